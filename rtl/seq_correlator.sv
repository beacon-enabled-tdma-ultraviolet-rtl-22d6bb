// seq_correlator: sliding chip-level correlator against a known OOK sequence.
//
// Used by both receivers: by the beacon receiver with the 256-symbol beacon
// and by the information receiver with the 63-symbol frame preamble. This is
// counting-based synchronization: the receiver keeps the photon counts of
// the last SEQ_LEN*M chips, sums them into SEQ_LEN symbol windows of M chips
// each, and correlates the symbol counts with the sequence mapped to +1/-1.
// The window slides by one chip per chip, so the correlation peak locates
// the sequence start to one chip (T_s / M).
//
// Symbol window k = 0 holds the newest M chips and is compared with the last
// sequence bit SEQ[SEQ_LEN-1]; SEQ[0] is the bit sent first. Each window sum
// is kept up to date with one add and one subtract per chip:
//   S_k <- S_k + (chip entering window k) - (chip leaving window k).
// From the window sums the module forms, one chip apart:
//   sum1_o    = sum of S_k over the windows where the sequence has a 1
//   sum_all_o = sum of all S_k
//   corr_o    = sum1_o - (sum_all_o - sum1_o)  (the +/-1 correlation)
//   s0_o      = S_0, the count of the newest complete M-chip window.
// sum1_o and sum_all_o - sum1_o are the received energies in the ones and
// zeros of the sequence, which the information receiver uses as its channel
// estimate.
//
// Timing: a chip arriving with chip_valid_i at clock t updates the window
// sums at t+1; the outputs for that chip appear at t+2 with upd_o high for
// one clock. chip_valid_i must be at most every second clock.
module seq_correlator #(
  parameter int unsigned           SEQ_LEN = 63,
  parameter int unsigned           M       = 10,
  parameter int unsigned           CNT_W   = 4,
  parameter logic [SEQ_LEN-1:0]    SEQ     = '0,
  localparam int unsigned          SW      = CNT_W + $clog2(M + 1),
  localparam int unsigned          TW      = SW + $clog2(SEQ_LEN + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 chip_valid_i,
  input  logic [CNT_W-1:0]     chip_cnt_i,
  output logic                 upd_o,
  output logic signed [TW:0]   corr_o,
  output logic [TW-1:0]        sum1_o,
  output logic [TW-1:0]        sum_all_o,
  output logic [SW-1:0]        s0_o
);
  localparam int unsigned NCHIP = SEQ_LEN * M;

  logic [NCHIP-1:0][CNT_W-1:0] hist;   // chip history, [0] newest
  logic [SEQ_LEN-1:0][SW-1:0]  s;      // symbol window sums
  logic             upd1;
  logic [TW-1:0]    sum1_c, sum_all_c;

  // Chip history shift register and incremental window sums.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist <= '0;
      s    <= '0;
    end else if (chip_valid_i) begin
      hist <= {hist[NCHIP-2:0], chip_cnt_i};
      s[0] <= s[0] + SW'(chip_cnt_i) - SW'(hist[M-1]);
      for (int k = 1; k < SEQ_LEN; k++)
        s[k] <= s[k] + SW'(hist[k*M-1]) - SW'(hist[k*M+M-1]);
    end
  end

  always_comb begin
    sum1_c    = '0;
    sum_all_c = '0;
    for (int k = 0; k < SEQ_LEN; k++) begin
      sum_all_c = sum_all_c + TW'(s[k]);
      if (SEQ[SEQ_LEN-1-k]) sum1_c = sum1_c + TW'(s[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd1      <= 1'b0;
      upd_o     <= 1'b0;
      corr_o    <= '0;
      sum1_o    <= '0;
      sum_all_o <= '0;
      s0_o      <= '0;
    end else begin
      upd1  <= chip_valid_i;
      upd_o <= upd1;
      if (upd1) begin
        sum1_o    <= sum1_c;
        sum_all_o <= sum_all_c;
        corr_o    <= $signed({sum1_c, 1'b0}) - $signed({1'b0, sum_all_c});
        s0_o      <= s[0];
      end
    end
  end
endmodule
