// beacon_rx: slave-node beacon reception.
//
// Correlates the received chip counts with the L-symbol beacon m-sequence
// (seq_correlator, M chips per symbol) and, when the correlation rises above
// thresh_i, looks for its maximum (peak_detect). The maximum is reached at
// the chip that completes the beacon; sync_o then pulses WIN chips later.
// That pulse is the slave's time synchronization pulse (P_s in the paper's
// synchronization test): the delay from the master's beacon start to it is
// t_trans + t_pro + t_ps, which the slot controller compensates by loading
// c_initial into its time counter.
//
// After a detection the receiver ignores further peaks for HOLD chips
// (default one beacon length, L*M), so one beacon yields one pulse. en_i
// low disables detection. peak_o gives the correlation value at the peak,
// a measure of the received beacon energy.
//
// Timing: sync_o is high for one clock, 3 clocks after the chip_valid_i of
// the WIN-th chip after the beacon's last chip. With the default
// CLKS_PER_CHIP = 5 and WIN = 9 this is 48 clocks (0.48 us) after the last
// beacon chip ends. The paper adopts counting-based synchronization from
// earlier work and states that the maximum correlation peak marks the
// beacon; the windowed maximum search and the hold-off are this design's.
module beacon_rx
  import uv_pkg::*;
#(
  parameter int unsigned L     = 256,
  parameter int unsigned M     = 10,
  parameter int unsigned CNT_W = 4,
  parameter int unsigned WIN   = M - 1,
  parameter int unsigned HOLD  = L * M,
  localparam int unsigned SW   = CNT_W + $clog2(M + 1),
  localparam int unsigned TW   = SW + $clog2(L + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en_i,
  input  logic                 chip_valid_i,
  input  logic [CNT_W-1:0]     chip_cnt_i,
  input  logic signed [TW:0]   thresh_i,
  output logic                 sync_o,
  output logic signed [TW:0]   peak_o
);
  localparam logic [1023:0] SEQ_ALL = beacon_seq(L);
  localparam logic [L-1:0]  SEQ     = SEQ_ALL[L-1:0];
  localparam int unsigned   HW      = $clog2(HOLD + 1);

  logic                upd;
  logic signed [TW:0]  corr;
  logic [TW-1:0]       sum1, sum_all;
  logic [SW-1:0]       s0;
  logic [HW-1:0]       hold_cnt;
  logic                found;
  logic [TW:0]         tag;

  seq_correlator #(.SEQ_LEN(L), .M(M), .CNT_W(CNT_W), .SEQ(SEQ)) u_corr (
    .clk, .rst_n, .chip_valid_i, .chip_cnt_i,
    .upd_o(upd), .corr_o(corr), .sum1_o(sum1), .sum_all_o(sum_all), .s0_o(s0)
  );

  peak_detect #(.CW(TW + 1), .TAG_W(TW + 1), .WIN(WIN)) u_peak (
    .clk, .rst_n, .en_i(en_i && hold_cnt == 0), .upd_i(upd),
    .corr_i(corr), .thresh_i, .tag_i(corr), .found_o(found), .tag_o(tag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_cnt <= '0;
      peak_o   <= '0;
    end else begin
      if (found) begin
        hold_cnt <= HW'(HOLD);
        peak_o   <= $signed(tag);
      end else if (hold_cnt != 0 && chip_valid_i) begin
        hold_cnt <= hold_cnt - 1'b1;
      end
    end
  end

  assign sync_o = found;
endmodule
