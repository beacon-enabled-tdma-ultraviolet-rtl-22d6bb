// photon_counter: photon counting by pulse counting on K PMT channels.
//
// Each PMT turns a photoelectron into an analog pulse; the ADC samples it
// once per system clock. A photon is counted when a channel's sample rises
// to or above thresh_i from below it (one count per pulse, however long the
// pulse). The counts of the K channels are added over one chip of
// CLKS_PER_CHIP clocks, and the chip total is presented on chip_cnt_o with
// a one-clock chip_valid_o pulse, one clock after the chip's last sample.
// The chip grid is free running; the receivers find the symbol alignment
// themselves by correlating at chip resolution.
//
// The paper gives pulse counting of the PMT output after the ADC and K = 3
// PMTs per node. The threshold crossing, the summing of the K channels and
// the widths are this design's choices. The chip total saturates at
// 2^CNT_W - 1.
module photon_counter #(
  parameter int unsigned K             = 3,
  parameter int unsigned ADC_W         = 12,
  parameter int unsigned CLKS_PER_CHIP = 5,
  parameter int unsigned CNT_W         = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [K-1:0][ADC_W-1:0] adc_i,
  input  logic [ADC_W-1:0]       thresh_i,
  output logic                   chip_valid_o,
  output logic [CNT_W-1:0]       chip_cnt_o
);
  localparam int unsigned PW = $clog2(CLKS_PER_CHIP + 1);
  localparam int unsigned KW = $clog2(K + 1);
  localparam int unsigned AW = CNT_W + 1;

  logic [K-1:0]  above_q;
  logic [K-1:0]  edge_now;
  logic [KW-1:0] n_edges;
  logic [PW-1:0] phase;
  logic [AW-1:0] acc, acc_next;

  always_comb begin
    n_edges = '0;
    for (int k = 0; k < K; k++) begin
      edge_now[k] = (adc_i[k] >= thresh_i) && !above_q[k];
      n_edges     = n_edges + KW'(edge_now[k]);
    end
    // Saturating accumulate; acc never exceeds the CNT_W-bit maximum.
    if (acc + AW'(n_edges) > AW'((1 << CNT_W) - 1)) acc_next = AW'((1 << CNT_W) - 1);
    else                                            acc_next = acc + AW'(n_edges);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      above_q      <= '1;   // a channel already high at reset is not a pulse
      phase        <= '0;
      acc          <= '0;
      chip_valid_o <= 1'b0;
      chip_cnt_o   <= '0;
    end else begin
      for (int k = 0; k < K; k++) above_q[k] <= (adc_i[k] >= thresh_i);
      chip_valid_o <= 1'b0;
      if (phase == PW'(CLKS_PER_CHIP - 1)) begin
        phase        <= '0;
        chip_cnt_o   <= acc_next[CNT_W-1:0];
        chip_valid_o <= 1'b1;
        acc          <= '0;
      end else begin
        phase <= phase + 1'b1;
        acc   <= acc_next;
      end
    end
  end
endmodule
