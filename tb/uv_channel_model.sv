// uv_channel_model: behavioural model of the NLOS UV channel, the PMTs and
// their ADCs, for network testbenches. Not synthesizable.
//
// Nodes sit at the corners of a 110 m x 90 m rectangle (node 1 at (0,0),
// 2 at (110,0), 3 at (0,90), 4 at (110,90)); light from node s reaches node
// r after the propagation delay d_rs / c, rounded to 10 ns clocks (37, 30
// and 47 clocks for the sides and the diagonal). In each clock, each of the
// K PMTs of node r detects a photoelectron with probability P_SIG/1000 if
// the delayed LED of any other node is lit, else P_BG/1000 (background and
// dark counts), a Bernoulli approximation of the Poisson arrivals of the
// paper's channel model. A photoelectron becomes a 2-sample pulse of height
// PULSE_H on that PMT's ADC output, followed by at least one low sample
// (pulses that arrive during a pulse are lost, like in a real counter).
// A node does not see its own LED.
module uv_channel_model #(
  parameter int N       = 4,
  parameter int K       = 3,
  parameter int ADC_W   = 12,
  parameter int P_SIG   = 300,
  parameter int P_BG    = 5,
  parameter int PULSE_H = 3000
) (
  input  logic                            clk,
  input  logic [N-1:0]                    led_i,
  output logic [N-1:0][K-1:0][ADC_W-1:0]  adc_o
);
  localparam int HIST = 64;
  logic [HIST-1:0] hist [N];
  int hi  [N][K];
  int low [N][K];

  function automatic int delay_clks(input int r, input int s);
    int dx, dy;
    dx = ((r % 2) != (s % 2)) ? 1 : 0;   // nodes 1,3 left; 2,4 right
    dy = ((r / 2) != (s / 2)) ? 1 : 0;   // nodes 1,2 bottom; 3,4 top
    if (dx && dy) return 47;
    if (dx)       return 37;
    return 30;
  endfunction

  initial begin
    for (int r = 0; r < N; r++) begin
      hist[r] = '0;
      for (int k = 0; k < K; k++) begin hi[r][k] = 0; low[r][k] = 0; end
    end
    adc_o = '0;
  end

  always @(posedge clk) begin
    for (int s = 0; s < N; s++) hist[s] <= {hist[s][HIST-2:0], led_i[s]};
  end

  always @(negedge clk) begin
    for (int r = 0; r < N; r++) begin
      logic lit;
      lit = 1'b0;
      for (int s = 0; s < N; s++)
        if (s != r && hist[s][delay_clks(r, s)]) lit = 1'b1;
      for (int k = 0; k < K; k++) begin
        if (hi[r][k] > 0) begin
          adc_o[r][k] = ADC_W'(PULSE_H);
          hi[r][k]--;
          if (hi[r][k] == 0) low[r][k] = 1;
        end else if (low[r][k] > 0) begin
          adc_o[r][k] = ADC_W'($urandom_range(0, 200));
          low[r][k]--;
        end else if ($urandom_range(0, 999) < (lit ? P_SIG : P_BG)) begin
          adc_o[r][k] = ADC_W'(PULSE_H);
          hi[r][k] = 1;
        end else begin
          adc_o[r][k] = ADC_W'($urandom_range(0, 200));
        end
      end
    end
  end
endmodule
