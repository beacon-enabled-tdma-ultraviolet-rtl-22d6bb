// beacon_gen: master-node beacon transmitter.
//
// The master sends an L-symbol binary m-sequence once per period T, OOK
// modulated: a 1 lights the UV LED for one symbol, a 0 leaves it dark. The
// paper asks for an L-bit m-sequence with L = 256; a maximal-length LFSR
// sequence has 2^n - 1 bits, so this design uses the 255-bit sequence of the
// 8-stage LFSR x^8 + x^6 + x^5 + x^4 + 1 (uv_pkg) and sends a 0 as symbol 256.
// The same bits are what uv_pkg::beacon_seq() returns for the correlator.
//
// A one-clock start_i pulse (the master's time counter entering the beacon
// transmission slot) restarts the sequence. bit_o then carries symbol n
// during clocks n*SYM_CLKS .. (n+1)*SYM_CLKS-1 after the clock following
// start_i, and active_o is high for the L*SYM_CLKS clocks of the beacon.
module beacon_gen
  import uv_pkg::*;
#(
  parameter int unsigned L        = 256,
  parameter int unsigned SYM_CLKS = 50
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start_i,
  output logic bit_o,
  output logic active_o
);
  localparam int unsigned SW = $clog2(SYM_CLKS);
  localparam int unsigned NW = $clog2(L + 1);

  logic [BEACON_LFSR_W-1:0] lfsr;
  logic [SW-1:0]            sym_cnt;
  logic [NW-1:0]            n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr     <= BEACON_LFSR_SEED;
      sym_cnt  <= '0;
      n        <= '0;
      active_o <= 1'b0;
    end else if (start_i) begin
      lfsr     <= BEACON_LFSR_SEED;
      sym_cnt  <= '0;
      n        <= '0;
      active_o <= 1'b1;
    end else if (active_o) begin
      if (sym_cnt == SW'(SYM_CLKS - 1)) begin
        sym_cnt <= '0;
        lfsr    <= lfsr_step(lfsr, BEACON_LFSR_TAPS);
        n       <= n + 1'b1;
        if (n == NW'(L - 1)) active_o <= 1'b0;
      end else begin
        sym_cnt <= sym_cnt + 1'b1;
      end
    end
  end

  // Symbols past the LFSR period (only symbol 256 at L = 256) are 0.
  assign bit_o = active_o && (n < NW'(255)) && lfsr[BEACON_LFSR_W-1];
endmodule
