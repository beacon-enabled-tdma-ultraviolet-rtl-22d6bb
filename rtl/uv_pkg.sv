// uv_pkg: types, constants and helper functions shared by the beacon-enabled
// TDMA UV network node.
//
// The node runs from one system clock. A received chip lasts CLKS_PER_CHIP
// clocks, a symbol M chips; the slot lengths are given in symbols and turned
// into clock counts by the modules that use them. The defaults of the
// modules follow the paper's specification (L = 256, M = 10, 2 Msymbol/s,
// period T = 1 s, N = 4 nodes, K = 3 PMTs, slot lengths of Table I). The
// 100 MHz system clock, the LFSR polynomials and the frame layout are this
// design's own choices.
//
// The m-sequences are produced by Fibonacci LFSRs that shift left and feed
// the XOR of the tap bits into bit 0; the output bit is the register's MSB.
// The same recursion is used by the hardware generators and by the constant
// functions below, so transmitter and correlator always agree.
package uv_pkg;

  // TDMA slot types of Fig. 5: beacon transmission, beacon interval,
  // information slot U_ij and guard interval G_ij.
  typedef enum logic [1:0] {
    SLOT_BT = 2'd0,
    SLOT_BI = 2'd1,
    SLOT_U  = 2'd2,
    SLOT_G  = 2'd3
  } slot_t;

  // Beacon m-sequence: x^8 + x^6 + x^5 + x^4 + 1 (255 chips), padded to L.
  localparam int unsigned         BEACON_LFSR_W    = 8;
  localparam logic [7:0]          BEACON_LFSR_TAPS = 8'hB8;  // bits 7,5,4,3
  localparam logic [7:0]          BEACON_LFSR_SEED = 8'h01;

  // Frame preamble m-sequence: x^6 + x^5 + 1 (63 symbols).
  localparam int unsigned         PRE_LEN          = 63;
  localparam int unsigned         PRE_LFSR_W       = 6;
  localparam logic [5:0]          PRE_LFSR_TAPS    = 6'h30;  // bits 5,4
  localparam logic [5:0]          PRE_LFSR_SEED    = 6'h01;

  // Frame header: source id (4 b), destination id (4 b), sequence (8 b).
  localparam int unsigned         HDR_BITS         = 16;
  localparam int unsigned         CRC_BITS         = 16;

  // One LFSR step (shift left, XOR of tap bits into bit 0), width 8 max.
  function automatic logic [7:0] lfsr_step(input logic [7:0] s,
                                           input logic [7:0] taps);
    return {s[6:0], ^(s & taps)};
  endfunction

  // Beacon sequence, bit 0 transmitted first. Bits past the 255-chip period
  // of the LFSR are 0.
  function automatic logic [1023:0] beacon_seq(input int unsigned len);
    logic [1023:0] v;
    logic [7:0]    s;
    v = '0;
    s = BEACON_LFSR_SEED;
    for (int unsigned n = 0; n < len && n < 1024; n++) begin
      if (n < 255) begin
        v[n] = s[BEACON_LFSR_W-1];
        s    = lfsr_step(s, BEACON_LFSR_TAPS);
      end
    end
    return v;
  endfunction

  // Preamble sequence, bit 0 transmitted first.
  function automatic logic [PRE_LEN-1:0] preamble_seq();
    logic [PRE_LEN-1:0]    v;
    logic [PRE_LFSR_W-1:0] s;
    s = PRE_LFSR_SEED;
    for (int unsigned n = 0; n < PRE_LEN; n++) begin
      v[n] = s[PRE_LFSR_W-1];
      s    = {s[PRE_LFSR_W-2:0], ^(s & PRE_LFSR_TAPS)};
    end
    return v;
  endfunction

  // CRC-16-CCITT (polynomial 0x1021), one bit at a time, MSB first.
  function automatic logic [15:0] crc16_bit(input logic [15:0] crc,
                                            input logic        b);
    logic fb;
    fb = crc[15] ^ b;
    return {crc[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0000);
  endfunction

endpackage
