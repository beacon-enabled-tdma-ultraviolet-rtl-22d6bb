// slot_ctrl: time counter, time compensation and TDMA slot transition.
//
// Every node keeps a time counter C that advances by one per system clock.
// One period T = C_MAX clocks is divided as in the paper: a beacon
// transmission slot BT (t_bt = L symbols), a beacon interval BI (t_bi), then
// N(N-1) information slots U_ij, each followed by its guard interval G_ij,
// in the order U_12, G_12, U_13, ..., U_1N, G_1N, U_21, ..., G_N(N-1).
// U_ij is the slot in which node i sends to node j.
//
// Master (is_master_i = 1): C counts 0 .. C_MAX-1 and wraps; entering BT at
// C = 0 starts the beacon. Slave: the slave has no BT slot. It waits in
// G_N(N-1) until its beacon receiver reports a synchronization pulse, then
// loads C with C_INIT (the time compensation c_initial) and enters BI. All
// other transitions of both roles happen when C reaches the boundaries of
// the paper's transition equations,
//   BT -> BI      at C = t_bt
//   BI -> U_12    at C = t_bt + t_bi
//   U_ij -> G_ij  at C = t_bt + t_bi + s(t_u + t_g) + t_u
//   G_ij -> next  at C = t_bt + t_bi + (s+1)(t_u + t_g)
// where s is the position of U_ij in the slot order (all in clocks). Rather
// than compare C with all 2N(N-1) constants, the controller keeps the next
// boundary in a register and adds the length of the slot it enters.
// A slave that reaches the end of G_N(N-1) before the next beacon stays in
// G_N(N-1) (its counter wraps at C_MAX), as in the slave transition diagram.
//
// After reset both roles are in G_N(N-1) with C = C_MAX-1, so the master
// enters BT (C = 0) one clock after reset. Outputs are registered and
// describe the current clock: cnt_o = C, slot_o/slot_i_o/slot_j_o the
// current slot, slot_start_o high in the first clock of a slot,
// remaining_o the clocks left in the slot including this one, period_o
// high when C = 0, synced_o once a slave has received a beacon (always for
// the master).
//
// Slot lengths follow Table I of the paper (in symbols of SYM_CLKS clocks:
// 256, 256, 137500, 29124) and C_INIT = 13300 clocks is the paper's
// c_initial = 133 us at the 100 MHz clock this design assumes.
module slot_ctrl
  import uv_pkg::*;
#(
  parameter int unsigned N        = 4,
  parameter int unsigned SYM_CLKS = 50,
  parameter int unsigned BT_SYMS  = 256,
  parameter int unsigned BI_SYMS  = 256,
  parameter int unsigned U_SYMS   = 137500,
  parameter int unsigned G_SYMS   = 29124,
  parameter int unsigned C_INIT   = 13300,
  localparam int unsigned T_BT    = BT_SYMS * SYM_CLKS,
  localparam int unsigned T_BI    = BI_SYMS * SYM_CLKS,
  localparam int unsigned T_U     = U_SYMS * SYM_CLKS,
  localparam int unsigned T_G     = G_SYMS * SYM_CLKS,
  localparam int unsigned C_MAX   = T_BT + T_BI + N * (N - 1) * (T_U + T_G),
  localparam int unsigned CW      = $clog2(C_MAX + 1),
  localparam int unsigned IW      = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          is_master_i,
  input  logic          sync_i,
  output logic [CW-1:0] cnt_o,
  output slot_t         slot_o,
  output logic [IW-1:0] slot_i_o,
  output logic [IW-1:0] slot_j_o,
  output logic          slot_start_o,
  output logic [CW-1:0] remaining_o,
  output logic          period_o,
  output logic          synced_o
);
  logic [CW-1:0] bound;      // value of C at which the current slot ends
  logic [CW-1:0] c_next;
  logic          at_last, wrap, take_sync;
  logic [IW-1:0] ni, nj;     // next information slot after (i, j)

  assign at_last   = (slot_o == SLOT_G) && slot_i_o == IW'(N) && slot_j_o == IW'(N - 1);
  assign wrap      = (cnt_o == CW'(C_MAX - 1));
  assign take_sync = !is_master_i && sync_i && at_last;
  assign c_next    = wrap ? '0 : cnt_o + 1'b1;

  // Successor of (i, j) in the order U_12, U_13, ..., U_1N, U_21, ...
  always_comb begin
    ni = slot_i_o;
    nj = slot_j_o + 1'b1;
    if (nj == slot_i_o) nj = nj + 1'b1;
    if (nj > IW'(N)) begin
      ni = slot_i_o + 1'b1;
      nj = (ni == IW'(1)) ? IW'(2) : IW'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_o        <= CW'(C_MAX - 1);
      slot_o       <= SLOT_G;
      slot_i_o     <= IW'(N);
      slot_j_o     <= IW'(N - 1);
      bound        <= CW'(C_MAX);
      slot_start_o <= 1'b0;
      synced_o     <= 1'b0;
    end else begin
      slot_start_o <= 1'b0;
      if (is_master_i) synced_o <= 1'b1;
      if (take_sync) begin
        // Time compensation: the beacon ended t_trans + t_pro + t_ps ago.
        cnt_o        <= CW'(C_INIT);
        slot_o       <= SLOT_BI;
        bound        <= CW'(T_BT + T_BI);
        slot_start_o <= 1'b1;
        synced_o     <= 1'b1;
      end else begin
        cnt_o <= c_next;
        if (is_master_i && wrap) begin
          slot_o       <= SLOT_BT;
          slot_i_o     <= IW'(1);
          slot_j_o     <= IW'(2);
          bound        <= CW'(T_BT);
          slot_start_o <= 1'b1;
        end else if (!at_last && c_next == bound) begin
          slot_start_o <= 1'b1;
          unique case (slot_o)
            SLOT_BT: begin
              slot_o <= SLOT_BI;
              bound  <= bound + CW'(T_BI);
            end
            SLOT_BI: begin
              slot_o   <= SLOT_U;
              slot_i_o <= IW'(1);
              slot_j_o <= IW'(2);
              bound    <= bound + CW'(T_U);
            end
            SLOT_U: begin
              slot_o <= SLOT_G;
              bound  <= bound + CW'(T_G);
            end
            SLOT_G: begin
              slot_o   <= SLOT_U;
              slot_i_o <= ni;
              slot_j_o <= nj;
              bound    <= bound + CW'(T_U);
            end
            default: slot_o <= SLOT_G;
          endcase
        end
      end
    end
  end

  assign remaining_o = bound - cnt_o;
  assign period_o    = (cnt_o == '0);

  // An information or guard slot never belongs to a node sending to itself.
  a_no_self_slot: assert property (@(posedge clk) disable iff (!rst_n)
    (slot_o inside {SLOT_U, SLOT_G}) |-> (slot_i_o != slot_j_o));
  a_compensation_in_bi: assert property (@(posedge clk) disable iff (!rst_n)
    (C_INIT >= T_BT) && (C_INIT < T_BT + T_BI));
endmodule
