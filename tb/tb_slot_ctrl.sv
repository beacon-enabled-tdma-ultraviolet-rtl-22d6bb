// tb_slot_ctrl: checks the time counter and slot transitions of a master and
// a slave against the slot boundaries of the paper's transition equations,
// at reduced slot lengths (N = 4, 2 clocks per symbol, BT = BI = 8, U = 20,
// G = 5 symbols, c_initial = 18 clocks).
// The reference maps a counter value C to its slot directly from the
// equations: BT below t_bt, BI below t_bt + t_bi, then slot number
// s = (C - t_bt - t_bi) / (t_u + t_g) with U_ij for s = (i-1)(N-1) + (j-1)
// (j < i) or (i-1)(N-1) + (j-2) (j > i).
// Also checked: the slave waits in G_N(N-1) until a beacon, loads C_INIT on
// the synchronization pulse and then runs in step with the master; a pulse
// outside G_N(N-1) is ignored; slot_start and remaining.
module tb_slot_ctrl;
  import uv_pkg::*;
  localparam int N = 4, SC = 2, BT = 8, BI = 8, U = 20, G = 5, CI = 18;
  localparam int TBT = BT * SC, TBI = BI * SC, TU = U * SC, TG = G * SC;
  localparam int CMAX = TBT + TBI + N * (N - 1) * (TU + TG);
  localparam int CW = $clog2(CMAX + 1), IW = $clog2(N + 1);

  logic clk = 0, rst_n = 0, sync = 0;
  logic [CW-1:0] mc, sc_, mrem, srem;
  slot_t ms, ss;
  logic [IW-1:0] mi, mj, si, sj;
  logic mstart, sstart, mper, sper, msync, ssync;
  int checks = 0, failures = 0, starts = 0, cyc = 0;

  slot_ctrl #(.N(N), .SYM_CLKS(SC), .BT_SYMS(BT), .BI_SYMS(BI), .U_SYMS(U), .G_SYMS(G), .C_INIT(CI)) u_m (
    .clk, .rst_n, .is_master_i(1'b1), .sync_i(1'b0), .cnt_o(mc), .slot_o(ms), .slot_i_o(mi),
    .slot_j_o(mj), .slot_start_o(mstart), .remaining_o(mrem), .period_o(mper), .synced_o(msync));
  slot_ctrl #(.N(N), .SYM_CLKS(SC), .BT_SYMS(BT), .BI_SYMS(BI), .U_SYMS(U), .G_SYMS(G), .C_INIT(CI)) u_s (
    .clk, .rst_n, .is_master_i(1'b0), .sync_i(sync), .cnt_o(sc_), .slot_o(ss), .slot_i_o(si),
    .slot_j_o(sj), .slot_start_o(sstart), .remaining_o(srem), .period_o(sper), .synced_o(ssync));

  always #5 clk = ~clk;

  function automatic void ref_slot(input int c, output slot_t t, output int i, output int j, output int rem);
    int off, s, r, jj;
    if (c < TBT) begin t = SLOT_BT; i = 1; j = 2; rem = TBT - c; return; end
    if (c < TBT + TBI) begin t = SLOT_BI; i = 1; j = 2; rem = TBT + TBI - c; return; end
    off = c - TBT - TBI; s = off / (TU + TG); r = off % (TU + TG);
    t = (r < TU) ? SLOT_U : SLOT_G;
    rem = (r < TU) ? TU - r : TU + TG - r;
    i = s / (N - 1) + 1; jj = s % (N - 1);
    j = (jj + 1 < i) ? jj + 1 : jj + 2;
  endfunction

  task automatic check_node(input string nm, input logic [CW-1:0] c, input slot_t st, input logic [IW-1:0] i,
                            input logic [IW-1:0] j, input logic [CW-1:0] rem);
    slot_t et; int ei, ej, er;
    ref_slot(int'(c), et, ei, ej, er);
    checks++;
    if (st != et || ((st == SLOT_U || st == SLOT_G) && (int'(i) != ei || int'(j) != ej)) || int'(rem) != er) begin
      failures++;
      if (failures < 10) $display("FAIL %s C=%0d slot %0d (%0d,%0d) rem %0d, expected %0d (%0d,%0d) rem %0d",
                                  nm, c, st, i, j, rem, et, ei, ej, er);
    end
  endtask

  logic [CW-1:0] prev_mc;
  int phase = 0;   // 0: slave unsynchronized, 1: aligned, 2: slave waits again, 3: lag 3
  int waited = 0;

  always @(negedge clk) begin
    if (rst_n) begin
      cyc++;
      // master: counter and slot every clock
      if (cyc > 1) begin
        checks++;
        if (int'(mc) != (int'(prev_mc) + 1) % CMAX) begin failures++; $display("FAIL master counter"); end
      end
      prev_mc = mc;
      check_node("master", mc, ms, mi, mj, mrem);
      if (mstart) starts++;
      // slave
      if (phase == 0 || phase == 2) begin
        checks++;
        if (!(ss == SLOT_G && si == IW'(N) && sj == IW'(N - 1))) begin failures++; $display("FAIL slave not waiting"); end
        if (phase == 2) waited++;
      end
      if (phase == 1) begin
        check_node("slave", sc_, ss, si, sj, srem);
        checks++; if (sc_ != mc) begin failures++; if (failures < 10) $display("FAIL slave %0d master %0d", sc_, mc); end
      end
      if (phase == 3) begin
        checks++; if (int'(sc_) != (int'(mc) - 3 + CMAX) % CMAX) begin failures++; if (failures < 10) $display("FAIL lag s=%0d m=%0d", sc_, mc); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // first period: slave left alone, then the beacon arrives in period 2
    wait (mc == CW'(CMAX - 1)); @(negedge clk);
    // raise the pulse while the master shows CI-1: the slave loads CI on the
    // same edge at which the master reaches CI, so the two run aligned
    wait (mc == CW'(CI - 1)); @(negedge clk);
    sync = 1; @(negedge clk); sync = 0;
    phase = 1;
    // a pulse in the middle of the period must be ignored
    wait (mc == CW'(TBT + TBI + 3 * (TU + TG) + 5));
    @(negedge clk); sync = 1; @(negedge clk); sync = 0;
    // end of period: slave waits in G_N(N-1) for the next beacon
    wait (mc == CW'(CMAX - 1)); @(negedge clk);
    phase = 2;
    wait (mc == CW'(CI + 2));  // beacon arrives late: slave lags by 3
    @(negedge clk);
    sync = 1; @(negedge clk); sync = 0;
    phase = 3;
    repeat (CMAX - 40) @(negedge clk);
    checks++; if (waited < CI) begin failures++; $display("FAIL slave did not wait"); end
    checks++; if (!ssync || !msync) begin failures++; $display("FAIL synced flags"); end
    checks++; if (starts < 3 * (2 + N * (N - 1)) - 1) begin failures++; $display("FAIL slot starts %0d", starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * CMAX) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
