// tb_uv_node: end-to-end test of a 4-node network built from four uv_node
// instances (node 1 master, nodes 2-4 slaves) joined by the behavioural UV
// channel (uv_channel_model). Each node's host sends random bytes over its
// UART. Slot lengths are shortened (U = 800, G = 100 symbols; BT, BI, L, M,
// the clock rates and c_initial keep their defaults) so that three periods
// of 0.113 s run in seconds.
// Checked: every slave synchronizes on the beacon and re-synchronizes each
// period; the compensated counters of the slaves lead the master by
// c_initial - (t_bt + t_pro + t_ps) and differ between slaves by the
// propagation delay difference; no two LEDs are ever lit together; a node
// lights its LED only in its own slots (or the beacon slot for the master);
// every ordered pair (i, j) exchanges frames; every frame a node receives is
// correct and its payload equals the next bytes its sender took from its
// host. Mechanisms counted: beacons, syncs, slot types, slave waiting at
// the end of a period, frames per pair.
module tb_uv_node;
  import uv_pkg::*;
  localparam int N = 4, K = 3, AW = 12, U = 800, G = 100, PB = 32, CPB = 25;
  localparam int SYM = 50, TBT = 256 * SYM, C_INIT = 13300;
  localparam int CMAX = (256 + 256 + N * (N - 1) * (U + G)) * SYM;
  localparam int CW = $clog2(CMAX + 1);
  localparam int PERIODS = 3;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] led, uart;
  logic [N-1:0][K-1:0][AW-1:0] adc;
  logic [N-1:0] spulse, ppulse, synced, bvalid, bmine, fdone, fok;
  logic [N-1:0][CW-1:0] cnt;
  slot_t slot [N];
  logic [N-1:0][2:0] ssrc, sdst;
  logic [N-1:0][7:0] rbyte;
  logic [N-1:0][3:0] fsrc;
  logic [N-1:0][24:0] nrx, nok, nsent;
  logic [N-1:0][15:0] ovf;
  logic [N-1:0] uerr;

  int checks = 0, failures = 0, cyc = 0;
  int beacons = 0, syncs [N], waits [N], slot_seen [N][4], pair_frames [N+1][N+1];
  int collisions = 0, foreign = 0;
  bit [7:0] stream [N][$];
  bit [7:0] rxbuf [N][$];

  uv_channel_model #(.N(N), .K(K), .ADC_W(AW)) u_ch (.clk, .led_i(led), .adc_o(adc));

  for (genvar r = 0; r < N; r++) begin : g_node
    uv_node #(.U_SYMS(U), .G_SYMS(G)) u_node (
      .clk, .rst_n, .node_id_i(3'(r + 1)), .uart_rxd_i(uart[r]), .adc_i(adc[r]),
      .adc_thresh_i(12'd1000), .beacon_thresh_i(19'sd1500), .frame_thresh_i(16'sd550),
      .led_o(led[r]), .sync_pulse_o(spulse[r]), .beacon_peak_o(), .period_pulse_o(ppulse[r]),
      .cnt_o(cnt[r]), .slot_o(slot[r]), .slot_src_o(ssrc[r]), .slot_dst_o(sdst[r]), .synced_o(synced[r]),
      .rx_byte_o(rbyte[r]), .rx_byte_valid_o(bvalid[r]), .rx_byte_mine_o(bmine[r]),
      .rx_frame_done_o(fdone[r]), .rx_frame_ok_o(fok[r]), .rx_frame_src_o(fsrc[r]),
      .frame_rx_num_o(nrx[r]), .frame_ok_num_o(nok[r]), .frames_sent_o(nsent[r]),
      .fifo_overflow_o(ovf[r]), .uart_err_o(uerr[r]));

    // host PC: random bytes over the UART, 8N1
    initial begin
      uart[r] = 1'b1;
      repeat (20) @(negedge clk);
      for (int n = 0; n < 1500; n++) begin
        bit [7:0] b;
        b = 8'($urandom);
        stream[r].push_back(b);
        uart[r] = 1'b0; repeat (CPB) @(negedge clk);
        for (int i = 0; i < 8; i++) begin uart[r] = b[i]; repeat (CPB) @(negedge clk); end
        uart[r] = 1'b1; repeat (CPB + 2) @(negedge clk);
      end
    end
  end

  always #5 clk = ~clk;

  int err_at_period [N];
  always @(posedge clk) if (rst_n) begin
    int lit;
    cyc++;
    lit = 0;
    for (int r = 0; r < N; r++) begin
      lit += led[r];
      slot_seen[r][slot[r]]++;
      // a node transmits only in its own slots
      if (led[r] && !((r == 0 && slot[r] == SLOT_BT) || (slot[r] == SLOT_U && ssrc[r] == 3'(r + 1)))) foreign++;
      if (r > 0 && spulse[r]) begin
        syncs[r]++;
        if (slot[r] == SLOT_G && ssrc[r] == 3'(N) && sdst[r] == 3'(N - 1)) waits[r]++;
      end
      if (bvalid[r]) rxbuf[r].push_back(rbyte[r]);
      if (fdone[r]) begin
        if (bmine[r]) begin
          int s;
          s = int'(fsrc[r]) - 1;
          checks++;
          if (!fok[r]) begin failures++; $display("FAIL node %0d: bad frame from %0d", r + 1, s + 1); end
          else begin
            pair_frames[s+1][r+1]++;
            checks++;
            if (rxbuf[r].size() != PB || stream[s].size() < PB || rxbuf[r] != stream[s][0:PB-1]) begin
              failures++; $display("FAIL node %0d: payload from %0d", r + 1, s + 1);
            end
            if (stream[s].size() >= PB) stream[s] = stream[s][PB:$];
          end
        end
        rxbuf[r] = {};
      end
    end
    if (lit > 1) collisions++;
    if (spulse[0]) beacons++;
    // time synchronization error, seen at the master's C = 0
    if (ppulse[0] && synced[1] && synced[2] && synced[3]) begin
      for (int r = 1; r < N; r++) err_at_period[r] = int'(cnt[r]);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (PERIODS * CMAX + TBT + 2000) @(negedge clk);
    // synchronization: one sync per beacon, waiting at period end
    for (int r = 1; r < N; r++) begin
      checks++; if (syncs[r] != beacons || beacons != PERIODS + 1) begin failures++; $display("FAIL node %0d: %0d syncs, %0d beacons", r + 1, syncs[r], beacons); end
      checks++; if (waits[r] != syncs[r]) begin failures++; $display("FAIL node %0d: waited %0d times", r + 1, waits[r]); end
      // slave leads by c_initial - (t_bt + t_pro + t_ps): 300..500 clocks at 10 ns
      checks++; if (err_at_period[r] < 300 || err_at_period[r] > 500) begin failures++; $display("FAIL node %0d sync error %0d", r + 1, err_at_period[r]); end
      $display("node %0d leads the master by %0d clocks after compensation", r + 1, err_at_period[r]);
    end
    // node 4 is 47 clocks from the master, node 2 37: node 2 leads node 4 by about 10
    checks++; if (err_at_period[1] - err_at_period[3] < 5 || err_at_period[1] - err_at_period[3] > 15) begin
      failures++; $display("FAIL propagation difference %0d", err_at_period[1] - err_at_period[3]);
    end
    checks++; if (collisions != 0) begin failures++; $display("FAIL %0d clocks with two LEDs lit", collisions); end
    checks++; if (foreign != 0) begin failures++; $display("FAIL %0d clocks lit outside own slot", foreign); end
    for (int r = 0; r < N; r++) begin
      checks++; if (nrx[r] != nok[r] || nok[r] == 0) begin failures++; $display("FAIL node %0d: %0d of %0d correct", r + 1, nok[r], nrx[r]); end
      checks++; if (slot_seen[r][SLOT_BI] == 0 || slot_seen[r][SLOT_U] == 0 || slot_seen[r][SLOT_G] == 0 ||
                    (r == 0 && slot_seen[r][SLOT_BT] == 0)) begin failures++; $display("FAIL node %0d slot types", r + 1); end
      checks++; if (ovf[r] != 0 || uerr[r]) begin failures++; $display("FAIL node %0d host link", r + 1); end
      $display("node %0d: sent %0d frames, received %0d, correct %0d", r + 1, nsent[r], nrx[r], nok[r]);
    end
    for (int i = 1; i <= N; i++) for (int j = 1; j <= N; j++) if (i != j) begin
      checks++; if (pair_frames[i][j] < 2) begin failures++; $display("FAIL pair %0d->%0d: %0d frames", i, j, pair_frames[i][j]); end
    end
    $display("mechanisms: beacons=%0d syncs=%0d/%0d/%0d waits=%0d/%0d/%0d frames 1->2=%0d 4->3=%0d",
             beacons, syncs[1], syncs[2], syncs[3], waits[1], waits[2], waits[3], pair_frames[1][2], pair_frames[4][3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (PERIODS * CMAX + 100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
