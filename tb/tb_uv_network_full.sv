// tb_uv_network_full: one complete operation of the network at the full
// default size (1 s period, Table I slot lengths, L = 256, M = 10, 100 MHz):
// four uv_node instances with default parameters over the behavioural
// channel. The master sends the beacon, the three slaves synchronize and
// compensate, and the master's host data (40 payloads) goes out as frames
// in slot U_12 (0.25 ms after the period start, 68.75 ms long). The run
// ends after U_12 has closed, 6.9 M clocks in.
// Checked: all slaves synchronized once, with their counters 300..500
// clocks ahead of the master's (c_initial minus the real delay); node 2
// received all 40 frames correctly with the right payloads; no other node
// accepted a frame; no frame was sent outside U_12; the slot sequence at
// the master is BT, BI, U_12, G_12 with the Table I lengths.
module tb_uv_network_full;
  import uv_pkg::*;
  localparam int N = 4, K = 3, AW = 12, PB = 32, CPB = 25, NFRAMES = 40;
  localparam int SYM = 50;
  localparam int T_BT = 256 * SYM, T_BI = 256 * SYM, T_U = 137500 * SYM;
  localparam int CW = 27;

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
  int checks = 0, failures = 0, syncs [N], good = 0, bad_tx = 0;
  int slot_change_at [$];
  slot_t last_slot;
  bit [7:0] stream [$];
  bit [7:0] rxbuf [$];

  uv_channel_model #(.N(N), .K(K), .ADC_W(AW)) u_ch (.clk, .led_i(led), .adc_o(adc));

  for (genvar r = 0; r < N; r++) begin : g_node
    uv_node u_node (
      .clk, .rst_n, .node_id_i(3'(r + 1)), .uart_rxd_i(uart[r]), .adc_i(adc[r]),
      .adc_thresh_i(12'd1000), .beacon_thresh_i(19'sd1500), .frame_thresh_i(16'sd550),
      .led_o(led[r]), .sync_pulse_o(spulse[r]), .beacon_peak_o(), .period_pulse_o(ppulse[r]),
      .cnt_o(cnt[r]), .slot_o(slot[r]), .slot_src_o(ssrc[r]), .slot_dst_o(sdst[r]), .synced_o(synced[r]),
      .rx_byte_o(rbyte[r]), .rx_byte_valid_o(bvalid[r]), .rx_byte_mine_o(bmine[r]),
      .rx_frame_done_o(fdone[r]), .rx_frame_ok_o(fok[r]), .rx_frame_src_o(fsrc[r]),
      .frame_rx_num_o(nrx[r]), .frame_ok_num_o(nok[r]), .frames_sent_o(nsent[r]),
      .fifo_overflow_o(), .uart_err_o());
  end

  always #5 clk = ~clk;

  // master's host: NFRAMES payloads of random bytes; other hosts idle
  initial begin
    uart = '1;
    repeat (20) @(negedge clk);
    for (int n = 0; n < NFRAMES * PB; n++) begin
      bit [7:0] b;
      b = 8'($urandom);
      stream.push_back(b);
      uart[0] = 1'b0; repeat (CPB) @(negedge clk);
      for (int i = 0; i < 8; i++) begin uart[0] = b[i]; repeat (CPB) @(negedge clk); end
      uart[0] = 1'b1; repeat (CPB + 2) @(negedge clk);
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (slot[0] != last_slot) slot_change_at.push_back(int'(cnt[0]));
    last_slot = slot[0];
    if (led[0] && !(slot[0] == SLOT_BT || (slot[0] == SLOT_U && ssrc[0] == 3'd1 && sdst[0] == 3'd2))) bad_tx++;
    for (int r = 1; r < N; r++) if (led[r]) bad_tx++;
    for (int r = 1; r < N; r++) if (spulse[r]) syncs[r]++;
    if (bvalid[1]) rxbuf.push_back(rbyte[1]);
    if (fdone[1]) begin
      if (bmine[1] && fok[1] && fsrc[1] == 4'd1 && rxbuf.size() == PB && stream.size() >= PB && rxbuf == stream[0:PB-1]) begin
        good++;
        stream = stream[PB:$];
      end
      rxbuf = {};
    end
  end

  initial begin
    last_slot = SLOT_G;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (synced[1] && synced[2] && synced[3]);
    repeat (100) @(negedge clk);
    for (int r = 1; r < N; r++) begin
      int d;
      d = int'(cnt[r]) - int'(cnt[0]);
      checks++; if (d < 300 || d > 500) begin failures++; $display("FAIL node %0d offset %0d", r + 1, d); end
      $display("node %0d leads the master by %0d clocks", r + 1, d);
    end
    wait (cnt[0] == CW'(T_BT + T_BI + T_U + 1000));
    for (int r = 1; r < N; r++) begin
      checks++; if (syncs[r] != 1) begin failures++; $display("FAIL node %0d synced %0d times", r + 1, syncs[r]); end
    end
    checks++; if (good != NFRAMES || nsent[0] != 25'(NFRAMES)) begin failures++; $display("FAIL %0d good frames, %0d sent", good, nsent[0]); end
    checks++; if (nrx[1] != 25'(NFRAMES) || nok[1] != 25'(NFRAMES)) begin failures++; $display("FAIL node 2 counters %0d/%0d", nok[1], nrx[1]); end
    checks++; if (nrx[2] != 0 || nrx[3] != 0 || nrx[0] != 0) begin failures++; $display("FAIL frames accepted by others"); end
    checks++; if (bad_tx != 0) begin failures++; $display("FAIL %0d clocks of LED outside U_12/BT", bad_tx); end
    // master slot changes: BT at 0, BI at t_bt, U_12 at t_bt+t_bi, G_12 at +t_u
    checks++;
    if (slot_change_at.size() < 4 || slot_change_at[0] != 0 || slot_change_at[1] != T_BT ||
        slot_change_at[2] != T_BT + T_BI || slot_change_at[3] != T_BT + T_BI + T_U) begin
      failures++; $display("FAIL master slot boundaries");
    end
    $display("node 2: received %0d frames, %0d correct", nrx[1], nok[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (7_200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
