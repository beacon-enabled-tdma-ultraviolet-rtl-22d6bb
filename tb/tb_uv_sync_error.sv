// tb_uv_sync_error: time synchronization error measurement over 100
// beacon periods, with one master and two slave nodes (uv_node, N = 3)
// joined by the behavioural UV channel (uv_channel_model). Each period the
// master marks the beacon start with its start pulse (P_m) and each slave
// its beacon detection with its sync pulse (P_s); the testbench measures
// the P_m -> P_s delay of every slave in every period, like an oscilloscope
// on the two pulses, and reports mean, variance and maximum.
// The beacon, the symbol and chip rates and c_initial keep their defaults;
// the information and guard slots are shortened to 20 symbols (no data is
// sent), so a period is 37 600 clocks.
// Checked per trial: every beacon gives exactly one sync pulse per slave;
// the delay is at least t_trans + t_pro (12 800 + 37 or 30 clocks) and below
// c_initial (13 300 clocks), so a compensated slave never lags the master;
// after compensation, the slave's counter at the master's next period start
// equals c_initial minus the measured delay (within 2 clocks). Overall: the
// delays of one slave spread over at most two chips (photon noise moves the
// peak by a chip), and node 2 (37 clocks away) hears the beacon about
// 7 clocks after node 3 (30 clocks away).
module tb_uv_sync_error;
  import uv_pkg::*;
  localparam int N = 3, K = 3, AW = 12, U = 20, G = 20;
  localparam int SYM = 50, TBT = 256 * SYM, C_INIT = 13300, CPC = 5;
  localparam int CMAX = (256 + 256 + N * (N - 1) * (U + G)) * SYM;
  localparam int CW = $clog2(CMAX + 1);
  localparam int TRIALS = 100;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] led;
  logic [N-1:0][K-1:0][AW-1:0] adc;
  logic [N-1:0] spulse, ppulse, synced;
  logic [N-1:0][CW-1:0] cnt;

  int checks = 0, failures = 0, cyc = 0;
  int beacons = 0, pm_at = -1;
  int syncs [N], delay [N][$], last_delay [N];
  int dmin [N], dmax [N];

  uv_channel_model #(.N(N), .K(K), .ADC_W(AW)) u_ch (.clk, .led_i(led), .adc_o(adc));

  for (genvar r = 0; r < N; r++) begin : g_node
    uv_node #(.N(N), .U_SYMS(U), .G_SYMS(G)) u_node (
      .clk, .rst_n, .node_id_i(3'(r + 1)), .uart_rxd_i(1'b1), .adc_i(adc[r]),
      .adc_thresh_i(12'd1000), .beacon_thresh_i(19'sd1500), .frame_thresh_i(16'sd550),
      .led_o(led[r]), .sync_pulse_o(spulse[r]), .beacon_peak_o(), .period_pulse_o(ppulse[r]),
      .cnt_o(cnt[r]), .slot_o(), .slot_src_o(), .slot_dst_o(), .synced_o(synced[r]),
      .rx_byte_o(), .rx_byte_valid_o(), .rx_byte_mine_o(),
      .rx_frame_done_o(), .rx_frame_ok_o(), .rx_frame_src_o(),
      .frame_rx_num_o(), .frame_ok_num_o(), .frames_sent_o(),
      .fifo_overflow_o(), .uart_err_o());
  end

  always #5 clk = ~clk;

  function automatic int prop(input int r);
    return (r == 1) ? 37 : 30;   // node 2 along the 110 m side, node 3 along the 90 m side
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (spulse[0]) begin beacons++; pm_at = cyc; end
    for (int r = 1; r < N; r++) begin
      if (spulse[r]) begin
        int d;
        d = cyc - pm_at;
        syncs[r]++;
        delay[r].push_back(d);
        last_delay[r] = d;
        checks++;
        if (d < TBT + prop(r) || d >= C_INIT) begin
          failures++; $display("FAIL node %0d trial %0d: P_m -> P_s %0d clocks", r + 1, syncs[r], d);
        end
      end
      // compensated counter seen at the master's next period start
      if (ppulse[0] && syncs[r] > 0 && beacons == syncs[r]) begin
        int lead;
        lead = int'(cnt[r]);
        checks++;
        if (lead < C_INIT - last_delay[r] - 2 || lead > C_INIT - last_delay[r] + 2) begin
          failures++; $display("FAIL node %0d: counter %0d at master period start, delay %0d", r + 1, lead, last_delay[r]);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (beacons == TRIALS);
    repeat (TBT + 2000) @(negedge clk);
    for (int r = 1; r < N; r++) begin
      real mean, var_;
      mean = 0.0; var_ = 0.0; dmin[r] = 1 << 30; dmax[r] = 0;
      foreach (delay[r][n]) begin
        mean += real'(delay[r][n]);
        if (delay[r][n] < dmin[r]) dmin[r] = delay[r][n];
        if (delay[r][n] > dmax[r]) dmax[r] = delay[r][n];
      end
      mean = mean / real'(delay[r].size());
      foreach (delay[r][n]) var_ += (real'(delay[r][n]) - mean) ** 2;
      var_ = var_ / real'(delay[r].size());
      checks++; if (syncs[r] != TRIALS) begin failures++; $display("FAIL node %0d: %0d syncs for %0d beacons", r + 1, syncs[r], TRIALS); end
      checks++; if (dmax[r] - dmin[r] > 2 * CPC) begin failures++; $display("FAIL node %0d: delay spread %0d clocks", r + 1, dmax[r] - dmin[r]); end
      $display("node %0d: P_m -> P_s mean %0.3f us, variance %0.6f us^2, min %0.2f us, max %0.2f us over %0d trials",
               r + 1, mean / 100.0, var_ / 1.0e4, real'(dmin[r]) / 100.0, real'(dmax[r]) / 100.0, delay[r].size());
    end
    checks++;
    if (dmin[1] - dmax[2] < 7 - 2 * CPC || dmax[1] - dmin[2] > 7 + 2 * CPC) begin
      failures++; $display("FAIL slave difference %0d..%0d clocks", dmin[1] - dmax[2], dmax[1] - dmin[2]);
    end
    $display("mechanisms: beacons=%0d syncs=%0d/%0d", beacons, syncs[1], syncs[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((TRIALS + 1) * CMAX + 100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
