// tb_beacon_rx: sends four beacons (the 256-symbol m-sequence, computed here
// by its bit recurrence, 10 chips per symbol) with background counts between
// and inside them, one chip every 2 clocks. Checks that exactly one sync
// pulse follows each beacon, exactly WIN = 9 chips + 3 clocks after the
// chip that completes it, that the peak value is the expected energy, and
// that noise alone never triggers.
module tb_beacon_rx;
  localparam int L = 256, M = 10, CW = 4, WIN = M - 1;
  localparam int TW = CW + $clog2(M + 1) + $clog2(L + 1);
  logic clk = 0, rst_n = 0, cv = 0;
  logic [CW-1:0] cnt = 0;
  logic sync;
  logic signed [TW:0] peak;
  int checks = 0, failures = 0, cyc = 0, nsync = 0;
  int expect_at = -1;
  logic ref_seq [L];

  beacon_rx #(.L(L), .M(M), .CNT_W(CW)) dut (.clk, .rst_n, .en_i(1'b1), .chip_valid_i(cv), .chip_cnt_i(cnt),
                                             .thresh_i((TW+1)'(1000)), .sync_o(sync), .peak_o(peak));
  always #5 clk = ~clk;
  // One block, so the edge count and the check see the same edge number.
  always @(posedge clk) begin
    cyc++;
    if (rst_n && sync) begin
    nsync++;
    checks++;
    if (cyc != expect_at) begin failures++; $display("FAIL sync at %0d, expected %0d", cyc, expect_at); end
    end
  end

  task automatic chip(input int c);
    @(negedge clk); cv = 1; cnt = CW'(c);
    @(negedge clk); cv = 0;
  endtask

  task automatic noise(input int n);
    for (int k = 0; k < n; k++) chip(($urandom_range(0, 99) < 5) ? 1 : 0);
  endtask

  initial begin
    for (int n = 0; n < 8; n++) ref_seq[n] = (n == 7);
    for (int n = 0; n + 8 < 255; n++) ref_seq[n+8] = ref_seq[n] ^ ref_seq[n+2] ^ ref_seq[n+3] ^ ref_seq[n+4];
    ref_seq[255] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    noise(4000);
    checks++; if (nsync != 0) begin failures++; $display("FAIL noise triggered"); end
    for (int b = 0; b < 4; b++) begin
      for (int n = 0; n < L; n++)
        for (int m = 0; m < M; m++) begin
          if (n == L - 1 && m == M - 1) expect_at = cyc + 2 + 2 * WIN + 3;  // chip() samples cv at edge cyc+2
          chip(ref_seq[n] ? 2 : 0);
        end
      noise(L * M + 200 + $urandom_range(0, 500));
      checks++; if (nsync != b + 1) begin failures++; $display("FAIL %0d syncs after beacon %0d", nsync, b); end
      checks++; if (peak != (TW+1)'(128 * M * 2)) begin failures++; $display("FAIL peak %0d", peak); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
