// tb_info_rx: feeds node 2's frame receiver with chip counts of frames built
// by the reference model (uv_frame_ref): 10 chips per symbol, 1 to 3 photons
// per chip in a 1 symbol, sparse background counts elsewhere, one chip every
// 2 clocks. Frames: a good frame to node 2, a frame to node 3, a frame to
// node 2 with a flipped CRC bit, and another good frame to node 2; then 24
// random frames to a random node, a quarter of them with one flipped bit
// in the header, payload or CRC, separated by random gaps (so every chip
// phase occurs). Checks every received byte and its byte_mine flag, the
// per-frame flags and source, the 25-bit receive and correct counters
// against the expected totals, and that background alone finds no frame.
module tb_info_rx;
  import uv_frame_ref::*;
  localparam int N = 4, M = 10, CW = 4, PB = 4;
  localparam int TW = CW + $clog2(M + 1) + $clog2(63 + 1);
  logic clk = 0, rst_n = 0, cv = 0;
  logic [CW-1:0] cnt = 0;
  logic [7:0] rbyte;
  logic rvalid, rmine, fdone, fok;
  logic [3:0] fsrc;
  logic [24:0] nrx, nok;
  int checks = 0, failures = 0, ndone = 0;
  bit [7:0] got[$];
  bit exp_ok[$];
  int exp_src[$];
  bit [7:0] exp_byte[$];
  bit exp_mine[$];
  int exp_rx = 0, exp_okn = 0;

  info_rx #(.N(N), .M(M), .CNT_W(CW), .PAYLOAD_BYTES(PB)) dut (
    .clk, .rst_n, .en_i(1'b1), .node_id_i(3'd2), .chip_valid_i(cv), .chip_cnt_i(cnt),
    .thresh_i((TW+1)'(300)), .byte_o(rbyte), .byte_valid_o(rvalid), .byte_mine_o(rmine),
    .frame_done_o(fdone), .frame_ok_o(fok), .frame_src_o(fsrc), .frame_rx_num_o(nrx), .frame_ok_num_o(nok));
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (rvalid) begin
      got.push_back(rbyte);
      if (ndone >= 4) begin
        checks++;
        if (exp_byte.size() == 0 || rbyte != exp_byte[0] || rmine != exp_mine[0]) begin
          failures++; $display("FAIL byte %h mine %0b", rbyte, rmine);
        end
        if (exp_byte.size()) begin void'(exp_byte.pop_front()); void'(exp_mine.pop_front()); end
      end
    end
    if (fdone) begin
      ndone++;
      checks++;
      if (exp_ok.size() == 0 || fok != exp_ok[0] || fsrc != 4'(exp_src[0])) begin
        failures++; $display("FAIL frame %0d ok=%0b src=%0d", ndone, fok, fsrc);
      end
      if (exp_ok.size()) begin void'(exp_ok.pop_front()); void'(exp_src.pop_front()); end
    end
  end

  task automatic chip(input int c);
    @(negedge clk); cv = 1; cnt = CW'(c);
    @(negedge clk); cv = 0;
  endtask
  task automatic noise(input int n);
    for (int k = 0; k < n; k++) chip(($urandom_range(0, 99) < 3) ? 1 : 0);
  endtask
  task automatic send(input int dst, input int seq, input bit [7:0] pl[$], input bit flip_crc, input int flip_at = -1);
    bit sym[$];
    build(1, dst, seq, pl, sym);
    if (flip_crc) sym[sym.size() - 1] = !sym[sym.size() - 1];
    if (flip_at >= 0) sym[63 + flip_at] = !sym[63 + flip_at];
    foreach (sym[s]) for (int m = 0; m < M; m++)
      chip(sym[s] ? $urandom_range(1, 3) : (($urandom_range(0, 99) < 3) ? 1 : 0));
  endtask

  initial begin
    bit [7:0] p1[$], p2[$], p3[$], p4[$];
    for (int k = 0; k < PB; k++) begin
      p1.push_back(8'($urandom)); p2.push_back(8'($urandom)); p3.push_back(8'($urandom)); p4.push_back(8'($urandom));
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    noise(2000);
    checks++; if (ndone != 0) begin failures++; $display("FAIL frame found in noise"); end
    exp_src.push_back(1); exp_ok.push_back(1); send(2, 0, p1, 0); noise(300);
    exp_src.push_back(1); exp_ok.push_back(1); send(3, 1, p2, 0); noise(300);
    exp_src.push_back(1); exp_ok.push_back(0); send(2, 2, p3, 1); noise(300);
    exp_src.push_back(1); exp_ok.push_back(1); send(2, 3, p4, 0); noise(300);
    checks++; if (ndone != 4) begin failures++; $display("FAIL %0d frames", ndone); end
    begin
      bit [7:0] all[$];
      all = {p1, p2, p3, p4};
      checks++; if (got != all) begin failures++; $display("FAIL payload bytes"); end
    end
    checks++; if (nrx != 25'd3) begin failures++; $display("FAIL receive count %0d", nrx); end
    checks++; if (nok != 25'd2) begin failures++; $display("FAIL correct count %0d", nok); end
    exp_rx = 3; exp_okn = 2;
    for (int f = 0; f < 24; f++) begin
      bit [7:0] pl[$];
      int dst, flip;
      pl   = {};
      dst  = $urandom_range(1, N);
      // flipped symbol: header (0..15), payload or CRC, in a quarter of the frames
      flip = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 16 + 8 * PB + 15) : -1;
      for (int k = 0; k < PB; k++) pl.push_back(8'($urandom));
      // a flipped destination bit changes the address the receiver sees
      for (int k = 0; k < PB; k++) begin
        exp_byte.push_back(pl[k] ^ ((flip >= 16 && flip < 16 + 8 * PB && (flip - 16) / 8 == k) ? 8'h80 >> ((flip - 16) % 8) : 8'h00));
        exp_mine.push_back((dst ^ ((flip >= 4 && flip < 8) ? (8 >> (flip - 4)) : 0)) == 2);
      end
      exp_ok.push_back(flip < 0);
      exp_src.push_back(1 ^ ((flip >= 0 && flip < 4) ? (8 >> flip) : 0));
      if ((dst ^ ((flip >= 4 && flip < 8) ? (8 >> (flip - 4)) : 0)) == 2) begin
        exp_rx++;
        if (flip < 0) exp_okn++;
      end
      send(dst, 4 + f, pl, 0, flip);
      noise(200 + $urandom_range(0, 9));
    end
    checks++; if (ndone != 28) begin failures++; $display("FAIL %0d frames", ndone); end
    checks++; if (nrx != 25'(exp_rx)) begin failures++; $display("FAIL receive count %0d, expected %0d", nrx, exp_rx); end
    checks++; if (nok != 25'(exp_okn)) begin failures++; $display("FAIL correct count %0d, expected %0d", nok, exp_okn); end
    $display("random frames: %0d for this node, %0d correct", exp_rx - 3, exp_okn - 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
