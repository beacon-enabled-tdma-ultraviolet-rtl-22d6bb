// tb_info_tx: checks the frame transmitter of node 2 against the reference
// frame model (uv_frame_ref) at 4 clocks per symbol and 4-byte payloads.
// It checks that nothing is sent in another node's slot, that three frames
// go out back to back when 12 bytes wait (sequence numbers 0..2, payload in
// FIFO order, correct CRC, every symbol exactly SYM_CLKS clocks long), that
// no frame starts with fewer bytes than a payload, and that a frame starts
// only when more than a whole frame's time is left in the slot.
module tb_info_tx;
  import uv_pkg::*;
  import uv_frame_ref::*;
  localparam int N = 4, SC = 4, PB = 4;
  localparam int FS = 63 + 16 + 8 * PB + 16, FCLK = FS * SC;
  logic clk = 0, rst_n = 0;
  slot_t slot = SLOT_G;
  logic [2:0] src = 1, dst = 2;
  logic [15:0] rem = 16'd60000;
  logic [7:0] fdata;
  logic [7:0] fcount;
  logic pop, bit_o, active;
  logic [24:0] frames;
  int checks = 0, failures = 0;
  bit [7:0] fq[$];
  bit [7:0] sent[$];
  bit txbits[$];
  int run_len = 0;

  info_tx #(.N(N), .SYM_CLKS(SC), .PAYLOAD_BYTES(PB), .CW(16), .FIFO_CW(8)) dut (
    .clk, .rst_n, .node_id_i(3'd2), .synced_i(1'b1), .slot_i(slot), .slot_src_i(src), .slot_dst_i(dst),
    .remaining_i(rem), .fifo_data_i(fdata), .fifo_count_i(fcount), .fifo_pop_o(pop), .bit_o, .active_o(active),
    .frames_o(frames));
  always #5 clk = ~clk;

  assign fdata  = fq.size() ? fq[0] : 8'h00;
  assign fcount = 8'(fq.size());

  always @(posedge clk) if (rst_n) begin
    if (pop) begin sent.push_back(fq[0]); void'(fq.pop_front()); end
    if (active) txbits.push_back(bit_o);
  end

  task automatic expect_frames(input int nframes, input int seq0, input bit [7:0] data[$]);
    bit sym[$];
    bit [7:0] pl[$];
    int idx;
    idx = 0;
    for (int f = 0; f < nframes; f++) begin
      pl = data[f*PB : f*PB+PB-1];
      build(2, 3, seq0 + f, pl, sym);
      foreach (sym[s]) for (int c = 0; c < SC; c++) begin
        checks++;
        if (idx >= txbits.size() || txbits[idx] != sym[s]) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d symbol %0d clock %0d", f, s, c);
        end
        idx++;
      end
    end
    checks++; if (txbits.size() != idx) begin failures++; $display("FAIL %0d clocks sent, expected %0d", txbits.size(), idx); end
  endtask

  initial begin
    bit [7:0] data[$];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 12; k++) begin data.push_back(8'($urandom)); fq.push_back(data[k]); end
    // another node's slot: nothing
    slot = SLOT_U; src = 1; dst = 2;
    repeat (100) @(negedge clk);
    checks++; if (txbits.size() != 0) begin failures++; $display("FAIL sent in foreign slot"); end
    // own guard interval: nothing
    slot = SLOT_G; src = 2; dst = 3;
    repeat (100) @(negedge clk);
    checks++; if (txbits.size() != 0) begin failures++; $display("FAIL sent in guard"); end
    // own slot U_23
    slot = SLOT_U;
    repeat (3 * FCLK + 200) @(negedge clk);
    expect_frames(3, 0, data);
    checks++; if (frames != 25'd3) begin failures++; $display("FAIL frame count %0d", frames); end
    checks++; if (sent != data) begin failures++; $display("FAIL FIFO pop order"); end
    // fewer bytes than a payload: wait
    txbits = {};
    fq.push_back(8'hA5); fq.push_back(8'h3C); fq.push_back(8'h0F);
    repeat (FCLK) @(negedge clk);
    checks++; if (txbits.size() != 0) begin failures++; $display("FAIL sent a short frame"); end
    // slot end too close: exactly one frame's time left is not enough
    fq.push_back(8'h81);
    rem = 16'(FCLK);
    repeat (FCLK) @(negedge clk);
    checks++; if (txbits.size() != 0) begin failures++; $display("FAIL frame would overrun slot"); end
    rem = 16'(FCLK + 1);
    repeat (FCLK + 50) @(negedge clk);
    data = {8'hA5, 8'h3C, 8'h0F, 8'h81};
    expect_frames(1, 3, data);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
