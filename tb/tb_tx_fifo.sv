// tb_tx_fifo: self-checking test of the byte FIFO against a queue model.
// Random pushes and pops on a 16-deep FIFO, including filling it past full
// (overflow count) and reading it empty.
module tb_tx_fifo;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic [7:0] wdata, rdata;
  logic wr, rd;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [15:0] ovf;
  int checks = 0, failures = 0, exp_ovf = 0;
  logic [7:0] q[$];

  tx_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_data_i(wdata), .wr_en_i(wr), .rd_data_o(rdata),
                                .rd_en_i(rd), .count_o(count), .overflow_o(ovf));
  always #5 clk = ~clk;

  task automatic step(input int pw, input int pr);
    @(negedge clk);
    wr = ($urandom_range(0, 99) < pw);
    rd = ($urandom_range(0, 99) < pr);
    wdata = 8'($urandom);
    checks++;
    if (count != q.size()) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
    if (q.size() > 0) begin
      checks++;
      if (rdata != q[0]) begin failures++; $display("FAIL data %02x vs %02x", rdata, q[0]); end
    end
    @(posedge clk);
    // model update, same rules as the specification
    begin
      bit did_rd;
      did_rd = rd && q.size() > 0;
      if (did_rd) void'(q.pop_front());
      if (wr) begin
        if (q.size() < DEPTH || did_rd) q.push_back(wdata);
        else exp_ovf++;
      end
    end
  endtask

  initial begin
    wr = 0; rd = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) step(50, 50);
    for (int n = 0; n < 40; n++)  step(90, 5);
    for (int n = 0; n < 300; n++) step(60, 40);
    for (int n = 0; n < 60; n++)  step(0, 90);
    @(negedge clk);
    checks++;
    if (ovf != 16'(exp_ovf) || exp_ovf == 0) begin failures++; $display("FAIL overflow %0d vs %0d", ovf, exp_ovf); end
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
