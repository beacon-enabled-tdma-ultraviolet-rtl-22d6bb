// tb_uart_rx: self-checking test of the 8N1 UART receiver.
// Sends 200 random bytes at the default 25 clocks per bit with random idle
// gaps and checks each received byte, then sends bytes with a broken stop
// bit and checks that they are dropped and flagged.
module tb_uart_rx;
  localparam int CPB = 25;
  logic clk = 0, rst_n = 0, rxd = 1;
  logic [7:0] data;
  logic valid, ferr;
  int checks = 0, failures = 0, n_valid = 0, n_err = 0;
  logic [7:0] exp_q[$];

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rxd, .data_o(data), .valid_o(valid), .frame_err_o(ferr));

  always #5 clk = ~clk;

  task automatic send(input logic [7:0] b, input logic stop);
    rxd = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stop; repeat (CPB) @(negedge clk);
    rxd = 1; repeat (2 + $urandom_range(0, 40)) @(negedge clk);
  endtask

  always @(posedge clk) begin
    if (rst_n && valid) begin
      n_valid++;
      checks++;
      if (exp_q.size() == 0 || exp_q[0] != data) begin
        failures++;
        $display("FAIL: got %02x", data);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (rst_n && ferr) n_err++;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      logic [7:0] b;
      b = 8'($urandom);
      exp_q.push_back(b);
      send(b, 1'b1);
    end
    repeat (4 * CPB) @(posedge clk);
    checks++; if (n_valid != 200) begin failures++; $display("FAIL: %0d bytes", n_valid); end
    for (int n = 0; n < 5; n++) send(8'h5A, 1'b0);
    repeat (12 * CPB) @(posedge clk);
    checks++; if (n_err != 5)     begin failures++; $display("FAIL: %0d frame errors", n_err); end
    checks++; if (n_valid != 200) begin failures++; $display("FAIL: bad bytes accepted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
