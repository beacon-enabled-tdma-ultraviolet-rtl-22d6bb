// tb_beacon_gen: checks the master beacon against an independently computed
// m-sequence. The reference uses the bit recurrence of x^8+x^6+x^5+x^4+1,
// o[n+8] = o[n] ^ o[n+2] ^ o[n+3] ^ o[n+4], from the register seed 0x01.
// It checks every symbol value, the symbol length, the beacon length L, the
// period (255) and balance of the sequence, and a restart.
module tb_beacon_gen;
  localparam int L = 256, SC = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic bit_o, active;
  int checks = 0, failures = 0;
  logic ref_seq [L];

  beacon_gen #(.L(L), .SYM_CLKS(SC)) dut (.clk, .rst_n, .start_i(start), .bit_o, .active_o(active));
  always #5 clk = ~clk;

  initial begin
    int ones;
    for (int n = 0; n < 8; n++) ref_seq[n] = (n == 7);
    for (int n = 0; n + 8 < 255; n++) ref_seq[n+8] = ref_seq[n] ^ ref_seq[n+2] ^ ref_seq[n+3] ^ ref_seq[n+4];
    ref_seq[255] = 0;
    ones = 0;
    for (int n = 0; n < 255; n++) ones += ref_seq[n];
    checks++; if (ones != 128) begin failures++; $display("FAIL reference has %0d ones", ones); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      // now in the first clock of symbol 0
      for (int n = 0; n < L; n++) begin
        for (int c = 0; c < SC; c++) begin
          checks++;
          if (!active || bit_o !== ref_seq[n]) begin
            failures++;
            if (failures < 10) $display("FAIL sym %0d clk %0d: bit %0b exp %0b act %0b", n, c, bit_o, ref_seq[n], active);
          end
          @(negedge clk);
        end
      end
      checks++; if (active || bit_o) begin failures++; $display("FAIL beacon longer than L"); end
      repeat (20) @(negedge clk);
    end
    // the LFSR sequence itself repeats after 255 symbols
    begin
      logic [7:0] s;
      logic o [510];
      s = 8'h01;
      for (int n = 0; n < 510; n++) begin o[n] = s[7]; s = {s[6:0], s[7]^s[5]^s[4]^s[3]}; end
      for (int n = 0; n < 255; n++) begin checks++; if (o[n] != o[n+255] || o[n] != ref_seq[n]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
