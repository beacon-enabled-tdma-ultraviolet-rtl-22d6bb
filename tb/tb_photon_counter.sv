// tb_photon_counter: drives random PMT pulses on K = 3 ADC channels and
// compares every chip count with a model that counts upward threshold
// crossings over the same 5-clock chip, saturating at 7 (CNT_W = 3). Also checks that
// chips come exactly every CLKS_PER_CHIP clocks.
module tb_photon_counter;
  localparam int K = 3, AW = 12, CPC = 5, CW = 3;
  logic clk = 0, rst_n = 0;
  logic [K-1:0][AW-1:0] adc;
  logic [AW-1:0] thr = 12'd1000;
  logic cv;
  logic [CW-1:0] cc;
  int checks = 0, failures = 0, nchips = 0, last_cv = -1, cyc = 0, dense = 0;
  int exp_q[$];
  int acc = 0, ph = 0;
  logic [K-1:0] above = '1;

  photon_counter #(.K(K), .ADC_W(AW), .CLKS_PER_CHIP(CPC), .CNT_W(CW)) dut (
    .clk, .rst_n, .adc_i(adc), .thresh_i(thr), .chip_valid_o(cv), .chip_cnt_o(cc));
  always #5 clk = ~clk;

  // stimulus: new samples after each rising edge
  always @(negedge clk) begin
    for (int k = 0; k < K; k++) begin
      int p;
      p = 25;
      if (cyc > 3000 && cyc < 4000) adc[k] = cyc[0] ? AW'(3000) : AW'(10);   // dense pulses: saturation
      else adc[k] = ($urandom_range(0, 99) < p) ? AW'($urandom_range(1000, 4095)) : AW'($urandom_range(0, 999));
    end
  end

  // reference model, sampled at the same edges as the design
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      int e;
      e = 0;
      for (int k = 0; k < K; k++) begin
        if (adc[k] >= thr && !above[k]) e++;
        above[k] = (adc[k] >= thr);
      end
      acc += e;
      if (ph == CPC - 1) begin exp_q.push_back(acc > 7 ? 7 : acc); acc = 0; ph = 0; end
      else ph++;
    end
    if (rst_n && cv) begin
      nchips++;
      checks++;
      if (exp_q.size() == 0 || int'(cc) != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL chip %0d: %0d vs %0d", nchips, cc, exp_q.size() ? exp_q[0] : -1);
      end
      if (exp_q.size()) begin if (exp_q[0] == 7) dense++; void'(exp_q.pop_front()); end
      if (last_cv >= 0) begin checks++; if (cyc - last_cv != CPC) failures++; end
      last_cv = cyc;
    end
  end

  initial begin
    adc = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    repeat (6000) @(posedge clk);
    checks++; if (nchips < 1100) begin failures++; $display("FAIL only %0d chips", nchips); end
    checks++; if (dense == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
