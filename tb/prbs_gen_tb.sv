// prbs_gen_tb - checks the pattern generator against the PRBS recurrences.
// For each pattern, the reference sequence is built in the testbench from
// b[t] = b[t-a] ^ b[t-b] starting from the all-ones seed, and every emitted
// bit is compared with it. PRBS-7 is also checked for its period of 127.
// An injected error must invert exactly one bit, the one emitted after the
// inject edge, with inj_mark high in the cycle that bit appears. Bits are
// requested every other cycle; each must appear one cycle after its strobe.
module prbs_gen_tb;
  import ttim_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  pattern_e pattern = PAT_PRBS7;
  logic bit_stb = 1'b0, inject = 1'b0;
  logic tx_bit, inj_mark;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  prbs_gen dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs n bits of pattern p from the all-ones seed; inverts bit inj_at (if >= 0).
  task automatic run_pattern(pattern_e p, int a, int b, int n, int inj_at);
    logic seq [$];
    logic got [$];
    logic exp_bit;
    int   n_marks = 0;
    @(negedge clk);
    pattern = p;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 31; i++) seq.push_back(1'b1);   // seed, oldest first
    for (int t = 0; t < n; t++) begin
      exp_bit = seq[seq.size() - a] ^ seq[seq.size() - b];
      seq.push_back(exp_bit);
      if (t == inj_at) begin
        inject = 1'b1;                 // rising edge arms the injection
        @(negedge clk);
        inject = 1'b0;
      end
      bit_stb = 1'b1;
      @(negedge clk);
      bit_stb = 1'b0;
      checks++;
      if (tx_bit != (exp_bit ^ (t == inj_at))) begin
        failures++;
        if (failures < 10) $display("FAIL pattern %0d bit %0d", p, t);
      end
      if (inj_mark) n_marks++;
      checks++;
      if (inj_mark != (t == inj_at)) begin
        failures++;
        $display("FAIL inj_mark=%0b at bit %0d", inj_mark, t);
      end
      got.push_back(tx_bit);
      @(negedge clk);
      // held between strobes
      checks++;
      if (tx_bit != got[t]) begin failures++; $display("FAIL bit not held"); end
      if (inj_mark) begin failures++; $display("FAIL inj_mark longer than one cycle"); end
    end
    if (p == PAT_PRBS7) begin
      for (int t = 0; t + 127 < n; t++) begin
        if (t == inj_at || t + 127 == inj_at) continue;
        checks++;
        if (got[t] != got[t + 127]) begin failures++; $display("FAIL period at %0d", t); end
      end
    end
    checks++;
    if (n_marks != (inj_at >= 0 ? 1 : 0)) begin
      failures++;
      $display("FAIL %0d marks", n_marks);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    run_pattern(PAT_PRBS15, 15, 14, 400, -1);
    run_pattern(PAT_PRBS7,   7,  6, 400, 150);
    run_pattern(PAT_PRBS23, 23, 18, 400, -1);
    run_pattern(PAT_PRBS31, 31, 28, 400, 333);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
