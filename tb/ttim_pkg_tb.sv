// ttim_pkg_tb - checks the shared PRBS functions of ttim_pkg.
// prbs_next must give a maximal-length sequence for each polynomial: started
// from all ones, the LFSR state must first return to all ones after exactly
// 2^n - 1 steps (checked for PRBS-7 and PRBS-15; PRBS-23/31 are checked
// against the recurrence b[t] = b[t-a] ^ b[t-b] written out here), and
// pattern_order must return the polynomial order.
module ttim_pkg_tb;
  import ttim_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  always #2 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int period(pattern_e p, int n);
    logic [LFSR_W-1:0] s = '1;
    logic [LFSR_W-1:0] m = LFSR_W'((64'd1 << n) - 1);
    for (int t = 1; t <= (1 << n); t++) begin
      s = {s[LFSR_W-2:0], prbs_next(s, p)};
      if ((s & m) == m) return t;
    end
    return -1;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    logic [LFSR_W-1:0] s;
    logic b;
    @(posedge clk);
    check("PRBS-7 period", longint'(period(PAT_PRBS7, 7)), 127);
    check("PRBS-15 period", longint'(period(PAT_PRBS15, 15)), 32767);
    check("order 7", longint'(pattern_order(PAT_PRBS7)), 7);
    check("order 15", longint'(pattern_order(PAT_PRBS15)), 15);
    check("order 23", longint'(pattern_order(PAT_PRBS23)), 23);
    check("order 31", longint'(pattern_order(PAT_PRBS31)), 31);
    for (int i = 0; i < 2000; i++) begin
      s = LFSR_W'($urandom);
      b = s[22] ^ s[17];
      check("PRBS-23 taps", prbs_next(s, PAT_PRBS23), b);
      b = s[30] ^ s[27];
      check("PRBS-31 taps", prbs_next(s, PAT_PRBS31), b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
