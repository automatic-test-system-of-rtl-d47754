// prbs_chk_tb - checks the PRBS checker.
// The testbench drives a PRBS from its own recurrence, one bit every four
// cycles with the sample strobe in the fourth cycle, and checks:
//   - lock after exactly (polynomial order) bits, with no error while clean;
//   - each bit inverted on the line gives exactly one err, in the cycle
//     after that bit's strobe, with rx_bit equal to the inverted bit;
//   - random data makes the checker drop lock; a clean stream relocks it;
//   - a pattern change restarts seeding and the new pattern locks.
module prbs_chk_tb;
  import ttim_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  pattern_e pattern = PAT_PRBS7;
  logic sample_stb = 1'b0, rx_in = 1'b0;
  logic rx_sync, locked, chk_valid, err, rx_bit;
  int checks = 0, failures = 0;
  logic seq [$];
  int ta, tb_;

  always #2 clk = ~clk;

  prbs_chk dut (.*);

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic next_ref();
    logic b = seq[seq.size() - ta] ^ seq[seq.size() - tb_];
    seq.push_back(b);
    return b;
  endfunction

  // Sends one bit; returns whether err followed its strobe.
  task automatic send_bit(logic b, output logic e, output logic rb);
    rx_in = b;
    repeat (3) @(negedge clk);
    sample_stb = 1'b1;
    @(negedge clk);
    sample_stb = 1'b0;
    e  = err;
    rb = rx_bit;
  endtask

  task automatic start_pattern(pattern_e p, int a, int b);
    pattern = p; ta = a; tb_ = b;
    seq.delete();
    for (int i = 0; i < 31; i++) seq.push_back(1'($urandom));
    repeat (2) @(negedge clk);
  endtask

  initial begin
    logic e, rb, bit_v;
    int n_err, lock_at;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // --- PRBS-7: lock, clean run, single errors
    start_pattern(PAT_PRBS7, 7, 6);
    lock_at = -1;
    for (int t = 0; t < 600; t++) begin
      bit_v = next_ref();
      if (t == 100 || t == 250 || t == 251 || t == 400) begin
        send_bit(~bit_v, e, rb);
        checks += 2;
        if (!e)          begin failures++; $display("FAIL missed error at bit %0d", t); end
        if (rb != ~bit_v) begin failures++; $display("FAIL rx_bit at bit %0d", t); end
      end else begin
        send_bit(bit_v, e, rb);
        if (locked && lock_at < 0) lock_at = t;
        if (t >= 7) begin
          checks++;
          if (e) begin failures++; $display("FAIL false error at bit %0d", t); end
        end
      end
      // one cycle later err must be gone
      @(negedge clk);
      if (err) begin failures++; $display("FAIL err longer than one cycle"); end
    end
    checks++;
    if (lock_at != 6) begin failures++; $display("FAIL locked after bit %0d, expected 6", lock_at); end
    checks++;
    if (!locked) begin failures++; $display("FAIL lost lock on single errors"); end

    // --- random data: lock must drop
    n_err = 0;
    for (int t = 0; t < 300 && locked; t++) begin
      send_bit(1'($urandom), e, rb);
      n_err += int'(e);
    end
    checks++;
    if (locked) begin failures++; $display("FAIL still locked on random data"); end
    checks++;
    if (n_err < 10) begin failures++; $display("FAIL only %0d errors on random data", n_err); end

    // --- clean stream relocks
    for (int t = 0; t < 200; t++) begin
      bit_v = next_ref();
      send_bit(bit_v, e, rb);
      if (t >= 40) begin
        checks++;
        if (e || !locked) begin failures++; $display("FAIL no relock at %0d", t); end
      end
    end

    // --- pattern change to PRBS-23
    start_pattern(PAT_PRBS23, 23, 18);
    checks++;
    if (locked) begin failures++; $display("FAIL lock kept across pattern change"); end
    lock_at = -1;
    for (int t = 0; t < 300; t++) begin
      bit_v = next_ref();
      send_bit((t == 200) ? ~bit_v : bit_v, e, rb);
      if (locked && lock_at < 0) lock_at = t;
      if (t >= 23) begin
        checks++;
        if (e != (t == 200)) begin failures++; $display("FAIL PRBS-23 bit %0d err=%0b", t, e); end
      end
    end
    checks++;
    if (lock_at != 22) begin failures++; $display("FAIL PRBS-23 locked after bit %0d", lock_at); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
