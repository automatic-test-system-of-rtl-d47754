// link_monitor_tb - checks the per-channel result record.
// The testbench plays the transmit line (random bits, with the history
// vector built from it), the injection mark and the checker's err/rx_bit,
// and checks: error count; time stamp of the first error only; cable latency
// from mark to error; classification of errors as source (received bit
// equals the bit sent one latency earlier) or noise (it differs);
// no classification before a latency is known or beyond the history;
// clear keeps the latency;
// a measurement that reaches the counter's limit is dropped; clear.
module link_monitor_tb;
  import ttim_pkg::*;
  localparam int unsigned HD = 64;
  logic clk = 1'b0, rst = 1'b1, clear = 1'b0;
  logic [CNT_W-1:0] timestamp = '0;
  logic locked = 1'b1, err = 1'b0, rx_bit = 1'b0, inj_mark = 1'b0;
  logic [HD-1:0] hist;
  chan_stats_t stats;
  int checks = 0, failures = 0;
  logic txl [$];     // transmit line, txl[0] = current cycle
  int cyc = 0;

  always #2 clk = ~clk;

  link_monitor #(.HIST_DEPTH(HD)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // advance one cycle: new transmit bit, history of the past bits
  task automatic tick();
    @(posedge clk);
    #1;
    cyc++;
    timestamp = CNT_W'(1000 + cyc);
    txl.push_front(1'($urandom));
    if (txl.size() > 400) void'(txl.pop_back());
    for (int k = 0; k < HD; k++) hist[k] = (k + 1 < txl.size()) ? txl[k + 1] : 1'b0;
  endtask

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint ts_first;
    for (int i = 0; i < 300; i++) txl.push_front(1'b0);
    tick(); tick();
    rst = 1'b0;
    repeat (5) tick();
    check("locked copied", stats.locked, 1);

    // error before any latency: counted, time-stamped, unclassified
    err = 1'b1; rx_bit = 1'b1; ts_first = timestamp;
    tick(); err = 1'b0;
    tick();
    check("count 1", stats.error_count, 1);
    check("first_seen", stats.first_seen, 1);
    check("event_count", stats.event_count, ts_first);
    check("unclassified src", stats.source_count, 0);
    check("unclassified noise", stats.noise_count, 0);

    // injection with latency 37: the flagged bit equals the bit sent 37 cycles earlier
    inj_mark = 1'b1; tick(); inj_mark = 1'b0;
    repeat (36) tick();
    err = 1'b1; rx_bit = txl[37];
    tick(); err = 1'b0;
    tick();
    check("latency valid", stats.latency_valid, 1);
    check("latency", stats.cable_latency, 37);
    check("count 2", stats.error_count, 2);
    check("event_count kept", stats.event_count, ts_first);
    check("source 1", stats.source_count, 1);

    // later errors classified with the stored latency
    repeat (20) tick();
    err = 1'b1; rx_bit = ~txl[37];          // noise
    tick(); err = 1'b0;
    repeat (5) tick();
    err = 1'b1; rx_bit = txl[37];           // source
    tick(); err = 1'b0;
    repeat (3) tick();
    err = 1'b1; rx_bit = ~txl[37];          // noise
    tick(); err = 1'b0;
    tick();
    check("noise 2", stats.noise_count, 2);
    check("source 2", stats.source_count, 2);
    check("count 5", stats.error_count, 5);

    // clear
    clear = 1'b1; tick(); clear = 1'b0; tick();
    check("clear count", stats.error_count, 0);
    check("clear first", stats.first_seen, 0);
    check("clear keeps latency", stats.cable_latency, 37);
    // after clear, errors are still classified with the kept latency
    err = 1'b1; rx_bit = ~txl[37];
    tick(); err = 1'b0; tick();
    check("noise after clear", stats.noise_count, 1);
    clear = 1'b1; tick(); clear = 1'b0; tick();
    check("clear noise", stats.noise_count, 0);

    // latency beyond the history: measured but errors left unclassified
    inj_mark = 1'b1; tick(); inj_mark = 1'b0;
    repeat (HD + 9) tick();
    err = 1'b1; rx_bit = 1'b0;
    tick(); err = 1'b0; tick();
    check("long latency", stats.cable_latency, HD + 10);
    check("long unclassified", stats.source_count + stats.noise_count, 0);
    check("long counted", stats.error_count, 1);

    // latency 1: tap 0
    inj_mark = 1'b1; tick(); inj_mark = 1'b0;
    err = 1'b1; rx_bit = ~txl[1];
    tick(); err = 1'b0; tick();
    check("latency 1", stats.cable_latency, 1);
    check("latency 1 noise", stats.noise_count, 1);

    // a mark that never comes back: measurement dropped at 2^LAT_W-1, old value kept
    inj_mark = 1'b1; tick(); inj_mark = 1'b0;
    repeat ((1 << LAT_W) + 10) tick();
    err = 1'b1; rx_bit = 1'b0;
    tick(); err = 1'b0; tick();
    check("timeout keeps latency", stats.cable_latency, 1);
    check("timeout counted", stats.error_count, 3);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
