// probe_mux_tb - checks channel readout and scope probes.
// Random records, error and receive vectors and a random history are applied;
// one cycle later sel_stats must be the selected channel's record (channel 0
// for a selection past the last channel), probe_err/probe_rx that channel's
// bits and probe_orig the history tap scope_delay.
module probe_mux_tb;
  import ttim_pkg::*;
  localparam int unsigned N = 6, HD = 16;
  logic clk = 1'b0, rst = 1'b1;
  logic [2:0] sel = '0;
  logic [3:0] scope_delay = '0;
  chan_stats_t stats [N];
  logic [N-1:0] err_vec = '0, rx_vec = '0;
  logic [HD-1:0] hist = '0;
  chan_stats_t sel_stats;
  logic probe_err, probe_rx, probe_orig;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  probe_mux #(.NUM_CH(N), .HIST_DEPTH(HD)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic chan_stats_t rand_stats();
    logic [$bits(chan_stats_t)-1:0] v;
    for (int i = 0; i < $bits(chan_stats_t); i += 32) v = {v, $urandom};
    return chan_stats_t'(v);
  endfunction

  initial begin
    chan_stats_t exp_s;
    logic e_err, e_rx, e_orig;
    int ch;
    for (int c = 0; c < N; c++) stats[c] = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < 500; t++) begin
      for (int c = 0; c < N; c++) stats[c] = rand_stats();
      err_vec     = N'($urandom);
      rx_vec      = N'($urandom);
      hist        = HD'($urandom);
      sel         = 3'($urandom);
      scope_delay = 4'($urandom);
      ch     = (int'(sel) < N) ? int'(sel) : 0;
      exp_s  = stats[ch];
      e_err  = err_vec[ch];
      e_rx   = rx_vec[ch];
      e_orig = hist[scope_delay];
      @(negedge clk);
      checks += 4;
      if (sel_stats != exp_s)   begin failures++; $display("FAIL stats sel=%0d", sel); end
      if (probe_err != e_err)   begin failures++; $display("FAIL probe_err"); end
      if (probe_rx != e_rx)     begin failures++; $display("FAIL probe_rx"); end
      if (probe_orig != e_orig) begin failures++; $display("FAIL probe_orig"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
