// ttim_prbs_top_tb - end-to-end test of the link-test firmware, full size.
//
// The top runs with its default parameters: 48 ports, 96 channels. The
// testbench models the cables of the loopback setup: ports are paired
// (2k, 2k+1); pair 1-2 of one port feeds pair 3-6 of the other and pair 4-5
// feeds pair 7-8. Each of the 96 channels gets its own cable delay (10 to
// 200 cycles) and can have bits inverted (noise) or be replaced by random
// data (a burst). The testbench then drives the control inputs as an
// operator would and reads each channel through rd_sel. It checks:
//   - all channels lock at 125 and 250 Mbit/s and on PRBS-7 and PRBS-31,
//     and stay error-free on clean cables;
//   - one injected error: every channel counts exactly 1 error, classed as
//     source, with cable_latency equal to the value worked out from the
//     cable delay, the 2-cycle synchroniser, the sample phase and the
//     registered error; event_count differences between channels equal the
//     latency differences;
//   - noise on two channels: 1 error each, classed as noise, no other channel
//     affected;
//   - a burst on one channel: lock lost and regained;
//   - the scope probes: probe_orig lines up with probe_rx when scope_delay
//     is the cable delay + 1, and probe_err pulses on the selected channel.
// Each of these mechanisms is counted and must occur at least once.
module ttim_prbs_top_tb;
  import ttim_pkg::*;
  localparam int unsigned NP = 48, NC = 2 * NP;

  logic clk = 1'b0, clk_locked = 1'b0;
  pattern_e pattern = PAT_PRBS7;
  logic [1:0] rate_sel = 2'd1;
  logic [2:0] rx_phase = 3'd1;
  logic inject = 1'b0, clear = 1'b0;
  logic [6:0] rd_sel = '0;
  logic [7:0] scope_delay = '0;
  logic [NP-1:0] tx_pair12, tx_pair45, rx_pair36, rx_pair78;
  logic [CNT_W-1:0] live_counter;
  chan_stats_t rd_stats;
  logic [NC-1:0] err_vec, locked_vec;
  logic probe_err, probe_rx, probe_orig;

  int checks = 0, failures = 0;
  int n_inject = 0, n_source = 0, n_noise = 0, n_lock_loss = 0, n_relock = 0;
  int n_rate_switch = 0, n_pattern_switch = 0, n_probe_align = 0, n_probe_err = 0;

  always #2 clk = ~clk;   // 250 MHz

  ttim_prbs_top dut (.*);

  // ---------------- cable model
  int unsigned delay [NC];
  logic [255:0] line [NC];       // line[c][k]: transmit bit of channel c's source k+1 cycles ago
  logic flip [NC];               // invert the received bit (noise)
  logic burst [NC];              // replace it by random data
  logic [NC-1:0] src_bit;

  for (genvar p = 0; p < NP; p++) begin : g_src
    localparam int P = (p % 2 == 0) ? p + 1 : p - 1;   // cable partner
    assign src_bit[2*p]     = tx_pair12[P];
    assign src_bit[2*p + 1] = tx_pair45[P];
    assign rx_pair36[p] = line[2*p][delay[2*p] - 1] ^ flip[2*p] ^
                          (burst[2*p] & 1'($urandom));
    assign rx_pair78[p] = line[2*p+1][delay[2*p+1] - 1] ^ flip[2*p+1] ^
                          (burst[2*p+1] & 1'($urandom));
  end

  always @(posedge clk)
    for (int c = 0; c < NC; c++) line[c] <= {line[c][254:0], src_bit[c]};

  // ---------------- helpers
  initial begin
    #8000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic cycles(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic read_ch(int c, output chan_stats_t s);
    rd_sel = 7'(c);
    cycles(2);
    s = rd_stats;
  endtask

  task automatic pulse_clear();
    clear = 1'b1; cycles(1); clear = 1'b0; cycles(2);
  endtask

  // Expected latency from the injected bit on the line to err:
  // cable delay D, two synchroniser stages, then the first sample strobe
  // k >= D+2 cycles after the mark with (1 + k) mod N == phase (the mark
  // comes one cycle after a transmit strobe), plus the registered err.
  function automatic int exp_latency(int d, int n, int ph);
    for (int k = d + 2; k < d + 2 + n; k++)
      if ((1 + k) % n == ph % n) return k + 1;
    return -1;
  endfunction

  task automatic expect_all_clean(string what);
    chan_stats_t s;
    for (int c = 0; c < NC; c++) begin
      read_ch(c, s);
      check({what, " locked"}, s.locked, 1);
      check({what, " no errors"}, s.error_count, 0);
    end
  endtask

  task automatic do_inject(int n, int ph, string what);
    chan_stats_t s;
    longint ev0;
    int lat0;
    pulse_clear();
    cycles(20);
    inject = 1'b1; cycles(1); inject = 1'b0;
    n_inject++;
    cycles(600);
    for (int c = 0; c < NC; c++) begin
      read_ch(c, s);
      check({what, " error_count"}, s.error_count, 1);
      check({what, " latency_valid"}, s.latency_valid, 1);
      check({what, " latency"}, s.cable_latency, exp_latency(delay[c], n, ph));
      check({what, " source"}, s.source_count, 1);
      check({what, " noise"}, s.noise_count, 0);
      if (s.source_count == 1) n_source++;
      if (c == 0) begin ev0 = s.event_count; lat0 = int'(s.cable_latency); end
      else check({what, " event_count"}, s.event_count - ev0, longint'(s.cable_latency) - lat0);
    end
  endtask

  initial begin
    chan_stats_t s;
    int ch_a, ch_b, seen_err;
    bit was_unlocked;
    for (int c = 0; c < NC; c++) begin
      delay[c] = 10 + ($urandom % 191);
      line[c]  = '0;
      flip[c]  = 1'b0;
      burst[c] = 1'b0;
    end
    cycles(5);
    clk_locked = 1'b1;
    cycles(400);

    // ---- 125 Mbit/s, PRBS-7
    pulse_clear();
    cycles(300);
    expect_all_clean("125M");
    do_inject(2, 1, "125M inject");

    // ---- noise on two channels
    pulse_clear();
    ch_a = 5; ch_b = 62;
    flip[ch_a] = 1'b1; cycles(2); flip[ch_a] = 1'b0;   // one bit (2 cycles at 125 Mbit/s)
    cycles(50);
    flip[ch_b] = 1'b1; cycles(2); flip[ch_b] = 1'b0;
    cycles(300);
    for (int c = 0; c < NC; c++) begin
      read_ch(c, s);
      if (c == ch_a || c == ch_b) begin
        check("noise error_count", s.error_count, 1);
        check("noise class", s.noise_count, 1);
        check("noise not source", s.source_count, 0);
        if (s.noise_count == 1) n_noise++;
      end else begin
        check("noise neighbours", s.error_count, 0);
      end
    end

    // ---- scope probes on channel ch_a
    rd_sel = 7'(ch_a);
    scope_delay = 8'(delay[ch_a] + 1);
    cycles(5);
    begin
      int mism = 0;
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        if (probe_rx != probe_orig) mism++;
      end
      check("probe alignment", mism, 0);
      if (mism == 0) n_probe_align++;
    end
    seen_err = 0;
    fork
      begin flip[ch_a] = 1'b1; cycles(2); flip[ch_a] = 1'b0; end
      for (int t = 0; t < 200; t++) begin
        @(negedge clk);
        if (probe_err) seen_err++;
      end
    join
    check("probe_err pulses", seen_err, 1);
    if (seen_err == 1) n_probe_err++;

    // ---- burst on one channel: lock lost, regained
    was_unlocked = 1'b0;
    burst[17] = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (!locked_vec[17]) was_unlocked = 1'b1;
    end
    burst[17] = 1'b0;
    check("burst loses lock", was_unlocked, 1);
    if (was_unlocked) n_lock_loss++;
    cycles(500);
    check("relocked", locked_vec[17], 1);
    if (locked_vec[17]) n_relock++;
    check("others locked", locked_vec, {NC{1'b1}});

    // ---- 250 Mbit/s
    rate_sel = 2'd0; rx_phase = 3'd0;
    n_rate_switch++;
    cycles(300);
    pulse_clear();
    cycles(500);
    expect_all_clean("250M");
    do_inject(1, 0, "250M inject");

    // ---- 62.5 Mbit/s with a late sample point
    rate_sel = 2'd2; rx_phase = 3'd3;
    n_rate_switch++;
    cycles(600);
    pulse_clear();
    cycles(500);
    expect_all_clean("62.5M");
    do_inject(4, 3, "62.5M inject");

    // ---- PRBS-31 at 125 Mbit/s
    rate_sel = 2'd1; rx_phase = 3'd1;
    pattern = PAT_PRBS31;
    n_pattern_switch++;
    // data of the old pattern still in the cables can seed a wrong state;
    // the loss-of-lock rule clears it within a few hundred bits
    cycles(3000);
    pulse_clear();
    cycles(2000);
    expect_all_clean("PRBS31");
    check("run counter", live_counter >= 2000, 1);

    // ---- mechanism coverage
    check("mechanism inject", n_inject > 0, 1);
    check("mechanism source class", n_source > 0, 1);
    check("mechanism noise class", n_noise > 0, 1);
    check("mechanism lock loss", n_lock_loss > 0, 1);
    check("mechanism relock", n_relock > 0, 1);
    check("mechanism rate switch", n_rate_switch > 0, 1);
    check("mechanism pattern switch", n_pattern_switch > 0, 1);
    check("mechanism probe align", n_probe_align > 0, 1);
    check("mechanism probe err", n_probe_err > 0, 1);
    $display("mechanisms: inject=%0d source=%0d noise=%0d lock_loss=%0d relock=%0d rate_switch=%0d pattern_switch=%0d probe_align=%0d probe_err=%0d",
             n_inject, n_source, n_noise, n_lock_loss, n_relock, n_rate_switch,
             n_pattern_switch, n_probe_align, n_probe_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
