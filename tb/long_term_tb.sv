// long_term_tb - compressed version of the BEC long-term test.
//
// The published long-term test ran 48 channels for 28 days. 41 channels
// stayed error-free. Channel 26 (a faulty cable) collected errors again and
// again, and channels 11, 17, 22, 24, 28 and 38 each had errors at one moment
// from external noise. This testbench replays that pattern in
// 400,000 cycles (1.6 ms) on the full-size firmware at 125 Mbit/s, PRBS-7:
//   - one error is injected first, to measure every cable's latency;
//   - after clear, single-bit noise hits are applied: 40 spread over the run
//     on channel 26, and a cluster of 1-4 at one random moment on each of
//     the six other channels;
//   - every 20,000 cycles the "host" reads all 48 channels through rd_sel,
//     as the periodic upload did, and checks that no count ever decreases;
//   - at the end each channel's error count must equal its number of hits,
//     all of them classed as noise, and the 41 clean channels must read 0.
module long_term_tb;
  import ttim_pkg::*;
  localparam int unsigned NP = 48, NC = 2 * NP, NTEST = 48;
  localparam int unsigned RUN = 400000, UPLOAD = 20000;

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

  always #2 clk = ~clk;

  ttim_prbs_top dut (.*);

  // ---------------- cables: each channel its own delay; flip[c] inverts its received bit
  int unsigned delay [NC];
  logic [255:0] line [NC];
  logic flip [NC];
  logic [NC-1:0] src_bit;

  for (genvar p = 0; p < NP; p++) begin : g_src
    localparam int P = (p % 2 == 0) ? p + 1 : p - 1;
    assign src_bit[2*p]     = tx_pair12[P];
    assign src_bit[2*p + 1] = tx_pair45[P];
    assign rx_pair36[p] = line[2*p][delay[2*p] - 1] ^ flip[2*p];
    assign rx_pair78[p] = line[2*p+1][delay[2*p+1] - 1] ^ flip[2*p+1];
  end

  always @(posedge clk)
    for (int c = 0; c < NC; c++) line[c] <= {line[c][254:0], src_bit[c]};

  initial begin
    #4000000;
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

  // ---------------- noise schedule
  int hit_time [$];
  int hit_ch [$];
  int hits [NC];
  int noisy [7] = '{11, 17, 22, 24, 26, 28, 38};

  task automatic schedule();
    for (int i = 0; i < 40; i++) begin
      hit_time.push_back(1000 + i * (RUN - 2000) / 40 + int'($urandom % 500));
      hit_ch.push_back(26);
    end
    foreach (noisy[j]) begin
      int t0, n;
      if (noisy[j] == 26) continue;
      t0 = 1000 + int'($urandom % (RUN - 3000));
      n  = 1 + int'($urandom % 4);
      for (int k = 0; k < n; k++) begin
        hit_time.push_back(t0 + k * 60);   // 30 bits apart: isolated single errors
        hit_ch.push_back(noisy[j]);
      end
    end
  endtask

  longint last [NTEST];

  task automatic upload(int n_up);
    for (int c = 0; c < NTEST; c++) begin
      rd_sel = 7'(c);
      cycles(2);
      checks++;
      if (rd_stats.error_count < last[c]) begin
        failures++;
        $display("FAIL upload %0d: channel %0d count went down", n_up, c);
      end
      last[c] = longint'(rd_stats.error_count);
      checks++;
      if (!rd_stats.locked) begin failures++; $display("FAIL channel %0d unlocked", c); end
    end
  endtask

  initial begin
    int t, n_up;
    for (int c = 0; c < NC; c++) begin
      delay[c] = 10 + ($urandom % 191);
      line[c] = '0;
      flip[c] = 1'b0;
      hits[c] = 0;
    end
    for (int c = 0; c < NTEST; c++) last[c] = 0;
    schedule();
    cycles(5);
    clk_locked = 1'b1;
    cycles(500);

    // latency measurement by one injected error, as the test procedure does
    inject = 1'b1; cycles(1); inject = 1'b0;
    cycles(600);
    for (int c = 0; c < NTEST; c++) begin
      rd_sel = 7'(c); cycles(2);
      check("latency measured", rd_stats.latency_valid, 1);
    end
    clear = 1'b1; cycles(1); clear = 1'b0;

    // the run
    t = 0; n_up = 0;
    fork
      begin : noise
        // a hit inverts the line for 2 cycles: one bit at 125 Mbit/s
        for (int tt = 0; tt < RUN; tt++) begin
          foreach (noisy[j]) flip[noisy[j]] = 1'b0;
          foreach (hit_time[i]) begin
            if (hit_time[i] == tt) hits[hit_ch[i]]++;
            if (hit_time[i] == tt || hit_time[i] == tt - 1) flip[hit_ch[i]] = 1'b1;
          end
          @(negedge clk);
        end
      end
      begin : host
        for (int k = 0; k < RUN / UPLOAD; k++) begin
          cycles(UPLOAD - 2 * NTEST);
          upload(n_up++);
        end
      end
    join
    foreach (flip[c]) flip[c] = 1'b0;
    cycles(1000);

    for (int c = 0; c < NTEST; c++) begin
      rd_sel = 7'(c); cycles(2);
      check($sformatf("channel %0d errors", c), rd_stats.error_count, hits[c]);
      check($sformatf("channel %0d noise", c), rd_stats.noise_count, hits[c]);
      check($sformatf("channel %0d source", c), rd_stats.source_count, 0);
      check($sformatf("channel %0d first-error flag", c), rd_stats.first_seen, hits[c] > 0);
    end
    check("run counter", live_counter > RUN, 1);
    check("uploads", n_up, RUN / UPLOAD);
    $display("hits: ch26=%0d ch11=%0d ch17=%0d ch22=%0d ch24=%0d ch28=%0d ch38=%0d",
             hits[26], hits[11], hits[17], hits[22], hits[24], hits[28], hits[38]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
