// rate_strobe_tb - checks the bit-rate strobes.
// For every rate (period 1, 2, 4, 8 cycles) and every receive phase, the
// testbench measures the distance between successive tx_stb pulses (must be
// the period) and the offset of each rx_stb after the last tx_stb (must be
// rx_phase modulo the period), and checks that each period has exactly one
// of each strobe.
module rate_strobe_tb;
  logic clk = 1'b0, rst = 1'b1;
  logic [1:0] rate_sel = '0;
  logic [2:0] rx_phase = '0;
  logic tx_stb, rx_stb;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  rate_strobe dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int period, since_tx, last_tx, n_tx, n_rx;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int r = 0; r < 4; r++) begin
      for (int ph = 0; ph < 8; ph++) begin
        @(negedge clk);
        rate_sel = 2'(r);
        rx_phase = 3'(ph);
        period   = 1 << r;
        // align to the next tx strobe
        do @(negedge clk); while (!tx_stb);
        last_tx = 0; n_tx = 0; n_rx = 0; since_tx = 0;
        for (int c = 0; c < 8 * period; c++) begin
          if (tx_stb) begin
            if (c != 0) begin
              checks++;
              if (since_tx != period) begin
                failures++;
                $display("FAIL rate %0d: tx period %0d", r, since_tx);
              end
            end
            since_tx = 0;
            n_tx++;
          end
          if (rx_stb) begin
            checks++;
            n_rx++;
            if (since_tx != (ph % period)) begin
              failures++;
              $display("FAIL rate %0d phase %0d: rx offset %0d", r, ph, since_tx);
            end
          end
          since_tx++;
          @(negedge clk);
        end
        checks++;
        if (n_tx != 8 || n_rx != 8) begin
          failures++;
          $display("FAIL rate %0d phase %0d: %0d tx %0d rx strobes", r, ph, n_tx, n_rx);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
