// tx_history_tb - checks that hist[k] is the input of k+1 cycles ago, for all taps.
module tx_history_tb;
  localparam int unsigned DEPTH = 256;
  logic clk = 1'b0, rst = 1'b1, din = 1'b0;
  logic [DEPTH-1:0] hist;
  logic ref_bits [$];
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  tx_history #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    checks++;
    if (hist != '0) begin failures++; $display("FAIL not cleared by reset"); end
    for (int t = 0; t < 3 * DEPTH; t++) begin
      din = 1'($urandom);
      ref_bits.push_front(din);
      @(posedge clk); #1;
      for (int k = 0; k < DEPTH && k < ref_bits.size(); k++) begin
        checks++;
        if (hist[k] != ref_bits[k]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d tap %0d", t, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
