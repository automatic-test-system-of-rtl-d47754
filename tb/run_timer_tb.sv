// run_timer_tb - checks that the run counter counts cycles and restarts on clear.
module run_timer_tb;
  localparam int unsigned W = 48;
  logic clk = 1'b0, rst = 1'b1, clear = 1'b0;
  logic [W-1:0] count;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  run_timer dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_count(longint unsigned v);
    checks++;
    if (count != W'(v)) begin
      failures++;
      $display("FAIL count %0d expected %0d", count, v);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 expect_count(0);
    rst = 1'b0;
    for (int i = 1; i <= 1000; i++) begin
      @(posedge clk); #1 expect_count(longint'(i));
    end
    clear = 1'b1;
    @(posedge clk); #1 expect_count(0);
    clear = 1'b0;
    for (int i = 1; i <= 37; i++) begin
      @(posedge clk); #1 expect_count(longint'(i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
