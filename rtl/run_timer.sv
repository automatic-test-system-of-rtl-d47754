// run_timer - run-duration counter and time base of the link test.
//
// A CNT_W-bit counter advances once per system clock cycle. Its value is the
// run duration (4 ns per count at 250 MHz) and is the time stamp stored when
// a channel sees its first error. A one-cycle clear restarts it from 0 (the
// counter shows 0 in the cycle after clear and 1 the cycle after that). The
// paper gives the counter and its 48-bit width; wrapping at 2^48 (about
// 13 days at 4 ns) instead of saturating is this design's choice.
module run_timer #(
  parameter int unsigned CNT_W = ttim_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  output logic [CNT_W-1:0] count
);

  always_ff @(posedge clk) begin
    if (rst || clear) count <= '0;
    else              count <= count + 1'b1;
  end

endmodule
