// tx_history - recent transmitted bits, kept for delayed comparison.
//
// To tell a corrupted source from noise on the cable, the paper compares the
// received data with a delayed copy of the original data (delayed by about
// 500 ns so that both line up). This block keeps the last DEPTH values of the
// transmit line, one per system clock cycle: hist[k] is din as it was k+1
// cycles ago. Users pick the tap that matches the delay they need. DEPTH=256
// (1.024 us at 250 MHz) is this design's choice, enough for the 500 ns of
// the paper and the 157-cycle latency shown for a 100 m cable.
module tx_history #(
  parameter int unsigned DEPTH = 256
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             din,
  output logic [DEPTH-1:0] hist
);

  always_ff @(posedge clk) begin
    if (rst) hist <= '0;
    else     hist <= {hist[DEPTH-2:0], din};
  end

endmodule
