// rate_strobe - bit-rate control of the link test.
//
// The firmware runs on one system clock (250 MHz, 4 ns per cycle, as the
// run counter of the original firmware shows) and sends one bit every
// 2^rate_sel cycles: 250, 125, 62.5 or 31.25 Mbit/s. The paper says the
// speed is configurable and reports runs at 125 and 250 Mbit/s; the
// power-of-two divider is this design's choice.
//
// A free-running cycle counter gives two one-cycle strobes:
//   tx_stb  when the counter (modulo the divider) is 0: the generator emits a bit;
//   rx_stb  when it equals rx_phase (modulo the divider): the checker samples.
// Moving rx_phase moves the receive sample point inside the bit, the
// cycle-level version of "adjusting the sample point" that the paper uses
// to reach error-free runs. Both strobes are combinational from the counter
// register; a new rate_sel takes effect from the next cycle.
module rate_strobe (
  input  logic       clk,
  input  logic       rst,
  input  logic [1:0] rate_sel,   // bit period = 2^rate_sel cycles
  input  logic [2:0] rx_phase,   // sample cycle inside the bit period
  output logic       tx_stb,
  output logic       rx_stb
);

  logic [2:0] cnt;
  logic [2:0] mask;

  always_comb mask = 3'((4'd1 << rate_sel) - 4'd1);

  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else     cnt <= cnt + 3'd1;
  end

  always_comb begin
    tx_stb = (cnt & mask) == 3'd0;
    rx_stb = (cnt & mask) == (rx_phase & mask);
  end

endmodule
