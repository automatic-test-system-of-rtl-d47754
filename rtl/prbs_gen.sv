// prbs_gen - PRBS pattern generator with error injection.
//
// One generator feeds every transmit pair of the card, as the single
// "Pattern generator" box of the test diagram does. A Fibonacci LFSR steps
// once per bit_stb and its new bit is registered onto tx_bit, which then
// holds until the next strobe. The pattern (PRBS-7 by default in use, the
// paper's choice for links below 10 Gbit/s) is selectable; changing it
// reseeds the LFSR with all ones.
//
// Error injection: a rising edge on inject (a level from the control
// console) arms a request; the next emitted bit is inverted and inj_mark
// pulses for one cycle in the first cycle that the inverted bit is on tx_bit.
// The LFSR itself is not disturbed, so exactly one bit of the sequence is
// wrong. The paper gives the injection; edge-triggering and the mark pulse
// (used to measure the cable latency) are this design's choices.
//
// Timing: tx_bit changes one cycle after a cycle with bit_stb high.
module prbs_gen
  import ttim_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  pattern_e pattern,
  input  logic     bit_stb,
  input  logic     inject,
  output logic     tx_bit,
  output logic     inj_mark
);

  logic [LFSR_W-1:0] state;
  pattern_e          pattern_q;
  logic              inject_q;
  logic              pending;
  logic              nb;

  always_comb nb = prbs_next(state, pattern);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= '1;
      pattern_q <= PAT_PRBS7;
      inject_q  <= 1'b0;
      pending   <= 1'b0;
      tx_bit    <= 1'b0;
      inj_mark  <= 1'b0;
    end else begin
      inject_q  <= inject;
      pattern_q <= pattern;
      inj_mark  <= 1'b0;
      if (inject && !inject_q) pending <= 1'b1;
      if (pattern != pattern_q) begin
        state <= '1;
      end else if (bit_stb) begin
        state  <= {state[LFSR_W-2:0], nb};
        tx_bit <= nb ^ pending;
        if (pending) begin
          pending  <= 1'b0;
          inj_mark <= 1'b1;
        end
      end
    end
  end

endmodule
