// prbs_chk - PRBS checker for one receive pair.
//
// The received line is first passed through a SYNC_STAGES flip-flop
// synchroniser (rx_sync), then sampled on each sample_stb. The checker has
// two states:
//   SEEDING  the sampled bits are shifted straight into the LFSR; after as
//            many bits as the polynomial order, the LFSR holds the
//            transmitter's state and the checker is locked.
//   LOCKED   the LFSR runs on its own predicted bits and each sampled bit is
//            compared with the prediction. A mismatch raises err for one
//            cycle. Because the prediction does not use the received bits,
//            one corrupted bit gives exactly one error (the paper's injected
//            error shows as an error count of 1).
// If LOSS_THRESH or more errors fall in a window of LOSS_WINDOW checked bits
// the stream is taken as lost and the checker seeds again. A pattern change
// also restarts seeding.
//
// Outputs chk_valid, err and rx_bit are registered: they appear one cycle
// after the sample_stb cycle. err is only raised while locked.
// The paper gives the checker's function; the seeding scheme, the loss
// rule and its numbers are this design's choices.
module prbs_chk
  import ttim_pkg::*;
#(
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned LOSS_WINDOW = 128,
  parameter int unsigned LOSS_THRESH = 16
) (
  input  logic     clk,
  input  logic     rst,
  input  pattern_e pattern,
  input  logic     sample_stb,
  input  logic     rx_in,       // line from the receiver, asynchronous
  output logic     rx_sync,     // synchronised line, for the probe outputs
  output logic     locked,
  output logic     chk_valid,   // a bit was checked (while locked)
  output logic     err,         // that bit was wrong
  output logic     rx_bit       // that bit's received value
);

  localparam int unsigned WIN_W = $clog2(LOSS_WINDOW + 1);

  logic [SYNC_STAGES-1:0] sync;
  logic [LFSR_W-1:0]      lfsr;
  logic [4:0]             seed_cnt;
  logic [WIN_W-1:0]       win_bits;
  logic [WIN_W-1:0]       win_errs;
  pattern_e               pattern_q;
  logic                   pred;
  logic                   miss;

  always_comb begin
    rx_sync = sync[SYNC_STAGES-1];
    pred    = prbs_next(lfsr, pattern);
    miss    = rx_sync ^ pred;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sync      <= '0;
      lfsr      <= '0;
      seed_cnt  <= '0;
      win_bits  <= '0;
      win_errs  <= '0;
      pattern_q <= PAT_PRBS7;
      locked    <= 1'b0;
      chk_valid <= 1'b0;
      err       <= 1'b0;
      rx_bit    <= 1'b0;
    end else begin
      sync      <= {sync[SYNC_STAGES-2:0], rx_in};
      pattern_q <= pattern;
      chk_valid <= 1'b0;
      err       <= 1'b0;
      if (pattern != pattern_q) begin
        locked   <= 1'b0;
        seed_cnt <= '0;
      end else if (sample_stb) begin
        rx_bit <= rx_sync;
        if (!locked) begin
          lfsr     <= {lfsr[LFSR_W-2:0], rx_sync};
          seed_cnt <= seed_cnt + 5'd1;
          if (32'(seed_cnt) + 1 >= pattern_order(pattern)) begin
            locked   <= 1'b1;
            win_bits <= '0;
            win_errs <= '0;
          end
        end else begin
          lfsr      <= {lfsr[LFSR_W-2:0], pred};
          chk_valid <= 1'b1;
          err       <= miss;
          if (32'(win_errs) + 32'(miss) >= LOSS_THRESH) begin
            locked   <= 1'b0;
            seed_cnt <= '0;
          end else if (32'(win_bits) + 1 >= LOSS_WINDOW) begin
            win_bits <= '0;
            win_errs <= '0;
          end else begin
            win_bits <= win_bits + 1'b1;
            win_errs <= win_errs + WIN_W'(miss);
          end
        end
      end
    end
  end

endmodule
