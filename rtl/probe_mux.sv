// probe_mux - channel readout and scope probes.
//
// The operator looks at one channel at a time: sel picks it. The block
// registers that channel's result record (sel_stats) for the control
// console, and drives three single-bit probes for an oscilloscope, the three
// digital traces of the paper's error-capture setup:
//   probe_err   the channel's checker error indicator;
//   probe_rx    the channel's received data (synchronised receive line);
//   probe_orig  the original transmitted data delayed by scope_delay+1
//               cycles (the paper delays it by about 500 ns, 125 cycles at
//               250 MHz, so it lines up with the received data).
// All outputs are registered, one cycle after their inputs. A sel beyond the
// last channel reads channel 0. Which signals the probes carry follows the
// paper; the selection and delay control are this design's choices.
module probe_mux
  import ttim_pkg::*;
#(
  parameter int unsigned NUM_CH     = 96,
  parameter int unsigned HIST_DEPTH = 256,
  localparam int unsigned SEL_W     = $clog2(NUM_CH),
  localparam int unsigned DLY_W     = $clog2(HIST_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [SEL_W-1:0]      sel,
  input  logic [DLY_W-1:0]      scope_delay,
  input  chan_stats_t           stats [NUM_CH],
  input  logic [NUM_CH-1:0]     err_vec,
  input  logic [NUM_CH-1:0]     rx_vec,
  input  logic [HIST_DEPTH-1:0] hist,
  output chan_stats_t           sel_stats,
  output logic                  probe_err,
  output logic                  probe_rx,
  output logic                  probe_orig
);

  logic [SEL_W-1:0] ch;

  always_comb ch = (32'(sel) < NUM_CH) ? sel : '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      sel_stats  <= '0;
      probe_err  <= 1'b0;
      probe_rx   <= 1'b0;
      probe_orig <= 1'b0;
    end else begin
      sel_stats  <= stats[ch];
      probe_err  <= err_vec[ch];
      probe_rx   <= rx_vec[ch];
      probe_orig <= hist[scope_delay];
    end
  end

endmodule
