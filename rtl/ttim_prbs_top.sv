// ttim_prbs_top - link-test firmware of the BEC trigger/timing mezzanine.
//
// The back-end card (BEC) has 48 Ethernet ports. For the test, ports are
// looped back to each other through cables, and each port's two transmit
// pairs (1-2 and 4-5) send a PRBS that arrives on another port's receive
// pairs (3-6 and 7-8): 96 channels tested at once. This top holds:
//   - rate_strobe: bit rate and receive sample point;
//   - prbs_gen:    one pattern generator, driving all 96 transmit pairs;
//   - tx_history:  the last HIST_DEPTH cycles of the transmitted line;
//   - run_timer:   the 48-bit run counter (live counter);
//   - per receive channel a prbs_chk and a link_monitor;
//   - probe_mux:   readout of one channel and the three scope probes.
// Channel c = 2*port + lane; lane 0 is receive pair 3-6, lane 1 pair 7-8.
//
// Interface. The control inputs (pattern, rate_sel, rx_phase, inject, clear,
// rd_sel, scope_delay) and the readout (rd_stats, err_vec, live_counter) are
// the signals that the vendor debug cores (virtual I/O, logic analyser)
// connect to; they are ports here. clk is the 250 MHz system clock from the
// clocking PLL and clk_locked its lock flag: the design is held in reset,
// through a two-flop reset synchroniser, while it is low.
//
// From the paper: one generator and checkers for the 96 channels, pattern
// and speed selection, error injection, error count, first-error time stamp,
// run counter, cable latency and the delayed-original comparison. The
// channel numbering, single shared generator for all lanes and the reset
// scheme are this design's choices.
module ttim_prbs_top
  import ttim_pkg::*;
#(
  parameter int unsigned NUM_PORTS  = 48,
  parameter int unsigned HIST_DEPTH = 256,
  localparam int unsigned NUM_CH    = 2 * NUM_PORTS,
  localparam int unsigned SEL_W     = $clog2(NUM_CH),
  localparam int unsigned DLY_W     = $clog2(HIST_DEPTH)
) (
  input  logic                  clk,
  input  logic                  clk_locked,
  // configuration
  input  pattern_e              pattern,
  input  logic [1:0]            rate_sel,
  input  logic [2:0]            rx_phase,
  input  logic                  inject,
  input  logic                  clear,
  input  logic [SEL_W-1:0]      rd_sel,
  input  logic [DLY_W-1:0]      scope_delay,
  // Ethernet pairs, one bit per port
  output logic [NUM_PORTS-1:0]  tx_pair12,
  output logic [NUM_PORTS-1:0]  tx_pair45,
  input  logic [NUM_PORTS-1:0]  rx_pair36,
  input  logic [NUM_PORTS-1:0]  rx_pair78,
  // results
  output logic [CNT_W-1:0]      live_counter,
  output chan_stats_t           rd_stats,
  output logic [NUM_CH-1:0]     err_vec,
  output logic [NUM_CH-1:0]     locked_vec,
  output logic                  probe_err,
  output logic                  probe_rx,
  output logic                  probe_orig
);

  logic [1:0] rst_sync;
  logic       rst;

  always_ff @(posedge clk or negedge clk_locked) begin
    if (!clk_locked) rst_sync <= 2'b11;
    else             rst_sync <= {rst_sync[0], 1'b0};
  end
  assign rst = rst_sync[1];

  logic                  tx_stb, rx_stb;
  logic                  tx_bit, inj_mark;
  logic [HIST_DEPTH-1:0] hist;
  logic [NUM_CH-1:0]     rx_in, rx_sync_vec;
  chan_stats_t           stats [NUM_CH];

  rate_strobe u_rate (
    .clk, .rst, .rate_sel, .rx_phase, .tx_stb, .rx_stb
  );

  prbs_gen u_gen (
    .clk, .rst, .pattern, .bit_stb(tx_stb), .inject, .tx_bit, .inj_mark
  );

  assign tx_pair12 = {NUM_PORTS{tx_bit}};
  assign tx_pair45 = {NUM_PORTS{tx_bit}};

  tx_history #(.DEPTH(HIST_DEPTH)) u_hist (
    .clk, .rst, .din(tx_bit), .hist
  );

  run_timer #(.CNT_W(CNT_W)) u_timer (
    .clk, .rst, .clear, .count(live_counter)
  );

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    assign rx_in[2*p]     = rx_pair36[p];
    assign rx_in[2*p + 1] = rx_pair78[p];
  end

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic chk_err, chk_bit, chk_locked;

    prbs_chk u_chk (
      .clk, .rst, .pattern, .sample_stb(rx_stb), .rx_in(rx_in[c]),
      .rx_sync(rx_sync_vec[c]), .locked(chk_locked), .chk_valid(),
      .err(chk_err), .rx_bit(chk_bit)
    );

    link_monitor #(.HIST_DEPTH(HIST_DEPTH)) u_mon (
      .clk, .rst, .clear, .timestamp(live_counter), .locked(chk_locked),
      .err(chk_err), .rx_bit(chk_bit), .inj_mark, .hist, .stats(stats[c])
    );

    assign err_vec[c]    = chk_err;
    assign locked_vec[c] = chk_locked;
  end

  probe_mux #(.NUM_CH(NUM_CH), .HIST_DEPTH(HIST_DEPTH)) u_probe (
    .clk, .rst, .sel(rd_sel), .scope_delay, .stats, .err_vec,
    .rx_vec(rx_sync_vec), .hist, .sel_stats(rd_stats),
    .probe_err, .probe_rx, .probe_orig
  );

endmodule
