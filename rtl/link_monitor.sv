// link_monitor - test results of one receive channel.
//
// Fed by the channel's checker, the run counter, the generator's injection
// mark and the transmit history, it keeps the channel's record (chan_stats_t):
//   error_count    bit errors since clear (the paper's error register);
//   event_count    run-counter value at the first error since clear (the
//                  paper's time stamp of the first error);
//   cable_latency  cycles from inj_mark (injected bit on the transmit line)
//                  to the checker flagging it. The original firmware shows
//                  cable_latency 0 before and 0x009D after an injection, so
//                  the latency is taken from the injected error here.
//                  A measurement that reaches 2^LAT_W-1 cycles is dropped;
//   source_count / noise_count  the paper's rule for the source of an error:
//                  if the received bit equals the original bit sent one
//                  cable latency earlier, the data source was wrong;
//                  otherwise noise on the link corrupted it. hist[L-1] is the
//                  transmit line L cycles back, so with L = cable_latency it
//                  is the bit that the flagged received bit was sent as.
//                  An error is not classified before a latency is known or
//                  when L exceeds HIST_DEPTH.
// All fields update in the cycle after err. clear (one cycle) zeroes the
// counts and the first-error stamp but keeps the cable latency, a property
// of the cable needed to classify later errors; reset zeroes everything.
// Counters wrap. The classification logic and the latency-from-injection
// method are this design's reading of the paper.
module link_monitor
  import ttim_pkg::*;
#(
  parameter int unsigned HIST_DEPTH = 256
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  clear,
  input  logic [CNT_W-1:0]      timestamp,
  input  logic                  locked,
  input  logic                  err,
  input  logic                  rx_bit,
  input  logic                  inj_mark,
  input  logic [HIST_DEPTH-1:0] hist,
  output chan_stats_t           stats
);

  localparam logic [LAT_W-1:0] LAT_MAX = '1;
  localparam int unsigned      IDX_W   = $clog2(HIST_DEPTH);

  logic             lat_run;
  logic [LAT_W-1:0] lat_cnt;
  logic [LAT_W-1:0] tap_lat;
  logic             tap_ok;
  logic [LAT_W-1:0] tap_idx;
  logic             orig_bit;

  // Latency to use for this error: the running measurement if it is about
  // to complete, else the stored one.
  always_comb begin
    tap_lat  = lat_run ? lat_cnt : stats.cable_latency;
    tap_ok   = (lat_run || stats.latency_valid) && tap_lat != '0 &&
               32'(tap_lat) <= HIST_DEPTH;
    tap_idx  = tap_lat - 1'b1;
    orig_bit = tap_ok ? hist[tap_idx[IDX_W-1:0]] : 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      stats   <= '0;
      lat_run <= 1'b0;
      lat_cnt <= '0;
    end else if (clear) begin
      stats.first_seen   <= 1'b0;
      stats.error_count  <= '0;
      stats.event_count  <= '0;
      stats.source_count <= '0;
      stats.noise_count  <= '0;
    end else begin
      stats.locked <= locked;

      if (inj_mark) begin
        lat_run <= 1'b1;
        lat_cnt <= LAT_W'(1);
      end else if (lat_run) begin
        if (err) begin
          lat_run             <= 1'b0;
          stats.cable_latency <= lat_cnt;
          stats.latency_valid <= 1'b1;
        end else if (lat_cnt == LAT_MAX) begin
          lat_run <= 1'b0;
        end else begin
          lat_cnt <= lat_cnt + 1'b1;
        end
      end

      if (err) begin
        stats.error_count <= stats.error_count + 1'b1;
        if (!stats.first_seen) begin
          stats.first_seen  <= 1'b1;
          stats.event_count <= timestamp;
        end
        if (tap_ok) begin
          if (rx_bit == orig_bit) stats.source_count <= stats.source_count + 1'b1;
          else                    stats.noise_count  <= stats.noise_count + 1'b1;
        end
      end
    end
  end

endmodule
