// ttim_pkg - types and constants shared by the BEC link-test firmware.
//
// The test firmware sends a pseudo-random bit sequence (PRBS) out of every
// transmit pair of the back-end card and checks it on every receive pair.
// This package holds what the blocks share: the pattern selector, the PRBS
// feedback function, and the per-channel result record.
//
// Following the paper: PRBS-7 as the main pattern, 48-bit error counter,
// 48-bit first-error time stamp and run counter, 14-bit cable latency (the
// widths printed in the debug-core screen shot of the running firmware).
// Own choices: the other selectable patterns (PRBS-15/23/31, the ITU-T O.150
// polynomials), the record layout and the error-source counters.
package ttim_pkg;

  // Width of the run counter, error counter and first-error time stamp.
  localparam int CNT_W = 48;
  // Width of the measured cable latency, in system-clock cycles.
  localparam int LAT_W = 14;
  // Longest LFSR used by any selectable pattern.
  localparam int LFSR_W = 31;

  typedef enum logic [1:0] {
    PAT_PRBS7  = 2'd0,  // x^7  + x^6  + 1
    PAT_PRBS15 = 2'd1,  // x^15 + x^14 + 1
    PAT_PRBS23 = 2'd2,  // x^23 + x^18 + 1
    PAT_PRBS31 = 2'd3   // x^31 + x^28 + 1
  } pattern_e;

  // Results kept for one receive channel.
  typedef struct packed {
    logic             locked;         // checker is synchronised to the stream
    logic             first_seen;     // an error has been seen since clear
    logic [CNT_W-1:0] error_count;    // bit errors since clear
    logic [CNT_W-1:0] event_count;    // run-counter value at the first error
    logic             latency_valid;  // cable_latency holds a measurement
    logic [LAT_W-1:0] cable_latency;  // cycles from injected error to its detection
    logic [CNT_W-1:0] source_count;   // errors whose received bit matches the sent bit
    logic [CNT_W-1:0] noise_count;    // errors whose received bit differs from the sent bit
  } chan_stats_t;

  // Order of the polynomial (length of the history a checker needs to seed).
  function automatic int unsigned pattern_order(pattern_e p);
    case (p)
      PAT_PRBS7:  return 7;
      PAT_PRBS15: return 15;
      PAT_PRBS23: return 23;
      default:    return 31;
    endcase
  endfunction

  // Next bit of the sequence. s[0] is the most recent bit, s[k] the bit k+1
  // positions back, so x^a + x^b + 1 gives b[t] = b[t-a] ^ b[t-b].
  function automatic logic prbs_next(logic [LFSR_W-1:0] s, pattern_e p);
    case (p)
      PAT_PRBS7:  return s[6]  ^ s[5];
      PAT_PRBS15: return s[14] ^ s[13];
      PAT_PRBS23: return s[22] ^ s[17];
      default:    return s[30] ^ s[27];
    endcase
  endfunction

endpackage
