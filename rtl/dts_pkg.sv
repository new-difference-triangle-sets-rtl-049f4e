// dts_pkg: constants, types and helper functions shared by the DTS search design.
//
// The design searches for an (n,k) difference triangle set (DTS) of scope M:
// n rulers of k+1 marks, 0 = a_i0 < ... < a_ik <= M, with all positive
// differences inside every ruler distinct across the whole set.  Rulers and
// distance sets are held as (M+1)-bit masks (bit i set = integer i in set).
//
// The default sizes are the (14,4)-DTS of scope 140 found with 48 workers on
// one Kintex-7 device.  Everything else here (state encodings, LFSR taps,
// seeds) is this design's own choice.
package dts_pkg;

  // Default search: (14,4)-DTS of scope 140, 48 workers per device.
  localparam int unsigned DEF_N       = 14;
  localparam int unsigned DEF_K       = 4;
  localparam int unsigned DEF_M       = 140;
  localparam int unsigned DEF_WORKERS = 48;
  // Attempt limits of the backtracking search (not given numerically; chosen).
  localparam int unsigned DEF_THRESH1 = 4096;
  localparam int unsigned DEF_THRESH2 = 4096;
  // Uniform bits per sample used by the inverse-CDF (quantile) tables.
  localparam int unsigned DEF_UBITS   = 8;

  // Control FSM states of one worker (sequencing of the modified Koubi
  // et al. hill-climbing search with row replacement).
  typedef enum logic [3:0] {
    S_INIT,        // clear the partial DTS, start the first row
    S_FILL,        // insert random marks into the current row
    S_COMMIT,      // write the completed row to the row RAM
    S_NEXT,        // next outer iteration, or abandon after THRESH1
    S_BT_SAVE,     // snapshot the stuck row before trying replacements
    S_BT_READ,     // address completed row r in the RAM
    S_BT_LOAD,     // hand row r to the distance extractor
    S_BT_EXTRACT,  // wait for the distance set of row r
    S_BT_RESTORE,  // snapshot back, with row r's distances released
    S_BT_TRY,      // insert marks with row r removed
    S_BT_UNDO,     // every replacement failed: restore the snapshot
    S_DONE         // n rows complete; RAM is read out
  } worker_state_e;

  // Operations on the row state register system.
  typedef enum logic [2:0] {
    ROW_HOLD,      // keep (pipeline updates still apply)
    ROW_CLEAR_ALL, // usedDistances = {}, row = {0}
    ROW_NEW,       // row = {0}, usedDistances kept
    ROW_RESTORE    // load snapshot, usedDistances minus a released set
  } row_op_e;

  // Tap mask (bit t-1 set for tap t) of a maximum-length Fibonacci LFSR.
  function automatic logic [63:0] lfsr_taps(input int unsigned width);
    case (width)
      4:  return 64'h0000_000C;             // x^4+x^3+1
      5:  return 64'h0000_0014;             // x^5+x^3+1
      6:  return 64'h0000_0030;             // x^6+x^5+1
      7:  return 64'h0000_0060;             // x^7+x^6+1
      8:  return 64'h0000_00B8;             // x^8+x^6+x^5+x^4+1
      16: return 64'h0000_D008;             // x^16+x^15+x^13+x^4+1
      24: return 64'h00E1_0000;             // x^24+x^23+x^22+x^17+1
      32: return 64'h8020_0003;             // x^32+x^22+x^2+x+1
      default: return 64'h0;
    endcase
  endfunction

  // Distinct nonzero seed for generator lane `lane` of worker `worker`.
  function automatic logic [31:0] lane_seed(input int unsigned worker, input int unsigned lane);
    logic [31:0] s;
    s = 32'hACE1_2468 ^ (32'(worker) * 32'h9E37_79B9) ^ (32'(lane + 1) * 32'h7F4A_7C15);
    return (s == 32'h0) ? 32'h1 : s;
  endfunction

endpackage
