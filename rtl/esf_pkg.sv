// esf_pkg: types and constants shared by the EventShiftFlow core.
//
// The event word carries (t, x, y, p) as produced by an event camera. The
// core bins events with its own clock-cycle timer, so the timestamp and the
// polarity travel through the FIFO but are not used by the datapath: the
// occupancy count collapses both the orthogonal coordinate and the sign.
// The 64-bit layout below is this design's choice; only the word width of 64
// bits follows the single-axis prototype described for the core.
//
// esf_cfg_t holds the run-time settings a host writes: the initial bin length
// in clock cycles, the event threshold theta_e, the score threshold theta_s,
// the minimum in-bounds step count beta, the scoring mode and the enable of
// the adaptive bin length. The DEF_* constants are the values used for the
// real-data evaluation (dt = 40 ms at 100 MHz, theta_e = 80, beta = 4,
// theta_s = 0.5 L = 8, cross-multiplied comparison).
package esf_pkg;

  // Event word: 32-bit timestamp, 16-bit x, 15-bit y, 1-bit polarity.
  typedef struct packed {
    logic [31:0] t;
    logic [15:0] x;
    logic [14:0] y;
    logic        p;
  } esf_event_t;

  // Scoring mode: raw popcount (synthetic data) or division-free
  // normalised comparison R_j*H_k > R_k*H_j (real data).
  typedef enum logic {
    SCORE_RAW  = 1'b0,
    SCORE_NORM = 1'b1
  } esf_score_mode_e;

  typedef struct packed {
    logic [31:0]     dt_init;   // bin length in clock cycles after reset
    logic [7:0]      theta_e;   // event count threshold
    logic [4:0]      theta_s;   // score threshold, in grid cells
    logic [3:0]      beta;      // minimum in-bounds steps
    esf_score_mode_e mode;      // scoring mode
    logic            adapt_en;  // adaptive bin length on/off
  } esf_cfg_t;

  localparam int unsigned DEF_DT_CYCLES = 4_000_000;  // 40 ms at 100 MHz
  localparam int unsigned DEF_THETA_E   = 80;
  localparam int unsigned DEF_THETA_S   = 8;          // 0.5 * L
  localparam int unsigned DEF_BETA      = 4;
  localparam int unsigned DT_MIN_CYCLES = 500_000;    // 5 ms at 100 MHz
  localparam int unsigned DT_MAX_CYCLES = 5_000_000;  // 50 ms at 100 MHz

endpackage
