// aero_pkg: types and constants shared by the adaptive-erase (AERO) engine.
//
// Time is counted in erase-pulse units of 0.5 ms, the granularity at which the
// erase-pulse latency tEP of the NAND chip can be set (a 3-bit code, 0..7, so
// 7 = 3.5 ms, the chip's default tEP). Fail-bit counts are FBC_W bits wide.
// The fail-bit range encoding follows the columns of the latency model:
// range 0 is F <= gamma, range k (1..7) is (k-1)*delta < F <= k*delta (range 1
// starting just above gamma), and range 8 is F > 7*delta, i.e. above F_HIGH,
// where no reduction of tEP is possible.
//
// The numbers that come from the paper: 0.5 ms tEP granularity, default
// tEP = 3.5 ms, shallow-erasure time tSE = 1 ms, at most 5 erase loops,
// delta ~ 5,000 fail bits, the latency model table. The fail-bit counter width,
// gamma and F_PASS are this design's own choices (the paper prints no value).
//
// GAMMA_DEFAULT, DELTA_DEFAULT, F_PASS_DEFAULT and TSE_DEFAULT are the values
// firmware is expected to drive on the engine's cfg_* inputs; no module uses
// them directly, so a lint run on any single module lists them as unused
// parameters. That warning is expected and harmless.
package aero_pkg;

  // ---- sizes --------------------------------------------------------------
  localparam int unsigned TEP_W      = 3;   // tEP code, units of 0.5 ms
  localparam int unsigned FBC_W      = 20;  // fail-bit counter width
  localparam int unsigned NUM_RANGES = 9;   // 8 table columns + "above F_HIGH"
  localparam int unsigned RANGE_W    = 4;
  localparam int unsigned MAX_LOOPS  = 5;   // L: maximum ISPE loops
  localparam int unsigned LOOP_W     = 3;
  localparam int unsigned TOT_W      = 8;   // accumulated pulse time, 0.5 ms units

  // ---- timing defaults (0.5 ms units) -------------------------------------
  localparam logic [TEP_W-1:0] TEP_DEFAULT = 3'd7;  // 3.5 ms
  localparam logic [TEP_W-1:0] TSE_DEFAULT = 3'd2;  // 1 ms

  // ---- fail-bit thresholds (defaults of the run-time registers) -----------
  localparam logic [FBC_W-1:0] DELTA_DEFAULT  = 20'd5000;
  localparam logic [FBC_W-1:0] GAMMA_DEFAULT  = 20'd1000;
  localparam logic [FBC_W-1:0] F_PASS_DEFAULT = 20'd100;

  // ---- NAND command port --------------------------------------------------
  // SET_TEP   : SET FEATURE, program the chip's erase-pulse latency to tep
  // ERASE_LOOP: one erase pulse at V_ERASE(vlevel) for the programmed tEP,
  //             followed by the verify-read that counts fail bits
  // GET_FBC   : GET FEATURE, return the fail-bit count of the last verify-read
  typedef enum logic [1:0] {
    NAND_SET_TEP    = 2'd0,
    NAND_ERASE_LOOP = 2'd1,
    NAND_GET_FBC    = 2'd2
  } nand_op_e;

  // ---- erase completion status --------------------------------------------
  typedef enum logic [1:0] {
    ERS_PASS      = 2'd0,  // last verify-read had F <= F_PASS
    ERS_PASS_ECC  = 2'd1,  // accepted through the ECC-capability margin
    ERS_FAIL      = 2'd2   // still failing after MAX_LOOPS voltage steps
  } ers_status_e;

  typedef struct packed {
    ers_status_e       status;
    logic [LOOP_W-1:0] n_ispe;      // highest V_ERASE step used (1..5)
    logic [5:0]        n_pulses;    // erase pulses issued, shallow included (<= 35)
    logic [TOT_W-1:0]  tep_total;   // sum of all pulse times, 0.5 ms units
    logic              shallow;     // shallow erasure was performed
    logic              sef_cleared; // SEF bit was set to FALSE by this erase
    logic [5:0]        mispredicts; // extra pulses after a predicted pulse failed
  } ers_result_t;

endpackage
