// fia_pkg: shared constants and types of the timing fault-injection monitor.
//
// The monitor replicates the positive pulse width of the clock with a
// configurable delay line (CDL) built from a coarse (ring-oscillator counting),
// a medium (path-selection) and a fine (load-tuned) stage, followed by two
// medium lines that set the acceptance window.  This package holds the stage
// sizes, the delay-model numbers used by the behavioural delay cells, and the
// configuration types passed between the locking FSM and the delay line.
//
// Sizes follow the fabricated 65 nm monitor: coarse 9 bit, medium 8, fine
// 4 bit, window lines 16 steps.  Per-stage delay steps follow the measured
// steps and offsets (coarse 130 ps + 500 ps/step, medium 100 ps/step, fine
// 295 ps + 10 ps/step, fine bypass 130 ps).  The coarse bypass path delay
// (70 ps) is derived from the measured 400 ps minimum of the whole line; the
// width of the bypass pulse (100 ps) is this design's own choice.
// All time values are in picoseconds; every file uses `timescale 1ps/1ps.
`timescale 1ps/1ps
package fia_pkg;

  // ---- stage sizes -------------------------------------------------------
  parameter int unsigned COARSE_BITS = 9;   // "Coarse 9b"
  parameter int unsigned MED_UNITS   = 8;   // "Medium 8b": 8 delay settings
  parameter int unsigned FINE_BITS   = 4;   // "Fine 4b": 16 delay settings
  parameter int unsigned ACC_UNITS   = 16;  // "Medium 16b" window lines

  parameter int unsigned MED_W  = $clog2(MED_UNITS);
  parameter int unsigned ACC_W  = $clog2(ACC_UNITS);

  // ---- delay model (simulation only, ps) ---------------------------------
  parameter int unsigned RO_HALF_PS    = 250;  // RO period 500 ps = coarse step
  parameter int unsigned COARSE_OFS_PS = 130;  // coarse stage minimum delay
  parameter int unsigned MED_UNIT_PS   = 100;  // medium step and minimum
  parameter int unsigned FINE_OFS_PS   = 295;  // fine stage offset
  parameter int unsigned FINE_STEP_PS  = 10;   // fine step
  parameter int unsigned FINE_BYP_PS   = 130;  // fine bypass path
  parameter int unsigned CBYP_DLY_PS   = 70;   // coarse bypass path (derived)
  parameter int unsigned CBYP_PW_PS    = 100;  // width of the bypass pulse (assumed)

  // ---- configuration skips (Fig. 11b example values) ---------------------
  typedef struct packed {
    logic [MED_W-1:0]     c_medium;  // medium start value after a coarse carry
    logic [FINE_BITS-1:0] c_fine;    // fine start value after a coarse carry
    logic [FINE_BITS-1:0] m_fine;    // fine start value after a medium carry
  } skip_cfg_t;

  parameter skip_cfg_t SKIP_DEFAULT = '{c_medium: 1, c_fine: 9, m_fine: 6};

  // ---- delay-line configuration written by the locking FSM ---------------
  typedef struct packed {
    logic                   byp_c;   // bypass the coarse stage
    logic                   byp_f;   // bypass the fine stage
    logic [COARSE_BITS-1:0] c_cfg;   // ring-oscillator cycles to count
    logic [MED_W-1:0]       m_cfg;   // medium setting, 0 .. MED_UNITS-1
    logic [FINE_BITS-1:0]   f_cfg;   // fine setting
  } cdl_cfg_t;

  // ---- acceptance window configuration (Config_ACC) ----------------------
  typedef struct packed {
    logic [ACC_W-1:0] w_neg;  // P_Min -> P_L line, window below the lock point
    logic [ACC_W-1:0] w_pos;  // P_L -> P_Max line, window above the lock point
  } acc_cfg_t;

  // ---- locking FSM states ------------------------------------------------
  typedef enum logic [2:0] {
    S_RESET  = 3'd0,
    S_COARSE = 3'd1,
    S_MEDIUM = 3'd2,
    S_FINE   = 3'd3,
    S_TRACK  = 3'd4,
    S_ERROR  = 3'd5
  } lock_state_t;

endpackage
