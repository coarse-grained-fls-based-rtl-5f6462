// algas3_pkg: widths, types and constants shared by the ALGAS3 processing core.
//
// The systolic moving-average FIR has 15 taps and its output is 14 bits wide,
// as printed in the paper's FIR simulation (data_out bits 0..13). The PMU works
// on fixed frames of 16 samples. Input sample width (10 bits), coefficient
// width (1 bit, a moving average needs only unit weights) and the rule-table
// geometry of the Flight Rules Unit are this design's own choices.
package algas3_pkg;

  // ---- systolic FIR -------------------------------------------------------
  localparam int unsigned FIR_TAPS   = 15;  // paper: 15 TAPs per FIR
  localparam int unsigned FIR_V_BITS = 10;  // input sample width (assumed)
  localparam int unsigned FIR_Z_BITS = 1;   // coefficient width (assumed)
  localparam int unsigned FIR_M_BITS = 14;  // AAC / output width (paper figure)

  // Control signals that the Signal & Clock Control Unit sends to every PE.
  typedef struct packed {
    logic ce;   // clock enable: advance the systolic chain by one sample
    logic clr;  // synchronous clear of the delay elements
  } fir_ctrl_t;

  // ---- Prognostic Malfunction Unit ----------------------------------------
  localparam int unsigned PMU_FRAME      = 16; // paper: frame of 16 samples
  localparam int unsigned PMU_FRAME_LOG2 = 4;

  // ---- Flight Rules Unit ----------------------------------------------------
  localparam int unsigned FRU_RULES = 8;  // rule slots (assumed)
  localparam int unsigned FRU_CONDS = 8;  // condition bits (assumed)
  localparam int unsigned FRU_ACTS  = 8;  // action bits (assumed)

  // Condition bits, taken from the two example flight rules.
  typedef enum logic [2:0] {
    C_LANDING_MODE    = 3'd0,
    C_BEACON_WEAK     = 3'd1,
    C_AWAY_FROM_BEACON= 3'd2,
    C_OPTICAL_NOISY   = 3'd3,
    C_UWAVE_NOISY     = 3'd4,
    C_UWB_NOISY       = 3'd5,
    C_SPARE6          = 3'd6,
    C_SPARE7          = 3'd7
  } fru_cond_e;

  // Action bits, taken from the two example flight rules.
  typedef enum logic [2:0] {
    A_REDUCE_SPEED      = 3'd0,
    A_RANGE_LIMIT_ERROR = 3'd1,
    A_STOP_LANDING      = 3'd2,
    A_ENTER_HOVER       = 3'd3,
    A_SENSOR_ERROR      = 3'd4,
    A_MANUAL_CONTROL    = 3'd5,
    A_SPARE6            = 3'd6,
    A_SPARE7            = 3'd7
  } fru_act_e;

  // One rule: IF (cond & care) == (match & care) THEN assert act.
  typedef struct packed {
    logic                 valid;
    logic [FRU_CONDS-1:0] care;
    logic [FRU_CONDS-1:0] match;
    logic [FRU_ACTS-1:0]  act;
  } fru_rule_t;

  // Number of cores in a full system and their positions (paper Fig. 2).
  localparam int unsigned N_CORES = 4;
  typedef enum logic [1:0] {
    POS_FRONT = 2'd0,
    POS_BACK  = 2'd1,
    POS_LEFT  = 2'd2,
    POS_RIGHT = 2'd3
  } core_pos_e;

endpackage
