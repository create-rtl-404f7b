// create_pkg: types and constants shared by the resilient INT8 accelerator.
//
// Supply voltages of the scaled PE-array domain are carried as a 5-bit code
// counting 10 mV steps above 0.6 V, so code 0 is 0.60 V and code 30 is the
// 0.90 V nominal supply (range and step follow the LDO specification; the
// code format itself is this design's choice). Predicted entropies are
// unsigned Q4.8 fixed point (0 .. 15.996), wide enough for the largest
// possible action-logit entropy of 13.07; this format is also a design choice.
//
// An entropy-to-voltage policy has up to four voltage levels separated by
// three ascending entropy thresholds: an entropy at or above thresh[k] selects
// at least level k+1. The reset policy is "Policy C" of the evaluation:
//   entropy < 1.6 -> 0.85 V, 1.6..2.0 -> 0.82 V, 2.0..2.4 -> 0.80 V, >= 2.4 -> 0.78 V.
package create_pkg;

  localparam int unsigned VCODE_W      = 5;
  localparam int unsigned V_MIN_MV     = 600;   // code 0
  localparam int unsigned V_STEP_MV    = 10;    // one code step
  localparam int unsigned ENT_W        = 12;    // Q4.8 entropy
  localparam int unsigned ENT_FRAC     = 8;
  localparam int unsigned POLICY_LEVELS = 4;

  typedef logic [VCODE_W-1:0] vcode_t;
  typedef logic [ENT_W-1:0]   entropy_t;

  localparam vcode_t VCODE_NOMINAL = vcode_t'(30);  // 0.90 V
  localparam vcode_t VCODE_MAX     = vcode_t'(30);

  // Which network the scaled arrays are running.
  typedef enum logic [0:0] {
    MODE_PLANNER    = 1'b0,   // fixed planner voltage
    MODE_CONTROLLER = 1'b1    // entropy-driven voltage, updated every few steps
  } run_mode_t;

  typedef struct packed {
    entropy_t [POLICY_LEVELS-2:0] thresh;   // ascending, thresh[0] lowest
    vcode_t   [POLICY_LEVELS-1:0] vcode;    // vcode[0] for the lowest entropies
  } ev_policy_t;

  // Policy C. Thresholds 1.6, 2.0, 2.4 rounded to Q4.8 (410, 512, 614);
  // voltages 0.85, 0.82, 0.80, 0.78 V -> codes 25, 22, 20, 18.
  localparam ev_policy_t POLICY_C = '{
    thresh: {entropy_t'(614), entropy_t'(512), entropy_t'(410)},
    vcode:  {vcode_t'(18), vcode_t'(20), vcode_t'(22), vcode_t'(25)}
  };

  function automatic int unsigned vcode_to_mv(vcode_t c);
    return V_MIN_MV + V_STEP_MV * int'(c);
  endfunction

endpackage
