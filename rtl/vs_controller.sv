// vs_controller: autonomy-adaptive voltage scaling control for the PE arrays
// that run the planner and the controller networks.
//
// In MODE_CONTROLLER the supply follows the predicted entropy of each
// controller step: on the first step after entering the mode, and then on
// every UPDATE_INTERVAL-th step (5 by default, the paper's choice), the
// prediction that accompanies step_start is mapped to a voltage by
// entropy_voltage_map and becomes the new LDO target; the steps in between
// keep the previous target, which limits switching. In MODE_PLANNER the target
// is the fixed planner code (the planner's lowest safe voltage, set by
// software). After reset the target is the 0.90 V nominal code and the policy
// is Policy C; the policy can be rewritten with policy_we.
//
// The paper gives the entropy-driven mapping and the 5-step interval; the
// planner mode register, the step_start strobe and the policy-write port are
// this design's interface choices.
//
// Timing: vtarget and v_update change one cycle after the step_start (or mode
// change) that causes them. v_update pulses for one cycle per new target.
module vs_controller
  import create_pkg::*;
#(
  parameter int unsigned UPDATE_INTERVAL = 5   // controller steps per voltage update
) (
  input  logic       clk,
  input  logic       rst_n,
  input  run_mode_t  mode,
  input  vcode_t     planner_vcode,  // supply used in MODE_PLANNER
  input  logic       policy_we,      // replace the entropy-to-voltage policy
  input  ev_policy_t policy_in,
  input  logic       step_start,     // a controller step begins
  input  entropy_t   entropy_pred,   // prediction for that step
  output vcode_t     vtarget,        // LDO target code
  output logic       v_update,       // vtarget was (re)computed this cycle
  output logic [1:0] v_level,        // policy level of the last entropy update
  output ev_policy_t policy          // policy in use
);
  localparam int unsigned CW = (UPDATE_INTERVAL > 1) ? $clog2(UPDATE_INTERVAL) : 1;

  logic [CW-1:0] step_cnt;
  run_mode_t     mode_q;
  vcode_t        mapped;
  logic [1:0]    level;

  entropy_voltage_map u_map (
    .entropy (entropy_pred),
    .policy  (policy),
    .vcode   (mapped),
    .level   (level)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      policy   <= POLICY_C;
      vtarget  <= VCODE_NOMINAL;
      v_level  <= 2'd0;
      v_update <= 1'b0;
      step_cnt <= '0;
      mode_q   <= MODE_PLANNER;
    end else begin
      v_update <= 1'b0;
      mode_q   <= mode;
      if (policy_we) policy <= policy_in;
      if (mode == MODE_PLANNER) begin
        step_cnt <= '0;
        if (mode_q != MODE_PLANNER || vtarget != planner_vcode) begin
          vtarget  <= planner_vcode;
          v_update <= 1'b1;
        end
      end else begin
        if (mode_q != MODE_CONTROLLER) step_cnt <= '0;
        if (step_start) begin
          if (step_cnt == '0 || mode_q != MODE_CONTROLLER) begin
            vtarget  <= mapped;
            v_level  <= level;
            v_update <= 1'b1;
          end
          if (mode_q != MODE_CONTROLLER)
            step_cnt <= (UPDATE_INTERVAL > 1) ? CW'(1) : '0;
          else if (step_cnt == CW'(UPDATE_INTERVAL - 1))
            step_cnt <= '0;
          else
            step_cnt <= step_cnt + CW'(1);
        end
      end
    end
  end

  a_vtarget_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    vtarget <= VCODE_MAX) else $error("voltage target above nominal");
endmodule
