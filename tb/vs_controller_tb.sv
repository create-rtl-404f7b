// vs_controller_tb: checks the autonomy-adaptive voltage control.
// A reference model in the testbench tracks the expected target: nominal after
// reset, the planner code in planner mode, and in controller mode the Policy C
// voltage of the prediction at the first step and then at every 5th step only.
// The test runs a planner phase, 60 controller steps with random predictions
// and random gaps between steps, a second planner phase and a second controller
// phase (the interval restarts), then rewrites the policy.
module vs_controller_tb;
  import create_pkg::*;
  localparam int UI = 5;
  logic clk = 0, rst_n = 0;
  run_mode_t  mode = MODE_PLANNER;
  vcode_t     planner_vcode = 5'd15;
  logic       policy_we = 0;
  ev_policy_t policy_in = POLICY_C;
  logic       step_start = 0;
  entropy_t   entropy_pred = '0;
  vcode_t     vtarget;
  logic       v_update;
  logic [1:0] v_level;
  ev_policy_t policy;
  int checks = 0, failures = 0, n_updates = 0, steps = 0;
  int exp_code;

  vs_controller #(.UPDATE_INTERVAL(UI)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mv_of(int e);
    if (e >= 614) return 780;
    if (e >= 512) return 800;
    if (e >= 410) return 820;
    return 850;
  endfunction

  task automatic expect_code(int code, string what);
    checks++;
    if (int'(vtarget) != code) begin
      failures++;
      $display("FAIL %s: vtarget %0d expected %0d", what, vtarget, code);
    end
  endtask

  always @(posedge clk) if (v_update) n_updates++;

  task automatic ctrl_steps(int n);
    for (int s = 0; s < n; s++) begin
      int e;
      e = int'($urandom_range(0, 1000));
      @(negedge clk);
      step_start = 1; entropy_pred = ENT_W'(e);
      if (s % UI == 0) exp_code = (mv_of(e) - 600) / 10;
      @(negedge clk);
      step_start = 0;
      expect_code(exp_code, $sformatf("controller step %0d", s));
      repeat ($urandom_range(0, 3)) @(negedge clk);
      expect_code(exp_code, "between steps");
      steps++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    expect_code(30, "reset value");
    rst_n = 1;
    repeat (3) @(negedge clk);
    expect_code(15, "planner mode");
    planner_vcode = 5'd12;
    repeat (2) @(negedge clk);
    expect_code(12, "planner code change");
    mode = MODE_CONTROLLER;
    ctrl_steps(60);
    mode = MODE_PLANNER;
    repeat (2) @(negedge clk);
    expect_code(12, "back to planner");
    // steps in planner mode do not change the target
    step_start = 1; entropy_pred = ENT_W'(900); @(negedge clk); step_start = 0;
    @(negedge clk); expect_code(12, "step ignored in planner mode");
    mode = MODE_CONTROLLER;
    ctrl_steps(23);
    // new policy: everything at 0.70 V
    @(negedge clk);
    policy_we = 1;
    policy_in.thresh = {ENT_W'(0), ENT_W'(0), ENT_W'(0)};
    policy_in.vcode  = {5'd10, 5'd10, 5'd10, 5'd10};
    @(negedge clk); policy_we = 0;
    mode = MODE_PLANNER; @(negedge clk); mode = MODE_CONTROLLER;
    @(negedge clk); step_start = 1; @(negedge clk); step_start = 0;
    expect_code(10, "rewritten policy");
    // 60 steps -> 12 updates, 23 steps -> 5 updates, plus the planner updates
    checks++;
    if (n_updates < 12 + 5 + 1) begin failures++; $display("FAIL only %0d updates", n_updates); end
    $display("%0d controller steps, %0d target updates", steps, n_updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
