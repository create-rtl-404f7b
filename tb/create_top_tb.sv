// create_top_tb: end-to-end test of the accelerator at reduced size
// (8 x 8 arrays, 2 predictor + 3 scaled arrays, 6 small buffer banks).
//
// The testbench plays the parts the chip leaves outside: it fills the buffer
// banks as an off-chip loader would, moves weights and input vectors from the
// banks into the arrays and collects results (the buffer-to-array datapath),
// and sequences planner and controller phases (the scheduler). It checks:
//   - every GEMM result of every array against a reference, with results
//     beyond the anomaly bound cleared to zero, and the 2*N-1 cycle latency;
//   - the planner-mode supply, and in controller mode a new Policy C voltage
//     at the first step and every 5th step, with the LDO slices reaching each
//     target at 9 cycles per 10 mV;
//   - a policy rewrite and mode switches in both directions.
// Each mechanism is counted and a mechanism that never occurred is a failure.
module create_top_tb;
  import create_pkg::*;
  localparam int N = 8, DW = 8, AW = 24, NP = 2, NC = 3, NA = NP + NC;
  localparam int NB = 6, BWD = N * DW, BD = 64, UI = 5, LSC = 9;
  localparam int BW = $clog2(NB);

  logic clk = 0, rst_n = 0;
  run_mode_t  mode = MODE_PLANNER;
  vcode_t     planner_vcode = 5'd30;
  logic       policy_we = 0;
  ev_policy_t policy_in = POLICY_C;
  logic       step_start = 0;
  entropy_t   entropy_pred = '0;
  vcode_t     vtarget;
  logic       v_update;
  logic [1:0] v_level;
  ev_policy_t policy;
  vcode_t     vdd_code [NC];
  logic [10:0] vdd_mv  [NC];
  logic       vdd_settled;
  logic                        arr_w_we     [NA];
  logic [$clog2(N)-1:0]        arr_w_row    [NA];
  logic signed [N-1:0][DW-1:0] arr_w_data   [NA];
  logic                        arr_x_valid  [NA];
  logic signed [N-1:0][DW-1:0] arr_x_in     [NA];
  logic [AW-2:0]               arr_ad_bound [NA];
  logic                        arr_y_valid  [NA];
  logic signed [N-1:0][AW-1:0] arr_y_out    [NA];
  logic [N-1:0]                arr_y_anom   [NA];
  logic            buf_en = 0, buf_we = 0;
  logic [BW-1:0]   buf_bank = '0;
  logic [$clog2(BD)-1:0] buf_addr = '0;
  logic [BWD-1:0]  buf_wdata = '0, buf_rdata;

  create_top #(.N(N), .DW(DW), .AW(AW), .N_PRED_ARRAYS(NP), .N_CTRL_ARRAYS(NC),
               .N_BANKS(NB), .BANK_WIDTH(BWD), .BANK_DEPTH(BD),
               .UPDATE_INTERVAL(UI), .LDO_STEP_CYCLES(LSC)) dut (.*);

  always #1 clk = ~clk;   // 2 ns clock

  int checks = 0, failures = 0, cycle = 0;
  // mechanism counters
  int n_gemm_vec = 0, n_cleared = 0, n_vupdates = 0, n_ramp_down = 0, n_ramp_up = 0;
  int n_to_ctrl = 0, n_to_plan = 0, n_policy = 0, n_buf_rd = 0, n_pred_runs = 0;
  logic [BWD-1:0] shadow [NB][BD];

  always @(posedge clk) cycle++;
  always @(posedge clk) if (rst_n && v_update) n_vupdates++;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    $display("FAIL @%0d: %s", cycle, msg);
  endtask

  // ---------------- buffer access (loader side) ----------------
  task automatic buf_write(int b, int a, logic [BWD-1:0] d);
    @(negedge clk);
    buf_en = 1; buf_we = 1; buf_bank = BW'(b); buf_addr = 6'(a); buf_wdata = d;
    shadow[b][a] = d;
    @(negedge clk);
    buf_en = 0; buf_we = 0;
  endtask

  task automatic buf_read(int b, int a, output logic [BWD-1:0] d);
    @(negedge clk);
    buf_en = 1; buf_we = 0; buf_bank = BW'(b); buf_addr = 6'(a);
    @(negedge clk);
    buf_en = 0;
    d = buf_rdata;
    n_buf_rd++;
    checks++;
    if (d !== shadow[b][a]) fail($sformatf("bank %0d addr %0d read %h exp %h", b, a, d, shadow[b][a]));
  endtask

  // ---------------- one GEMM on one array, operands from the buffers ----------------
  // weights: N rows at bank wb, addr 0..N-1; inputs: nv vectors at bank xb, addr 0..nv-1
  task automatic run_gemm(int arr, int wb, int xb, int nv, int bound);
    logic [BWD-1:0] d;
    logic [BWD-1:0] xv [BD];
    int W [N][N];
    int got, t0, t_first, acc, exp_y;
    bit exp_a;
    arr_ad_bound[arr] = (AW-1)'(bound);
    for (int r = 0; r < N; r++) begin
      buf_read(wb, r, d);
      for (int c = 0; c < N; c++) W[r][c] = int'(signed'(d[c*DW +: DW]));
      @(negedge clk);
      arr_w_we[arr] = 1; arr_w_row[arr] = 3'(r); arr_w_data[arr] = d;
      @(negedge clk);
      arr_w_we[arr] = 0;
    end
    for (int v = 0; v < nv; v++) buf_read(xb, v, xv[v]);
    // stream and collect
    got = 0; t_first = -1;
    fork
      begin
        for (int v = 0; v < nv; v++) begin
          @(negedge clk);
          arr_x_valid[arr] = 1; arr_x_in[arr] = xv[v];
          if (v == 0) t0 = cycle + 1;
        end
        @(negedge clk);
        arr_x_valid[arr] = 0;
      end
      begin
        while (got < nv) begin
          @(negedge clk);
          if (arr_y_valid[arr]) begin
            if (t_first < 0) t_first = cycle;
            for (int c = 0; c < N; c++) begin
              acc = 0;
              for (int r = 0; r < N; r++) acc += int'(signed'(xv[got][r*DW +: DW])) * W[r][c];
              exp_a = (acc > bound) || (acc < -bound);
              exp_y = exp_a ? 0 : acc;
              checks++;
              if (int'(signed'(arr_y_out[arr][c])) != exp_y || arr_y_anom[arr][c] != exp_a)
                fail($sformatf("array %0d vec %0d col %0d got %0d exp %0d", arr, got, c,
                               signed'(arr_y_out[arr][c]), exp_y));
              if (exp_a) n_cleared++;
            end
            got++;
            n_gemm_vec++;
          end
        end
      end
    join
    checks++;
    if (t_first - t0 != 2 * N - 1) fail($sformatf("array %0d latency %0d", arr, t_first - t0));
  endtask

  // ---------------- wait for the LDO slices and check the ramp time ----------------
  task automatic wait_ldo(int from_code, int to_code);
    int n, exp_n;
    n = 0;
    while (!vdd_settled && n < 2000) begin @(negedge clk); n++; end
    exp_n = (from_code > to_code ? from_code - to_code : to_code - from_code) * LSC;
    checks++;
    if (n < exp_n - 2 || n > exp_n + 2) fail($sformatf("LDO %0d->%0d took %0d cycles, exp ~%0d", from_code, to_code, n, exp_n));
    for (int s = 0; s < NC; s++) begin
      checks++;
      if (int'(vdd_code[s]) != to_code || int'(vdd_mv[s]) != 600 + 10 * to_code)
        fail($sformatf("LDO slice %0d at %0d, expected %0d", s, vdd_code[s], to_code));
    end
    if (to_code < from_code) n_ramp_down++;
    if (to_code > from_code) n_ramp_up++;
  endtask

  function automatic int policy_c_code(int e);
    if (e >= 614) return 18;
    if (e >= 512) return 20;
    if (e >= 410) return 22;
    return 25;
  endfunction

  initial begin
    int cur, expc, e;
    for (int a = 0; a < NA; a++) begin
      arr_w_we[a] = 0; arr_w_row[a] = '0; arr_w_data[a] = '0;
      arr_x_valid[a] = 0; arr_x_in[a] = '0; arr_ad_bound[a] = '1;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (vtarget != VCODE_NOMINAL || !vdd_settled || vdd_code[0] != VCODE_NOMINAL) fail("reset supply not nominal");

    // ---- off-chip load: weights in banks 0..NB-2, inputs in the last bank ----
    for (int b = 0; b < NB - 1; b++)
      for (int r = 0; r < N; r++) buf_write(b, r, {$urandom, $urandom});
    for (int v = 0; v < 16; v++) buf_write(NB - 1, v, {$urandom, $urandom});

    // ---- entropy predictor on the nominal arrays, nothing should be cleared ----
    for (int a = 0; a < NP; a++) begin
      run_gemm(a, a, NB - 1, 16, 4194303);
      n_pred_runs++;
    end

    // ---- planner phase at a lowered fixed supply (0.75 V) ----
    planner_vcode = 5'd15;
    cur = 30;
    @(negedge clk); @(negedge clk);
    checks++;
    if (vtarget != 5'd15) fail("planner target");
    wait_ldo(cur, 15); cur = 15;
    for (int a = NP; a < NA; a++) run_gemm(a, a, NB - 1, 12, 127 * 40);

    // ---- controller phase: 23 steps, voltage updated every 5 steps ----
    mode = MODE_CONTROLLER; n_to_ctrl++;
    for (int s = 0; s < 23; s++) begin
      // predictor result for this step: alternate critical and relaxed phases
      e = (s / 5) % 2 == 0 ? int'($urandom_range(700, 1000)) : int'($urandom_range(100, 400));
      @(negedge clk);
      step_start = 1; entropy_pred = ENT_W'(e);
      @(negedge clk);
      step_start = 0;
      if (s % UI == 0) begin
        expc = policy_c_code(e);
        checks++;
        if (int'(vtarget) != expc) fail($sformatf("step %0d target %0d exp %0d", s, vtarget, expc));
        wait_ldo(cur, expc);
        cur = expc;
      end else begin
        checks++;
        if (int'(vtarget) != cur) fail($sformatf("step %0d target changed between updates", s));
      end
      run_gemm(NP + (s % NC), NP + (s % NC), NB - 1, 4, 127 * 40);
    end

    // ---- back to the planner ----
    mode = MODE_PLANNER; n_to_plan++;
    planner_vcode = 5'd20;
    @(negedge clk); @(negedge clk);
    checks++;
    if (vtarget != 5'd20) fail("planner target after switch");
    wait_ldo(cur, 20); cur = 20;

    // ---- new policy (Policy E shape: 0.85 / 0.80 / 0.70 V at 2.2 and 2.6) ----
    @(negedge clk);
    policy_we = 1;
    policy_in.thresh = {ENT_W'(666), ENT_W'(666), ENT_W'(563)};
    policy_in.vcode  = {5'd10, 5'd10, 5'd20, 5'd25};
    @(negedge clk); policy_we = 0; n_policy++;
    checks++;
    if (policy != policy_in) fail("policy not written");
    mode = MODE_CONTROLLER; n_to_ctrl++;
    @(negedge clk); step_start = 1; entropy_pred = ENT_W'(800);
    @(negedge clk); step_start = 0;
    checks++;
    if (vtarget != 5'd10) fail("new policy not applied");
    wait_ldo(cur, 10); cur = 10;
    run_gemm(NP, NP, NB - 1, 8, 127 * 40);
    @(negedge clk); step_start = 1; entropy_pred = ENT_W'(100);
    @(negedge clk); step_start = 0;
    checks++;
    if (vtarget != 5'd10) fail("target changed inside the update interval");

    // ---- mechanism coverage ----
    $display("vectors %0d, cleared results %0d, voltage updates %0d, ramps down %0d up %0d",
             n_gemm_vec, n_cleared, n_vupdates, n_ramp_down, n_ramp_up);
    $display("mode switches to controller %0d to planner %0d, policy writes %0d, buffer reads %0d, predictor runs %0d",
             n_to_ctrl, n_to_plan, n_policy, n_buf_rd, n_pred_runs);
    checks++; if (n_gemm_vec == 0)  fail("no GEMM vectors");
    checks++; if (n_cleared == 0)   fail("no anomaly was cleared");
    checks++; if (n_vupdates < 6)   fail("too few voltage updates");
    checks++; if (n_ramp_down == 0) fail("no downward voltage ramp");
    checks++; if (n_ramp_up == 0)   fail("no upward voltage ramp");
    checks++; if (n_to_ctrl == 0 || n_to_plan == 0) fail("mode switch missing");
    checks++; if (n_policy == 0)    fail("no policy write");
    checks++; if (n_buf_rd == 0)    fail("no buffer reads");
    checks++; if (n_pred_runs == 0) fail("predictor arrays unused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
