// create_top_full_tb: one complete controller step on the accelerator at its
// full size (18 arrays of 128 x 128 PEs, 16 LDO slices, 142 x 512 KB banks).
//
// The step: a weight tile and input vectors are written into two buffer banks
// and read back; the weights are loaded into scaled array 2 and 16 input
// vectors streamed through it, every result (after anomaly clearance with a
// bound of 127 * 800) is compared with a reference GEMM and the 255-cycle
// latency is checked; the voltage controller switches to controller mode, maps
// a predicted entropy of 2.5 to 0.78 V under Policy C, and all 16 LDO slices
// reach it after 12 steps of 9 cycles. A predictor array (0) runs the same
// vectors at nominal voltage with the clearance disabled.
module create_top_full_tb;
  import create_pkg::*;
  localparam int N = 128, DW = 8, AW = 24, NP = 2, NC = 16, NA = NP + NC;
  localparam int NB = 142, BWD = 1024, BD = 4096, NV = 16;

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
  logic [7:0]      buf_bank = '0;
  logic [11:0]     buf_addr = '0;
  logic [BWD-1:0]  buf_wdata = '0, buf_rdata;

  create_top dut (.*);

  always #1 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, n_cleared = 0;
  logic [BWD-1:0] wrow [N];
  logic [BWD-1:0] xvec [NV];
  always @(posedge clk) cycle++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    $display("FAIL @%0d: %s", cycle, msg);
  endtask

  function automatic logic [BWD-1:0] rand_word();
    logic [BWD-1:0] w;
    for (int i = 0; i < BWD / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  task automatic buf_access(bit wr, int b, int a, logic [BWD-1:0] d, output logic [BWD-1:0] q);
    @(negedge clk);
    buf_en = 1; buf_we = wr; buf_bank = 8'(b); buf_addr = 12'(a); buf_wdata = d;
    @(negedge clk);
    buf_en = 0; buf_we = 0;
    q = buf_rdata;
  endtask

  task automatic run_gemm(int arr, int bound);
    int t0, t_first, got, acc, exp_y;
    bit exp_a;
    arr_ad_bound[arr] = (AW-1)'(bound);
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      arr_w_we[arr] = 1; arr_w_row[arr] = 7'(r); arr_w_data[arr] = wrow[r];
    end
    @(negedge clk);
    arr_w_we[arr] = 0;
    got = 0; t_first = -1;
    fork
      begin
        for (int v = 0; v < NV; v++) begin
          @(negedge clk);
          arr_x_valid[arr] = 1; arr_x_in[arr] = xvec[v];
          if (v == 0) t0 = cycle + 1;
        end
        @(negedge clk);
        arr_x_valid[arr] = 0;
      end
      begin
        while (got < NV) begin
          @(negedge clk);
          if (arr_y_valid[arr]) begin
            if (t_first < 0) t_first = cycle;
            for (int c = 0; c < N; c++) begin
              acc = 0;
              for (int r = 0; r < N; r++)
                acc += int'(signed'(xvec[got][r*DW +: DW])) * int'(signed'(wrow[r][c*DW +: DW]));
              exp_a = (acc > bound) || (acc < -bound);
              exp_y = exp_a ? 0 : acc;
              checks++;
              if (int'(signed'(arr_y_out[arr][c])) != exp_y || arr_y_anom[arr][c] != exp_a)
                fail($sformatf("array %0d vec %0d col %0d got %0d exp %0d", arr, got, c,
                               signed'(arr_y_out[arr][c]), exp_y));
              if (exp_a) n_cleared++;
            end
            got++;
          end
        end
      end
    join
    checks++;
    if (t_first - t0 != 2 * N - 1) fail($sformatf("latency %0d", t_first - t0));
  endtask

  initial begin
    logic [BWD-1:0] q;
    int n;
    for (int a = 0; a < NA; a++) begin
      arr_w_we[a] = 0; arr_w_row[a] = '0; arr_w_data[a] = '0;
      arr_x_valid[a] = 0; arr_x_in[a] = '0; arr_ad_bound[a] = '1;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    // weights to bank 7, inputs to bank 141, then read both back
    for (int r = 0; r < N; r++) begin wrow[r] = rand_word(); buf_access(1, 7, r, wrow[r], q); end
    for (int v = 0; v < NV; v++) begin xvec[v] = rand_word(); buf_access(1, NB - 1, v, xvec[v], q); end
    for (int r = 0; r < N; r++) begin
      buf_access(0, 7, r, '0, q);
      checks++; if (q !== wrow[r]) fail($sformatf("bank 7 word %0d", r));
    end
    for (int v = 0; v < NV; v++) begin
      buf_access(0, NB - 1, v, '0, q);
      checks++; if (q !== xvec[v]) fail($sformatf("bank 141 word %0d", v));
    end
    // controller step: entropy 2.5 -> Policy C 0.78 V (code 18)
    mode = MODE_CONTROLLER;
    @(negedge clk); step_start = 1; entropy_pred = ENT_W'(640);
    @(negedge clk); step_start = 0;
    checks++; if (vtarget != 5'd18) fail($sformatf("target %0d", vtarget));
    n = 0;
    while (!vdd_settled && n < 1000) begin @(negedge clk); n++; end
    checks++; if (n < 12 * 9 - 2 || n > 12 * 9 + 2) fail($sformatf("LDO ramp %0d cycles", n));
    for (int s = 0; s < NC; s++) begin
      checks++; if (vdd_mv[s] != 11'd780) fail($sformatf("slice %0d at %0d mV", s, vdd_mv[s]));
    end
    run_gemm(2, 127 * 800);
    run_gemm(0, 4194303);
    $display("LDO ramp %0d cycles, %0d results cleared", n, n_cleared);
    checks++; if (n_cleared == 0) fail("no anomaly cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
