// systolic_array_tb: self-checking test of the systolic array with its AD row.
// Uses an 8 x 8 array. Loads random signed weights, streams back-to-back
// random input vectors, and compares each output vector with a reference GEMM
// computed in the testbench, including the zero-clearing of results whose
// magnitude exceeds the anomaly bound. Checks the 2*N-1 cycle latency (vector in cycle t, result in cycle t+2N-1) and that
// results come out in order, one per cycle.
module systolic_array_tb;
  localparam int N = 8, DW = 8, AW = 24, NV = 40;
  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [$clog2(N)-1:0] w_row = '0;
  logic signed [N-1:0][DW-1:0] w_data = '0, x_in = '0;
  logic x_valid = 0;
  logic [AW-2:0] ad_bound;
  logic y_valid;
  logic signed [N-1:0][AW-1:0] y_out;
  logic [N-1:0] y_anom;

  int checks = 0, failures = 0, cycle = 0;
  int W [N][N];
  int X [NV][N];
  int first_in = -1, first_out = -1, n_out = 0, n_anom = 0;

  systolic_array #(.N(N), .DW(DW), .AW(AW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(negedge clk) if (rst_n && y_valid) begin
    for (int c = 0; c < N; c++) begin
      int acc, exp_y; bit exp_a;
      acc = 0;
      for (int r = 0; r < N; r++) acc += X[n_out][r] * W[r][c];
      exp_a = (acc > int'(ad_bound)) || (acc < -int'(ad_bound));
      exp_y = exp_a ? 0 : acc;
      checks++;
      if (int'(signed'(y_out[c])) != exp_y || y_anom[c] != exp_a) begin
        failures++;
        $display("FAIL vec %0d col %0d: got %0d/%0b exp %0d/%0b", n_out, c, y_out[c], y_anom[c], exp_y, exp_a);
      end
      if (exp_a) n_anom++;
    end
    if (n_out == 0) first_out = cycle;
    n_out++;
  end

  initial begin
    ad_bound = 23'd9000;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) W[r][c] = int'($urandom_range(0, 255)) - 128;
    for (int v = 0; v < NV; v++) for (int r = 0; r < N; r++) X[v][r] = int'($urandom_range(0, 255)) - 128;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load weights, one row per cycle
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      w_we = 1; w_row = r[$clog2(N)-1:0];
      for (int c = 0; c < N; c++) w_data[c] = DW'(W[r][c]);
    end
    @(negedge clk); w_we = 0;
    // stream vectors back to back
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      x_valid = 1;
      for (int r = 0; r < N; r++) x_in[r] = DW'(X[v][r]);
      if (v == 0) first_in = cycle + 1;    // sampled at the next rising edge
    end
    @(negedge clk); x_valid = 0;
    repeat (3 * N + 5) @(posedge clk);
    checks++;
    if (n_out != NV) begin failures++; $display("FAIL got %0d vectors, expected %0d", n_out, NV); end
    checks++;
    if (first_out - first_in != 2 * N - 1) begin
      failures++; $display("FAIL latency %0d, expected %0d", first_out - first_in, 2 * N - 1);
    end
    checks++;
    if (n_anom == 0) begin failures++; $display("FAIL no anomaly was exercised"); end
    $display("latency %0d cycles, %0d results cleared", first_out - first_in, n_anom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
