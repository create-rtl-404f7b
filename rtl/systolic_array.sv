// systolic_array: N x N weight-stationary INT8 GEMM array with a row of
// anomaly detection units at its output.
//
// Each PE keeps one weight (8-bit multiplier, 24-bit accumulator). An input vector x (one element per PE row) enters
// at the left edge and moves right one PE per cycle; partial sums move down one
// PE per cycle and leave at the bottom, so column c produces
//     y[c] = sum over rows r of x[r] * w[r][c]        (24-bit, wrapping)
// Below the bottom row, one ad_unit per column clamps out-of-range results to
// zero. This organisation (weights in PEs, inputs left to right, sums
// downward, AD row at the output) follows the paper.
//
// This design's own choices: the input skew (row r delayed r cycles) and the
// output de-skew (column c delayed N-1-c cycles) are inside the array, so the
// user presents one whole x vector per cycle and receives one whole y vector
// per cycle; weights are loaded one PE row per cycle through w_we/w_row/w_data
// and must only be changed while no vector is in flight; the AD output is
// registered. A new vector may be presented every cycle.
//
// The PE grid, skew and de-skew are written as register arrays updated in
// loops rather than as N*N module instances; at the default size this keeps
// the elaborated model of an 18-array chip small enough to lint and simulate.
// Skew and de-skew stages are kept as full N x N arrays for regularity; the
// entries that no row or column reads are removed by synthesis.
//
// Timing: a vector presented with x_valid in cycle t (sampled at the clock
// edge that ends cycle t) appears on y_out with y_valid in cycle t + 2*N - 1:
// N - 1 + c edges through the skew and the PEs of column c, N - 1 - c edges
// of de-skew and one edge in the AD output register.
module systolic_array #(
  parameter int unsigned N  = 128,   // PE rows and columns
  parameter int unsigned DW = 8,     // operand width
  parameter int unsigned AW = 24     // accumulator width
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight load: one PE row (all N columns) per cycle
  input  logic                         w_we,
  input  logic [$clog2(N)-1:0]         w_row,
  input  logic signed [N-1:0][DW-1:0]  w_data,    // w_data[c] -> PE(w_row, c)
  // streaming input vectors
  input  logic                         x_valid,
  input  logic signed [N-1:0][DW-1:0]  x_in,      // x_in[r] enters PE row r
  // anomaly bound, shared by all columns
  input  logic [AW-2:0]                ad_bound,
  // results
  output logic                         y_valid,
  output logic signed [N-1:0][AW-1:0]  y_out,     // y_out[c] from column c
  output logic [N-1:0]                 y_anom     // column c was cleared
);
  localparam int unsigned LATENCY = 2 * N;   // valid pipeline length in edges

  // PE state: stationary weight, input register (to the right) and partial-sum
  // register (downward) of PE(r,c).
  logic signed [DW-1:0] w_q  [N][N];
  logic signed [DW-1:0] x_q  [N][N];
  logic signed [AW-1:0] ps_q [N][N];
  // sk[k][r]: input of row r delayed k+1 cycles (row r uses stage r-1)
  logic signed [DW-1:0] sk   [N][N];
  // ds[k][c]: bottom result of column c delayed k+1 cycles (column c uses stage N-2-c)
  logic signed [AW-1:0] ds   [N][N];
  logic signed [DW-1:0] x_row   [N];   // skewed input entering PE(r,0)
  logic signed [AW-1:0] col_out [N];   // de-skewed column results
  logic [LATENCY-1:0]   vld_sr;

  // ---------------- input skew: row r delayed r cycles ----------------
  always_comb begin
    x_row[0] = x_in[0];
    for (int r = 1; r < N; r++) x_row[r] = sk[r-1][r];
  end

  // ---------------- PE grid ----------------
  // PE(r,c): ps <= ps(r-1,c) + x * w ; x passed to PE(r,c+1).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          w_q[r][c]  <= '0;
          x_q[r][c]  <= '0;
          ps_q[r][c] <= '0;
          sk[r][c]   <= '0;
          ds[r][c]   <= '0;
        end
    end else begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          logic signed [DW-1:0]   xv;
          logic signed [2*DW-1:0] prod;
          logic signed [AW-1:0]   above;
          xv    = (c == 0) ? x_row[r] : x_q[r][c-1];
          prod  = xv * w_q[r][c];
          above = (r == 0) ? '0 : ps_q[r-1][c];
          if (w_we && (w_row == $clog2(N)'(r))) w_q[r][c] <= w_data[c];
          x_q[r][c]  <= xv;
          ps_q[r][c] <= above + AW'(prod);
        end
      // skew and de-skew shift stages
      for (int k = 0; k < N; k++)
        for (int j = 0; j < N; j++) begin
          sk[k][j] <= (k == 0) ? x_in[j]         : sk[k-1][j];
          ds[k][j] <= (k == 0) ? ps_q[N-1][j]    : ds[k-1][j];
        end
    end
  end

  // ---------------- output de-skew: column c delayed N-1-c cycles ----------------
  always_comb begin
    col_out[N-1] = ps_q[N-1][N-1];
    for (int c = 0; c < N - 1; c++) col_out[c] = ds[N-2-c][c];
  end

  // ---------------- anomaly detection row (registered) ----------------
  for (genvar c = 0; c < N; c++) begin : g_ad
    logic signed [AW-1:0] ad_y;
    logic                 ad_a;
    ad_unit #(.AW(AW)) u_ad (
      .y_in    (col_out[c]),
      .bound   (ad_bound),
      .y_out   (ad_y),
      .anomaly (ad_a)
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        y_out[c]  <= '0;
        y_anom[c] <= 1'b0;
      end else begin
        y_out[c]  <= ad_y;
        y_anom[c] <= ad_a;
      end
    end
  end

  // ---------------- valid pipeline ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LATENCY-2:0], x_valid};
  end
  assign y_valid = vld_sr[LATENCY-1];

  // Weights are stationary: they must not be rewritten while vectors flow.
  // (Checked only when the valid pipeline is known after reset.)
  a_no_reload_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    w_we |-> (vld_sr[N-1:0] == '0) && !x_valid)
    else $error("weight load while vectors are in the array");
endmodule
