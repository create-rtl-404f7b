// create_top: INT8 embodied-AI accelerator with circuit-level anomaly
// detection and autonomy-adaptive voltage scaling.
//
// The chip holds N_PRED_ARRAYS + N_CTRL_ARRAYS weight-stationary systolic
// arrays of N x N PEs, each followed by a row of anomaly detection units that
// clear out-of-range GEMM results to zero. Arrays 0 .. N_PRED_ARRAYS-1 run the
// entropy predictor at the fixed nominal supply so that its prediction is
// free of timing errors; the remaining arrays run the planner and controller
// networks on a scaled supply produced by a distributed digital LDO (one slice
// per scaled array, all regulating to one target). vs_controller sets that
// target: a fixed planner voltage while the planner runs, and in controller
// mode a voltage chosen from the predicted entropy every UPDATE_INTERVAL
// steps. N_BANKS SRAM buffer banks (512 KB each) hold weights and activations.
//
// Follows the paper: 18 arrays of 128 x 128 PEs (2 for the predictor, 16 for
// the controller, as labelled in the layout), 8-bit multipliers and 24-bit
// accumulators, an AD row per array, LDO range 0.6-0.9 V in 10 mV steps with
// 90 ns / 50 mV response, voltage update every 5 steps, 142 x 512 KB buffers.
// This design's own choices: one LDO slice per scaled array; the planner mode;
// all the port formats. The paper describes no datapath between the buffers
// and the arrays, no scheduler and no requantiser, so the arrays' operand and
// result streams, the buffer port and the scheduler's controls are ports of
// this module, to be connected to such logic or driven by a host.
//
// Timing: see systolic_array (result 2*N cycles after its input vector),
// vs_controller (target one cycle after step_start), ldo_model (9 cycles per
// 10 mV) and sram_buffer (read data one cycle after the read).
module create_top
  import create_pkg::*;
#(
  parameter int unsigned N               = 128,   // PEs per array side
  parameter int unsigned DW              = 8,     // INT8 operands
  parameter int unsigned AW              = 24,    // accumulator width
  parameter int unsigned N_PRED_ARRAYS   = 2,     // nominal-voltage arrays
  parameter int unsigned N_CTRL_ARRAYS   = 16,    // voltage-scaled arrays
  parameter int unsigned N_BANKS         = 142,   // SRAM buffer banks
  parameter int unsigned BANK_WIDTH      = 1024,  // bits per buffer word
  parameter int unsigned BANK_DEPTH      = 4096,  // words per bank (512 KB)
  parameter int unsigned UPDATE_INTERVAL = 5,     // controller steps per voltage update
  parameter int unsigned LDO_STEP_CYCLES = 9,     // cycles per 10 mV LDO step
  localparam int unsigned NA = N_PRED_ARRAYS + N_CTRL_ARRAYS,
  localparam int unsigned BW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ---- voltage scaling controls (from the scheduler) ----
  input  run_mode_t                     mode,
  input  vcode_t                        planner_vcode,
  input  logic                          policy_we,
  input  ev_policy_t                    policy_in,
  input  logic                          step_start,
  input  entropy_t                      entropy_pred,
  output vcode_t                        vtarget,
  output logic                          v_update,
  output logic [1:0]                    v_level,
  output ev_policy_t                    policy,                     // policy in use
  output vcode_t                        vdd_code [N_CTRL_ARRAYS],   // each LDO slice's output
  output logic [10:0]                   vdd_mv   [N_CTRL_ARRAYS],   // the same in millivolts
  output logic                          vdd_settled,                // all slices at target
  // ---- PE arrays: index 0 .. N_PRED_ARRAYS-1 predictor, then controller ----
  input  logic                          arr_w_we     [NA],
  input  logic [$clog2(N)-1:0]          arr_w_row    [NA],
  input  logic signed [N-1:0][DW-1:0]   arr_w_data   [NA],
  input  logic                          arr_x_valid  [NA],
  input  logic signed [N-1:0][DW-1:0]   arr_x_in     [NA],
  input  logic [AW-2:0]                 arr_ad_bound [NA],
  output logic                          arr_y_valid  [NA],
  output logic signed [N-1:0][AW-1:0]   arr_y_out    [NA],
  output logic [N-1:0]                  arr_y_anom   [NA],
  // ---- SRAM buffer pool port (from the off-chip loader / array datapath) ----
  input  logic                          buf_en,
  input  logic                          buf_we,
  input  logic [BW-1:0]                 buf_bank,
  input  logic [$clog2(BANK_DEPTH)-1:0] buf_addr,
  input  logic [BANK_WIDTH-1:0]         buf_wdata,
  output logic [BANK_WIDTH-1:0]         buf_rdata
);

  // ---------------- PE arrays with anomaly detection ----------------
  for (genvar a = 0; a < NA; a++) begin : g_array
    systolic_array #(.N(N), .DW(DW), .AW(AW)) u_sa (
      .clk      (clk),
      .rst_n    (rst_n),
      .w_we     (arr_w_we[a]),
      .w_row    (arr_w_row[a]),
      .w_data   (arr_w_data[a]),
      .x_valid  (arr_x_valid[a]),
      .x_in     (arr_x_in[a]),
      .ad_bound (arr_ad_bound[a]),
      .y_valid  (arr_y_valid[a]),
      .y_out    (arr_y_out[a]),
      .y_anom   (arr_y_anom[a])
    );
  end

  // ---------------- autonomy-adaptive voltage scaling ----------------
  vs_controller #(.UPDATE_INTERVAL(UPDATE_INTERVAL)) u_vs (
    .clk           (clk),
    .rst_n         (rst_n),
    .mode          (mode),
    .planner_vcode (planner_vcode),
    .policy_we     (policy_we),
    .policy_in     (policy_in),
    .step_start    (step_start),
    .entropy_pred  (entropy_pred),
    .vtarget       (vtarget),
    .v_update      (v_update),
    .v_level       (v_level),
    .policy        (policy)
  );

  // distributed LDO: one slice per voltage-scaled array
  logic [N_CTRL_ARRAYS-1:0] slice_settled;
  for (genvar s = 0; s < N_CTRL_ARRAYS; s++) begin : g_ldo
    ldo_model #(.STEP_CYCLES(LDO_STEP_CYCLES)) u_ldo (
      .clk     (clk),
      .rst_n   (rst_n),
      .vtarget (vtarget),
      .vout    (vdd_code[s]),
      .vout_mv (vdd_mv[s]),
      .settled (slice_settled[s])
    );
  end
  assign vdd_settled = &slice_settled;

  // ---------------- SRAM buffer pool ----------------
  logic [BANK_WIDTH-1:0] bank_rdata [N_BANKS];
  logic [BW-1:0]         rd_bank_q;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    sram_buffer #(.WIDTH(BANK_WIDTH), .DEPTH(BANK_DEPTH)) u_buf (
      .clk   (clk),
      .en    (buf_en && (buf_bank == BW'(b))),
      .we    (buf_we),
      .addr  (buf_addr),
      .wdata (buf_wdata),
      .rdata (bank_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                rd_bank_q <= '0;
    else if (buf_en && !buf_we) rd_bank_q <= buf_bank;
  end
  assign buf_rdata = bank_rdata[rd_bank_q];

  a_bank_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    buf_en |-> (int'(buf_bank) < int'(N_BANKS))) else $error("buffer bank out of range");
endmodule
