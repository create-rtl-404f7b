// ldo_model: behavioural model of one digital low-dropout regulator slice of
// the distributed LDO that supplies the scaled PE arrays. It is a model of an
// analog/mixed-signal part, not synthesisable power circuitry.
//
// The regulator is modelled by its specification: output 0.60 .. 0.90 V in
// 10 mV steps and a response time of 90 ns per 50 mV, i.e. 18 ns per 10 mV
// step, or STEP_CYCLES = 9 cycles of the 2 ns clock. The output code moves one
// step toward the target every STEP_CYCLES cycles, so the largest swing,
// 0.90 V to 0.60 V, takes 30 * 18 ns = 540 ns, the switching latency the paper
// reports. Overshoot, ripple, load current and efficiency are not modelled.
// After reset the output is at the nominal 0.90 V.
//
// Ports: vtarget is the requested code, vout the present output code, vout_mv
// the same in millivolts, settled is high while vout equals vtarget.
module ldo_model
  import create_pkg::*;
#(
  parameter int unsigned STEP_CYCLES = 9    // clock cycles per 10 mV step
) (
  input  logic        clk,
  input  logic        rst_n,
  input  vcode_t      vtarget,
  output vcode_t      vout,
  output logic [10:0] vout_mv,
  output logic        settled
);
  localparam int unsigned TW = (STEP_CYCLES > 1) ? $clog2(STEP_CYCLES) : 1;
  logic [TW-1:0] timer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vout  <= VCODE_NOMINAL;
      timer <= '0;
    end else if (vout == vtarget) begin
      timer <= '0;
    end else if (timer == TW'(STEP_CYCLES - 1)) begin
      timer <= '0;
      vout  <= (vtarget > vout) ? vout + vcode_t'(1) : vout - vcode_t'(1);
    end else begin
      timer <= timer + TW'(1);
    end
  end

  assign settled = (vout == vtarget);
  assign vout_mv = 11'(vcode_to_mv(vout));
endmodule
