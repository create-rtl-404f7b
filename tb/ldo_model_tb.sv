// ldo_model_tb: checks the LDO model's slew. From the 0.90 V reset level it
// requests 0.60 V and checks that the output reaches it in 30 steps of 9
// cycles (540 ns at 2 ns per cycle), descending one 10 mV step at a time; then
// it steps 0.70 -> 0.75 V and checks 5 * 9 cycles (90 ns per 50 mV), and that
// settled is high only when the output equals the target.
module ldo_model_tb;
  import create_pkg::*;
  logic clk = 0, rst_n = 0;
  vcode_t vtarget = 5'd30, vout;
  logic [10:0] vout_mv;
  logic settled;
  int checks = 0, failures = 0;

  ldo_model #(.STEP_CYCLES(9)) dut (.*);
  always #1 clk = ~clk;   // 2 ns clock

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ramp(int to_code, int exp_cycles);
    int n, prev;
    n = 0; prev = int'(vout);
    @(negedge clk);
    vtarget = vcode_t'(to_code);
    while (int'(vout) != to_code && n < 1000) begin
      @(negedge clk);
      n++;
      if (int'(vout) != prev) begin
        checks++;
        if ((int'(vout) - prev) * (int'(vout) - prev) != 1) begin
          failures++; $display("FAIL jump %0d -> %0d", prev, vout);
        end
        prev = int'(vout);
      end
      checks++;
      if (settled != (int'(vout) == to_code)) begin failures++; $display("FAIL settled flag"); end
    end
    checks++;
    if (n != exp_cycles) begin
      failures++; $display("FAIL ramp to %0d took %0d cycles, expected %0d", to_code, n, exp_cycles);
    end
    checks++;
    if (int'(vout_mv) != 600 + 10 * to_code) begin failures++; $display("FAIL vout_mv %0d", vout_mv); end
    $display("ramp to %0d mV: %0d ns", vout_mv, 2 * n);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    checks++; if (vout != 5'd30 || !settled) begin failures++; $display("FAIL reset level"); end
    ramp(0, 30 * 9);    // 0.90 -> 0.60 V: 540 ns
    ramp(10, 10 * 9);   // 0.60 -> 0.70 V
    ramp(15, 5 * 9);    // 0.70 -> 0.75 V: 90 ns per 50 mV
    ramp(30, 15 * 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
