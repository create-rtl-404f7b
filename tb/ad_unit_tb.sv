// ad_unit_tb: self-checking test of the anomaly detection unit.
// Drives corner values (exactly at +/-bound, one past it, extremes of the
// 24-bit range) and random values against random bounds, and compares the
// cleared output and the anomaly flag with a reference computed in integers.
module ad_unit_tb;
  localparam int AW = 24;
  logic signed [AW-1:0] y_in, y_out;
  logic [AW-2:0]        bound;
  logic                 anomaly;
  int checks = 0, failures = 0;

  ad_unit #(.AW(AW)) dut (.y_in(y_in), .bound(bound), .y_out(y_out), .anomaly(anomaly));

  task automatic check(int y, int b);
    int  exp_y;
    bit  exp_a;
    y_in  = AW'(y);
    bound = (AW-1)'(b);
    #1;
    exp_a = (y > b) || (y < -b);
    exp_y = exp_a ? 0 : y;
    checks++;
    if (anomaly !== exp_a || int'(y_out) !== exp_y) begin
      failures++;
      $display("FAIL y=%0d bound=%0d -> y_out=%0d anomaly=%0b (exp %0d %0b)",
               y, b, y_out, anomaly, exp_y, exp_a);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b, y;
    // corners around a bound of 127*100
    b = 12700;
    check(0, b); check(b, b); check(-b, b); check(b + 1, b); check(-b - 1, b);
    check(8388607, b); check(-8388608, b);
    // zero bound clears everything but zero
    check(0, 0); check(1, 0); check(-1, 0);
    // largest bound lets everything through
    check(8388607, 4194303); check(-8388608, 4194303);
    for (int i = 0; i < 2000; i++) begin
      b = int'($urandom_range(0, 4194303));
      y = int'($urandom) >>> 8;                  // any 24-bit signed value
      if (i % 2 == 0) y = y % (2 * b + 3);       // many near the bound
      check(y, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
