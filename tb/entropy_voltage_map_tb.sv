// entropy_voltage_map_tb: checks the entropy-to-voltage staircase.
// With the reset policy (Policy C) it sweeps every Q4.8 entropy value and
// compares the code with the expected voltage in millivolts (850/820/800/780),
// worked out from the entropy as a real number; then it loads a two-level
// policy shaped like Policy D (0.85 V below 2.6, 0.70 V from 2.6) and checks
// again.
module entropy_voltage_map_tb;
  import create_pkg::*;
  entropy_t   entropy;
  ev_policy_t policy;
  vcode_t     vcode;
  logic [1:0] level;
  int checks = 0, failures = 0;

  entropy_voltage_map dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e;
    int  exp_mv;
    policy = POLICY_C;
    for (int i = 0; i < 4096; i++) begin
      entropy = ENT_W'(i);
      #1;
      e = real'(i) / 256.0;
      // thresholds as stored (rounded to Q4.8): 410/256, 512/256, 614/256
      if      (e >= 614.0 / 256.0) exp_mv = 780;
      else if (e >= 2.0)           exp_mv = 800;
      else if (e >= 410.0 / 256.0) exp_mv = 820;
      else                         exp_mv = 850;
      checks++;
      if (int'(vcode_to_mv(vcode)) != exp_mv) begin
        failures++;
        $display("FAIL Policy C entropy %f -> %0d mV, expected %0d", e, vcode_to_mv(vcode), exp_mv);
      end
    end
    // the paper's sample points for Policy C
    entropy = ENT_W'(128);  #1; checks++; if (vcode != 5'd25) failures++;  // 0.5 -> 0.85
    entropy = ENT_W'(461);  #1; checks++; if (vcode != 5'd22) failures++;  // 1.8 -> 0.82
    entropy = ENT_W'(563);  #1; checks++; if (vcode != 5'd20) failures++;  // 2.2 -> 0.80
    entropy = ENT_W'(717);  #1; checks++; if (vcode != 5'd18) failures++;  // 2.8 -> 0.78
    // Policy D shape: thresholds all at 2.6 -> 0.70 V (code 10)
    policy.thresh = {ENT_W'(666), ENT_W'(666), ENT_W'(666)};
    policy.vcode  = {5'd10, 5'd10, 5'd10, 5'd25};
    for (int i = 0; i < 4096; i += 7) begin
      entropy = ENT_W'(i);
      #1;
      checks++;
      if (vcode != ((i >= 666) ? 5'd10 : 5'd25) || level != ((i >= 666) ? 2'd3 : 2'd0)) begin
        failures++;
        $display("FAIL Policy D entropy %0d -> code %0d level %0d", i, vcode, level);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
