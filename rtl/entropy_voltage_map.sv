// entropy_voltage_map: entropy-to-voltage policy of the autonomy-adaptive
// voltage scaling.
//
// A low predicted entropy of the controller's action logits marks a critical
// step that needs a safe voltage margin; a high entropy marks a non-critical
// step that can run at a lower supply. The map is a staircase: the entropy is
// compared with three ascending thresholds and the number of thresholds it
// reaches selects one of four voltage codes. Higher entropy never selects a
// higher level index. The staircase shape and the default "Policy C" levels
// (0.85/0.82/0.80/0.78 V, steps at entropy 1.6, 2.0, 2.4) come from the paper;
// the threshold count, the Q4.8 entropy and the 10 mV voltage code are this
// design's encoding (see create_pkg). Policies with fewer levels repeat a code.
//
// Combinational: vcode follows entropy and policy in the same cycle.
module entropy_voltage_map
  import create_pkg::*;
(
  input  entropy_t   entropy,     // predicted entropy, Q4.8
  input  ev_policy_t policy,      // thresholds and voltage codes
  output vcode_t     vcode,       // selected supply code
  output logic [1:0] level        // selected level, 0 = most critical
);
  always_comb begin
    level = 2'd0;
    for (int k = 0; k < POLICY_LEVELS - 1; k++)
      if (entropy >= policy.thresh[k]) level = 2'(k + 1);
    vcode = policy.vcode[level];
  end
endmodule
