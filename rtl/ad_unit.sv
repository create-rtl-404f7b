// ad_unit: anomaly detection and clearance for one column of a systolic array.
//
// Voltage underscaling mostly corrupts the high-order bits of an accumulator,
// producing results far outside the range that a re-quantised INT8 output can
// take. This unit compares a signed accumulator result with the valid bound
// (typically 127 times the output scaling factor, expressed in accumulator
// units) and replaces an out-of-range value with zero; in-range values pass
// unchanged. The comparator + multiplexer structure follows the paper. The
// valid range is taken as symmetric, -bound .. +bound (this design's choice).
//
// Purely combinational: y_out and anomaly follow y_in in the same cycle. The
// enclosing array registers the result.
module ad_unit #(
  parameter int unsigned AW = 24                 // accumulator width
) (
  input  logic signed [AW-1:0] y_in,            // raw column result
  input  logic        [AW-2:0] bound,           // largest valid magnitude
  output logic signed [AW-1:0] y_out,           // cleared result
  output logic                 anomaly          // y_in was out of range
);
  logic signed [AW:0] y_ext, pos_bound, neg_bound;

  always_comb begin
    y_ext     = (AW+1)'(y_in);
    pos_bound = (AW+1)'({2'b00, bound});
    neg_bound = -pos_bound;
    anomaly   = (y_ext > pos_bound) || (y_ext < neg_bound);   // comparator
    y_out     = anomaly ? '0 : y_in;                          // multiplexer
  end
endmodule
