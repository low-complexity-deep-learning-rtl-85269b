// relu: rectified linear unit, y = max(0, x), for one signed fixed-point word.
//
// As in the published PE datapath, the activation is a two-input multiplexer
// that chooses between zero and the processing-element output; the sign bit of
// the PE output is its select line. Purely combinational, no latency.
module relu #(
  parameter int unsigned DW = 26
) (
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  always_comb y = x[DW-1] ? '0 : x;
endmodule
