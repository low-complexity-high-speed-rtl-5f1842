// relu_unit: ReLU activation of one hidden-layer output.
//
// As drawn in the architecture figure, a comparator tests the PE output
// for being greater than zero and a multiplexer passes either the value or
// the constant 0. Combinational; out = (in > 0) ? in : 0.
module relu_unit
  import lcls_pkg::*;
(
  input  data_t in_data,
  output data_t out_data
);
  assign out_data = (in_data > 0) ? in_data : '0;
endmodule
