// denormalizer: output de-normalization of one DNN.
//
// Undoes the input normalization on the DNN output: out = in * std + mean,
// a multiplier followed by an adder as in the architecture figure. The
// same mean and std as the normalizer of the same DNN are used. The
// product is truncated to 16 fractional bits and the sum saturated to
// <24,8> (this design's choice). Combinational.
module denormalizer
  import lcls_pkg::*;
(
  input  data_t in_data,
  input  data_t mean,
  input  data_t std_dev,
  output data_t out_data
);
  logic signed [2*DW-1:0] prod;
  assign prod     = in_data * std_dev;
  assign out_data = sat_data(80'(prod) + (80'(mean) <<< DFR), 2 * DFR);
endmodule
