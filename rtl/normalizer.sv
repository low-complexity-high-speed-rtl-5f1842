// normalizer: input normalization of one DNN.
//
// The LS estimate is made zero-mean and unit-variance with constants found
// when the DNN was trained: out = (in - mean) / std, as drawn in the
// architecture figure (a subtractor followed by a divider). mean and std are
// <24,8> values held in the DNN's internal memory; the quotient is
// truncated and saturated to <24,8>, and a zero std gives 0 (this design's
// choices). Combinational.
module normalizer
  import lcls_pkg::*;
(
  input  data_t in_data,
  input  data_t mean,
  input  data_t std_dev,
  output data_t out_data
);
  logic signed [DW:0] diff;
  assign diff     = (DW+1)'(in_data) - (DW+1)'(mean);
  assign out_data = fx_div(64'(diff), 64'(std_dev));
endmodule
