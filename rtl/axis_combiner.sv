// axis_combiner: merges the outputs of the two DNNs into complex estimates.
//
// The real-part and imaginary-part DNN streams are joined beat by beat
// into one complex stream, as an AXI-stream combiner does in the reference
// system: an output beat exists when both inputs offer one, and both
// inputs are consumed by the same output handshake. The output tlast is
// the inputs' tlast, which must agree (an assertion checks it). The data
// bits pass straight through; what the block adds is the joint handshake.
// Combinational, no added latency.
module axis_combiner
  import lcls_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  re_valid,
  output logic  re_ready,
  input  data_t re_data,
  input  logic  re_last,
  input  logic  im_valid,
  output logic  im_ready,
  input  data_t im_data,
  input  logic  im_last,
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_data,
  output logic  m_last
);

  assign m_valid   = re_valid && im_valid;
  assign re_ready  = m_ready && im_valid;
  assign im_ready  = m_ready && re_valid;
  assign m_data.re = re_data;
  assign m_data.im = im_data;
  assign m_last    = re_last;

  a_last_match: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid |-> (re_last == im_last));

endmodule
