// axis_splitter: broadcasts the complex LS-estimate stream to the two DNNs.
//
// In the system each complex estimate goes to both DNNs, the real part to
// one and the imaginary part to the other; an AXI-stream broadcaster does
// this in the reference system. Here each branch has its own output
// register and valid flag: an input beat is taken when both branches can
// take a new beat, and each branch then drains at its own pace, so one DNN
// may stall without the other losing data. tlast is copied to both.
//
// Timing: one register stage, a beat per cycle when neither branch stalls.
// The register-per-branch structure is this design's choice.
module axis_splitter
  import lcls_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_data,
  input  logic  s_last,
  output logic  re_valid,
  input  logic  re_ready,
  output data_t re_data,
  output logic  re_last,
  output logic  im_valid,
  input  logic  im_ready,
  output data_t im_data,
  output logic  im_last
);

  assign s_ready = (!re_valid || re_ready) && (!im_valid || im_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      re_valid <= 1'b0;
      im_valid <= 1'b0;
      re_data  <= '0;
      im_data  <= '0;
      re_last  <= 1'b0;
      im_last  <= 1'b0;
    end else if (s_valid && s_ready) begin
      re_valid <= 1'b1;
      im_valid <= 1'b1;
      re_data  <= s_data.re;
      im_data  <= s_data.im;
      re_last  <= s_last;
      im_last  <= s_last;
    end else begin
      if (re_ready) re_valid <= 1'b0;
      if (im_ready) im_valid <= 1'b0;
    end
  end

  a_re_hold: assert property (@(posedge clk) disable iff (!rst_n)
    re_valid && !re_ready |=> re_valid && $stable(re_data) && $stable(re_last));
  a_im_hold: assert property (@(posedge clk) disable iff (!rst_n)
    im_valid && !im_ready |=> im_valid && $stable(im_data) && $stable(im_last));

endmodule
