// lc_lsdnn_top: LC-LSDNN channel-estimation accelerator.
//
// Estimates the channel of the K active subcarriers of an IEEE 802.11p
// frame from its two long training symbols (LTS). The chain is the one of
// the LC-LSDNN subsystem:
//
//   s_axis -> ls_estimator -> axis_splitter -+-> lc_dnn (real) -+-> axis_combiner -> m_axis
//                                            +-> lc_dnn (imag) -+
//   s_axil -> axil_config -> parameter memories of both lc_dnn
//
// ls_estimator forms the least-square estimate y/x of each subcarrier,
// averaged over the two LTS; the splitter sends its real part to one DNN
// and its imaginary part to the other; each DNN normalizes, runs its
// K -> K/2 -> K network and de-normalizes; the combiner rejoins the two
// parts into the refined complex estimate.
//
// Interface: s_axis takes one subcarrier per beat (lts_beat_t: y1, y2 and
// the reference x, <24,8> each), K beats per frame with tlast on the last.
// m_axis returns K complex <24,8> estimates per frame, tlast on the last.
// In the reference system both streams connect to an AXI DMA. s_axil is
// the AXI-Lite configuration port: it writes the weights, biases, mean and
// standard deviation of either DNN and reads a busy flag (register map in
// axil_config). busy is also a plain output, high while a frame is inside.
//
// Timing: without back-pressure one frame takes about 3K + K/2 + 8 cycles
// from its first input beat to its last output beat (188 + 2 for K = 52);
// see lc_dnn for the phases.
module lc_lsdnn_top
  import lcls_pkg::*;
#(
  parameter int unsigned K       = K_ON,
  parameter bit          LS_BPSK = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  // AXI-Lite configuration
  input  logic [19:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [19:0] s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI-stream data path
  input  logic      s_axis_tvalid,
  output logic      s_axis_tready,
  input  lts_beat_t s_axis_tdata,
  input  logic      s_axis_tlast,
  output logic      m_axis_tvalid,
  input  logic      m_axis_tready,
  output cplx_t     m_axis_tdata,
  output logic      m_axis_tlast,
  output logic      busy
);

  logic  ls_valid, ls_ready, ls_last;
  cplx_t ls_data;
  logic  sr_valid, sr_ready, sr_last, si_valid, si_ready, si_last;
  data_t sr_data, si_data;
  logic  dr_valid, dr_ready, dr_last, di_valid, di_ready, di_last;
  data_t dr_data, di_data;
  logic  busy_r, busy_i;
  param_wr_t p_wr;

  axil_config #(.ADDR_W(20)) u_cfg (
    .clk(clk), .rst_n(rst_n),
    .s_axil_awaddr(s_axil_awaddr), .s_axil_awvalid(s_axil_awvalid), .s_axil_awready(s_axil_awready),
    .s_axil_wdata(s_axil_wdata), .s_axil_wstrb(s_axil_wstrb), .s_axil_wvalid(s_axil_wvalid),
    .s_axil_wready(s_axil_wready), .s_axil_bresp(s_axil_bresp), .s_axil_bvalid(s_axil_bvalid),
    .s_axil_bready(s_axil_bready), .s_axil_araddr(s_axil_araddr), .s_axil_arvalid(s_axil_arvalid),
    .s_axil_arready(s_axil_arready), .s_axil_rdata(s_axil_rdata), .s_axil_rresp(s_axil_rresp),
    .s_axil_rvalid(s_axil_rvalid), .s_axil_rready(s_axil_rready),
    .busy(busy), .p_wr(p_wr));

  ls_estimator #(.LS_BPSK(LS_BPSK)) u_ls (
    .clk(clk), .rst_n(rst_n),
    .s_valid(s_axis_tvalid), .s_ready(s_axis_tready),
    .s_data(s_axis_tdata), .s_last(s_axis_tlast),
    .m_valid(ls_valid), .m_ready(ls_ready), .m_data(ls_data), .m_last(ls_last));

  axis_splitter u_split (
    .clk(clk), .rst_n(rst_n),
    .s_valid(ls_valid), .s_ready(ls_ready), .s_data(ls_data), .s_last(ls_last),
    .re_valid(sr_valid), .re_ready(sr_ready), .re_data(sr_data), .re_last(sr_last),
    .im_valid(si_valid), .im_ready(si_ready), .im_data(si_data), .im_last(si_last));

  lc_dnn #(.K(K), .COMP(1'b0)) u_dnn_re (
    .clk(clk), .rst_n(rst_n), .p_wr(p_wr),
    .s_valid(sr_valid), .s_ready(sr_ready), .s_data(sr_data), .s_last(sr_last),
    .m_valid(dr_valid), .m_ready(dr_ready), .m_data(dr_data), .m_last(dr_last),
    .busy(busy_r));

  lc_dnn #(.K(K), .COMP(1'b1)) u_dnn_im (
    .clk(clk), .rst_n(rst_n), .p_wr(p_wr),
    .s_valid(si_valid), .s_ready(si_ready), .s_data(si_data), .s_last(si_last),
    .m_valid(di_valid), .m_ready(di_ready), .m_data(di_data), .m_last(di_last),
    .busy(busy_i));

  axis_combiner u_comb (
    .clk(clk), .rst_n(rst_n),
    .re_valid(dr_valid), .re_ready(dr_ready), .re_data(dr_data), .re_last(dr_last),
    .im_valid(di_valid), .im_ready(di_ready), .im_data(di_data), .im_last(di_last),
    .m_valid(m_axis_tvalid), .m_ready(m_axis_tready), .m_data(m_axis_tdata),
    .m_last(m_axis_tlast));

  assign busy = busy_r || busy_i || ls_valid || sr_valid || si_valid;

endmodule
