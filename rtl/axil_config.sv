// axil_config: AXI-Lite slave through which the processor configures the
// estimator.
//
// In the reference system the processor sets up each channel-estimation IP
// over AXI-Lite and the DNN parameters sit in the IP's internal memory.
// This slave turns every AXI-Lite write into one parameter write (p_wr)
// into the real or the imaginary DNN, and offers a status register for
// reading. No register map is published; this one is this design's own:
//
//   word address = byte address >> 2 = { comp, kind[2:0], row[6:0], col[6:0] }
//     comp  0: real-part DNN, 1: imaginary-part DNN
//     kind  lcls_pkg::pkind_e (0 hidden W, 1 hidden bias, 2 output W,
//           3 output bias, 4 mean, 5 std); 6 and 7 are not memories
//     row   PE index, col input index (weights only)
//   write data: bits 23:0 hold the value (<18,2> parameters in 17:0,
//           sign-extended; <24,8> mean and std in 23:0)
//   kind 7, any row/col: status, read-only, bit 0 = busy
//
// Writes need full words (WSTRB is not used). Reads of the write-only
// memories return 0. All responses are OKAY, so BRESP, RRESP and RDATA
// bits 31:1 are constant by design.
//
// Timing: a write is accepted in the cycle where AWVALID and WVALID are
// both high and no response is pending; p_wr.we pulses in the next cycle,
// together with BVALID. A read is accepted when no read data is pending;
// RVALID follows one cycle later. Reset is synchronous, active low.
module axil_config
  import lcls_pkg::*;
#(
  parameter int unsigned ADDR_W = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  input  logic              busy,
  output param_wr_t         p_wr
);

  localparam logic [2:0] KIND_STATUS = 3'd7;

  logic wr_go, rd_go;
  logic [17:0] wa, ra;

  assign wa = 18'(s_axil_awaddr >> 2);
  assign ra = 18'(s_axil_araddr >> 2);

  assign wr_go          = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign s_axil_bresp   = 2'b00;
  assign rd_go          = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_go;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_wr          <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      p_wr.we <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        p_wr.we       <= (wa[16:14] <= 3'(PK_STD));
        p_wr.comp     <= wa[17];
        p_wr.kind     <= pkind_e'(wa[16:14]);
        p_wr.row      <= wa[13:7];
        p_wr.col      <= wa[6:0];
        // <24,8> values use all 24 bits; <18,2> parameters are sign-extended
        // from bit 17 (the DNN uses only the low 18 bits).
        p_wr.data     <= data_t'(s_axil_wdata[23:0]);
      end else if (s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      if (rd_go) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= (ra[16:14] == KIND_STATUS) ? {31'b0, busy} : 32'b0;
      end else if (s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response stays offered until it is taken.
  a_bhold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
