// ls_estimator: least-square channel estimate of one subcarrier per beat.
//
// For every active subcarrier the input beat carries the two received long
// training symbols y1, y2 and the reference LTS value x. The two received
// symbols are averaged, y = (y1 + y2) / 2, and the estimate is H = y / x.
//
// LS_BPSK = 0 builds the general complex divider of the architecture
// figure: six real multiplications, three additions and two real
// divisions,
//   Re{H} = (x_r*y_r + x_i*y_i) / (x_r^2 + x_i^2)
//   Im{H} = (x_r*y_i - x_i*y_r) / (x_r^2 + x_i^2).
// LS_BPSK = 1 (default) uses the simplification the 802.11p preamble allows:
// the reference LTS is BPSK (+1 or -1), so H is y kept or negated, chosen
// by the sign of x_r, and the multipliers and dividers disappear.
//
// Averaging the two LTS follows the description of LS estimation; taking
// both symbols in one beat, and the average before the division, is this
// design's choice (the two orders are equal in exact arithmetic).
//
// Interface: AXI-stream style valid/ready in and out, with tlast passed
// along. One register stage: the estimate appears one cycle after the
// input handshake; throughput is one subcarrier per cycle. Reset is
// synchronous and active low.
module ls_estimator
  import lcls_pkg::*;
#(
  parameter bit LS_BPSK = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      s_valid,
  output logic      s_ready,
  input  lts_beat_t s_data,
  input  logic      s_last,
  output logic      m_valid,
  input  logic      m_ready,
  output cplx_t     m_data,
  output logic      m_last
);

  data_t y_r, y_i;
  cplx_t h;

  // Average of the two received LTS (one extra bit keeps the sum exact).
  always_comb begin
    logic signed [DW:0] sr, si;
    sr  = (DW+1)'(s_data.y1.re) + (DW+1)'(s_data.y2.re);
    si  = (DW+1)'(s_data.y1.im) + (DW+1)'(s_data.y2.im);
    y_r = data_t'(sr >>> 1);
    y_i = data_t'(si >>> 1);
  end

  generate
    if (LS_BPSK) begin : g_bpsk
      // Reference is +1 or -1 on the real axis: keep or negate.
      always_comb begin
        if (s_data.x.re[DW-1]) begin
          h.re = (y_r == DATA_MIN) ? DATA_MAX : -y_r;
          h.im = (y_i == DATA_MIN) ? DATA_MAX : -y_i;
        end else begin
          h.re = y_r;
          h.im = y_i;
        end
      end
    end else begin : g_div
      // Full complex division y / x.
      always_comb begin
        logic signed [2*DW-1:0] p_rr, p_ii, p_ri, p_ir, p_xr, p_xi;
        logic signed [2*DW+1:0] num_r, num_i, den;
        p_rr  = s_data.x.re * y_r;
        p_ii  = s_data.x.im * y_i;
        p_ri  = s_data.x.re * y_i;
        p_ir  = s_data.x.im * y_r;
        p_xr  = s_data.x.re * s_data.x.re;
        p_xi  = s_data.x.im * s_data.x.im;
        num_r = (2*DW+2)'(p_rr) + (2*DW+2)'(p_ii);
        num_i = (2*DW+2)'(p_ri) - (2*DW+2)'(p_ir);
        den   = (2*DW+2)'(p_xr) + (2*DW+2)'(p_xi);
        h.re  = fx_div(64'(num_r), 64'(den));
        h.im  = fx_div(64'(num_i), 64'(den));
      end
    end
  endgenerate

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
    end else if (s_ready) begin
      m_valid <= s_valid;
      if (s_valid) begin
        m_data <= h;
        m_last <= s_last;
      end
    end
  end

  // AXI-stream rule: a beat that is offered stays offered, unchanged.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));

endmodule
