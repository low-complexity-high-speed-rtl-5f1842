// tb_axis_combiner: checks the joining of the two DNN output streams.
//
// The real and imaginary streams are offered with independent random
// gaps, the output sees random back-pressure. Every output beat must hold
// the next real and the next imaginary value together, in order, and no
// input beat may be lost or taken twice.
module tb_axis_combiner;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic re_valid = 0, re_ready, re_last = 0, im_valid = 0, im_ready, im_last = 0;
  data_t re_data = '0, im_data = '0;
  logic m_valid, m_ready = 0, m_last;
  cplx_t m_data;
  axis_combiner dut (.*);

  longint vr[N], vi[N];
  bit tk_r, tk_i;  // a beat was taken at the last edge
  always @(posedge clk) begin
    tk_r <= re_valid && re_ready;
    tk_i <= im_valid && im_ready;
  end
  int ir = 0, ii = 0, got = 0;

  always @(posedge clk) if (rst_n) begin
    if (re_valid && re_ready) ir <= ir + 1;
    if (im_valid && im_ready) ii <= ii + 1;
    if (m_valid && m_ready) begin
      checks++;
      if (longint'(m_data.re) != vr[got] || longint'(m_data.im) != vi[got] ||
          m_last != (got % 13 == 12)) begin
        failures++;
        $display("FAIL beat %0d: %0d %0d exp %0d %0d", got, m_data.re, m_data.im, vr[got], vi[got]);
      end
      got <= got + 1;
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (vr[k]) begin vr[k] = rand_data(6); vi[k] = rand_data(6); end
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (got < N) begin
      @(negedge clk);
      // keep a beat offered until taken, then maybe idle
      if (ir < N && ((re_valid && !tk_r) || $urandom_range(0, 2) != 0)) begin
        re_valid = 1; re_data = data_t'(vr[ir]); re_last = (ir % 13 == 12);
      end else re_valid = 0;
      if (ii < N && ((im_valid && !tk_i) || $urandom_range(0, 2) != 0)) begin
        im_valid = 1; im_data = data_t'(vi[ii]); im_last = (ii % 13 == 12);
      end else im_valid = 0;
      m_ready = ($urandom_range(0, 3) != 0);
    end
    @(negedge clk);
    checks++;
    if (ir != N || ii != N) begin failures++; $display("FAIL consumed %0d %0d", ir, ii); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
