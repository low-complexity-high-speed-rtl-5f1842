// tb_axis_splitter: checks that every complex beat reaches both branches.
//
// Random input valid and independent random back-pressure on the real and
// imaginary outputs. Each branch must deliver the real (imaginary) part of
// every input beat, in order, with its tlast, and no beat twice. With both
// outputs always ready the splitter must pass one beat per cycle.
module tb_axis_splitter;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_valid = 0, s_ready, s_last = 0;
  cplx_t s_data = '0;
  logic re_valid, re_ready = 0, re_last, im_valid, im_ready = 0, im_last;
  data_t re_data, im_data;
  axis_splitter dut (.*);

  longint qr[$], qi[$];
  bit ql_r[$], ql_i[$];
  int sent = 0, got_r = 0, got_i = 0, full_rate = 0;
  bit fast = 0;

  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) begin
      qr.push_back(longint'(s_data.re)); qi.push_back(longint'(s_data.im));
      ql_r.push_back(s_last); ql_i.push_back(s_last); sent++;
      if (fast) full_rate++;
    end
    if (re_valid && re_ready) begin
      checks++; got_r++;
      if (qr.size() == 0 || longint'(re_data) != qr[0] || re_last != ql_r[0]) begin
        failures++; $display("FAIL real beat %0d", got_r);
      end
      if (qr.size() != 0) begin void'(qr.pop_front()); void'(ql_r.pop_front()); end
    end
    if (im_valid && im_ready) begin
      checks++; got_i++;
      if (qi.size() == 0 || longint'(im_data) != qi[0] || im_last != ql_i[0]) begin
        failures++; $display("FAIL imag beat %0d", got_i);
      end
      if (qi.size() != 0) begin void'(qi.pop_front()); void'(ql_i.pop_front()); end
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    while (sent < N) begin
      @(negedge clk);
      re_ready = fast || ($urandom_range(0, 2) != 0);
      im_ready = fast || ($urandom_range(0, 2) != 0);
      if (sent >= N - 100) fast = 1;
      // new beat when the previous one was taken (or none offered)
      if (!s_valid || taken) begin
        s_valid = fast || ($urandom_range(0, 3) != 0);
        s_data.re = data_t'(rand_data(6)); s_data.im = data_t'(rand_data(6));
        s_last = ($urandom_range(0, 7) == 0);
      end
    end
    @(negedge clk); s_valid = 0; re_ready = 1; im_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (got_r != sent || got_i != sent) begin
      failures++; $display("FAIL sent %0d got %0d/%0d", sent, got_r, got_i);
    end
    checks++;
    if (full_rate < 95) begin failures++; $display("FAIL full rate beats %0d", full_rate); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit taken;
  always @(posedge clk) taken <= s_valid && s_ready;
endmodule
