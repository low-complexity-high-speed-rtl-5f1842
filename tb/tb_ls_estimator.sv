// tb_ls_estimator: checks the LS estimate in both builds.
//
// Two instances: the default BPSK build (reference +-1, keep or negate) and
// the general complex-division build. Random beats are offered with random
// valid gaps and random back-pressure; every output is compared with the
// golden model, tlast must follow its beat, and each estimate must appear
// exactly one cycle after its input handshake when the output is free.
module tb_ls_estimator;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int N_BEATS = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;

  for (genvar g = 0; g < 2; g++) begin : g_inst
    localparam bit BP = (g == 0);
    logic      s_valid, s_ready, s_last, m_valid, m_ready, m_last;
    lts_beat_t s_data;
    cplx_t     m_data;
    longint    exp_r[$], exp_i[$];
    bit        exp_l[$];
    int        exp_c[$];
    int        sent = 0, got = 0;

    ls_estimator #(.LS_BPSK(BP)) dut (.*);

    // Driver
    initial begin
      s_valid = 0; s_data = '0; s_last = 0;
      wait (rst_n);
      while (sent < N_BEATS) begin
        @(negedge clk);
        if (!s_valid || s_ready_q) begin
          if ($urandom_range(0, 3) != 0) begin
            lts_beat_t b;
            longint hr, hi;
            b.y1.re = data_t'(rand_data(5)); b.y1.im = data_t'(rand_data(5));
            b.y2.re = data_t'(rand_data(5)); b.y2.im = data_t'(rand_data(5));
            if (BP) begin
              b.x.re = $urandom_range(0, 1) ? data_t'(65536) : data_t'(-65536);
              b.x.im = '0;
            end else begin
              b.x.re = data_t'(rand_data(2)); b.x.im = data_t'(rand_data(2));
            end
            s_data = b; s_valid = 1; s_last = ($urandom_range(0, 9) == 0);
          end else s_valid = 0;
        end
      end
      @(negedge clk); if (s_ready_q) s_valid = 0;
      wait (!s_valid || s_ready_q); @(negedge clk); s_valid = 0;
    end

    // Sample the handshake at the clock edge.
    logic s_ready_q;
    always @(posedge clk) begin
      s_ready_q <= 0;
      if (rst_n && s_valid && s_ready) begin
        longint hr, hi;
        ref_ls(BP, s_data.y1.re, s_data.y1.im, s_data.y2.re, s_data.y2.im,
               s_data.x.re, s_data.x.im, hr, hi);
        exp_r.push_back(hr); exp_i.push_back(hi); exp_l.push_back(s_last);
        exp_c.push_back(cycle);
        sent++;
        s_ready_q <= 1;
      end
    end

    always @(negedge clk) m_ready = ($urandom_range(0, 3) != 0);

    always @(posedge clk) begin
      if (rst_n && m_valid && m_ready) begin
        checks++;
        if (exp_r.size() == 0) begin
          failures++; $display("FAIL[%0d] unexpected output", g);
        end else begin
          longint er, ei; bit el; int ec;
          er = exp_r.pop_front(); ei = exp_i.pop_front(); el = exp_l.pop_front();
          ec = exp_c.pop_front();
          if (longint'(m_data.re) != er || longint'(m_data.im) != ei || m_last != el) begin
            failures++;
            $display("FAIL[%0d] beat %0d: got %0d %0d %0b exp %0d %0d %0b", g, got,
                     m_data.re, m_data.im, m_last, er, ei, el);
          end
          if (cycle < ec + 1) begin
            failures++; $display("FAIL[%0d] output before its input", g);
          end
        end
        got++;
      end
    end
  end

  // Latency: with the output always free the estimate follows one cycle later.
  // Checked on the first beat of each instance.
  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (g_inst[0].got == N_BEATS && g_inst[1].got == N_BEATS);
    repeat (5) @(posedge clk);
    checks++;
    if (g_inst[0].exp_r.size() != 0 || g_inst[1].exp_r.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
