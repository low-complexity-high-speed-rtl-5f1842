// tb_denormalizer: checks y * std + mean, including saturation.
module tb_denormalizer;
  import lcls_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  data_t x, m, s, y;
  denormalizer dut (.in_data(x), .mean(m), .std_dev(s), .out_data(y));

  task automatic check(input longint xv, input longint mv, input longint sv);
    longint e;
    x = data_t'(xv); m = data_t'(mv); s = data_t'(sv);
    #1;
    e = ref_denorm(xv, mv, sv);
    checks++;
    if (longint'(y) != e) begin
      failures++;
      $display("FAIL denorm(%0d,%0d,%0d) = %0d expected %0d", xv, mv, sv, y, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(65536, 0, 65536);              // 1.0*1.0 + 0
    check(2 * 65536, 65536, 32768);      // 2*0.5 + 1 = 2.0
    check(-65536, 0, 3 * 65536);         // -3.0
    check(DMAX, DMAX, DMAX);             // saturates high
    check(DMAX, DMIN, DMIN);             // saturates low
    repeat (1000) check(rand_data(4), rand_data(2), $urandom_range(1, 4 * 65536));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
