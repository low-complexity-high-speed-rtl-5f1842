// tb_normalizer: checks (x - mean) / std, including saturation and std = 0.
module tb_normalizer;
  import lcls_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  data_t x, m, s, y;
  normalizer dut (.in_data(x), .mean(m), .std_dev(s), .out_data(y));

  task automatic check(input longint xv, input longint mv, input longint sv);
    longint e;
    x = data_t'(xv); m = data_t'(mv); s = data_t'(sv);
    #1;
    e = ref_norm(xv, mv, sv);
    checks++;
    if (longint'(y) != e) begin
      failures++;
      $display("FAIL norm(%0d,%0d,%0d) = %0d expected %0d", xv, mv, sv, y, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(65536, 0, 65536);            // 1.0 -> 1.0
    check(3 * 65536, 65536, 32768);    // (3-1)/0.5 = 4.0
    check(DMAX, DMIN, 1);              // saturates high
    check(DMIN, DMAX, 1);              // saturates low
    check(12345, 0, 0);                // zero std gives 0
    repeat (1000) check(rand_data(3), rand_data(1), ($urandom_range(1, 4 * 65536)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
