// tb_relu_unit: checks ReLU on edge values and random values.
module tb_relu_unit;
  import lcls_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  data_t a, y;
  relu_unit dut (.in_data(a), .out_data(y));

  task automatic check(input longint v);
    a = data_t'(v);
    #1;
    checks++;
    if (longint'(y) != ref_relu(v)) begin
      failures++;
      $display("FAIL relu(%0d) = %0d", v, y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(1); check(-1); check(DMAX); check(DMIN);
    repeat (500) check(rand_data(7));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
