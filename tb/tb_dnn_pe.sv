// tb_dnn_pe: checks one PE at its default size (52 inputs).
//
// Loads random weights and a bias, holds pe_en for N_IN cycles and checks
// that out_valid pulses in the cycle after the output register loads,
// one edge after the last MAC edge, with
// sum(x*w) + b, and that out_data holds between runs. Repeated with new
// inputs and parameters, including a run that saturates.
module tb_dnn_pe;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = K_ON;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pe_en = 0, w_we = 0, b_we = 0, out_valid;
  data_t in_vec [N];
  logic [$clog2(N)-1:0] w_addr = '0;
  param_t w_data = '0, b_data = '0;
  data_t out_data;

  dnn_pe #(.N_IN(N)) dut (.*);

  longint xs[], ws[], bs;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xs = new[N]; ws = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      longint e, held;
      int shift;
      shift = (run == 19) ? 0 : 4;
      // parameters
      for (int i = 0; i < N; i++) begin
        ws[i] = rand_param(shift);
        @(negedge clk); w_we = 1; w_addr = i[$clog2(N)-1:0]; w_data = param_t'(ws[i]);
      end
      bs = rand_param(0);
      @(negedge clk); w_we = 0; b_we = 1; b_data = param_t'(bs);
      @(negedge clk); b_we = 0;
      for (int i = 0; i < N; i++) begin
        xs[i] = (run == 19) ? DMAX : rand_data(3);
        in_vec[i] = data_t'(xs[i]);
      end
      if (run == 19) for (int i = 0; i < N; i++) begin
        ws[i] = 131071;
        @(negedge clk); w_we = 1; w_addr = i[$clog2(N)-1:0]; w_data = param_t'(ws[i]);
        @(negedge clk); w_we = 0;
      end
      e = ref_pe(xs, ws, bs);
      held = longint'(out_data);
      // run: pe_en high N cycles
      @(negedge clk); pe_en = 1;
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        checks++;
        if (out_valid || longint'(out_data) != held) begin
          failures++; $display("FAIL run %0d: output changed during MAC cycle %0d", run, c);
        end
      end
      pe_en = 0;
      // The sum was complete at the last MAC edge; bias add and output
      // register take the next edge.
      checks++;
      if (out_valid) begin failures++; $display("FAIL run %0d: out_valid early", run); end
      @(negedge clk);
      checks++;
      if (!out_valid || longint'(out_data) != e) begin
        failures++;
        $display("FAIL run %0d: valid=%0b out=%0d exp=%0d", run, out_valid, out_data, e);
      end
      @(negedge clk);
      checks++;
      if (out_valid || longint'(out_data) != e) begin
        failures++; $display("FAIL run %0d: output not held", run);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
