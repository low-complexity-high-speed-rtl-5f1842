// tb_dnn_layer: checks a 52 -> 26 fully connected layer (hidden-layer size).
//
// Writes a random weight matrix and biases through the row/col port, then
// runs several input vectors. Checks every output against the golden model,
// that `done` comes exactly N_IN + 2 cycles after `start`, that busy covers
// the run, and that a start while busy is ignored.
module tb_dnn_layer;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = K_ON;
  localparam int NO = K_ON / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, w_we = 0, b_we = 0, done, busy;
  data_t in_vec [NI];
  data_t out_vec [NO];
  logic [$clog2(NO)-1:0] w_row = '0;
  logic [$clog2(NI)-1:0] w_col = '0;
  param_t w_data = '0;

  dnn_layer #(.N_IN(NI), .N_OUT(NO)) dut (.*);

  longint W[NO][NI], B[NO], xs[];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xs = new[NI];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NO; r++) begin
      for (int c = 0; c < NI; c++) begin
        W[r][c] = rand_param(3);
        @(negedge clk); w_we = 1; w_row = r[$clog2(NO)-1:0]; w_col = c[$clog2(NI)-1:0];
        w_data = param_t'(W[r][c]);
      end
      B[r] = rand_param(0);
      @(negedge clk); w_we = 0; b_we = 1; w_data = param_t'(B[r]);
      @(negedge clk); b_we = 0;
    end
    for (int run = 0; run < 8; run++) begin
      int lat;
      for (int i = 0; i < NI; i++) begin xs[i] = rand_data(3); in_vec[i] = data_t'(xs[i]); end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      // a second start while busy must be ignored
      if (run == 3) begin start = 1; @(negedge clk); start = 0; lat++; end
      while (!done && lat < 4 * NI) begin
        checks++;
        if (!busy) begin failures++; $display("FAIL run %0d: not busy at %0d", run, lat); end
        @(negedge clk); lat++;
      end
      checks++;
      if (lat != NI + 2) begin failures++; $display("FAIL run %0d: latency %0d", run, lat); end
      for (int r = 0; r < NO; r++) begin
        longint e;
        longint wr[];
        wr = new[NI];
        for (int c = 0; c < NI; c++) wr[c] = W[r][c];
        e = ref_pe(xs, wr, B[r]);
        checks++;
        if (longint'(out_vec[r]) != e) begin
          failures++; $display("FAIL run %0d PE %0d: %0d exp %0d", run, r, out_vec[r], e);
        end
      end
      @(negedge clk);
      checks++;
      if (done || busy) begin failures++; $display("FAIL run %0d: done/busy after run", run); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
