// tb_lc_dnn: checks one DNN (normalize, 52-26-52 network, de-normalize).
//
// Random weights, biases, mean and standard deviation are written through
// the parameter port (with writes for the other DNN that must be ignored),
// then frames of 52 values are streamed in and the 52 outputs compared
// with the golden model. The first frame runs without stalls and its
// duration, first input beat to last output beat, must be 3K + K/2 + 6
// cycles. Later frames have random input gaps and output back-pressure.
module tb_lc_dnn;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int K = K_ON;
  localparam int H = K / 2;
  localparam int FRAMES = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;

  param_wr_t p_wr = '0;
  logic s_valid = 0, s_ready, s_last = 0, m_valid, m_ready = 0, m_last, busy;
  data_t s_data = '0, m_data;
  lc_dnn #(.K(K), .COMP(1'b1)) dut (.*);

  longint W1[H][K], B1[H], W2[K][H], B2[K], MEAN, SD;
  longint xin[FRAMES][K], yexp[FRAMES][K];
  int relu_zeros = 0;

  task automatic wr(input bit comp, input pkind_e kind, input int row, input int col,
                    input longint v);
    @(negedge clk);
    p_wr.we = 1; p_wr.comp = comp; p_wr.kind = kind;
    p_wr.row = 7'(row); p_wr.col = 7'(col); p_wr.data = data_t'(v);
    @(negedge clk);
    p_wr = '0;
  endtask

  function automatic void model(input int f);
    longint xn[], h[], w[], a[];
    xn = new[K]; h = new[H]; a = new[H];
    for (int i = 0; i < K; i++) xn[i] = ref_norm(xin[f][i], MEAN, SD);
    for (int j = 0; j < H; j++) begin
      w = new[K];
      for (int i = 0; i < K; i++) w[i] = W1[j][i];
      h[j] = ref_pe(xn, w, B1[j]);
      a[j] = ref_relu(h[j]);
      if (h[j] <= 0) relu_zeros++;
    end
    for (int o = 0; o < K; o++) begin
      w = new[H];
      for (int j = 0; j < H; j++) w[j] = W2[o][j];
      yexp[f][o] = ref_denorm(ref_pe(a, w, B2[o]), MEAN, SD);
    end
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int first_in = -1, last_out = -1, got = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready && first_in < 0) first_in = cycle;
    if (m_valid && m_ready) begin
      int f, o;
      f = got / K; o = got % K;
      checks++;
      if (longint'(m_data) != yexp[f][o] || m_last != (o == K - 1)) begin
        failures++;
        $display("FAIL frame %0d out %0d: %0d exp %0d last %0b", f, o, m_data, yexp[f][o], m_last);
      end
      if (got == K - 1) last_out = cycle;
      got++;
    end
  end

  always @(negedge clk) m_ready = (got < K) || ($urandom_range(0, 2) != 0);

  initial begin
    MEAN = rand_data(0); SD = $urandom_range(32768, 2 * 65536);
    for (int j = 0; j < H; j++) begin
      for (int i = 0; i < K; i++) W1[j][i] = rand_param(3);
      B1[j] = rand_param(2);
    end
    for (int o = 0; o < K; o++) begin
      for (int j = 0; j < H; j++) W2[o][j] = rand_param(2);
      B2[o] = rand_param(2);
    end
    for (int f = 0; f < FRAMES; f++) for (int i = 0; i < K; i++) xin[f][i] = rand_data(2);
    for (int f = 0; f < FRAMES; f++) model(f);

    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(1, PK_MEAN, 0, 0, MEAN);
    wr(1, PK_STD, 0, 0, SD);
    wr(0, PK_STD, 0, 0, 3);               // other DNN: ignored
    for (int j = 0; j < H; j++) begin
      for (int i = 0; i < K; i++) wr(1, PK_HID_W, j, i, W1[j][i]);
      wr(1, PK_HID_B, j, 0, B1[j]);
      wr(0, PK_HID_B, j, 0, 0);           // other DNN: ignored
    end
    for (int o = 0; o < K; o++) begin
      for (int j = 0; j < H; j++) wr(1, PK_OUT_W, o, j, W2[o][j]);
      wr(1, PK_OUT_B, o, 0, B2[o]);
    end
    wr(1, PK_HID_W, H, 0, 12345);         // row out of range: ignored

    for (int f = 0; f < FRAMES; f++) begin
      for (int i = 0; i < K; i++) begin
        @(negedge clk);
        while (f > 0 && $urandom_range(0, 3) == 0) begin s_valid = 0; @(negedge clk); end
        s_valid = 1; s_data = data_t'(xin[f][i]); s_last = (i == K - 1);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
      @(negedge clk); s_valid = 0;
    end
    wait (got == FRAMES * K);
    repeat (3) @(negedge clk);
    checks++;
    if (last_out - first_in + 1 != 3 * K + H + 6) begin
      failures++; $display("FAIL frame time %0d cycles, expected %0d", last_out - first_in + 1, 3 * K + H + 6);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after the last frame"); end
    $display("COUNT relu_zeroed=%0d frame_cycles=%0d", relu_zeros, last_out - first_in + 1);
    checks++;
    if (relu_zeros == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
