// tb_lc_lsdnn_top: end-to-end test of the LC-LSDNN estimator at its
// default size (52 active subcarriers, 52-26-52 networks, BPSK LS).
//
// The testbench plays the DMA and the processor. Over AXI-Lite it writes
// separate random parameter sets into the real and the imaginary DNN
// (with random BREADY delays) and reads the status register while a frame
// is inside and at the end. Then it sends frames:
// each is the IEEE 802.11 long training sequence (+-1 on the 52 active
// subcarriers) through a random channel, two received copies with
// independent noise. The complex estimates coming out are compared beat by
// beat with the golden model: LS on the averaged LTS, then each part
// through its own normalize -> DNN -> de-normalize chain.
//
// The first frame runs without stalls; it must take 3K + K/2 + 8 cycles
// from its first input beat to its last output beat (190 for K = 52).
// Later frames see random input gaps and output back-pressure. Counted and
// required at least once: LS keep and LS negate (reference +1 / -1), ReLU
// clipping in each DNN, input back-pressure (tvalid while not tready),
// output back-pressure, and a frame offered while the previous one is
// still inside.
module tb_lc_lsdnn_top;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int K = K_ON;
  localparam int H = K / 2;
  localparam int FRAMES = 6;

  // 802.11a/p long training sequence on subcarriers -26..-1, 1..26.
  localparam bit [51:0] LTS_POS = 52'b1100110101111110011010111110011010100000110010101111;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;   // 200 MHz
  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle++;

  logic [19:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0;
  logic        s_axil_arvalid = 0, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = '0;
  logic [3:0]  s_axil_wstrb = 4'hF;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [31:0] s_axil_rdata;
  logic      s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  lts_beat_t s_axis_tdata = '0;
  logic      m_axis_tvalid, m_axis_tready = 0, m_axis_tlast, busy;
  cplx_t     m_axis_tdata;

  lc_lsdnn_top dut (.*);

  longint W1[2][H][K], B1[2][H], W2[2][K][H], B2[2][K], MEAN[2], SD[2];
  lts_beat_t beats[FRAMES][K];
  longint er[FRAMES][K], ei[FRAMES][K];

  int n_keep = 0, n_neg = 0, n_relu[2] = '{0, 0}, n_in_stall = 0, n_out_stall = 0;
  int n_overlap = 0;

  // AXI-Lite write of one parameter: word address {comp, kind, row, col}.
  int n_axil_wr = 0, n_axil_rd_busy = 0, n_axil_rd_idle = 0;
  task automatic wr(input bit comp, input pkind_e kind, input int row, input int col,
                    input longint v);
    @(negedge clk);
    s_axil_awaddr  = {comp, 3'(kind), 7'(row), 7'(col), 2'b00};
    s_axil_wdata   = 32'(v);
    s_axil_awvalid = 1; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk); s_axil_awvalid = 0; s_axil_wvalid = 0;
    s_axil_bready = ($urandom_range(0, 1) == 0);
    while (!s_axil_bvalid) @(negedge clk);
    if (!s_axil_bready) begin @(negedge clk); s_axil_bready = 1; end
    checks++;
    if (s_axil_bresp != 2'b00) begin failures++; $display("FAIL AXI-Lite BRESP"); end
    @(posedge clk); #0.1;
    s_axil_bready = 0;
    n_axil_wr++;
  endtask

  // AXI-Lite read of the status register (kind 7): bit 0 = busy.
  task automatic rd_status(output logic [31:0] v);
    @(negedge clk);
    s_axil_araddr = {1'b0, 3'd7, 14'd0, 2'b00};
    s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk); s_axil_arvalid = 0; s_axil_rready = 1;
    while (!s_axil_rvalid) @(negedge clk);
    v = s_axil_rdata;
    @(negedge clk); s_axil_rready = 0;
  endtask

  // Golden model of one part (c = 0 real, 1 imaginary) of one frame.
  function automatic void dnn_model(input int c, input longint ls[], output longint y[]);
    longint xn[], a[], w[];
    xn = new[K]; a = new[H]; y = new[K];
    for (int i = 0; i < K; i++) xn[i] = ref_norm(ls[i], MEAN[c], SD[c]);
    for (int j = 0; j < H; j++) begin
      longint h;
      w = new[K];
      for (int i = 0; i < K; i++) w[i] = W1[c][j][i];
      h = ref_pe(xn, w, B1[c][j]);
      if (h <= 0) n_relu[c]++;
      a[j] = ref_relu(h);
    end
    for (int o = 0; o < K; o++) begin
      w = new[H];
      for (int j = 0; j < H; j++) w[j] = W2[c][o][j];
      y[o] = ref_denorm(ref_pe(a, w, B2[c][o]), MEAN[c], SD[c]);
    end
  endfunction

  function automatic void make_frame(input int f);
    longint lr[], li[], yr[], yi[];
    lr = new[K]; li = new[K];
    for (int k = 0; k < K; k++) begin
      longint hr, hi, xr, nr1, ni1, nr2, ni2;
      lts_beat_t b;
      hr = rand_data(0); hi = rand_data(0);          // channel gain, |.| < 1
      xr = LTS_POS[51 - k] ? 65536 : -65536;
      nr1 = rand_data(0) >>> 3; ni1 = rand_data(0) >>> 3;
      nr2 = rand_data(0) >>> 3; ni2 = rand_data(0) >>> 3;
      b.x.re  = data_t'(xr); b.x.im = '0;
      b.y1.re = data_t'(((hr * xr) >>> 16) + nr1); b.y1.im = data_t'(((hi * xr) >>> 16) + ni1);
      b.y2.re = data_t'(((hr * xr) >>> 16) + nr2); b.y2.im = data_t'(((hi * xr) >>> 16) + ni2);
      beats[f][k] = b;
      if (xr < 0) n_neg++; else n_keep++;
      ref_ls(1'b1, b.y1.re, b.y1.im, b.y2.re, b.y2.im, b.x.re, b.x.im, lr[k], li[k]);
    end
    dnn_model(0, lr, yr);
    dnn_model(1, li, yi);
    for (int k = 0; k < K; k++) begin er[f][k] = yr[k]; ei[f][k] = yi[k]; end
  endfunction

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard and event counters.
  int first_in = -1, last_out = -1, got = 0, sent = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_axis_tvalid && !s_axis_tready) n_in_stall++;
    if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
    if (s_axis_tvalid && s_axis_tready) begin
      if (first_in < 0) first_in = cycle;
      if (busy && sent % K == 0 && sent > 0) n_overlap++;
      sent++;
    end
    if (m_axis_tvalid && m_axis_tready) begin
      int f, o;
      f = got / K; o = got % K;
      checks++;
      if (longint'(m_axis_tdata.re) != er[f][o] || longint'(m_axis_tdata.im) != ei[f][o] ||
          m_axis_tlast != (o == K - 1)) begin
        failures++;
        $display("FAIL frame %0d sc %0d: (%0d,%0d) exp (%0d,%0d) last %0b", f, o,
                 m_axis_tdata.re, m_axis_tdata.im, er[f][o], ei[f][o], m_axis_tlast);
      end
      if (got == K - 1) last_out = cycle;
      got++;
    end
  end

  always @(negedge clk) m_axis_tready = (got < K) || ($urandom_range(0, 2) != 0);

  initial begin
    for (int c = 0; c < 2; c++) begin
      MEAN[c] = rand_data(0) >>> 4; SD[c] = $urandom_range(16384, 65536);
      for (int j = 0; j < H; j++) begin
        for (int i = 0; i < K; i++) W1[c][j][i] = rand_param(3);
        B1[c][j] = rand_param(3);
      end
      for (int o = 0; o < K; o++) begin
        for (int j = 0; j < H; j++) W2[c][o][j] = rand_param(3);
        B2[c][o] = rand_param(4);
      end
    end
    for (int f = 0; f < FRAMES; f++) make_frame(f);

    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++) begin
      wr(c[0], PK_MEAN, 0, 0, MEAN[c]);
      wr(c[0], PK_STD, 0, 0, SD[c]);
      for (int j = 0; j < H; j++) begin
        for (int i = 0; i < K; i++) wr(c[0], PK_HID_W, j, i, W1[c][j][i]);
        wr(c[0], PK_HID_B, j, 0, B1[c][j]);
      end
      for (int o = 0; o < K; o++) begin
        for (int j = 0; j < H; j++) wr(c[0], PK_OUT_W, o, j, W2[c][o][j]);
        wr(c[0], PK_OUT_B, o, 0, B2[c][o]);
      end
    end

    for (int f = 0; f < FRAMES; f++) begin
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        while (f > 0 && $urandom_range(0, 4) == 0) begin s_axis_tvalid = 0; @(negedge clk); end
        s_axis_tvalid = 1; s_axis_tdata = beats[f][k]; s_axis_tlast = (k == K - 1);
        do @(posedge clk); while (!s_axis_tready);
      end
      @(negedge clk); s_axis_tvalid = 0;
      // The first frame is timed alone; later frames follow at once.
      if (f == 0) begin
        logic [31:0] st;
        rd_status(st);             // frame 0 is inside the DNNs now
        checks++;
        if (st !== 32'd1) begin failures++; $display("FAIL status while busy: %h", st); end
        else n_axil_rd_busy++;
        wait (got == K);
      end
    end
    wait (got == FRAMES * K);
    repeat (4) @(negedge clk);

    checks++;
    if (last_out - first_in + 1 != 3 * K + H + 8) begin
      failures++;
      $display("FAIL frame time %0d cycles, expected %0d", last_out - first_in + 1, 3 * K + H + 8);
    end
    checks++;
    if (busy || m_axis_tvalid) begin failures++; $display("FAIL not idle at the end"); end
    begin
      logic [31:0] st;
      rd_status(st);
      checks++;
      if (st !== 32'd0) begin failures++; $display("FAIL status when idle: %h", st); end
      else n_axil_rd_idle++;
    end
    $display("COUNT axil_writes=%0d status_busy=%0d status_idle=%0d", n_axil_wr, n_axil_rd_busy, n_axil_rd_idle);
    $display("COUNT frames=%0d frame_cycles=%0d ls_keep=%0d ls_negate=%0d relu_re=%0d relu_im=%0d in_stall=%0d out_stall=%0d overlap=%0d",
             got / K, last_out - first_in + 1, n_keep, n_neg, n_relu[0], n_relu[1],
             n_in_stall, n_out_stall, n_overlap);
    checks += 7;
    if (n_keep == 0)      begin failures++; $display("FAIL LS keep never seen"); end
    if (n_neg == 0)       begin failures++; $display("FAIL LS negate never seen"); end
    if (n_relu[0] == 0)   begin failures++; $display("FAIL real ReLU never clipped"); end
    if (n_relu[1] == 0)   begin failures++; $display("FAIL imag ReLU never clipped"); end
    if (n_in_stall == 0)  begin failures++; $display("FAIL no input back-pressure"); end
    if (n_out_stall == 0) begin failures++; $display("FAIL no output back-pressure"); end
    if (n_overlap == 0)   begin failures++; $display("FAIL no frame offered while busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
