// tb_lc_lsdnn_channels: the estimator on frequency-selective channels at
// several SNRs, at its default size.
//
// The frames are built like a receiver would see them. The 802.11 LTS
// (+-1 on the 52 active subcarriers) is sent twice through a tapped-delay-
// line channel; the channel's frequency response on subcarrier k is
// H[k] = sum_l g_l exp(-j 2 pi k d_l / 64); and complex Gaussian noise is
// added at a given SNR. Three delay profiles of increasing delay spread (an
// illustrative choice, not the standard vehicular tables) are each run at
// 10, 20 and 30 dB.
//
// Two things are checked:
//  * every DUT output beat bit-exactly against the golden model (random
//    network parameters, since trained ones are not available);
//  * the LS stage inside the DUT against the true channel. Averaging two
//    LTS halves the noise, so its NMSE must be close to 1 / (2 SNR); the
//    check asks for a factor of 2 on either side.
module tb_lc_lsdnn_channels;
  import lcls_pkg::*;
  import tb_ref_pkg::*;

  localparam int K = K_ON;
  localparam int H = K / 2;
  localparam int NPROF = 3;
  localparam int NSNR = 3;
  localparam int FPER = 12;          // frames per (profile, SNR)
  localparam int FRAMES = NPROF * NSNR * FPER;
  localparam real PI = 3.14159265358979;
  localparam bit [51:0] LTS_POS = 52'b1100110101111110011010111110011010100000110010101111;

  // delay profiles: tap delays in samples and relative powers (dB)
  localparam int   NTAP = 4;
  localparam int   DLY [NPROF][NTAP] = '{'{0, 1, 2, 3}, '{0, 2, 4, 7}, '{0, 3, 8, 14}};
  localparam real  PDB [NPROF][NTAP] = '{'{0.0, -6.0, -12.0, -18.0},
                                         '{0.0, -3.0, -8.0, -14.0},
                                         '{0.0, -2.0, -5.0, -10.0}};
  localparam real  SNR_DB [NSNR] = '{10.0, 20.0, 30.0};

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [19:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 1;
  logic        s_axil_arvalid = 0, s_axil_rready = 1;
  logic [31:0] s_axil_wdata = '0;
  logic [3:0]  s_axil_wstrb = 4'hF;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [31:0] s_axil_rdata;
  logic      s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  lts_beat_t s_axis_tdata = '0;
  logic      m_axis_tvalid, m_axis_tready = 1, m_axis_tlast, busy;
  cplx_t     m_axis_tdata;

  lc_lsdnn_top dut (.*);

  longint W1[2][H][K], B1[2][H], W2[2][K][H], B2[2][K], MEAN[2], SD[2];
  lts_beat_t beats[FRAMES][K];
  real       hr_true[FRAMES][K], hi_true[FRAMES][K];
  longint    er[FRAMES][K], ei[FRAMES][K];
  real       err_pow[NPROF][NSNR], ch_pow[NPROF][NSNR];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 32'hFFFFFF)) ) / 16777216.0;
    u2 = (real'($urandom_range(0, 32'hFFFFFF)) ) / 16777216.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic longint q(input real v);   // real -> <24,8>
    return longint'($floor(v * 65536.0 + 0.5));
  endfunction

  function automatic void dnn_model(input int c, input longint ls[], output longint y[]);
    longint xn[], a[], w[];
    xn = new[K]; a = new[H]; y = new[K];
    for (int i = 0; i < K; i++) xn[i] = ref_norm(ls[i], MEAN[c], SD[c]);
    for (int j = 0; j < H; j++) begin
      w = new[K];
      for (int i = 0; i < K; i++) w[i] = W1[c][j][i];
      a[j] = ref_relu(ref_pe(xn, w, B1[c][j]));
    end
    for (int o = 0; o < K; o++) begin
      w = new[H];
      for (int j = 0; j < H; j++) w[j] = W2[c][o][j];
      y[o] = ref_denorm(ref_pe(a, w, B2[c][o]), MEAN[c], SD[c]);
    end
  endfunction

  function automatic void make_frame(input int f, input int prof, input real snr_db);
    real gr[NTAP], gi[NTAP], norm, sigma;
    longint lr[], li[], yr[], yi[];
    lr = new[K]; li = new[K];
    // Rayleigh taps with the profile's powers, total power 1
    norm = 0.0;
    for (int l = 0; l < NTAP; l++) norm += $pow(10.0, PDB[prof][l] / 10.0);
    for (int l = 0; l < NTAP; l++) begin
      real a;
      a = $sqrt($pow(10.0, PDB[prof][l] / 10.0) / norm / 2.0);
      gr[l] = a * gauss(); gi[l] = a * gauss();
    end
    sigma = $sqrt($pow(10.0, -snr_db / 10.0) / 2.0);   // per real dimension
    for (int k = 0; k < K; k++) begin
      int sc;
      real hr, hi, xr;
      lts_beat_t b;
      sc = (k < 26) ? k - 26 : k - 25;                  // -26..-1, 1..26
      hr = 0.0; hi = 0.0;
      for (int l = 0; l < NTAP; l++) begin
        real ph;
        ph = -2.0 * PI * sc * DLY[prof][l] / 64.0;
        hr += gr[l] * $cos(ph) - gi[l] * $sin(ph);
        hi += gr[l] * $sin(ph) + gi[l] * $cos(ph);
      end
      hr_true[f][k] = hr; hi_true[f][k] = hi;
      xr = LTS_POS[51 - k] ? 1.0 : -1.0;
      b.x.re  = data_t'(q(xr)); b.x.im = '0;
      b.y1.re = data_t'(q(hr * xr + sigma * gauss())); b.y1.im = data_t'(q(hi * xr + sigma * gauss()));
      b.y2.re = data_t'(q(hr * xr + sigma * gauss())); b.y2.im = data_t'(q(hi * xr + sigma * gauss()));
      beats[f][k] = b;
      ref_ls(1'b1, b.y1.re, b.y1.im, b.y2.re, b.y2.im, b.x.re, b.x.im, lr[k], li[k]);
    end
    dnn_model(0, lr, yr);
    dnn_model(1, li, yi);
    for (int k = 0; k < K; k++) begin er[f][k] = yr[k]; ei[f][k] = yi[k]; end
  endfunction

  task automatic wr(input bit comp, input pkind_e kind, input int row, input int col,
                    input longint v);
    @(negedge clk);
    s_axil_awaddr = {comp, 3'(kind), 7'(row), 7'(col), 2'b00};
    s_axil_wdata  = 32'(v);
    s_axil_awvalid = 1; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk); s_axil_awvalid = 0; s_axil_wvalid = 0;
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // LS stage against the true channel; DUT output against the golden model.
  int ls_n = 0, got = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ls.m_valid && dut.u_ls.m_ready) begin
      int f, k, p, s;
      real dr, di;
      f = ls_n / K; k = ls_n % K;
      p = f / (NSNR * FPER); s = (f / FPER) % NSNR;
      dr = real'(dut.u_ls.m_data.re) / 65536.0 - hr_true[f][k];
      di = real'(dut.u_ls.m_data.im) / 65536.0 - hi_true[f][k];
      err_pow[p][s] += dr * dr + di * di;
      ch_pow[p][s]  += hr_true[f][k] ** 2 + hi_true[f][k] ** 2;
      ls_n++;
    end
    if (m_axis_tvalid && m_axis_tready) begin
      int f, o;
      f = got / K; o = got % K;
      checks++;
      if (longint'(m_axis_tdata.re) != er[f][o] || longint'(m_axis_tdata.im) != ei[f][o] ||
          m_axis_tlast != (o == K - 1)) begin
        failures++;
        $display("FAIL frame %0d sc %0d: (%0d,%0d) exp (%0d,%0d)", f, o,
                 m_axis_tdata.re, m_axis_tdata.im, er[f][o], ei[f][o]);
      end
      got++;
    end
  end

  initial begin
    for (int c = 0; c < 2; c++) begin
      MEAN[c] = rand_data(0) >>> 4; SD[c] = $urandom_range(32768, 65536);
      for (int j = 0; j < H; j++) begin
        for (int i = 0; i < K; i++) W1[c][j][i] = rand_param(3);
        B1[c][j] = rand_param(3);
      end
      for (int o = 0; o < K; o++) begin
        for (int j = 0; j < H; j++) W2[c][o][j] = rand_param(3);
        B2[c][o] = rand_param(4);
      end
    end
    for (int p = 0; p < NPROF; p++) for (int s = 0; s < NSNR; s++) begin
      err_pow[p][s] = 0.0; ch_pow[p][s] = 0.0;
      for (int n = 0; n < FPER; n++) make_frame((p * NSNR + s) * FPER + n, p, SNR_DB[s]);
    end

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
        s_axis_tvalid = 1; s_axis_tdata = beats[f][k]; s_axis_tlast = (k == K - 1);
        do @(posedge clk); while (!s_axis_tready);
      end
      @(negedge clk); s_axis_tvalid = 0;
    end
    wait (got == FRAMES * K);
    repeat (4) @(negedge clk);

    for (int p = 0; p < NPROF; p++) for (int s = 0; s < NSNR; s++) begin
      real nmse, expect_nmse;
      nmse = err_pow[p][s] / ch_pow[p][s];
      expect_nmse = 0.5 * $pow(10.0, -SNR_DB[s] / 10.0);
      $display("COUNT profile=%0d snr_db=%0.0f ls_nmse_db=%0.2f expected_db=%0.2f", p, SNR_DB[s],
               10.0 * $log10(nmse), 10.0 * $log10(expect_nmse));
      checks++;
      if (nmse > 2.0 * expect_nmse || nmse < 0.5 * expect_nmse) begin
        failures++; $display("FAIL LS NMSE off for profile %0d at %0.0f dB", p, SNR_DB[s]);
      end
    end
    checks++;
    if (ls_n != FRAMES * K) begin failures++; $display("FAIL LS beats %0d", ls_n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
