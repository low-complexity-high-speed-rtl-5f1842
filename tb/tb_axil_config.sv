// tb_axil_config: checks the AXI-Lite register map and handshakes.
//
// Random writes (address fields, data) with AW and W offered in random
// order and random BREADY delays: each must produce exactly one p_wr pulse
// with the decoded comp/kind/row/col/data, one cycle after acceptance, and
// an OKAY response. Writes to kinds 6 and 7 must produce no pulse. Reads of
// the status register must return busy; reads elsewhere return 0.
module tb_axil_config;
  import lcls_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [19:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic        s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 0;
  logic        s_axil_arvalid = 0, s_axil_rready = 0;
  logic [31:0] s_axil_wdata = '0;
  logic [3:0]  s_axil_wstrb = 4'hF;
  logic        s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic [31:0] s_axil_rdata;
  logic        busy = 0;
  param_wr_t   p_wr;

  axil_config dut (.*);

  int pulses = 0;
  param_wr_t last_wr;
  always @(posedge clk) if (rst_n && p_wr.we) begin pulses++; last_wr = p_wr; end

  task automatic axil_write(input logic [19:0] a, input logic [31:0] d, input bit expect_pulse);
    int p0, dly;
    p0 = pulses;
    @(negedge clk);
    // offer AW and W in random order
    dly = $urandom_range(0, 2);
    s_axil_awaddr = a; s_axil_wdata = d;
    if ($urandom_range(0, 1)) s_axil_awvalid = 1; else s_axil_wvalid = 1;
    repeat (dly) begin
      @(negedge clk);
      checks++;
      if (s_axil_awready || s_axil_wready) begin failures++; $display("FAIL accepted half a write"); end
    end
    s_axil_awvalid = 1; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
    checks++;
    if (!s_axil_bvalid || s_axil_bresp != 2'b00) begin failures++; $display("FAIL no OKAY response"); end
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk);
      checks++;
      if (!s_axil_bvalid) begin failures++; $display("FAIL BVALID dropped"); end
    end
    s_axil_bready = 1;
    @(negedge clk); s_axil_bready = 0;
    checks++;
    if (pulses != p0 + (expect_pulse ? 1 : 0)) begin
      failures++; $display("FAIL %0d p_wr pulses for address %h", pulses - p0, a);
    end
    if (expect_pulse) begin
      checks++;
      if (last_wr.comp != a[19] || 3'(last_wr.kind) != a[18:16] || last_wr.row != a[15:9] ||
          last_wr.col != a[8:2] || last_wr.data != d[23:0]) begin
        failures++; $display("FAIL decode of %h/%h: %p", a, d, last_wr);
      end
    end
  endtask

  task automatic axil_read(input logic [19:0] a, input logic [31:0] expv);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk); s_axil_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_axil_rready = 1;
    while (!s_axil_rvalid) @(negedge clk);
    checks++;
    if (s_axil_rdata != expv || s_axil_rresp != 2'b00) begin
      failures++; $display("FAIL read %h = %h, expected %h", a, s_axil_rdata, expv);
    end
    @(negedge clk); s_axil_rready = 0;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [2:0] kind;
      kind = 3'($urandom_range(0, 7));
      axil_write({1'($urandom), kind, 7'($urandom), 7'($urandom), 2'b00}, $urandom,
                 kind <= 3'd5);
    end
    busy = 1; axil_read({1'b0, 3'd7, 14'd0, 2'b00}, 32'd1);
    busy = 0; axil_read({1'b1, 3'd7, 14'h1234, 2'b00}, 32'd0);
    busy = 1; axil_read({1'b0, 3'd2, 14'd5, 2'b00}, 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
