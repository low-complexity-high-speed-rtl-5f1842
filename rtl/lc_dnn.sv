// lc_dnn: one of the two DNNs of the LC-LSDNN estimator.
//
// LC-LSDNN processes the real and the imaginary part of the LS estimate
// with two separate, identically shaped networks; this module is one of
// them (COMP = 0 real, 1 imaginary). A network is a fully connected
// K -> K/2 -> K net (K = 52 active subcarriers): a hidden layer of K/2 PEs
// with ReLU activation and an output layer of K PEs with linear activation.
// Its input is normalized, out = (x - mean)/std, and its output
// de-normalized, y * std + mean, with the mean and standard deviation held
// in internal registers.
//
// Operation, one frame (K subcarrier values) at a time:
//   LOAD  accept K input beats, normalize each and store it in the input
//         buffer (one beat per cycle);
//   HID   run the hidden layer: K cycles of MAC in all K/2 PEs at once;
//   OUT   run the output layer on the ReLU outputs: K/2 cycles of MAC;
//   SEND  stream the K de-normalized outputs, tlast on the last.
// With no stalls one frame takes K (load) + 1 + (K+2) + 1 + (K/2+2) + K
// cycles from the first input beat to the last output beat. The phases do
// not overlap; ordering them one after another and the input buffer are
// this design's choices, the layer shapes, activations and (de)normalization
// follow the paper.
//
// Interface: AXI-stream style valid/ready for input and output; the input
// tlast must mark beat K. Parameters are written through p_wr (kinds in
// lcls_pkg::pkind_e); writes for the other DNN or outside the layer sizes
// are ignored. Reset (synchronous, active low) sets mean 0 and std 1.0;
// weights and biases are not reset and must be written before use.
module lc_dnn
  import lcls_pkg::*;
#(
  parameter int unsigned K    = K_ON,
  parameter bit          COMP = 1'b0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t p_wr,
  input  logic      s_valid,
  output logic      s_ready,
  input  data_t     s_data,
  input  logic      s_last,
  output logic      m_valid,
  input  logic      m_ready,
  output data_t     m_data,
  output logic      m_last,
  output logic      busy
);

  localparam int unsigned H  = K / 2;
  localparam int unsigned IW = $clog2(K);

  typedef enum logic [1:0] {ST_LOAD, ST_HID, ST_OUT, ST_SEND} state_e;
  state_e state;

  data_t in_buf  [K];
  data_t hid_out [H];
  data_t hid_act [H];
  data_t out_vec [K];
  data_t mean, std_dev;
  data_t norm_val, denorm_val;
  logic [IW-1:0] idx;
  logic hid_start, out_start, hid_done, out_done;
  logic hid_busy, out_busy;

  // ---------------- parameter memories ----------------
  logic mine;
  assign mine = p_wr.we && (p_wr.comp == COMP);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mean    <= '0;
      std_dev <= data_t'(1 << DFR);
    end else if (mine) begin
      if (p_wr.kind == PK_MEAN) mean    <= p_wr.data;
      if (p_wr.kind == PK_STD)  std_dev <= p_wr.data;
    end
  end

  logic hw_we, hb_we, ow_we, ob_we;
  assign hw_we = mine && p_wr.kind == PK_HID_W && 32'(p_wr.row) < H && 32'(p_wr.col) < K;
  assign hb_we = mine && p_wr.kind == PK_HID_B && 32'(p_wr.row) < H;
  assign ow_we = mine && p_wr.kind == PK_OUT_W && 32'(p_wr.row) < K && 32'(p_wr.col) < H;
  assign ob_we = mine && p_wr.kind == PK_OUT_B && 32'(p_wr.row) < K;

  // ---------------- datapath ----------------
  normalizer u_norm (.in_data(s_data), .mean(mean), .std_dev(std_dev), .out_data(norm_val));

  dnn_layer #(.N_IN(K), .N_OUT(H)) u_hidden (
    .clk(clk), .rst_n(rst_n), .start(hid_start), .in_vec(in_buf),
    .w_we(hw_we), .b_we(hb_we),
    .w_row(p_wr.row[$clog2(H)-1:0]), .w_col(p_wr.col[$clog2(K)-1:0]),
    .w_data(param_t'(p_wr.data)),
    .out_vec(hid_out), .done(hid_done), .busy(hid_busy));

  for (genvar j = 0; j < H; j++) begin : g_relu
    relu_unit u_relu (.in_data(hid_out[j]), .out_data(hid_act[j]));
  end

  dnn_layer #(.N_IN(H), .N_OUT(K)) u_output (
    .clk(clk), .rst_n(rst_n), .start(out_start), .in_vec(hid_act),
    .w_we(ow_we), .b_we(ob_we),
    .w_row(p_wr.row[$clog2(K)-1:0]), .w_col(p_wr.col[$clog2(H)-1:0]),
    .w_data(param_t'(p_wr.data)),
    .out_vec(out_vec), .done(out_done), .busy(out_busy));

  denormalizer u_denorm (.in_data(out_vec[idx]), .mean(mean), .std_dev(std_dev),
                         .out_data(denorm_val));

  // ---------------- control ----------------
  assign s_ready = (state == ST_LOAD);
  assign m_valid = (state == ST_SEND);
  assign m_data  = denorm_val;
  assign m_last  = (state == ST_SEND) && (idx == IW'(K - 1));
  assign busy    = (state != ST_LOAD) || hid_busy || out_busy;

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) in_buf[idx] <= norm_val;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= ST_LOAD;
      idx       <= '0;
      hid_start <= 1'b0;
      out_start <= 1'b0;
    end else begin
      hid_start <= 1'b0;
      out_start <= 1'b0;
      unique case (state)
        ST_LOAD: if (s_valid) begin
          if (idx == IW'(K - 1)) begin
            idx       <= '0;
            state     <= ST_HID;
            hid_start <= 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        ST_HID: if (hid_done) begin
          state     <= ST_OUT;
          out_start <= 1'b1;
        end
        ST_OUT: if (out_done) state <= ST_SEND;
        ST_SEND: if (m_ready) begin
          if (idx == IW'(K - 1)) begin
            idx   <= '0;
            state <= ST_LOAD;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        default: state <= ST_LOAD;
      endcase
    end
  end

  // The input frame is exactly K beats long.
  a_frame: assert property (@(posedge clk) disable iff (!rst_n)
    s_valid && s_ready |-> (s_last == (idx == IW'(K - 1))));

endmodule
