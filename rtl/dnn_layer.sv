// dnn_layer: fully connected layer built from N_OUT parallel PEs.
//
// All PEs of a layer work in parallel, as in the architecture: every PE
// sees the whole input vector and walks through it one input per cycle
// with its own counter, so a layer takes N_IN cycles of multiply-accumulate
// whatever N_OUT is. The layer controller raises pe_en for exactly N_IN
// cycles after a start pulse; the PEs' output registers then load the
// biased sums together and `done` pulses with them.
//
// Timing: start in cycle 0 -> MACs in cycles 1..N_IN -> out_vec valid and
// done high in cycle N_IN+2. out_vec holds until the next run ends. in_vec
// must stay stable while busy. A start while busy is ignored.
//
// Parameter writes address a PE by w_row and a weight by w_col (the index
// of the input it multiplies). No activation is applied here.
module dnn_layer
  import lcls_pkg::*;
#(
  parameter int unsigned N_IN  = K_ON,
  parameter int unsigned N_OUT = K_ON / 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  data_t                    in_vec [N_IN],
  input  logic                     w_we,
  input  logic                     b_we,
  input  logic [$clog2(N_OUT)-1:0] w_row,
  input  logic [$clog2(N_IN)-1:0]  w_col,
  input  param_t                   w_data,
  output data_t                    out_vec [N_OUT],
  output logic                     done,
  output logic                     busy
);

  localparam int unsigned CW = $clog2(N_IN + 1);

  logic          pe_en;
  logic [CW-1:0] run_cnt;
  logic          wait_out;
  logic [N_OUT-1:0] pe_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pe_en    <= 1'b0;
      run_cnt  <= '0;
      wait_out <= 1'b0;
    end else if (pe_en) begin
      if (run_cnt == CW'(N_IN - 1)) begin
        pe_en    <= 1'b0;
        wait_out <= 1'b1;
      end
      run_cnt <= run_cnt + 1'b1;
    end else if (wait_out) begin
      if (pe_valid[0]) wait_out <= 1'b0;
    end else if (start) begin
      pe_en   <= 1'b1;
      run_cnt <= '0;
    end
  end

  assign busy = pe_en || wait_out;
  assign done = pe_valid[0];

  for (genvar p = 0; p < N_OUT; p++) begin : g_pe
    dnn_pe #(.N_IN(N_IN)) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .pe_en    (pe_en),
      .in_vec   (in_vec),
      .w_we     (w_we && (w_row == ($clog2(N_OUT))'(p))),
      .w_addr   (w_col),
      .w_data   (w_data),
      .b_we     (b_we && (w_row == ($clog2(N_OUT))'(p))),
      .b_data   (w_data),
      .out_data (out_vec[p]),
      .out_valid(pe_valid[p])
    );
  end

  // All PEs run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    pe_valid[0] |-> &pe_valid);

endmodule
