// dnn_pe: one neuron (processing element) of a fully connected layer.
//
// The PE follows the schematic of the architecture figure. An input
// multiplexer picks one of the N_IN layer inputs I1..IK with the value of a
// counter; the same counter addresses the PE's weight memory. The product
// is added to the accumulator register. While pe_en is low a second
// multiplexer loads 0 into the accumulator and the counter is held at 0.
// Once the last input has been accumulated, the bias is added and the sum
// is loaded into the output register through a third multiplexer, which
// otherwise feeds the output register back to itself (holds the result).
// The activation (ReLU or linear) is applied outside the PE.
//
// Timing: pe_en is held high for exactly N_IN cycles, one input per cycle.
// out_data is loaded at the end of the cycle after the last MAC, and
// out_valid pulses high for one cycle with the new value. pe_en may drop in
// that cycle (the accumulator is then cleared while out_data takes the sum).
//
// The figure labels the counter "Mod 2K" and its compare "=2K" while its
// multiplexer has K inputs I1..IK; this PE counts its N_IN inputs and
// compares with the last one. Weight and bias storage with a write port,
// the <18,2> parameter and <24,8> data formats and the truncating,
// saturating rescale of the sum are this design's implementation.
module dnn_pe
  import lcls_pkg::*;
#(
  parameter int unsigned N_IN = K_ON
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pe_en,
  input  data_t                   in_vec [N_IN],
  // Parameter memory write port.
  input  logic                    w_we,
  input  logic [$clog2(N_IN)-1:0] w_addr,
  input  param_t                  w_data,
  input  logic                    b_we,
  input  param_t                  b_data,
  output data_t                   out_data,
  output logic                    out_valid
);

  localparam int unsigned CW = $clog2(N_IN);

  param_t          weight [N_IN];
  param_t          bias;
  logic [CW-1:0]   cnt;
  logic            last_q;
  acc_t            acc;
  acc_t            prod;

  always_ff @(posedge clk) begin
    if (w_we) weight[w_addr] <= w_data;
    if (b_we) bias <= b_data;
  end

  // Input multiplexer and multiplier.
  assign prod = acc_t'(in_vec[cnt]) * acc_t'(weight[cnt]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt    <= '0;
      last_q <= 1'b0;
      acc    <= '0;
    end else begin
      if (pe_en) begin
        acc    <= acc + prod;
        cnt    <= (cnt == CW'(N_IN - 1)) ? '0 : cnt + 1'b1;
        last_q <= (cnt == CW'(N_IN - 1));
      end else begin
        acc    <= '0;
        cnt    <= '0;
        last_q <= 1'b0;
      end
    end
  end

  // Bias add and output register.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= last_q;
      if (last_q)
        out_data <= sat_data(80'(acc) + (80'(bias) <<< DFR), DFR + PFR);
    end
  end

endmodule
