// lcls_pkg: types, sizes and fixed-point helpers shared by the LC-LSDNN
// channel estimator.
//
// Number formats follow the fixed-point study of the design: every data
// value (LTS samples, LS estimates, activations, mean and standard
// deviation) is <24,8>, a 24-bit two's complement word with 8 integer bits
// (sign included) and 16 fractional bits. Every DNN parameter (weight and
// bias) is <18,2>: 18 bits, 2 integer, 16 fractional. Products of a data
// word and a parameter carry 32 fractional bits and are accumulated in 48
// bits. Conversion back to <24,8> truncates (arithmetic shift) and
// saturates; the rounding and overflow rules are this design's choice.
package lcls_pkg;

  // Number of active subcarriers of an IEEE 802.11p LTS (52 of 64).
  localparam int unsigned K_ON = 52;

  localparam int unsigned DW   = 24;  // data word length <24,8>
  localparam int unsigned DFR  = 16;  // data fractional bits
  localparam int unsigned PW   = 18;  // parameter word length <18,2>
  localparam int unsigned PFR  = 16;  // parameter fractional bits
  localparam int unsigned AW   = 48;  // accumulator width, DFR+PFR fractional bits

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [PW-1:0] param_t;
  typedef logic signed [AW-1:0] acc_t;

  localparam data_t DATA_MAX = data_t'({1'b0, {(DW-1){1'b1}}});
  localparam data_t DATA_MIN = data_t'({1'b1, {(DW-1){1'b0}}});

  // Complex sample: real part in the low half.
  typedef struct packed {
    data_t im;
    data_t re;
  } cplx_t;

  // One subcarrier of the preamble as delivered on the input stream: the
  // two received long training symbols and the reference LTS value.
  typedef struct packed {
    cplx_t x;   // reference (transmitted) LTS value
    cplx_t y2;  // second received LTS
    cplx_t y1;  // first received LTS
  } lts_beat_t;

  // What a parameter-memory write addresses.
  typedef enum logic [2:0] {
    PK_HID_W  = 3'd0,  // hidden-layer weight: row = PE, col = input
    PK_HID_B  = 3'd1,  // hidden-layer bias:   row = PE
    PK_OUT_W  = 3'd2,  // output-layer weight: row = PE, col = input
    PK_OUT_B  = 3'd3,  // output-layer bias:   row = PE
    PK_MEAN   = 3'd4,  // normalization mean (<24,8>)
    PK_STD    = 3'd5   // normalization standard deviation (<24,8>)
  } pkind_e;

  // Parameter write to the internal memories of the two DNNs.
  typedef struct packed {
    logic        we;
    logic        comp;   // 0: real-part DNN, 1: imaginary-part DNN
    pkind_e      kind;
    logic [6:0]  row;
    logic [6:0]  col;
    data_t       data;   // parameters use the low PW bits
  } param_wr_t;

  // Saturate a value held with `frac` fractional bits to <24,8>,
  // truncating the extra fractional bits.
  function automatic data_t sat_data(input logic signed [79:0] v, input int unsigned frac);
    logic signed [79:0] s;
    s = v >>> (frac - DFR);
    if (s > 80'(signed'(DATA_MAX)))      return DATA_MAX;
    else if (s < 80'(signed'(DATA_MIN))) return DATA_MIN;
    else                                 return data_t'(s);
  endfunction

  // Fixed-point quotient num/den in <24,8>, where num and den carry the
  // same number of fractional bits. A zero divisor gives zero.
  function automatic data_t fx_div(input logic signed [63:0] num, input logic signed [63:0] den);
    logic signed [79:0] q;
    if (den == 0) return '0;
    q = (80'(num) <<< DFR) / 80'(den);
    return sat_data(q, DFR);
  endfunction

endpackage
