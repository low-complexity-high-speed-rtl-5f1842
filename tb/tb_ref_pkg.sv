// tb_ref_pkg: golden model of the LC-LSDNN arithmetic for the testbenches.
//
// Recomputes every stage with 128-bit integers, written separately from
// the RTL: LS estimate, normalization, a PE (MAC + bias), ReLU,
// de-normalization and a whole K -> K/2 -> K network. Values are <24,8>
// data and <18,2> parameters held in plain integers; conversions truncate
// toward minus infinity and saturate to 24 bits, quotients truncate toward
// zero.
package tb_ref_pkg;

  typedef logic signed [127:0] big_t;

  localparam longint DMAX = (64'sd1 <<< 23) - 1;
  localparam longint DMIN = -(64'sd1 <<< 23);

  function automatic longint clamp24(input big_t v);
    if (v > big_t'(DMAX)) return DMAX;
    if (v < big_t'(DMIN)) return DMIN;
    return longint'(v);
  endfunction

  // v carries `frac` fractional bits; return it with 16, saturated.
  function automatic longint to_data(input big_t v, input int frac);
    return clamp24(v >>> (frac - 16));
  endfunction

  function automatic longint ref_div(input big_t num, input big_t den);
    big_t q;
    if (den == 0) return 0;
    q = (num * 65536) / den;
    return clamp24(q);
  endfunction

  // LS estimate of one component pair; returns {im, re} as two longints.
  function automatic void ref_ls(input bit bpsk,
                                 input longint y1r, input longint y1i,
                                 input longint y2r, input longint y2i,
                                 input longint xr,  input longint xi,
                                 output longint hr, output longint hi);
    big_t yr, yi, nr, ni, dd;
    yr = (big_t'(y1r) + big_t'(y2r)) >>> 1;
    yi = (big_t'(y1i) + big_t'(y2i)) >>> 1;
    if (bpsk) begin
      if (xr < 0) begin hr = clamp24(-yr); hi = clamp24(-yi); end
      else        begin hr = longint'(yr); hi = longint'(yi); end
    end else begin
      nr = big_t'(xr) * yr + big_t'(xi) * yi;
      ni = big_t'(xr) * yi - big_t'(xi) * yr;
      dd = big_t'(xr) * big_t'(xr) + big_t'(xi) * big_t'(xi);
      hr = ref_div(nr, dd);
      hi = ref_div(ni, dd);
    end
  endfunction

  function automatic longint ref_norm(input longint x, input longint mean, input longint sd);
    return ref_div(big_t'(x) - big_t'(mean), big_t'(sd));
  endfunction

  function automatic longint ref_denorm(input longint y, input longint mean, input longint sd);
    return to_data(big_t'(y) * big_t'(sd) + big_t'(mean) * 65536, 32);
  endfunction

  function automatic longint ref_relu(input longint v);
    return (v > 0) ? v : 0;
  endfunction

  // One neuron: sum_i x[i]*w[i] + b, back to <24,8>.
  function automatic longint ref_pe(input longint x[], input longint w[], input longint b);
    big_t s;
    s = 0;
    foreach (x[i]) s += big_t'(x[i]) * big_t'(w[i]);
    s += big_t'(b) * 65536;
    return to_data(s, 32);
  endfunction

  // Random <18,2> parameter scaled down so a layer of n inputs stays in range.
  function automatic longint rand_param(input int scale_shift);
    longint v;
    v = longint'($signed($urandom_range(0, 32'h3FFFF))) - 131072;
    return v >>> scale_shift;
  endfunction

  // Random <24,8> value of magnitude below 2^(int_bits) .
  function automatic longint rand_data(input int int_bits);
    longint v;
    v = longint'($urandom_range(0, (32'd1 << (int_bits + 17)) - 1)) - (64'sd1 <<< (int_bits + 16));
    return v;
  endfunction

endpackage
