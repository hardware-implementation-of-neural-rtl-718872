// fxp_funcs.svh: saturating fixed-point helpers, included inside a module body.
//
// The including module must declare the parameters Q (word width) and FRAC
// (fractional bits). Every weight, bias, activation and partial sum is a
// signed Q-bit two's-complement number with FRAC fractional bits. Products are
// formed at full precision, shifted right by FRAC (truncation towards minus
// infinity) and saturated to Q bits; sums saturate to Q bits.

localparam logic signed [63:0] FX_MAX = (64'sd1 <<< (Q - 1)) - 64'sd1;
localparam logic signed [63:0] FX_MIN = -(64'sd1 <<< (Q - 1));

function automatic logic signed [Q-1:0] fx_sat(input logic signed [63:0] v);
  if (v > FX_MAX)      return FX_MAX[Q-1:0];
  else if (v < FX_MIN) return FX_MIN[Q-1:0];
  else                 return v[Q-1:0];
endfunction

function automatic logic signed [63:0] fx_ext(input logic signed [Q-1:0] a);
  return {{(64-Q){a[Q-1]}}, a};
endfunction

function automatic logic signed [Q-1:0] fx_mul(input logic signed [Q-1:0] a,
                                               input logic signed [Q-1:0] b);
  logic signed [63:0] p;
  p = fx_ext(a) * fx_ext(b);
  return fx_sat(p >>> FRAC);
endfunction

function automatic logic signed [Q-1:0] fx_add(input logic signed [Q-1:0] a,
                                               input logic signed [Q-1:0] b);
  return fx_sat(fx_ext(a) + fx_ext(b));
endfunction
