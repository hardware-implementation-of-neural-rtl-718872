// cpe: complex multiply-accumulate processing element of the linear canceller.
//
// Each enabled cycle it forms the complex product of the sample a and the
// coefficient h with three real multipliers, s1 = ar*hr, s2 = ai*hi and
// s3 = (ar+ai)(hr+hi), giving re = s1 - s2 and im = s3 - s1 - s2, and adds it
// to its complex partial-sum register (or to zero when clr is high). The new
// sum appears on sum_re/sum_im in the same cycle and is stored at the clock
// edge; with en low the stored sum is shown and kept. The three-multiplier
// form and the single partial-sum register follow the paper; products are kept
// at full precision, shifted by FRAC and saturated to Q bits per component,
// and the accumulation saturates (shared fixed-point rules, fxp_funcs.svh).
module cpe #(
  parameter int unsigned Q    = 16,
  parameter int unsigned FRAC = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                clr,
  input  logic signed [Q-1:0] a_re,
  input  logic signed [Q-1:0] a_im,
  input  logic signed [Q-1:0] h_re,
  input  logic signed [Q-1:0] h_im,
  output logic signed [Q-1:0] sum_re,
  output logic signed [Q-1:0] sum_im
);
  `include "fxp_funcs.svh"

  logic signed [Q-1:0] acc_re, acc_im;
  logic signed [63:0]  s1, s2, s3;
  logic signed [Q-1:0] p_re, p_im, n_re, n_im;

  always_comb begin
    s1   = fx_ext(a_re) * fx_ext(h_re);
    s2   = fx_ext(a_im) * fx_ext(h_im);
    s3   = (fx_ext(a_re) + fx_ext(a_im)) * (fx_ext(h_re) + fx_ext(h_im));
    p_re = fx_sat((s1 - s2) >>> FRAC);
    p_im = fx_sat((s3 - s1 - s2) >>> FRAC);
    n_re = fx_add(p_re, clr ? '0 : acc_re);
    n_im = fx_add(p_im, clr ? '0 : acc_im);
    sum_re = en ? n_re : acc_re;
    sum_im = en ? n_im : acc_im;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_re <= '0;
      acc_im <= '0;
    end else if (en) begin
      acc_re <= n_re;
      acc_im <= n_im;
    end
  end

endmodule
