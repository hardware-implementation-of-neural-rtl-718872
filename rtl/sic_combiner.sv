// sic_combiner: denormalization and final adders of the canceller.
//
// When an NN output, a linear estimate and the matching received sample are
// all present (and the output register is free), it computes
//   y_nl   = 2^shift * y_nn          (denormalization, arithmetic shift,
//                                     left for shift > 0, right for < 0)
//   y_hat  = y_lin + y_nl            (full SI estimate)
//   y_c    = y - y_hat               (cancelled received sample)
// per real and imaginary part, saturating each result to Q bits, and holds
// y_hat and y_c in its output register until taken. Denormalization by a
// power of two only follows the paper; the mean offset of the normalization
// is left to the output-layer bias. The three-way join is this design's
// handshake: each source is consumed (its *_take pulse) in the cycle the
// result is registered.
module sic_combiner #(
  parameter int unsigned Q  = 16,
  parameter int unsigned SW = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [SW-1:0] shift,
  input  logic                 nn_valid,
  input  logic signed [Q-1:0]  nn_re,
  input  logic signed [Q-1:0]  nn_im,
  output logic                 nn_stall,
  input  logic                 lin_valid,
  input  logic signed [Q-1:0]  lin_re,
  input  logic signed [Q-1:0]  lin_im,
  input  logic                 y_valid,
  input  logic signed [Q-1:0]  y_re,
  input  logic signed [Q-1:0]  y_im,
  output logic                 take,
  output logic                 out_valid,
  output logic signed [Q-1:0]  yhat_re,
  output logic signed [Q-1:0]  yhat_im,
  output logic signed [Q-1:0]  yc_re,
  output logic signed [Q-1:0]  yc_im,
  input  logic                 out_stall
);
  localparam int unsigned FRAC = 0;  // unused by this block's helpers
  `include "fxp_funcs.svh"

  function automatic logic signed [Q-1:0] denorm(input logic signed [Q-1:0] v,
                                                 input logic signed [SW-1:0] s);
    logic signed [63:0] e;
    e = fx_ext(v);
    if (s >= 0) return fx_sat(e <<< s);
    else        return fx_sat(e >>> (-s));
  endfunction

  logic                out_free;
  logic signed [Q-1:0] h_re, h_im, c_re, c_im;

  always_comb begin
    out_free = !out_valid || !out_stall;
    take     = nn_valid && lin_valid && y_valid && out_free;
    nn_stall = !take;
    h_re     = fx_add(lin_re, denorm(nn_re, shift));
    h_im     = fx_add(lin_im, denorm(nn_im, shift));
    c_re     = fx_sat(fx_ext(y_re) - fx_ext(h_re));
    c_im     = fx_sat(fx_ext(y_im) - fx_ext(h_im));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      yhat_re   <= '0;
      yhat_im   <= '0;
      yc_re     <= '0;
      yc_im     <= '0;
    end else if (out_free) begin
      out_valid <= take;
      if (take) begin
        yhat_re <= h_re;
        yhat_im <= h_im;
        yc_re   <= c_re;
        yc_im   <= c_im;
      end
    end
  end

endmodule
