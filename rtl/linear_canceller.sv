// linear_canceller: complex FIR that forms the linear SI estimate
// y_lin[n] = sum_{l=0}^{L-1} h[l] x[n-l].
//
// A window of the L most recent samples is latched when accepted; NCPE cpe
// instances then process taps cnt*NCPE + c (c = 0..NCPE-1) for
// cnt = 0..NC-1, NC = ceil(L/NCPE) cycles, which is the paper's latency of the
// linear canceller. The NCPE partial sums are added and saturated and the
// result is placed in the output register, where it stays until taken. The
// block is not pipelined: a new window is accepted in the last compute cycle
// of the current one, so it delivers one result every NC cycles. The taps
// h[l] sit in a register file written through the external port.
//
// Handshake: window on in_valid && !in_stall, result on out_valid &&
// !out_stall; in_stall ignores in_valid. Window element 0 is x[n].
// The handshake and tap storage are this design's choices.
module linear_canceller #(
  parameter int unsigned Q    = 16,
  parameter int unsigned FRAC = 11,
  parameter int unsigned L    = 2,
  parameter int unsigned NCPE = 1,
  localparam int unsigned NC  = (L + NCPE - 1) / NCPE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [Q-1:0] x_re [L],
  input  logic signed [Q-1:0] x_im [L],
  output logic                in_stall,
  output logic                out_valid,
  output logic signed [Q-1:0] out_re,
  output logic signed [Q-1:0] out_im,
  input  logic                out_stall,
  // external tap writes h[cfg_tap] = cfg_re + j cfg_im
  input  logic                cfg_we,
  input  logic [7:0]          cfg_tap,
  input  logic signed [Q-1:0] cfg_re,
  input  logic signed [Q-1:0] cfg_im
);
  `include "fxp_funcs.svh"

  localparam int unsigned CAW = (NC > 1) ? $clog2(NC) : 1;

  logic signed [Q-1:0] h_re [L];
  logic signed [Q-1:0] h_im [L];
  logic signed [Q-1:0] w_re [L];
  logic signed [Q-1:0] w_im [L];
  logic                busy, run, last, res_free;
  logic [CAW-1:0]      cnt;

  always_comb begin
    res_free = !out_valid || !out_stall;
    run      = busy && res_free;
    last     = (cnt == CAW'(NC - 1));
    in_stall = busy && !(run && last);
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < L; l++) begin
      if (cfg_we && int'(cfg_tap) == l) begin
        h_re[l] <= cfg_re;
        h_im[l] <= cfg_im;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      for (int l = 0; l < L; l++) begin
        w_re[l] <= '0;
        w_im[l] <= '0;
      end
    end else begin
      if (run) cnt <= last ? '0 : cnt + 1'b1;
      if (!in_stall) begin
        busy <= in_valid;
        if (in_valid) begin
          w_re <= x_re;
          w_im <= x_im;
        end
      end
    end
  end

  logic signed [Q-1:0] c_re [NCPE];
  logic signed [Q-1:0] c_im [NCPE];

  for (genvar c = 0; c < NCPE; c++) begin : g_cpe
    logic signed [Q-1:0] a_re, a_im, t_re, t_im;
    always_comb begin
      int unsigned tap;
      tap = int'(cnt) * NCPE + c;
      if (tap < L) begin
        a_re = w_re[tap];  a_im = w_im[tap];
        t_re = h_re[tap];  t_im = h_im[tap];
      end else begin
        a_re = '0;  a_im = '0;  t_re = '0;  t_im = '0;
      end
    end
    cpe #(.Q(Q), .FRAC(FRAC)) u_cpe (
      .clk, .rst_n, .en(run), .clr(cnt == '0),
      .a_re, .a_im, .h_re(t_re), .h_im(t_im),
      .sum_re(c_re[c]), .sum_im(c_im[c])
    );
  end

  logic signed [Q-1:0] tot_re, tot_im;

  always_comb begin
    logic signed [63:0] sr, si;
    sr = '0;
    si = '0;
    for (int c = 0; c < NCPE; c++) begin
      sr += fx_ext(c_re[c]);
      si += fx_ext(c_im[c]);
    end
    tot_re = fx_sat(sr);
    tot_im = fx_sat(si);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else if (run && last) begin
      out_valid <= 1'b1;
      out_re    <= tot_re;
      out_im    <= tot_im;
    end else if (res_free) begin
      out_valid <= 1'b0;
    end
  end

endmodule
