// nn_canceller: neural-network digital self-interference canceller (top).
//
// For every transmitted baseband sample x[n] the canceller estimates the
// self-interference y_hat[n] = y_lin[n] + 2^shift * y_nn[n] and returns the
// cleaned received sample y_c[n] = y[n] - y_hat[n]. y_lin is a complex FIR over
// x[n] ... x[n-L+1] (linear_canceller). y_nn is a feed-forward network with 2L
// real inputs (Re/Im of the L samples), NL hidden layers of NH ReLU neurons
// and 2 linear outputs (Re/Im). Each layer is one macro-pipeline stage, and
// the stages alternate: layer 0 (the first hidden layer) is an NBN stage,
// layer 1 an IBI stage, layer 2 NBN again, and so on, with the output
// register of each stage as the pipeline register to the next. An IBI stage
// starts as soon as the NBN stage before it has its first K neurons out; an
// NBN stage starts when the IBI stage before it has its whole vector out.
// NL must be odd, so that the output layer is an IBI stage (the case for
// which the paper gives the latency); NPE[l] is the PE count of layer l and
// each NBN/IBI pair must agree on its beat width K (checked at elaboration).
//
// Data flow: tap_delay_line -> {NBN -> IBI [-> NBN -> IBI ...],
// linear_canceller} -> sic_combiner. The window is handed to the NN and the
// linear canceller in the same cycle; the linear result and y[n] wait in
// small FIFOs for the NN result of the same sample. The FIFOs must hold every
// sample in flight in the NN (each stage holds at most two: one being
// computed, one in its output register), so their depth defaults to
// 2*NL + 2 = 2 per stage; a shallower FIFO only lowers the throughput.
//
// Timing with the defaults (the equi-performance canceller: L=2, NL=1, NH=8,
// Q=16, 8 + 4 PEs, one CPE): both stages need 4 cycles per sample, so one y_c
// leaves every 4 cycles. From the cycle the first NBN stage holds a window to
// the NN result being valid takes L1_first + L2 = (CPG1+1) + (4+1) = 7 cycles
// (the sum over NBN/IBI pairs of L_first + L in general, plus one hand-over
// cycle for each further pair). The input register, the window hand-over and
// the combiner register add 3, so x[n] accepted in cycle t by an idle
// canceller gives y_c[n] valid in cycle t+10. Under back-to-back input a
// sample also waits in the input register until the first layer takes it
// (3 cycles with the defaults).
//
// Interfaces: sample input (in_valid, x, y; in_stall), result output
// (out_valid, y_hat, y_c; out_stall), a sample moving when valid && !stall.
// cfg writes one parameter per cycle (see nnsic_pkg::cfg_wr_t): weights and
// biases of layer cfg.layer by (row = neuron, col = input), h by col = tap,
// the denormalization exponent by re. The NN input order is
// [Re x[n], Im x[n], Re x[n-1], ...].
// The alternating NBN/IBI mapping and the latency follow the paper; the
// stall/valid handshake, FIFOs and parameter-port layout are this design's
// choices.
// Lint may report rst_n as used both asynchronously and synchronously: the
// synchronous use is only the disable condition of the assertion below, no
// flip-flop is reset synchronously.
module nn_canceller
  import nnsic_pkg::*;
#(
  parameter int unsigned Q          = 16,
  parameter int unsigned FRAC       = 11,
  parameter int unsigned L          = 2,
  parameter int unsigned NH         = 8,
  parameter int unsigned NL         = 1,
  parameter int unsigned NPE [NL+1] = '{8, 4},
  parameter int unsigned NCPE_LIN   = 1,
  parameter int unsigned FIFO_DEPTH = 2 * NL + 2,
  localparam int unsigned NE0       = 2 * L,
  localparam int unsigned NP        = (NL + 1) / 2,
  localparam int unsigned VW        = (NE0 > NH) ? NE0 : NH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [Q-1:0] x_re,
  input  logic signed [Q-1:0] x_im,
  input  logic signed [Q-1:0] y_re,
  input  logic signed [Q-1:0] y_im,
  output logic                in_stall,
  output logic                out_valid,
  output logic signed [Q-1:0] yhat_re,
  output logic signed [Q-1:0] yhat_im,
  output logic signed [Q-1:0] yc_re,
  output logic signed [Q-1:0] yc_im,
  input  logic                out_stall,
  input  cfg_wr_t             cfg
);
  initial begin
    assert (NL % 2 == 1)
      else $error("nn_canceller: NL = %0d, the number of hidden layers must be odd", NL);
  end

  // ---------------------------------------------------------------- config
  logic signed [5:0] shift;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                  shift <= '0;
    else if (cfg.we && cfg.target == CFG_SHIFT)  shift <= cfg.re[5:0];
  end

  // ------------------------------------------------------ input register
  logic                tv, t_stall;
  logic signed [Q-1:0] win_re [L];
  logic signed [Q-1:0] win_im [L];
  logic signed [Q-1:0] ty_re, ty_im;

  tap_delay_line #(.Q(Q), .L(L)) u_tdl (
    .clk, .rst_n, .in_valid, .x_re, .x_im, .y_re, .y_im, .in_stall,
    .out_valid(tv), .win_re, .win_im, .yo_re(ty_re), .yo_im(ty_im),
    .out_stall(t_stall)
  );

  logic nbn_in_stall, lin_in_stall, y_full, y_empty, l_full, l_empty, take;

  always_comb t_stall = nbn_in_stall || lin_in_stall || y_full;

  // ------------------------------------------------------ NN layers
  // Link p carries a whole vector into NBN stage p: link 0 is the window,
  // link p+1 the output of pair p (link NP: the NN output, 2 values).
  wire             [NP:0] v_valid, v_stall;
  wire [NP:0][VW-1:0][Q-1:0] vec;

  for (genvar i = 0; i < VW; i++) begin : g_l0
    if (i < NE0) begin : g_x
      if (i % 2 == 0) begin : g_re
        assign vec[0][i] = win_re[i/2];
      end else begin : g_im
        assign vec[0][i] = win_im[i/2];
      end
    end else begin : g_pad
      assign vec[0][i] = '0;
    end
  end
  assign v_valid[0]   = tv && !lin_in_stall && !y_full;
  assign nbn_in_stall = v_stall[0];

  for (genvar p = 0; p < NP; p++) begin : g_pair
    localparam int unsigned NEI = (p == 0) ? NE0 : NH;          // inputs of layer 2p
    localparam int unsigned NEO = (p == NP - 1) ? 2 : NH;       // outputs of layer 2p+1
    localparam int unsigned NPA = NPE[2*p];
    localparam int unsigned NPB = NPE[2*p+1];
    localparam int unsigned KA  = (NPA > NEI) ? NPA / NEI : 1;  // NBN beat width
    localparam int unsigned KB  = (NPB > NEO) ? NPB / NEO : 1;  // IBI inputs per beat
    localparam act_e        ACTB = (p == NP - 1) ? ACT_LINEAR : ACT_RELU;

    initial begin
      assert (KA == KB)
        else $error("nn_canceller: layer %0d emits beats of %0d, layer %0d takes %0d", 2*p, KA, 2*p+1, KB);
    end

    logic signed [Q-1:0] a_in [NEI];
    logic                hv, hl, hs;
    logic signed [Q-1:0] h [KA];
    logic signed [Q-1:0] o [NEO];

    always_comb begin
      for (int i = 0; i < NEI; i++) a_in[i] = vec[p][i];
    end

    nbn_stage #(.Q(Q), .FRAC(FRAC), .NE_IN(NEI), .NE_OUT(NH), .NPE(NPA), .ACT(ACT_RELU)) u_nbn (
      .clk, .rst_n,
      .in_valid(v_valid[p]), .in_data(a_in), .in_stall(v_stall[p]),
      .out_valid(hv), .out_data(h), .out_last(hl), .out_stall(hs),
      .cfg_we(cfg.we && cfg.layer == 4'(2*p) && (cfg.target == CFG_W || cfg.target == CFG_B)),
      .cfg_bias(cfg.target == CFG_B), .cfg_row(cfg.row), .cfg_col(cfg.col),
      .cfg_data(cfg.re[Q-1:0])
    );

    ibi_stage #(.Q(Q), .FRAC(FRAC), .NE_IN(NH), .NE_OUT(NEO), .NPE(NPB), .ACT(ACTB)) u_ibi (
      .clk, .rst_n,
      .in_valid(hv), .in_data(h), .in_last(hl), .in_stall(hs),
      .out_valid(v_valid[p+1]), .out_data(o), .out_stall(v_stall[p+1]),
      .cfg_we(cfg.we && cfg.layer == 4'(2*p+1) && (cfg.target == CFG_W || cfg.target == CFG_B)),
      .cfg_bias(cfg.target == CFG_B), .cfg_row(cfg.row), .cfg_col(cfg.col),
      .cfg_data(cfg.re[Q-1:0])
    );

    for (genvar i = 0; i < VW; i++) begin : g_o
      if (i < NEO) begin : g_v
        assign vec[p+1][i] = o[i];
      end else begin : g_pad
        assign vec[p+1][i] = '0;
      end
    end
  end

  logic                o_valid, o_stall;
  logic signed [Q-1:0] o_re, o_im;
  assign o_valid     = v_valid[NP];
  assign v_stall[NP] = o_stall;
  assign o_re        = vec[NP][0];
  assign o_im        = vec[NP][1];

  // ------------------------------------------------------ linear canceller
  logic                lo_valid;
  logic signed [Q-1:0] lo_re, lo_im;

  linear_canceller #(.Q(Q), .FRAC(FRAC), .L(L), .NCPE(NCPE_LIN)) u_linear (
    .clk, .rst_n,
    .in_valid(tv && !nbn_in_stall && !y_full), .x_re(win_re), .x_im(win_im),
    .in_stall(lin_in_stall),
    .out_valid(lo_valid), .out_re(lo_re), .out_im(lo_im), .out_stall(l_full),
    .cfg_we(cfg.we && cfg.target == CFG_H), .cfg_tap(cfg.col),
    .cfg_re(cfg.re[Q-1:0]), .cfg_im(cfg.im[Q-1:0])
  );

  // ------------------------------------------ alignment FIFOs (y and y_lin)
  logic [2*Q-1:0] yq, lq;

  sync_fifo #(.W(2*Q), .DEPTH(FIFO_DEPTH)) u_yfifo (
    .clk, .rst_n,
    .push(tv && !nbn_in_stall && !lin_in_stall && !y_full), .wdata({ty_re, ty_im}),
    .pop(take), .rdata(yq), .full(y_full), .empty(y_empty)
  );

  sync_fifo #(.W(2*Q), .DEPTH(FIFO_DEPTH)) u_lfifo (
    .clk, .rst_n,
    .push(lo_valid && !l_full), .wdata({lo_re, lo_im}),
    .pop(take), .rdata(lq), .full(l_full), .empty(l_empty)
  );

  // ------------------------------------------ denormalization and adders
  sic_combiner #(.Q(Q), .SW(6)) u_comb (
    .clk, .rst_n, .shift,
    .nn_valid(o_valid), .nn_re(o_re), .nn_im(o_im), .nn_stall(o_stall),
    .lin_valid(!l_empty), .lin_re(lq[2*Q-1:Q]), .lin_im(lq[Q-1:0]),
    .y_valid(!y_empty), .y_re(yq[2*Q-1:Q]), .y_im(yq[Q-1:0]),
    .take, .out_valid, .yhat_re, .yhat_im, .yc_re, .yc_im, .out_stall
  );

  // Handshake rule: an offered result stays unchanged until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               $past(out_valid && out_stall) |-> out_valid && $stable(yc_re) && $stable(yc_im));

endmodule
