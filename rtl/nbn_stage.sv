// nbn_stage: neuron-by-neuron (NBN) macro-pipeline stage of the NN canceller.
//
// Computes one dense layer l[j] = f(b[j] + sum_i W[j][i] * x[i]) for NE_OUT
// neurons from NE_IN inputs that arrive together as one vector. Neurons are
// processed in groups of K: when NPE <= NE_IN, K = 1 and the NPE PEs share the
// sum of one neuron over CPG = ceil(NE_IN/NPE) cycles; when NPE > NE_IN, NPE
// must be a multiple of NE_IN, K = NPE/NE_IN neurons are computed at once and
// CPG = 1. A sample therefore takes NG*CPG cycles with NG = ceil(NE_OUT/K),
// and the first K outputs leave after CPG+1 cycles (a pipeline register sits
// between the PEs and the output interface), as the architecture specifies.
//
// Parts, as in the stage block diagram:
//  * input register and input interface: the vector is latched when the stage
//    accepts it; one multiplexer per PE picks input c*PPN + lane (zero past
//    the end of the vector) where PPN = NPE/K PEs serve one neuron;
//  * NPE nn_pe instances with a one-word partial-sum memory;
//  * weight memory (NG*CPG words of NPE values) and bias memory (NG words of
//    K values), both externally writable by (neuron, input) index;
//  * control unit: counters c (cycle within a group) and g (neuron group),
//    stalling when no input vector is held or the pipeline register cannot be
//    freed because the next stage stalls;
//  * output interface: K adder trees over the registered PE sums, the bias,
//    saturation to Q bits and the activation; the result is held in the
//    inter-stage register (out_data/out_valid) until the next stage takes it.
//
// Handshake: a vector moves on in_valid && !in_stall and a beat of K outputs
// on out_valid && !out_stall. in_stall never depends on in_valid. Beats of a
// sample leave in neuron order; beat g carries neurons g*K .. g*K+K-1 and
// neurons past NE_OUT (padding of the last group) are output as zero.
// The adder tree works at full precision and saturates once after the bias is
// added: this, the handshake and the write-port addressing are this design's
// choices; the schedule and the stage structure follow the paper.
module nbn_stage
  import nnsic_pkg::*;
#(
  parameter int unsigned Q      = 16,
  parameter int unsigned FRAC   = 11,
  parameter int unsigned NE_IN  = 4,
  parameter int unsigned NE_OUT = 8,
  parameter int unsigned NPE    = 8,
  parameter act_e        ACT    = ACT_RELU,
  localparam int unsigned K     = (NPE > NE_IN) ? NPE / NE_IN : 1,
  localparam int unsigned PPN   = NPE / K,
  localparam int unsigned CPG   = (NE_IN + PPN - 1) / PPN,
  localparam int unsigned NG    = (NE_OUT + K - 1) / K,
  localparam int unsigned WW    = NG * CPG
) (
  input  logic                clk,
  input  logic                rst_n,
  // previous layer (or canceller input) vector
  input  logic                in_valid,
  input  logic signed [Q-1:0] in_data [NE_IN],
  output logic                in_stall,
  // K neuron outputs per beat
  output logic                out_valid,
  output logic signed [Q-1:0] out_data [K],
  output logic                out_last,
  input  logic                out_stall,
  // external parameter writes: W[cfg_row][cfg_col] or b[cfg_row]
  input  logic                cfg_we,
  input  logic                cfg_bias,
  input  logic [7:0]          cfg_row,
  input  logic [7:0]          cfg_col,
  input  logic signed [Q-1:0] cfg_data
);
  `include "fxp_funcs.svh"

  localparam int unsigned WAW = (WW > 1) ? $clog2(WW) : 1;
  localparam int unsigned GAW = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned CAW = (CPG > 1) ? $clog2(CPG) : 1;
  localparam int unsigned PLW = (NPE > 1) ? $clog2(NPE) : 1;
  localparam int unsigned KLW = (K > 1) ? $clog2(K) : 1;

  initial begin
    assert (NPE <= NE_IN || NPE % NE_IN == 0)
      else $error("nbn_stage: NPE must be <= NE_IN or a multiple of it");
  end

  // ---------------------------------------------------------------- control
  logic                in_have;
  logic signed [Q-1:0] in_reg [NE_IN];
  logic [CAW-1:0]      c;
  logic [GAW-1:0]      g;
  logic                pipe_valid, pipe_last;
  logic [GAW-1:0]      pipe_g;
  logic                out_free, pipe_free, run, last_c, last_g, done;

  always_comb begin
    out_free  = !out_valid || !out_stall;
    pipe_free = !pipe_valid || out_free;
    run       = in_have && pipe_free;
    last_c    = (c == CAW'(CPG - 1));
    last_g    = (g == GAW'(NG - 1));
    done      = run && last_c && last_g;
    in_stall  = in_have && !done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_have <= 1'b0;
      c       <= '0;
      g       <= '0;
      for (int i = 0; i < NE_IN; i++) in_reg[i] <= '0;
    end else begin
      if (run) begin
        c <= last_c ? '0 : c + 1'b1;
        if (last_c) g <= last_g ? '0 : g + 1'b1;
      end
      if (!in_stall) begin
        in_have <= in_valid;
        if (in_valid) in_reg <= in_data;
      end
    end
  end

  // --------------------------------------------------------- weight memory
  logic signed [Q-1:0] w_word [NPE];
  logic signed [Q-1:0] b_word [K];
  logic [WAW-1:0]      w_raddr, w_waddr;
  logic [PLW-1:0]      w_wlane;
  logic [GAW-1:0]      b_waddr;
  logic [KLW-1:0]      b_wlane;

  always_comb begin
    // W[n][i] lives in word (n/K)*CPG + i/PPN, lane (n%K)*PPN + i%PPN
    w_waddr = WAW'((int'(cfg_row) / K) * CPG + int'(cfg_col) / PPN);
    w_wlane = PLW'((int'(cfg_row) % K) * PPN + int'(cfg_col) % PPN);
    b_waddr = GAW'(int'(cfg_row) / K);
    b_wlane = KLW'(int'(cfg_row) % K);
    w_raddr = WAW'(int'(g) * CPG + int'(c));
  end

  wb_mem #(.Q(Q), .LANES(NPE), .WORDS(WW)) u_wmem (
    .clk, .we(cfg_we && !cfg_bias), .waddr(w_waddr), .wlane(w_wlane),
    .wdata(cfg_data), .raddr(w_raddr), .rdata(w_word)
  );

  wb_mem #(.Q(Q), .LANES(K), .WORDS(NG)) u_bmem (
    .clk, .we(cfg_we && cfg_bias), .waddr(b_waddr), .wlane(b_wlane),
    .wdata(cfg_data), .raddr(pipe_g), .rdata(b_word)
  );

  // ------------------------------------------- input interface and PE array
  logic signed [Q-1:0] pe_in  [NPE];
  logic signed [Q-1:0] pe_out [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    localparam int unsigned LANE = p % PPN;
    always_comb begin
      int unsigned idx;
      idx = int'(c) * PPN + LANE;
      pe_in[p] = (idx < NE_IN) ? in_reg[idx] : '0;
    end
    nn_pe #(.Q(Q), .FRAC(FRAC), .DEPTH(1)) u_pe (
      .clk, .rst_n, .en(run), .clr(c == '0), .addr(1'b0),
      .data_in(pe_in[p]), .weight_in(w_word[p]), .data_out(pe_out[p])
    );
  end

  // ------------------------------------------------- PE pipeline register
  logic signed [Q-1:0] pipe [NPE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pipe_valid <= 1'b0;
      pipe_last  <= 1'b0;
      pipe_g     <= '0;
      for (int p = 0; p < NPE; p++) pipe[p] <= '0;
    end else if (run && last_c) begin
      pipe_valid <= 1'b1;
      pipe_last  <= last_g;
      pipe_g     <= g;
      pipe       <= pe_out;
    end else if (out_free) begin
      pipe_valid <= 1'b0;
    end
  end

  // ------------------------------------------------------ output interface
  logic signed [Q-1:0] act_out [K];

  always_comb begin
    for (int s = 0; s < K; s++) begin
      logic signed [63:0]  acc;
      logic signed [Q-1:0] v;
      acc = fx_ext(b_word[s]);
      for (int ln = 0; ln < PPN; ln++) acc += fx_ext(pipe[s * PPN + ln]);
      v = fx_sat(acc);
      if (ACT == ACT_RELU && v < 0) v = '0;
      if (int'(pipe_g) * K + s >= NE_OUT) v = '0;
      act_out[s] = v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      for (int s = 0; s < K; s++) out_data[s] <= '0;
    end else if (out_free) begin
      out_valid <= pipe_valid;
      if (pipe_valid) begin
        out_data <= act_out;
        out_last <= pipe_last;
      end
    end
  end

endmodule
