// ibi_stage: input-by-input (IBI) macro-pipeline stage of the NN canceller.
//
// Computes the dense layer l[n] = f(b[n] + sum_i W[n][i] * x[i]) for NE_OUT
// neurons while the NE_IN inputs arrive a few at a time, in beats of K
// consecutive inputs (the output beats of a preceding NBN stage). When
// NPE > NE_OUT, NPE must be a multiple of NE_OUT and K = NPE/NE_OUT inputs are
// processed in parallel; otherwise K = 1. NPN = NPE/K PEs serve one input, and
// each PE keeps D = ceil(NE_OUT/NPN) partial sums in its memory, one per
// neuron it serves. A beat is processed in D cycles (neuron word d = 0..D-1),
// a sample in NIB*D cycles with NIB = ceil(NE_IN/K) beats, and all NE_OUT
// outputs appear together one cycle after the last update (the PE pipeline
// register), as the architecture specifies.
//
// Parts, as in the stage block diagram:
//  * input interface: PE p = s*NPN + lane takes input s of the current beat
//    (zero for an input index past NE_IN);
//  * NPE nn_pe instances with a D-word partial-sum memory addressed by d;
//  * weight memory (NIB*D words of NPE values) and bias memory (one word of
//    NE_OUT values), externally writable by (neuron, input) index;
//  * control unit: counters d and b (beat of the sample); the first beat of a
//    sample resets the sums; it stalls when no beat is offered or when the
//    pipeline register still holds an unclaimed result;
//  * output interface: for each neuron the K per-input-slot partial sums are
//    added at full precision with the bias, saturated to Q bits, passed
//    through the activation and held in the output register.
//
// Handshake as in nbn_stage: a beat moves on in_valid && !in_stall, the
// output vector on out_valid && !out_stall, and in_stall ignores in_valid.
// Beats are counted from reset, so the source must deliver whole samples of
// NIB beats; in_last marks the last beat and is checked against the count. Full-precision adder tree, the handshake and write addressing are
// this design's choices; schedule and structure follow the paper.
// Lint may report rst_n as used both asynchronously and synchronously: the
// synchronous use is only the disable condition of the assertion below, no
// flip-flop is reset synchronously.
module ibi_stage
  import nnsic_pkg::*;
#(
  parameter int unsigned Q      = 16,
  parameter int unsigned FRAC   = 11,
  parameter int unsigned NE_IN  = 8,
  parameter int unsigned NE_OUT = 2,
  parameter int unsigned NPE    = 4,
  parameter act_e        ACT    = ACT_LINEAR,
  localparam int unsigned K     = (NPE > NE_OUT) ? NPE / NE_OUT : 1,
  localparam int unsigned NPN   = NPE / K,
  localparam int unsigned D     = (NE_OUT + NPN - 1) / NPN,
  localparam int unsigned NIB   = (NE_IN + K - 1) / K,
  localparam int unsigned WW    = NIB * D
) (
  input  logic                clk,
  input  logic                rst_n,
  // K inputs per beat
  input  logic                in_valid,
  input  logic signed [Q-1:0] in_data [K],
  input  logic                in_last,
  output logic                in_stall,
  // all NE_OUT outputs at once
  output logic                out_valid,
  output logic signed [Q-1:0] out_data [NE_OUT],
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
  localparam int unsigned DAW = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned BAW = (NIB > 1) ? $clog2(NIB) : 1;
  localparam int unsigned PLW = (NPE > 1) ? $clog2(NPE) : 1;
  localparam int unsigned OLW = (NE_OUT > 1) ? $clog2(NE_OUT) : 1;

  initial begin
    assert (NPE <= NE_OUT || NPE % NE_OUT == 0)
      else $error("ibi_stage: NPE must be <= NE_OUT or a multiple of it");
  end

  // ---------------------------------------------------------------- control
  logic [DAW-1:0] d;
  logic [BAW-1:0] b;
  logic           pipe_valid;
  logic           out_free, pipe_free, run, last_d, last_b;

  always_comb begin
    out_free  = !out_valid || !out_stall;
    pipe_free = !pipe_valid || out_free;
    run       = in_valid && pipe_free;
    last_d    = (d == DAW'(D - 1));
    last_b    = (b == BAW'(NIB - 1));
    in_stall  = !(pipe_free && last_d);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d <= '0;
      b <= '0;
    end else if (run) begin
      d <= last_d ? '0 : d + 1'b1;
      if (last_d) b <= last_b ? '0 : b + 1'b1;
    end
  end

  // The source marks the last beat of a sample; it must agree with the count.
  a_beat_align: assert property (@(posedge clk) disable iff (!rst_n)
                                 (in_valid && !in_stall) |-> (in_last == last_b));

  // ---------------------------------------------------------------- memories
  logic signed [Q-1:0] w_word [NPE];
  logic signed [Q-1:0] b_word [NE_OUT];
  logic [WAW-1:0]      w_raddr, w_waddr;
  logic [PLW-1:0]      w_wlane;

  always_comb begin
    // W[n][i] lives in word (i/K)*D + n/NPN, lane (i%K)*NPN + n%NPN
    w_waddr = WAW'((int'(cfg_col) / K) * D + int'(cfg_row) / NPN);
    w_wlane = PLW'((int'(cfg_col) % K) * NPN + int'(cfg_row) % NPN);
    w_raddr = WAW'(int'(b) * D + int'(d));
  end

  wb_mem #(.Q(Q), .LANES(NPE), .WORDS(WW)) u_wmem (
    .clk, .we(cfg_we && !cfg_bias), .waddr(w_waddr), .wlane(w_wlane),
    .wdata(cfg_data), .raddr(w_raddr), .rdata(w_word)
  );

  wb_mem #(.Q(Q), .LANES(NE_OUT), .WORDS(1)) u_bmem (
    .clk, .we(cfg_we && cfg_bias), .waddr(1'b0), .wlane(OLW'(cfg_row)),
    .wdata(cfg_data), .raddr(1'b0), .rdata(b_word)
  );

  // ------------------------------------------- input interface and PE array
  logic signed [Q-1:0] pe_in  [NPE];
  logic signed [Q-1:0] pe_out [NPE];
  logic signed [Q-1:0] pipe   [NPE][D];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    localparam int unsigned S = p / NPN;
    always_comb begin
      pe_in[p] = (int'(b) * K + S < NE_IN) ? in_data[S] : '0;
    end
    nn_pe #(.Q(Q), .FRAC(FRAC), .DEPTH(D)) u_pe (
      .clk, .rst_n, .en(run), .clr(b == '0), .addr(d),
      .data_in(pe_in[p]), .weight_in(w_word[p]), .data_out(pe_out[p])
    );

    // pipeline register: final sums are captured word by word in the last beat
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int w = 0; w < D; w++) pipe[p][w] <= '0;
      end else if (run && last_b) begin
        pipe[p][d] <= pe_out[p];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        pipe_valid <= 1'b0;
    else if (run && last_b && last_d)  pipe_valid <= 1'b1;
    else if (out_free)                 pipe_valid <= 1'b0;
  end

  // ------------------------------------------------------ output interface
  logic signed [Q-1:0] act_out [NE_OUT];

  always_comb begin
    for (int n = 0; n < NE_OUT; n++) begin
      logic signed [63:0]  acc;
      logic signed [Q-1:0] v;
      acc = fx_ext(b_word[n]);
      for (int s = 0; s < K; s++) acc += fx_ext(pipe[s * NPN + n % NPN][n / NPN]);
      v = fx_sat(acc);
      if (ACT == ACT_RELU && v < 0) v = '0;
      act_out[n] = v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int n = 0; n < NE_OUT; n++) out_data[n] <= '0;
    end else if (out_free) begin
      out_valid <= pipe_valid;
      if (pipe_valid) out_data <= act_out;
    end
  end

endmodule
