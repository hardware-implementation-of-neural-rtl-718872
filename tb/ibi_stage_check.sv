// ibi_stage_check: drives and checks one ibi_stage configuration.
//
// Loads random weights and biases, then sends NSAMP samples as beats of K
// inputs. Phase 1 offers beats back to back without output stalls and checks
// that the outputs are valid 2 cycles after the last beat of a sample is
// taken (its last update cycle plus the PE pipeline register, i.e. the
// paper's L = NE_IN*NE_OUT/NPE + 1 counted from the first update) and that a
// sample takes NIB*D cycles. Phase 2 adds random gaps and output stalls.
// Every output vector is compared with tb_ref_pkg::ibi_ref.
module ibi_stage_check #(
  parameter int NE_IN = 8, parameter int NE_OUT = 2, parameter int NPE = 4,
  parameter int Q = 16, parameter int FRAC = 11, parameter int NSAMP = 40,
  parameter bit RELU = 0
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   n_stall,
  output bit   done
);
  import tb_ref_pkg::*;
  import nnsic_pkg::*;
  localparam int K   = (NPE > NE_OUT) ? NPE / NE_OUT : 1;
  localparam int NPN = NPE / K;
  localparam int D   = (NE_OUT + NPN - 1) / NPN;
  localparam int NIB = (NE_IN + K - 1) / K;
  localparam act_e ACT = RELU ? ACT_RELU : ACT_LINEAR;

  logic rst_n = 1'b0;
  logic in_valid = 1'b0, in_last = 1'b0, in_stall, out_valid, out_stall = 1'b0;
  logic signed [Q-1:0] in_data [K];
  logic signed [Q-1:0] out_data [NE_OUT];
  logic cfg_we = 1'b0, cfg_bias = 1'b0;
  logic [7:0] cfg_row = '0, cfg_col = '0;
  logic signed [Q-1:0] cfg_data = '0;

  ibi_stage #(.Q(Q), .FRAC(FRAC), .NE_IN(NE_IN), .NE_OUT(NE_OUT), .NPE(NPE), .ACT(ACT)) dut (
    .clk, .rst_n, .in_valid, .in_data, .in_last, .in_stall, .out_valid, .out_data,
    .out_stall, .cfg_we, .cfg_bias, .cfg_row, .cfg_col, .cfg_data
  );

  longint w [], b [];
  longint xs [NSAMP][];
  int last_t [NSAMP];
  int first_t [NSAMP];
  bit phase2 = 0;
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    checks = 0; failures = 0; n_stall = 0; done = 0;
    for (int i = 0; i < K; i++) in_data[i] = '0;
    w = new[NE_OUT * NE_IN];
    b = new[NE_OUT];
    foreach (w[i]) w[i] = rnd(12);
    foreach (b[i]) b[i] = rnd(12);
    for (int s = 0; s < NSAMP; s++) begin
      xs[s] = new[NE_IN];
      for (int i = 0; i < NE_IN; i++) xs[s][i] = (s % 9 == 4) ? rnd(Q) : rnd(12);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NE_OUT; n++) begin
      for (int i = 0; i < NE_IN; i++) begin
        @(negedge clk);
        cfg_we = 1; cfg_bias = 0; cfg_row = 8'(n); cfg_col = 8'(i); cfg_data = Q'(w[n*NE_IN+i]);
      end
      @(negedge clk);
      cfg_we = 1; cfg_bias = 1; cfg_row = 8'(n); cfg_col = 0; cfg_data = Q'(b[n]);
    end
    @(negedge clk) cfg_we = 0;
    for (int s = 0; s < NSAMP; s++) begin
      if (s == NSAMP / 2) phase2 = 1;
      for (int bt = 0; bt < NIB; bt++) begin
        if (phase2) repeat ($urandom_range(0, 1)) @(negedge clk);
        in_valid = 1;
        in_last  = (bt == NIB - 1);
        for (int k = 0; k < K; k++)
          in_data[k] = (bt * K + k < NE_IN) ? Q'(xs[s][bt*K + k]) : Q'(rnd(Q));
        do @(posedge clk); while (in_stall);
        if (bt == 0) first_t[s] = cyc - D + 1;
        if (bt == NIB - 1) last_t[s] = cyc;
        #1 in_valid = 0;
      end
    end
  end

  always @(negedge clk) out_stall <= phase2 && ($urandom_range(0, 3) == 0);

  initial begin
    int s;
    longint y [];
    s = 0;
    wait (rst_n);
    while (s < NSAMP) begin
      @(posedge clk);
      if (out_valid && out_stall) n_stall++;
      if (out_valid && !out_stall) begin
        ibi_ref(xs[s], w, b, NE_IN, NE_OUT, NPE, Q, FRAC, RELU, y);
        for (int n = 0; n < NE_OUT; n++) begin
          checks++;
          if (longint'(out_data[n]) != y[n]) begin
            failures++;
            if (failures < 10) $display("ibi %0d/%0d/%0d sample %0d neuron %0d: got %0d exp %0d",
                                        NE_IN, NE_OUT, NPE, s, n, out_data[n], y[n]);
          end
        end
        if (s < NSAMP / 2 - 4) begin
          checks += 2;
          if (cyc - last_t[s] != 2) begin
            failures++;
            $display("ibi latency: outputs %0d cycles after last beat, expected 2", cyc - last_t[s]);
          end
          if (cyc - first_t[s] != NIB * D + 1) begin
            failures++;
            $display("ibi latency: outputs %0d cycles after first update, expected %0d", cyc - first_t[s], NIB * D + 1);
          end
        end
        s++;
      end
    end
    done = 1;
  end
endmodule
