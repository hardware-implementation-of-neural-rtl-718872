// nbn_stage_check: drives and checks one nbn_stage configuration.
//
// Loads random weights and biases through the write port, then sends NSAMP
// random input vectors. Phase 1 (first half of the samples) offers inputs
// back to back and never stalls the output, and checks the schedule: the
// first beat of a sample appears 1 + L_first cycles after the vector is
// accepted (L_first = ceil(NE_IN/NPE') + 1, one cycle of which is the input
// hand-over) and a new sample is accepted every NG*CPG cycles. Phase 2 adds
// random input gaps and random output stalls. Every output beat is compared
// with tb_ref_pkg::nbn_ref. Results are reported on the ports when done.
module nbn_stage_check #(
  parameter int NE_IN = 4, parameter int NE_OUT = 8, parameter int NPE = 8,
  parameter int Q = 16, parameter int FRAC = 11, parameter int NSAMP = 40
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   n_stall,
  output int   n_relu,
  output bit   done
);
  import tb_ref_pkg::*;
  import nnsic_pkg::*;
  localparam int K   = (NPE > NE_IN) ? NPE / NE_IN : 1;
  localparam int PPN = NPE / K;
  localparam int CPG = (NE_IN + PPN - 1) / PPN;
  localparam int NG  = (NE_OUT + K - 1) / K;

  logic rst_n = 1'b0;
  logic in_valid = 1'b0, in_stall, out_valid, out_last, out_stall = 1'b0;
  logic signed [Q-1:0] in_data [NE_IN];
  logic signed [Q-1:0] out_data [K];
  logic cfg_we = 1'b0, cfg_bias = 1'b0;
  logic [7:0] cfg_row = '0, cfg_col = '0;
  logic signed [Q-1:0] cfg_data = '0;

  nbn_stage #(.Q(Q), .FRAC(FRAC), .NE_IN(NE_IN), .NE_OUT(NE_OUT), .NPE(NPE), .ACT(ACT_RELU)) dut (
    .clk, .rst_n, .in_valid, .in_data, .in_stall, .out_valid, .out_data, .out_last,
    .out_stall, .cfg_we, .cfg_bias, .cfg_row, .cfg_col, .cfg_data
  );

  longint w [], b [];
  longint xs [NSAMP][NE_IN];
  int acc_t [NSAMP];
  bit phase2 = 0;
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    checks = 0; failures = 0; n_stall = 0; n_relu = 0; done = 0;
    for (int i = 0; i < NE_IN; i++) in_data[i] = '0;
    w = new[NE_OUT * NE_IN];
    b = new[NE_OUT];
    foreach (w[i]) w[i] = rnd(12);
    foreach (b[i]) b[i] = rnd(12);
    for (int s = 0; s < NSAMP; s++)
      for (int i = 0; i < NE_IN; i++) xs[s][i] = (s % 7 == 3) ? rnd(16) : rnd(12);
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
    // driver
    for (int s = 0; s < NSAMP; s++) begin
      if (s == NSAMP / 2) phase2 = 1;
      if (phase2) repeat ($urandom_range(0, 2)) @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < NE_IN; i++) in_data[i] = Q'(xs[s][i]);
      do @(posedge clk); while (in_stall);
      acc_t[s] = cyc;
      #1 in_valid = 0;
    end
  end

  // output stall generator (phase 2 only)
  always @(negedge clk) begin
    out_stall <= phase2 && ($urandom_range(0, 3) == 0);
  end

  // monitor
  initial begin
    int s, g;
    longint y [];
    int first_cyc [NSAMP];
    s = 0; g = 0;
    wait (rst_n);
    while (s < NSAMP) begin
      @(posedge clk);
      if (out_valid && out_stall) n_stall++;
      if (out_valid && !out_stall) begin
        if (g == 0) begin
          nbn_ref(xs[s], w, b, NE_IN, NE_OUT, NPE, Q, FRAC, 1'b1, y);
          first_cyc[s] = cyc;
          if (s < NSAMP / 2 - 4) begin
            checks++;
            if (cyc - acc_t[s] != CPG + 2) begin
              failures++;
              $display("nbn latency: sample %0d first beat %0d cycles after accept, expected %0d", s, cyc - acc_t[s], CPG + 2);
            end
            if (s > 0) begin
              checks++;
              if (first_cyc[s] - first_cyc[s-1] != NG * CPG) begin
                failures++;
                $display("nbn rate: sample period %0d, expected %0d", first_cyc[s] - first_cyc[s-1], NG * CPG);
              end
            end
          end
        end
        for (int k = 0; k < K; k++) begin
          longint e;
          e = (g * K + k < NE_OUT) ? y[g*K + k] : 0;
          if (g * K + k < NE_OUT && e == 0) n_relu++;
          checks++;
          if (longint'(out_data[k]) != e) begin
            failures++;
            if (failures < 10) $display("nbn %0d/%0d/%0d sample %0d beat %0d lane %0d: got %0d exp %0d",
                                        NE_IN, NE_OUT, NPE, s, g, k, out_data[k], e);
          end
        end
        checks++;
        if (out_last != (g == NG - 1)) failures++;
        g++;
        if (g == NG) begin g = 0; s++; end
      end
    end
    done = 1;
  end
endmodule
