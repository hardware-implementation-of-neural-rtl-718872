// linear_check: drives and checks one linear_canceller configuration.
//
// Writes random taps, then sends NSAMP random windows. Phase 1 offers windows
// back to back without output stalls and checks the paper's latency
// ceil(L/NCPE) (result valid 1 + NC cycles after the window is taken, one
// cycle being the hand-over) and that a window is taken every NC cycles.
// Phase 2 adds random gaps and stalls. Results are compared with
// tb_ref_pkg::lin_ref.
module linear_check #(
  parameter int L = 2, parameter int NCPE = 1, parameter int Q = 16,
  parameter int FRAC = 11, parameter int NSAMP = 40
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   n_stall,
  output bit   done
);
  import tb_ref_pkg::*;
  localparam int NC = (L + NCPE - 1) / NCPE;

  logic rst_n = 1'b0, in_valid = 1'b0, in_stall, out_valid, out_stall = 1'b0;
  logic signed [Q-1:0] x_re [L];
  logic signed [Q-1:0] x_im [L];
  logic signed [Q-1:0] out_re, out_im;
  logic cfg_we = 1'b0;
  logic [7:0] cfg_tap = '0;
  logic signed [Q-1:0] cfg_re = '0, cfg_im = '0;

  linear_canceller #(.Q(Q), .FRAC(FRAC), .L(L), .NCPE(NCPE)) dut (
    .clk, .rst_n, .in_valid, .x_re, .x_im, .in_stall, .out_valid, .out_re, .out_im,
    .out_stall, .cfg_we, .cfg_tap, .cfg_re, .cfg_im
  );

  longint hr [], hi [];
  longint xr [NSAMP][], xi [NSAMP][];
  int acc_t [NSAMP];
  bit phase2 = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    checks = 0; failures = 0; n_stall = 0; done = 0;
    for (int l = 0; l < L; l++) begin x_re[l] = '0; x_im[l] = '0; end
    hr = new[L]; hi = new[L];
    foreach (hr[l]) begin hr[l] = rnd(13); hi[l] = rnd(13); end
    for (int s = 0; s < NSAMP; s++) begin
      xr[s] = new[L]; xi[s] = new[L];
      for (int l = 0; l < L; l++) begin xr[s][l] = rnd(14); xi[s][l] = rnd(14); end
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int l = 0; l < L; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_tap = 8'(l); cfg_re = Q'(hr[l]); cfg_im = Q'(hi[l]);
    end
    @(negedge clk) cfg_we = 0;
    for (int s = 0; s < NSAMP; s++) begin
      if (s == NSAMP / 2) phase2 = 1;
      if (phase2) repeat ($urandom_range(0, 2)) @(negedge clk);
      in_valid = 1;
      for (int l = 0; l < L; l++) begin x_re[l] = Q'(xr[s][l]); x_im[l] = Q'(xi[s][l]); end
      do @(posedge clk); while (in_stall);
      acc_t[s] = cyc;
      #1 in_valid = 0;
    end
  end

  always @(negedge clk) out_stall <= phase2 && ($urandom_range(0, 2) == 0);

  initial begin
    int s;
    longint er, ei;
    s = 0;
    wait (rst_n);
    while (s < NSAMP) begin
      @(posedge clk);
      if (out_valid && out_stall) n_stall++;
      if (out_valid && !out_stall) begin
        lin_ref(xr[s], xi[s], hr, hi, L, NCPE, Q, FRAC, er, ei);
        checks += 2;
        if (longint'(out_re) != er || longint'(out_im) != ei) begin
          failures++;
          if (failures < 10) $display("lin L=%0d sample %0d: got %0d,%0d exp %0d,%0d", L, s, out_re, out_im, er, ei);
        end
        if (s < NSAMP / 2 - 4) begin
          checks++;
          if (cyc - acc_t[s] != NC + 1) begin
            failures++;
            $display("lin latency %0d, expected %0d", cyc - acc_t[s], NC + 1);
          end
          if (s > 0) begin
            checks++;
            if (acc_t[s] - acc_t[s-1] != NC) begin
              failures++;
              $display("lin rate: window period %0d, expected %0d", acc_t[s] - acc_t[s-1], NC);
            end
          end
        end
        s++;
      end
    end
    done = 1;
  end
endmodule
