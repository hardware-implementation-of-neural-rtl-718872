// canceller_check: stimulus and checking for a complete nn_canceller.
//
// Connects to a canceller instantiated by the testbench (its parameters must
// match the ones given here). It loads a random network, linear taps and a
// denormalization exponent, then runs three phases:
//  A  samples back to back, no output stall: checks every result, the sample
//     period (the slowest NN stage or the linear canceller; checked away from
//     the phase change) and, for the first sample (empty pipeline), the
//     input-to-output latency (see latency_f: L_first + L per NBN/IBI pair as
//     the architecture gives it, plus the input register, the window
//     hand-over, the combiner register and one hand-over per further pair);
//     later samples also wait in the input register while layer 0 is busy;
//  B  random input gaps and random output stalls;
//  C  a re-configuration (new weights, taps and exponent) after the pipeline
//     has drained, then more random traffic.
// Every y_hat and y_c is compared with a model built from tb_ref_pkg. It
// counts how often each mechanism occurred (output stall, input stall,
// input bubble, ReLU clipping, saturation, left and right denormalization,
// reconfiguration) and counts a failure for any that never did.
module canceller_check
  import nnsic_pkg::*;
#(
  parameter int Q = 16, parameter int FRAC = 11, parameter int L = 2,
  parameter int NH = 8, parameter int NL = 1, parameter int NPE [NL+1] = '{8, 4},
  parameter int NCPE = 1, parameter int NSAMP = 60
) (
  input  logic                clk,
  output logic                rst_n,
  output logic                in_valid,
  output logic signed [Q-1:0] x_re,
  output logic signed [Q-1:0] x_im,
  output logic signed [Q-1:0] y_re,
  output logic signed [Q-1:0] y_im,
  input  logic                in_stall,
  input  logic                out_valid,
  input  logic signed [Q-1:0] yhat_re,
  input  logic signed [Q-1:0] yhat_im,
  input  logic signed [Q-1:0] yc_re,
  input  logic signed [Q-1:0] yc_im,
  output logic                out_stall,
  output cfg_wr_t             cfg,
  output int                  checks,
  output int                  failures,
  output bit                  done
);
  import tb_ref_pkg::*;
  localparam int NE0  = 2 * L;
  localparam int NCL  = (L + NCPE - 1) / NCPE;

  // schedule of layer l: inputs, outputs, cycles per sample, cycles to the
  // first output (NBN: first beat; IBI: all outputs)
  function automatic int ne_in(int l);  return (l == 0) ? NE0 : NH; endfunction
  function automatic int ne_out(int l); return (l == NL) ? 2 : NH;  endfunction
  function automatic int t_layer(int l);
    int k, ppn;
    if (l % 2 == 0) begin
      k = (NPE[l] > ne_in(l)) ? NPE[l] / ne_in(l) : 1;
      ppn = NPE[l] / k;
      return ((ne_out(l) + k - 1) / k) * ((ne_in(l) + ppn - 1) / ppn);
    end
    k = (NPE[l] > ne_out(l)) ? NPE[l] / ne_out(l) : 1;
    ppn = NPE[l] / k;
    return ((ne_in(l) + k - 1) / k) * ((ne_out(l) + ppn - 1) / ppn);
  endfunction
  // NBN layer l: cycles per neuron group and cycles to its first beat
  function automatic int cpg_of(int l);
    int k;
    k = (NPE[l] > ne_in(l)) ? NPE[l] / ne_in(l) : 1;
    return (ne_in(l) + NPE[l] / k - 1) / (NPE[l] / k);
  endfunction
  // IBI layer l: cycles per beat and beats per sample
  function automatic int d_of(int l);
    int k;
    k = (NPE[l] > ne_out(l)) ? NPE[l] / ne_out(l) : 1;
    return (ne_out(l) + NPE[l] / k - 1) / (NPE[l] / k);
  endfunction
  function automatic int nib_of(int l);
    int k;
    k = (NPE[l] > ne_out(l)) ? NPE[l] / ne_out(l) : 1;
    return (ne_in(l) + k - 1) / k;
  endfunction
  function automatic int period_f();
    int p;
    p = NCL;
    for (int l = 0; l <= NL; l++) if (t_layer(l) > p) p = t_layer(l);
    return p;
  endfunction
  // Latency of an idle canceller: input register, window hand-over and
  // combiner register, one hand-over per further NBN/IBI pair, and for each
  // pair the cycle the IBI stage outputs. The NBN stage offers beat g at
  // F + g*CPG (F = CPG + 1); the IBI stage takes beat g at
  // t_g = max(F + g*CPG, t_{g-1} + D) and outputs at t_last + D + 1. When the
  // IBI stage is never starved (CPG <= D) this is the architecture's
  // L_first + L = F + NIB*D + 1.
  function automatic int latency_f();
    int t, tg;
    t = 3 + (NL + 1) / 2 - 1;
    for (int l = 0; l < NL; l += 2) begin
      tg = cpg_of(l) + 1;
      for (int g = 1; g < nib_of(l + 1); g++)
        tg = (cpg_of(l) + 1 + g * cpg_of(l) > tg + d_of(l + 1)) ? cpg_of(l) + 1 + g * cpg_of(l) : tg + d_of(l + 1);
      t += tg + d_of(l + 1) + 1;
    end
    return t;
  endfunction
  localparam int PERIOD  = period_f();
  localparam int LATENCY = latency_f();
  localparam int NTOT = 3 * NSAMP;

  longint hr [], hi [];
  int shift;
  longint sx_re [NTOT], sx_im [NTOT], sy_re [NTOT], sy_im [NTOT];
  int acc_t [NTOT], out_t [NTOT];
  int cfg_gen [NTOT];
  int phase = 0, gen = 0, cyc = 0, nsent = 0;
  int n_ostall = 0, n_istall = 0, n_bubble = 0, n_relu = 0, n_sat = 0, n_left = 0, n_right = 0, n_reconf = 0;

  // saved parameter sets, so results can be checked against the set in force
  longint sw [2][NL+1][], sb [2][NL+1][], shr [2][], shi [2][];
  int sshift [2];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic cfg_write(cfg_target_e t, int layer, int row, int col, longint re, longint im);
    @(negedge clk);
    cfg.we = 1; cfg.target = t; cfg.layer = 4'(layer); cfg.row = 8'(row); cfg.col = 8'(col);
    cfg.re = 32'(re); cfg.im = 32'(im);
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic load_params(int set, int wbits);
    hr = new[L]; hi = new[L];
    foreach (hr[i]) begin hr[i] = rnd(wbits + 1); hi[i] = rnd(wbits + 1); end
    shift = (set == 0) ? 2 : -1;
    for (int l = 0; l <= NL; l++) begin
      sw[set][l] = new[ne_out(l) * ne_in(l)];
      sb[set][l] = new[ne_out(l)];
      foreach (sw[set][l][i]) sw[set][l][i] = rnd(wbits);
      foreach (sb[set][l][i]) sb[set][l][i] = rnd(wbits);
      for (int n = 0; n < ne_out(l); n++) begin
        for (int i = 0; i < ne_in(l); i++) cfg_write(CFG_W, l, n, i, sw[set][l][n*ne_in(l)+i], 0);
        cfg_write(CFG_B, l, n, 0, sb[set][l][n], 0);
      end
    end
    for (int l = 0; l < L; l++) cfg_write(CFG_H, 0, 0, l, hr[l], hi[l]);
    cfg_write(CFG_SHIFT, 0, 0, 0, longint'(shift), 0);
    shr[set] = hr; shi[set] = hi;
    sshift[set] = shift;
  endtask

  // driver
  initial begin
    checks = 0; failures = 0; done = 0;
    rst_n = 0; in_valid = 0; x_re = '0; x_im = '0; y_re = '0; y_im = '0;
    cfg = '0;
    for (int s = 0; s < NTOT; s++) begin
      sx_re[s] = (s % 11 == 5) ? rnd(Q) : rnd(Q - 3);
      sx_im[s] = (s % 11 == 5) ? rnd(Q) : rnd(Q - 3);
      sy_re[s] = (s % 13 == 6) ? rnd(Q) : rnd(Q - 2);
      sy_im[s] = rnd(Q - 2);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load_params(0, FRAC);
    for (int s = 0; s < NTOT; s++) begin
      if (s == NSAMP) phase = 1;
      if (s == 2 * NSAMP) begin
        // drain, then switch to a new parameter set
        wait (out_t[s-1] != 0);
        gen = 1;
        n_reconf++;
        load_params(1, FRAC);
        phase = 2;
      end
      if (phase > 0) begin
        int gap;
        gap = $urandom_range(0, 3) == 0 ? $urandom_range(1, 6) : 0;
        for (int g = 0; g < gap; g++) begin
          @(negedge clk);
          n_bubble++;
        end
      end
      in_valid = 1;
      x_re = Q'(sx_re[s]); x_im = Q'(sx_im[s]); y_re = Q'(sy_re[s]); y_im = Q'(sy_im[s]);
      cfg_gen[s] = gen;
      do begin
        @(posedge clk);
        if (in_stall) n_istall++;
      end while (in_stall);
      acc_t[s] = cyc;
      nsent = s + 1;
      #1 in_valid = 0;
    end
  end

  always @(negedge clk) out_stall <= (phase > 0) && ($urandom_range(0, 4) == 0);

  // monitor and reference model
  initial begin
    int s;
    s = 0;
    for (int i = 0; i < NTOT; i++) out_t[i] = 0;
    wait (rst_n);
    while (s < NTOT) begin
      @(posedge clk);
      if (out_valid && out_stall) n_ostall++;
      if (out_valid && !out_stall) begin
        longint l0 [], h [], o [];
        longint lr, li, wxr [], wxi [], ehr, ehi, ecr, eci;
        int st;
        st = cfg_gen[s];
        l0 = new[NE0]; wxr = new[L]; wxi = new[L];
        for (int l = 0; l < L; l++) begin
          wxr[l] = (s - l >= 0) ? sx_re[s-l] : 0;
          wxi[l] = (s - l >= 0) ? sx_im[s-l] : 0;
          l0[2*l] = wxr[l]; l0[2*l+1] = wxi[l];
        end
        h = l0;
        for (int l = 0; l <= NL; l++) begin
          if (l % 2 == 0)
            nbn_ref(h, sw[st][l], sb[st][l], ne_in(l), ne_out(l), NPE[l], Q, FRAC, l < NL, o);
          else
            ibi_ref(h, sw[st][l], sb[st][l], ne_in(l), ne_out(l), NPE[l], Q, FRAC, l < NL, o);
          if (l < NL) foreach (o[j]) if (o[j] == 0) n_relu++;
          h = o;
        end
        lin_ref(wxr, wxi, shr[st], shi[st], L, NCPE, Q, FRAC, lr, li);
        ehr = add(lr, denorm(o[0], sshift[st], Q), Q);
        ehi = add(li, denorm(o[1], sshift[st], Q), Q);
        ecr = sat(sy_re[s] - ehr, Q);
        eci = sat(sy_im[s] - ehi, Q);
        if (sshift[st] > 0) n_left++;
        if (sshift[st] < 0) n_right++;
        if (ecr == sat(64'sh7fffffffffff, Q) || ecr == sat(-64'sh7fffffffffff, Q)) n_sat++;
        checks++;
        if (longint'(yhat_re) != ehr || longint'(yhat_im) != ehi ||
            longint'(yc_re) != ecr || longint'(yc_im) != eci) begin
          failures++;
          if (failures < 10) $display("sample %0d: y_hat %0d,%0d exp %0d,%0d  y_c %0d,%0d exp %0d,%0d",
                                      s, yhat_re, yhat_im, ehr, ehi, yc_re, yc_im, ecr, eci);
        end
        out_t[s] = cyc;
        if (s == 0) begin
          checks++;
          if (out_t[s] - acc_t[s] != LATENCY) begin
            failures++;
            $display("latency of sample %0d: %0d cycles, expected %0d", s, out_t[s] - acc_t[s], LATENCY);
          end
        end
        if (s >= 3 && s < NSAMP - 12) begin
          checks++;
          if (out_t[s] - out_t[s-1] != PERIOD) begin
            failures++;
            $display("period at sample %0d: %0d cycles, expected %0d", s, out_t[s] - out_t[s-1], PERIOD);
          end
        end
        s++;
      end
    end
    $display("period %0d latency %0d cycles (checked in phase A)", PERIOD, LATENCY);
    $display("mechanisms: output stalls %0d, input stalls %0d, input bubbles %0d, relu-clipped %0d, saturated %0d, left-shift %0d, right-shift %0d, reconfigurations %0d",
             n_ostall, n_istall, n_bubble, n_relu, n_sat, n_left, n_right, n_reconf);
    checks += 8;
    if (n_ostall == 0) failures++;
    if (n_istall == 0) failures++;
    if (n_bubble == 0) failures++;
    if (n_relu == 0)   failures++;
    if (n_sat == 0)    failures++;
    if (n_left == 0)   failures++;
    if (n_right == 0)  failures++;
    if (n_reconf == 0) failures++;
    done = 1;
  end
endmodule
