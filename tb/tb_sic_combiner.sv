// tb_sic_combiner: self-checking testbench of denormalization and the output
// adders. Random NN outputs, linear estimates and received samples arrive
// with independent random validity; the shift exponent is changed between
// -4 and +4 during the run and the consumer stalls at random. Every result is
// compared with y_hat = sat(y_lin + sat(2^s y_nn)), y_c = sat(y - y_hat); the
// test also checks that a source is consumed only when all three are present.
module tb_sic_combiner;
  import tb_ref_pkg::*;
  localparam int Q = 16, N = 400;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [5:0] shift = '0;
  logic nn_valid = 0, lin_valid = 0, y_valid = 0, nn_stall, take, out_valid, out_stall = 0;
  logic signed [Q-1:0] nn_re = '0, nn_im = '0, lin_re = '0, lin_im = '0, y_re = '0, y_im = '0;
  logic signed [Q-1:0] yhat_re, yhat_im, yc_re, yc_im;
  longint e_hr [$], e_hi [$], e_cr [$], e_ci [$];
  int checks = 0, failures = 0, n_stall = 0, n_sat = 0, n_left = 0, n_right = 0, got = 0;

  always #5 clk = ~clk;

  sic_combiner dut (.clk, .rst_n, .shift, .nn_valid, .nn_re, .nn_im, .nn_stall,
    .lin_valid, .lin_re, .lin_im, .y_valid, .y_re, .y_im, .take, .out_valid,
    .yhat_re, .yhat_im, .yc_re, .yc_im, .out_stall);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sources: each holds its value until taken
  always @(negedge clk) begin
    if (rst_n) begin
      out_stall <= ($urandom_range(0, 3) == 0);
      if (!nn_valid && $urandom_range(0, 1) != 0) begin
        nn_valid <= 1; nn_re <= Q'(rnd(12)); nn_im <= Q'(rnd(12));
      end
      if (!lin_valid && $urandom_range(0, 1) != 0) begin
        lin_valid <= 1; lin_re <= Q'(rnd(16)); lin_im <= Q'(rnd(16));
      end
      if (!y_valid && $urandom_range(0, 1) != 0) begin
        y_valid <= 1; y_re <= Q'(rnd(16)); y_im <= Q'(rnd(16));
      end
      if ($urandom_range(0, 19) == 0) shift <= 6'($signed($urandom_range(0, 8)) - 4);
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (take != (nn_valid && lin_valid && y_valid && (!out_valid || !out_stall))) failures++;
      if (take) begin
        longint hr, hi;
        hr = add(longint'(lin_re), denorm(longint'(nn_re), int'(shift), Q), Q);
        hi = add(longint'(lin_im), denorm(longint'(nn_im), int'(shift), Q), Q);
        e_hr.push_back(hr); e_hi.push_back(hi);
        e_cr.push_back(sat(longint'(y_re) - hr, Q)); e_ci.push_back(sat(longint'(y_im) - hi, Q));
        if (shift > 0) n_left++;
        if (shift < 0) n_right++;
        nn_valid  <= 0;
        lin_valid <= 0;
        y_valid   <= 0;
      end
      if (out_valid && out_stall) n_stall++;
      if (out_valid && !out_stall) begin
        checks++;
        if (longint'(yhat_re) != e_hr[0] || longint'(yhat_im) != e_hi[0] ||
            longint'(yc_re) != e_cr[0] || longint'(yc_im) != e_ci[0]) begin
          failures++;
          if (failures < 10) $display("result %0d: got %0d/%0d exp %0d/%0d", got, yhat_re, yc_re, e_hr[0], e_cr[0]);
        end
        if (e_cr[0] == 32767 || e_cr[0] == -32768) n_sat++;
        void'(e_hr.pop_front()); void'(e_hi.pop_front());
        void'(e_cr.pop_front()); void'(e_ci.pop_front());
        got++;
        if (got == N) begin
          checks++;
          if (n_stall == 0 || n_sat == 0 || n_left == 0 || n_right == 0) failures++;
          $display("stalls %0d saturations %0d left %0d right %0d", n_stall, n_sat, n_left, n_right);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
  end
endmodule
