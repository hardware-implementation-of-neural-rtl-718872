// tb_tap_delay_line: self-checking testbench of the input delay line.
//
// Feeds 300 random samples with random gaps while the consumer stalls at
// random, and checks every window that is taken: element l must be the sample
// accepted l samples earlier (zero before the first), and y the newest y.
// Also checks that no sample is accepted while an offered window is stalled.
module tb_tap_delay_line;
  import tb_ref_pkg::*;
  localparam int Q = 16, L = 3, N = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_stall, out_valid, out_stall = 1'b0;
  logic signed [Q-1:0] x_re = '0, x_im = '0, y_re = '0, y_im = '0, yo_re, yo_im;
  logic signed [Q-1:0] win_re [L];
  logic signed [Q-1:0] win_im [L];
  longint hx_re [$], hx_im [$];
  longint hy_re [$], hy_im [$];
  int checks = 0, failures = 0, n_stall = 0, taken = 0;

  always #5 clk = ~clk;

  tap_delay_line #(.Q(Q), .L(L)) dut (.clk, .rst_n, .in_valid, .x_re, .x_im, .y_re, .y_im,
    .in_stall, .out_valid, .win_re, .win_im, .yo_re, .yo_im, .out_stall);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_stall <= ($urandom_range(0, 2) == 0);

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int s = 0; s < N; s++) begin
      repeat ($urandom_range(0, 1)) @(negedge clk);
      in_valid = 1;
      x_re = Q'(rnd(16)); x_im = Q'(rnd(16)); y_re = Q'(rnd(16)); y_im = Q'(rnd(16));
      do @(posedge clk); while (in_stall);
      hx_re.push_back(longint'(x_re)); hx_im.push_back(longint'(x_im));
      hy_re.push_back(longint'(y_re)); hy_im.push_back(longint'(y_im));
      #1 in_valid = 0;
    end
  end

  initial begin
    wait (rst_n);
    while (taken < N) begin
      @(posedge clk);
      if (out_valid && out_stall) begin
        n_stall++;
        checks++;
        if (!in_stall) failures++;
      end
      if (out_valid && !out_stall) begin
        int last;
        last = hx_re.size() - 1;
        for (int l = 0; l < L; l++) begin
          longint er, ei;
          er = (last - l >= 0) ? hx_re[last - l] : 0;
          ei = (last - l >= 0) ? hx_im[last - l] : 0;
          checks++;
          if (longint'(win_re[l]) != er || longint'(win_im[l]) != ei) begin
            failures++;
            if (failures < 10) $display("window %0d tap %0d: got %0d exp %0d", taken, l, win_re[l], er);
          end
        end
        checks++;
        if (longint'(yo_re) != hy_re[last] || longint'(yo_im) != hy_im[last]) failures++;
        taken++;
      end
    end
    checks++;
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
