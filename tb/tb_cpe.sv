// tb_cpe: self-checking testbench of the complex MAC PE.
//
// Random samples and coefficients (some at full scale to saturate) with random
// enable and reset-sum; the expected sum uses the four-multiplier complex
// product (tb_ref_pkg::cmul), so the three-multiplier datapath is checked
// against an independent formula every cycle.
module tb_cpe;
  import tb_ref_pkg::*;
  localparam int Q = 16, FRAC = 11;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, clr = 1'b0;
  logic signed [Q-1:0] a_re = '0, a_im = '0, h_re = '0, h_im = '0, s_re, s_im;
  longint m_re = 0, m_im = 0;
  int checks = 0, failures = 0, n_sat = 0;

  always #5 clk = ~clk;

  cpe dut (.clk, .rst_n, .en, .clr, .a_re, .a_im, .h_re, .h_im,
                                 .sum_re(s_re), .sum_im(s_im));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      longint pr, pi, er, ei;
      @(negedge clk);
      en  = ($urandom_range(0, 3) != 0);
      clr = ($urandom_range(0, 5) == 0);
      if (t % 40 < 3) begin
        a_re = 16'sh7fff; a_im = 16'sh7fff; h_re = 16'sh7fff; h_im = (t % 2 != 0) ? 16'sh7fff : -16'sh7fff;
      end else begin
        a_re = Q'(rnd(14)); a_im = Q'(rnd(14)); h_re = Q'(rnd(14)); h_im = Q'(rnd(14));
      end
      #1;
      cmul(longint'(a_re), longint'(a_im), longint'(h_re), longint'(h_im), Q, FRAC, pr, pi);
      er = en ? add(pr, clr ? 0 : m_re, Q) : m_re;
      ei = en ? add(pi, clr ? 0 : m_im, Q) : m_im;
      if (en && (er == 32767 || er == -32768 || ei == 32767 || ei == -32768)) n_sat++;
      checks += 2;
      if (longint'(s_re) != er) failures++;
      if (longint'(s_im) != ei) failures++;
      if (failures > 0 && failures < 5) $display("t=%0d got %0d,%0d exp %0d,%0d", t, s_re, s_im, er, ei);
      @(posedge clk);
      if (en) begin m_re = er; m_im = ei; end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
