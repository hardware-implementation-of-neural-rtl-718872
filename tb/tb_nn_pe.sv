// tb_nn_pe: self-checking testbench of the MAC processing element.
//
// Drives a PE with a 3-word partial-sum memory with random enable, reset-sum,
// address, data and weight values (some large enough to saturate) and checks
// data_out every cycle against a model of the PE kept in the testbench: the
// new sum sat(sat(d*w >> FRAC) + (clr ? 0 : mem[addr])) when enabled, the
// stored word otherwise.
module tb_nn_pe;
  import tb_ref_pkg::*;
  localparam int Q = 16, FRAC = 11, DEPTH = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en, clr;
  logic [1:0] addr;
  logic signed [Q-1:0] din, win, dout;
  int checks = 0, failures = 0;
  int n_sat = 0;
  longint model [DEPTH];

  always #5 clk = ~clk;

  nn_pe #(.Q(Q), .FRAC(FRAC), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .en, .clr, .addr, .data_in(din), .weight_in(win), .data_out(dout)
  );

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clr = 0; addr = 0; din = 0; win = 0;
    for (int i = 0; i < DEPTH; i++) model[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      longint exp_v, prod;
      @(negedge clk);
      en   = ($urandom_range(0, 3) != 0);
      clr  = ($urandom_range(0, 4) == 0);
      addr = 2'($urandom_range(0, DEPTH - 1));
      if (t % 50 < 5) begin
        din = (t % 2 != 0) ? 16'sh7fff : -16'sh7fff;
        win = 16'sh7fff;
      end else begin
        din = Q'(rnd(14));
        win = Q'(rnd(14));
      end
      #1;
      prod  = mul(longint'(din), longint'(win), Q, FRAC);
      exp_v = en ? add(prod, clr ? 0 : model[addr], Q) : model[addr];
      if (en && (exp_v == 32767 || exp_v == -32768)) n_sat++;
      checks++;
      if (longint'(dout) != exp_v) begin
        failures++;
        if (failures < 10) $display("t=%0d mismatch: got %0d exp %0d", t, dout, exp_v);
      end
      @(posedge clk);
      if (en) model[addr] = exp_v;
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("saturated sums: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
