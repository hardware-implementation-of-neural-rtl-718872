// tb_linear_canceller: self-checking testbench of the complex FIR linear
// canceller, in the equi-performance shape (L=2, one CPE), the
// peak-performance shape (L=4, one CPE) and a shape with two CPEs and a
// padded last step (L=5, NCPE=2). Checking is done by linear_check.
module tb_linear_canceller;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int c0, f0, s0, c1, f1, s1, c2, f2, s2;
  bit d0, d1, d2;
  int checks, failures;

  linear_check #(.L(2), .NCPE(1), .Q(16)) u_equi (clk, c0, f0, s0, d0);
  linear_check #(.L(4), .NCPE(1), .Q(18)) u_peak (clk, c1, f1, s1, d1);
  linear_check #(.L(5), .NCPE(2), .Q(16)) u_two  (clk, c2, f2, s2, d2);

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1 && d2);
    checks   = c0 + c1 + c2 + 1;
    failures = f0 + f1 + f2;
    if (s0 + s1 + s2 == 0) begin failures++; $display("output stall never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
