// tb_ibi_stage: self-checking testbench of the IBI macro-pipeline stage.
//
// Three shapes: the equi-performance output layer (8 inputs, 2 neurons,
// 4 PEs: two inputs per cycle), the peak-performance output layer (34 inputs,
// 2 neurons, 10 PEs: five inputs per cycle, last beat padded) and a shape
// with several partial sums per PE (5 inputs, 6 ReLU neurons, 4 PEs: two
// memory words per PE). Values, latency, rate and stalls are checked by
// ibi_stage_check.
module tb_ibi_stage;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int c0, f0, s0, c1, f1, s1, c2, f2, s2;
  bit d0, d1, d2;
  int checks, failures;

  ibi_stage_check #(.NE_IN(8),  .NE_OUT(2), .NPE(4),  .Q(16)) u_equi (clk, c0, f0, s0, d0);
  ibi_stage_check #(.NE_IN(34), .NE_OUT(2), .NPE(10), .Q(18)) u_peak (clk, c1, f1, s1, d1);
  ibi_stage_check #(.NE_IN(5),  .NE_OUT(6), .NPE(4),  .Q(16), .RELU(1)) u_deep (clk, c2, f2, s2, d2);

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
    $display("stalls %0d", s0 + s1 + s2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
