// tb_nbn_stage: self-checking testbench of the NBN macro-pipeline stage.
//
// Three shapes: the equi-performance hidden layer (4 inputs, 8 neurons,
// 8 PEs: two neurons per cycle), the peak-performance hidden layer (8 inputs,
// 34 neurons, 40 PEs: five neurons per cycle, last group padded) and a shape
// with fewer PEs than inputs (8 inputs, 3 neurons, 3 PEs: three cycles per
// neuron, padded lanes). Each is checked by nbn_stage_check for values,
// latency, rate, stalls and ReLU clipping.
module tb_nbn_stage;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int c0, f0, s0, r0, c1, f1, s1, r1, c2, f2, s2, r2;
  bit d0, d1, d2;
  int checks, failures;

  nbn_stage_check #(.NE_IN(4), .NE_OUT(8),  .NPE(8),  .Q(16)) u_equi (clk, c0, f0, s0, r0, d0);
  nbn_stage_check #(.NE_IN(8), .NE_OUT(34), .NPE(40), .Q(18)) u_peak (clk, c1, f1, s1, r1, d1);
  nbn_stage_check #(.NE_IN(8), .NE_OUT(3),  .NPE(3),  .Q(16)) u_slow (clk, c2, f2, s2, r2, d2);

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1 && d2);
    checks   = c0 + c1 + c2 + 2;
    failures = f0 + f1 + f2;
    if (s0 + s1 + s2 == 0) begin failures++; $display("output stall never exercised"); end
    if (r0 + r1 + r2 == 0) begin failures++; $display("ReLU clipping never exercised"); end
    $display("stalls %0d relu-clipped %0d", s0 + s1 + s2, r0 + r1 + r2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
