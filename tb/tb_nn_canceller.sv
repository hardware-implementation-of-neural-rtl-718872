// tb_nn_canceller: end-to-end testbench of the canceller at its default size
// (the equi-performance configuration: L=2, 8 hidden neurons, Q=16, 8 + 4 PEs,
// one CPE). 180 samples through three phases (canceller_check): back-to-back
// traffic with value, 4-cycle period and 10-cycle latency checks; random gaps
// and output stalls; a parameter reload followed by more traffic.
module tb_nn_canceller;
  import nnsic_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_stall, out_valid, out_stall;
  logic signed [15:0] x_re, x_im, y_re, y_im, yhat_re, yhat_im, yc_re, yc_im;
  cfg_wr_t cfg;
  int checks, failures;
  bit done;

  nn_canceller dut (
    .clk, .rst_n, .in_valid, .x_re, .x_im, .y_re, .y_im, .in_stall,
    .out_valid, .yhat_re, .yhat_im, .yc_re, .yc_im, .out_stall, .cfg
  );

  canceller_check #(.Q(16), .FRAC(11), .L(2), .NH(8), .NL(1), .NPE('{8, 4}), .NCPE(1), .NSAMP(60)) u_chk (
    .clk, .rst_n, .in_valid, .x_re, .x_im, .y_re, .y_im, .in_stall,
    .out_valid, .yhat_re, .yhat_im, .yc_re, .yc_im, .out_stall, .cfg,
    .checks, .failures, .done
  );

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
