// tb_nn_canceller_peak: end-to-end testbench of the canceller in the
// peak-performance configuration: L=4 taps (8 NN inputs), 34 hidden neurons,
// Q=18 (FRAC=12: one more integer bit than the 16-bit configuration), 40 PEs
// in the hidden layer (five neurons per cycle, last group padded), 10 PEs in
// the output layer (five inputs per cycle) and one CPE. Expected: one sample
// every 7 cycles, 13 cycles from input to output for an idle canceller.
module tb_nn_canceller_peak;
  import nnsic_pkg::*;
  localparam int Q = 18;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_stall, out_valid, out_stall;
  logic signed [Q-1:0] x_re, x_im, y_re, y_im, yhat_re, yhat_im, yc_re, yc_im;
  cfg_wr_t cfg;
  int checks, failures;
  bit done;

  nn_canceller #(.Q(Q), .FRAC(12), .L(4), .NH(34), .NL(1), .NPE('{40, 10}), .NCPE_LIN(1)) dut (
    .clk, .rst_n, .in_valid, .x_re, .x_im, .y_re, .y_im, .in_stall,
    .out_valid, .yhat_re, .yhat_im, .yc_re, .yc_im, .out_stall, .cfg
  );

  canceller_check #(.Q(Q), .FRAC(12), .L(4), .NH(34), .NL(1), .NPE('{40, 10}), .NCPE(1), .NSAMP(60)) u_chk (
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
