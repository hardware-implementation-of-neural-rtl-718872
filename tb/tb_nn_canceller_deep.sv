// tb_nn_canceller_deep: end-to-end testbench of cancellers with three hidden
// layers (NL=3: four macro-pipeline stages NBN, IBI, NBN, IBI), L=2, 8 neurons
// per hidden layer, Q=16. Two cancellers run side by side:
//  a  PE counts 8, 16, 16, 4: every stage moves two neurons (or inputs) per
//     cycle and needs 4 cycles per sample, so nothing stalls and the NN
//     latency is the architecture's sum over the two NBN/IBI pairs,
//     (2 + 5) + (2 + 5) = 14 cycles; with the input register, window
//     hand-over, combiner register and the hand-over between the pairs an
//     idle canceller answers after 18 cycles, one sample every 4 cycles.
//  b  PE counts 8, 16, 4, 2: the second pair moves one neuron per beat and
//     its NBN stage needs 16 cycles per sample, so the stages around it are
//     stalled and starved; one sample every 16 cycles, 30 cycles latency
//     (the last stage waits for beats that arrive every 2 cycles).
// Each is driven and checked by its own canceller_check.
module tb_nn_canceller_deep;
  import nnsic_pkg::*;
  localparam int unsigned NPE_A [4] = '{8, 16, 16, 4};
  localparam int unsigned NPE_B [4] = '{8, 16, 4, 2};
  localparam int          CHK_A [4] = '{8, 16, 16, 4};
  localparam int          CHK_B [4] = '{8, 16, 4, 2};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n [2], in_valid [2], in_stall [2], out_valid [2], out_stall [2];
  logic signed [15:0] x_re [2], x_im [2], y_re [2], y_im [2];
  logic signed [15:0] yhat_re [2], yhat_im [2], yc_re [2], yc_im [2];
  cfg_wr_t cfg [2];
  int checks [2], failures [2];
  bit done [2];

  nn_canceller #(.Q(16), .FRAC(11), .L(2), .NH(8), .NL(3), .NPE(NPE_A), .NCPE_LIN(1)) dut_a (
    .clk, .rst_n(rst_n[0]), .in_valid(in_valid[0]), .x_re(x_re[0]), .x_im(x_im[0]),
    .y_re(y_re[0]), .y_im(y_im[0]), .in_stall(in_stall[0]), .out_valid(out_valid[0]),
    .yhat_re(yhat_re[0]), .yhat_im(yhat_im[0]), .yc_re(yc_re[0]), .yc_im(yc_im[0]),
    .out_stall(out_stall[0]), .cfg(cfg[0])
  );

  canceller_check #(.Q(16), .FRAC(11), .L(2), .NH(8), .NL(3), .NPE(CHK_A), .NCPE(1), .NSAMP(60)) u_chk_a (
    .clk, .rst_n(rst_n[0]), .in_valid(in_valid[0]), .x_re(x_re[0]), .x_im(x_im[0]),
    .y_re(y_re[0]), .y_im(y_im[0]), .in_stall(in_stall[0]), .out_valid(out_valid[0]),
    .yhat_re(yhat_re[0]), .yhat_im(yhat_im[0]), .yc_re(yc_re[0]), .yc_im(yc_im[0]),
    .out_stall(out_stall[0]), .cfg(cfg[0]), .checks(checks[0]), .failures(failures[0]), .done(done[0])
  );

  nn_canceller #(.Q(16), .FRAC(11), .L(2), .NH(8), .NL(3), .NPE(NPE_B), .NCPE_LIN(1)) dut_b (
    .clk, .rst_n(rst_n[1]), .in_valid(in_valid[1]), .x_re(x_re[1]), .x_im(x_im[1]),
    .y_re(y_re[1]), .y_im(y_im[1]), .in_stall(in_stall[1]), .out_valid(out_valid[1]),
    .yhat_re(yhat_re[1]), .yhat_im(yhat_im[1]), .yc_re(yc_re[1]), .yc_im(yc_im[1]),
    .out_stall(out_stall[1]), .cfg(cfg[1])
  );

  canceller_check #(.Q(16), .FRAC(11), .L(2), .NH(8), .NL(3), .NPE(CHK_B), .NCPE(1), .NSAMP(60)) u_chk_b (
    .clk, .rst_n(rst_n[1]), .in_valid(in_valid[1]), .x_re(x_re[1]), .x_im(x_im[1]),
    .y_re(y_re[1]), .y_im(y_im[1]), .in_stall(in_stall[1]), .out_valid(out_valid[1]),
    .yhat_re(yhat_re[1]), .yhat_im(yhat_im[1]), .yc_re(yc_re[1]), .yc_im(yc_im[1]),
    .out_stall(out_stall[1]), .cfg(cfg[1]), .checks(checks[1]), .failures(failures[1]), .done(done[1])
  );

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1] + 1);
    $finish;
  end

  initial begin
    wait (done[0] && done[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1]);
    $finish;
  end
endmodule
