// tap_delay_line: input register of the canceller holding x[n] ... x[n-L+1].
//
// Each accepted sample (x, plus the received sample y of the same instant)
// shifts the delay line by one: element 0 becomes the new x[n], element l the
// previous element l-1. The window and y are then offered downstream until
// taken; a new sample is accepted when the window is empty or is being taken
// in the same cycle. After reset all taps hold zero, so the first windows
// treat samples before the first one as zero. The delay line is this design's
// way to present the L delayed samples in parallel, as the canceller's input
// vector is drawn in the architecture.
module tap_delay_line #(
  parameter int unsigned Q = 16,
  parameter int unsigned L = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [Q-1:0] x_re,
  input  logic signed [Q-1:0] x_im,
  input  logic signed [Q-1:0] y_re,
  input  logic signed [Q-1:0] y_im,
  output logic                in_stall,
  output logic                out_valid,
  output logic signed [Q-1:0] win_re [L],
  output logic signed [Q-1:0] win_im [L],
  output logic signed [Q-1:0] yo_re,
  output logic signed [Q-1:0] yo_im,
  input  logic                out_stall
);
  assign in_stall = out_valid && out_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      yo_re     <= '0;
      yo_im     <= '0;
      for (int l = 0; l < L; l++) begin
        win_re[l] <= '0;
        win_im[l] <= '0;
      end
    end else if (!in_stall) begin
      out_valid <= in_valid;
      if (in_valid) begin
        win_re[0] <= x_re;
        win_im[0] <= x_im;
        for (int l = 1; l < L; l++) begin
          win_re[l] <= win_re[l-1];
          win_im[l] <= win_im[l-1];
        end
        yo_re <= y_re;
        yo_im <= y_im;
      end
    end
  end

endmodule
