// tb_wb_mem: self-checking testbench of the weight/bias memory.
//
// Writes every lane of every word with random values, one value per cycle, in
// random order with interleaved reads, and checks that each combinational read
// returns the last value written to every lane of the addressed word.
module tb_wb_mem;
  import tb_ref_pkg::*;
  localparam int Q = 16, LANES = 5, WORDS = 7;

  logic clk = 1'b0;
  logic we;
  logic [2:0] waddr, raddr;
  logic [2:0] wlane;
  logic signed [Q-1:0] wdata;
  logic signed [Q-1:0] rdata [LANES];
  longint model [WORDS][LANES];
  bit written [WORDS][LANES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  wb_mem #(.Q(Q), .LANES(LANES), .WORDS(WORDS)) dut (
    .clk, .we, .waddr, .wlane, .wdata, .raddr, .rdata
  );

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wlane = 0; wdata = 0; raddr = 0;
    // fill every location once
    for (int w = 0; w < WORDS; w++)
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk);
        we = 1; waddr = 3'(w); wlane = 3'(l); wdata = Q'(rnd(16));
        model[w][l] = longint'(wdata);
        written[w][l] = 1;
      end
    @(negedge clk) we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we    = 1'($urandom_range(0, 1));
      waddr = 3'($urandom_range(0, WORDS - 1));
      wlane = 3'($urandom_range(0, LANES - 1));
      wdata = Q'(rnd(16));
      raddr = 3'($urandom_range(0, WORDS - 1));
      #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (longint'(rdata[l]) != model[raddr][l]) begin
          failures++;
          if (failures < 10) $display("word %0d lane %0d: got %0d exp %0d", raddr, l, rdata[l], model[raddr][l]);
        end
      end
      @(posedge clk);
      if (we) model[waddr][wlane] = longint'(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
