// sync_fifo: small synchronous first-in first-out buffer.
//
// Holds up to DEPTH words of W bits. push stores wdata when not full; pop
// drops the head word when not empty; rdata always shows the head word. Push
// and pop may happen in the same cycle. Used inside the canceller to hold the
// linear estimates and received samples while the slower NN pipeline works on
// the same samples; this buffering is this design's choice.
// Lint may report rst_n as used both asynchronously and synchronously: the
// synchronous use is only the disable condition of the assertion below, no
// flip-flop is reset synchronously.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wdata,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         full,
  output logic         empty
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic          do_push, do_pop;

  always_comb begin
    full    = (count == (AW+1)'(DEPTH));
    empty   = (count == '0);
    do_push = push && !full;
    do_pop  = pop && !empty;
    rdata   = mem[rp];
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

// Handshake rules: the user never pushes into a full or pops an empty FIFO.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
