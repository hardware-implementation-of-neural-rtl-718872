// wb_mem: weight or bias memory of a macro-pipeline stage.
//
// WORDS words of LANES signed Q-bit values. The read port returns a whole word
// combinationally (rdata follows raddr in the same cycle), so all PEs of a
// stage get their weights in parallel, as in a LUT-RAM. The write port stores
// one Q-bit value (lane wlane of word waddr) per cycle; it is the external
// re-configuration port. Weight memories are N_PE values wide and bias
// memories k values wide, as the architecture prescribes; reading a word
// combinationally and writing one value at a time is this design's choice.
// Contents are not reset: the stages never use a value that was not written.
module wb_mem #(
  parameter int unsigned Q     = 16,
  parameter int unsigned LANES = 8,
  parameter int unsigned WORDS = 4,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [LW-1:0]       wlane,
  input  logic signed [Q-1:0] wdata,
  input  logic [AW-1:0]       raddr,
  output logic signed [Q-1:0] rdata [LANES]
);
  logic signed [Q-1:0] mem [WORDS][LANES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wlane] <= wdata;
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) rdata[i] = mem[raddr][i];
  end

endmodule
