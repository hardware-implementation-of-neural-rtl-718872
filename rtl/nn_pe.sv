// nn_pe: real multiply-accumulate processing element of a macro-pipeline stage.
//
// Each enabled cycle the PE multiplies data_in by weight_in and adds the product
// to the partial sum stored at word addr of its local memory, or to zero when
// clr ("reset sum") is high. The new sum is written back to that word and is
// also driven on data_out in the same cycle; when en is low data_out shows the
// stored partial sum unchanged and nothing is written. In a neuron-by-neuron
// stage DEPTH is 1 (one Q-bit register); in an input-by-input stage DEPTH is
// ceil(NE_l / PEs per input), one word per neuron the PE serves.
//
// The structure (multiplier, adder, reset-sum mux, enable mux, memory, output
// taken after the enable mux) follows the PE drawing of the architecture. The
// saturating fixed-point arithmetic is shared with the rest of the design
// (fxp_funcs.svh). data_out is combinational; the stage registers it.
module nn_pe #(
  parameter int unsigned Q     = 16,
  parameter int unsigned FRAC  = 11,
  parameter int unsigned DEPTH = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                clr,
  input  logic [AW-1:0]       addr,
  input  logic signed [Q-1:0] data_in,
  input  logic signed [Q-1:0] weight_in,
  output logic signed [Q-1:0] data_out
);
  `include "fxp_funcs.svh"

  logic signed [Q-1:0] mem [DEPTH];
  logic signed [Q-1:0] partial, addend, sum;

  always_comb begin
    partial  = mem[addr];
    addend   = clr ? '0 : partial;
    sum      = fx_add(fx_mul(data_in, weight_in), addend);
    data_out = en ? sum : partial;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (en) begin
      mem[addr] <= sum;
    end
  end

endmodule
