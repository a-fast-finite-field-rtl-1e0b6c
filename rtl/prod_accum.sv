// prod_accum -- the reconfigurable accumulation path behind the N x N
// multiplier ("Adder Tree" of the paper's Fig. 3).
//
// Each 2N-bit product leaving the multiplier carries its limb offset s (the
// sum of its operand limb indices) and is added, shifted left by s*N, into a
// 5N-bit accumulator.  The same path thus builds the 4N-bit result of a
// 2N x 2N product (4 products), the 5N-bit result of 3N x 2N (6 products)
// and the 3N-bit result of 2N x N (2 products).  A product marked `first`
// replaces the accumulator instead of adding to it, so no clearing cycle is
// needed between results; one marked `last` raises `done` with the result's
// tag in the cycle the full result is in `acc`.
// The paper draws this as an adder tree without giving its structure; a
// single shift-and-add accumulator shared by both interleaved sets is this
// design's choice (the schedule never overlaps the two sets' product
// streams).
// Timing: a product presented in cycle t is in `acc` in cycle t+1.
module prod_accum
  import ffm_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [2:0]       in_shift,   // limb offset, 0..3
  input  acc_tag_t         in_tag,
  input  logic [2*N-1:0]   prod,
  output logic [5*N-1:0]   acc,
  output logic             done,
  output acc_tag_t         done_tag
);
  logic [5*N-1:0] placed;
  assign placed = (5*N)'(prod) << (in_shift * N);

  always_ff @(posedge clk) begin
    if (in_valid) acc <= (in_first ? '0 : acc) + placed;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      done     <= 1'b0;
      done_tag <= '0;
    end else begin
      done     <= in_valid && in_last;
      if (in_valid && in_last) done_tag <= in_tag;
    end
  end
endmodule
