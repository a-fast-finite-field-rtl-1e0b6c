// sub_mult -- W x W-bit unsigned multiplier pipelined into three stages.
//
// Sixteen of these (W = N/4, 95 bits by default) form the partial-product
// layer of the N x N multiplier.  The paper says only that each small
// multiplier is split into 3 pipeline stages; how the work is divided is this
// design's choice: the right operand is cut into three slices of H =
// ceil(W/3) bits.
//   stage 1: the three slice products a*b0, a*b1, a*b2 are registered
//   stage 2: a*b0 + (a*b1 << H) is registered, a*b2 is carried along
//   stage 3: the full product is registered
// Interface: a, b sampled every cycle; p = a*b appears exactly 3 cycles
// later (fully pipelined, one product per cycle, no stall, no reset needed
// because the block holds only data).
module sub_mult #(
  parameter int unsigned W = 95
) (
  input  logic             clk,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  output logic [2*W-1:0]   p
);
  localparam int unsigned H = (W + 2) / 3;

  logic [3*H-1:0]   b_ext;
  logic [W+H-1:0]   s1_p0, s1_p1, s1_p2;
  logic [2*W-1:0]   s2_sum;
  logic [W+H-1:0]   s2_p2;

  assign b_ext = (3*H)'(b);

  always_ff @(posedge clk) begin
    // stage 1: slice products
    s1_p0  <= (W+H)'(a) * (W+H)'(b_ext[0*H +: H]);
    s1_p1  <= (W+H)'(a) * (W+H)'(b_ext[1*H +: H]);
    s1_p2  <= (W+H)'(a) * (W+H)'(b_ext[2*H +: H]);
    // stage 2: combine the two low slices
    s2_sum <= (2*W)'(s1_p0) + ((2*W)'(s1_p1) << H);
    s2_p2  <= s1_p2;
    // stage 3: add the high slice
    p      <= s2_sum + ((2*W)'(s2_p2) << (2*H));
  end
endmodule
