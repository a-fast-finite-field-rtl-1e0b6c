// nxn_mult -- the deeply pipelined N x N-bit multiplier at the heart of the
// finite field multiplier (N = 380 by default).
//
// Following the paper, the N-bit operands are cut into four N/4-bit limbs and
// the sixteen limb products are formed by sixteen 3-stage sub-multipliers
// (sub_mult).  A 4-level binary adder tree, one register per level, sums the
// sixteen products, each shifted by (i+j)*N/4, into the 2N-bit result.  With
// the input buffer register and the output register the pipeline is
// 1 + 3 + 4 + 1 = 9 stages, so a product appears 9 cycles after its operands
// (Fig. 4 of the paper shows the first result at cycle 9).  The paper says
// there are 9 stages "including one stage for buffering"; which registers
// make up the count beyond the 3 + 4 it names is this design's reading.
// Interface: a, b every cycle (no handshake, no stall); p = a*b after
// LAT = 9 cycles.  Data-only pipeline: no reset.
module nxn_mult
  import ffm_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic             clk,
  input  logic [N-1:0]     a,
  input  logic [N-1:0]     b,
  output logic [2*N-1:0]   p
);
  localparam int unsigned Q = N / 4;   // sub-multiplier width

  if (N % 4 != 0) begin : g_chk
    $error("nxn_mult: N must be a multiple of 4");
  end

  // stage 0: input buffer
  logic [N-1:0] a_q, b_q;
  always_ff @(posedge clk) begin
    a_q <= a;
    b_q <= b;
  end

  // stages 1..3: sixteen limb products
  logic [2*Q-1:0] pp [16];
  for (genvar i = 0; i < 4; i++) begin : g_i
    for (genvar j = 0; j < 4; j++) begin : g_j
      sub_mult #(.W(Q)) u_sub (
        .clk (clk),
        .a   (a_q[i*Q +: Q]),
        .b   (b_q[j*Q +: Q]),
        .p   (pp[4*i+j])
      );
    end
  end

  // stages 4..7: adder tree 16 -> 8 -> 4 -> 2 -> 1
  logic [2*N-1:0] lv1 [8];
  logic [2*N-1:0] lv2 [4];
  logic [2*N-1:0] lv3 [2];
  logic [2*N-1:0] lv4;

  function automatic logic [2*N-1:0] placed(logic [2*Q-1:0] x, int unsigned k);
    return (2*N)'(x) << (k * Q);
  endfunction

  always_ff @(posedge clk) begin
    for (int unsigned m = 0; m < 8; m++) begin
      // pair products 2m and 2m+1: i = m/2, j = 2*(m%2) and +1
      lv1[m] <= placed(pp[2*m],   (m / 2) + 2 * (m % 2))
              + placed(pp[2*m+1], (m / 2) + 2 * (m % 2) + 1);
    end
    for (int unsigned m = 0; m < 4; m++) lv2[m] <= lv1[2*m] + lv1[2*m+1];
    for (int unsigned m = 0; m < 2; m++) lv3[m] <= lv2[2*m] + lv2[2*m+1];
    lv4 <= lv3[0] + lv3[1];
    // stage 8: output register
    p <= lv4;
  end
endmodule
