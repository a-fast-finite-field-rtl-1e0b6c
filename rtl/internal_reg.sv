// internal_reg -- the internal register file between the reconfigurable
// multiplier and the post-processing module ("Internal Reg." in the paper's
// Fig. 1), one bank per interleaved data set.
//
// Per set it holds the accepted operands A and B and the three intermediate
// results that come back from the accumulator, each sliced as in the
// paper's Fig. 3:
//   after A*B       : q1 = C >> ALPHA (3N bits), r1 = C mod 2^ALPHA
//   after q1*x      : q2 = (q1*x) >> k (2N bits, the Barrett estimate)
//   after q2*m3     : pr = q2*m3, low 2N+2 bits (enough for r2 = q1 - pr,
//                     which is below 2*m3)
// The multiplier reads a, b, q1 and q2 of either set; the post-processing
// module reads q1, r1, q2 and pr of the set selected by `pp_set`.
// Timing: a load (input accept or accumulator `done`) is visible the next
// cycle.  Data only, no reset.  The top bits of `acc` above k + 2N are never
// read: no valid result reaches them.
module internal_reg
  import ffm_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned ALPHA = ALPHA_DEF,
  parameter int unsigned BETA  = BETA_DEF,
  parameter int unsigned F     = F_DEF,
  parameter bit          PLUS  = PLUS_DEF
) (
  input  logic              clk,
  // operand load
  input  logic              load_in,
  input  logic              load_set,
  input  logic [2*N-1:0]    in_a,
  input  logic [2*N-1:0]    in_b,
  // results from the accumulator
  input  logic [5*N-1:0]    acc,
  input  logic              acc_done,
  input  acc_tag_t          acc_tag,
  // multiplier operand sources
  output logic [2*N-1:0]    a_q  [NSETS],
  output logic [2*N-1:0]    b_q  [NSETS],
  output logic [3*N-1:0]    q1_q [NSETS],
  output logic [2*N-1:0]    q2_q [NSETS],
  // post-processing read port
  input  logic              pp_set,
  output logic [2*N+1:0]    pp_q1,
  output logic [ALPHA-1:0]  pp_r1,
  output logic [2*N-1:0]    pp_q2,
  output logic [2*N+1:0]    pp_pr
);
  localparam int unsigned K = barrett_k(F, ALPHA, BETA, PLUS);

  if (ALPHA + 3*N > 5*N) begin : g_chk_q1 $error("internal_reg: q1 slice out of range"); end
  if (K + 2*N > 5*N)     begin : g_chk_q2 $error("internal_reg: q2 slice out of range"); end

  logic [ALPHA-1:0] r1_q [NSETS];
  logic [2*N+1:0]   pr_q [NSETS];

  always_ff @(posedge clk) begin
    if (load_in) begin
      a_q[load_set] <= in_a;
      b_q[load_set] <= in_b;
    end
    if (acc_done) begin
      unique case (acc_tag.phase)
        PH_AB: begin
          q1_q[acc_tag.set] <= acc[ALPHA +: 3*N];
          r1_q[acc_tag.set] <= acc[ALPHA-1:0];
        end
        PH_QX: q2_q[acc_tag.set] <= acc[K +: 2*N];
        PH_Q3: pr_q[acc_tag.set] <= acc[2*N+1:0];
        default: ;
      endcase
    end
  end

  assign pp_q1 = q1_q[pp_set][2*N+1:0];
  assign pp_r1 = r1_q[pp_set];
  assign pp_q2 = q2_q[pp_set];
  assign pp_pr = pr_q[pp_set];
endmodule
