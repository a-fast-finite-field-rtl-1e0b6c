// ffm_top -- fast finite field multiplier for SIKE: computes A*B mod p in
// GF(p), p = F*2^ALPHA*3^BETA - 1 (SIKEp751 by default; PLUS = 1 selects
// the other FFM2 form, F*2^ALPHA*3^BETA + 1), with the FFM2 algorithm on one
// deeply pipelined N x N-bit multiplier.
//
// Blocks (the paper's Fig. 1): controller (ffm_ctrl), reconfigurable
// multiplier (reconf_mult: operand selection, 9-stage N x N multiplier,
// accumulation path), internal registers (internal_reg), ROM of
// precomputed values (precomp_rom) and post-processing (post_proc).
//
// Interface.  The paper names the pins DATA, CLK, RST and RES; this design
// widens DATA into a valid/ready pair with both 2N-bit operands, and RES into
// a valid pulse with the 2N-bit product and the slot it belongs to.
//   in_valid/in_ready/in_a/in_b : one operand pair per accepted cycle.  The
//     first pair accepted while idle starts a batch (cycle 0); a second pair
//     accepted by cycle 5 is interleaved with it.  Operands must be < p.
//   res_valid/res/res_set : res = in_a*in_b mod p for the pair of slot
//     res_set.  Slot 0's product appears at cycle 50, slot 1's at cycle 57;
//     a new batch can start at cycle 50, so two products leave every
//     50 cycles (25 cycles per product), as in the paper.
// Reset: synchronous, active high.
module ffm_top
  import ffm_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned ALPHA = ALPHA_DEF,
  parameter int unsigned BETA  = BETA_DEF,
  parameter int unsigned F     = F_DEF,
  parameter bit          PLUS  = PLUS_DEF
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [2*N-1:0]  in_a,
  input  logic [2*N-1:0]  in_b,
  output logic            res_valid,
  output logic [2*N-1:0]  res,
  output logic            res_set,
  output logic            busy
);
  mul_cmd_t   cmd;
  rom_maddr_t rom_maddr;
  rom_waddr_t rom_waddr;
  logic       load_in, load_set;
  logic       acc_done;
  acc_tag_t   acc_tag;
  logic       pp_start, pp_set, pp_valid;

  logic [N-1:0]      rom_mword;
  logic [2*N+1:0]    rom_wword;
  logic [5*N-1:0]    acc;
  logic [2*N-1:0]    a_q  [NSETS];
  logic [2*N-1:0]    b_q  [NSETS];
  logic [3*N-1:0]    q1_q [NSETS];
  logic [2*N-1:0]    q2_q [NSETS];
  logic [2*N+1:0]    pp_q1, pp_pr;
  logic [ALPHA-1:0]  pp_r1;
  logic [2*N-1:0]    pp_q2;

  ffm_ctrl u_ctrl (
    .clk       (clk),
    .rst       (rst),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .load_in   (load_in),
    .load_set  (load_set),
    .cmd       (cmd),
    .rom_maddr (rom_maddr),
    .acc_done  (acc_done),
    .acc_tag   (acc_tag),
    .pp_start  (pp_start),
    .pp_set    (pp_set),
    .pp_valid  (pp_valid),
    .busy      (busy)
  );

  precomp_rom #(.N(N), .ALPHA(ALPHA), .BETA(BETA), .F(F), .PLUS(PLUS)) u_rom (
    .maddr (rom_maddr),
    .mword (rom_mword),
    .waddr (rom_waddr),
    .wword (rom_wword)
  );

  internal_reg #(.N(N), .ALPHA(ALPHA), .BETA(BETA), .F(F), .PLUS(PLUS)) u_ireg (
    .clk      (clk),
    .load_in  (load_in),
    .load_set (load_set),
    .in_a     (in_a),
    .in_b     (in_b),
    .acc      (acc),
    .acc_done (acc_done),
    .acc_tag  (acc_tag),
    .a_q      (a_q),
    .b_q      (b_q),
    .q1_q     (q1_q),
    .q2_q     (q2_q),
    .pp_set   (pp_set),
    .pp_q1    (pp_q1),
    .pp_r1    (pp_r1),
    .pp_q2    (pp_q2),
    .pp_pr    (pp_pr)
  );

  reconf_mult #(.N(N)) u_rmul (
    .clk      (clk),
    .rst      (rst),
    .cmd      (cmd),
    .a_q      (a_q),
    .b_q      (b_q),
    .q1_q     (q1_q),
    .q2_q     (q2_q),
    .rom_word (rom_mword),
    .acc      (acc),
    .done     (acc_done),
    .done_tag (acc_tag)
  );

  post_proc #(.N(N), .ALPHA(ALPHA), .PLUS(PLUS)) u_pp (
    .clk         (clk),
    .rst         (rst),
    .start       (pp_start),
    .start_set   (pp_set),
    .start_valid (pp_valid),
    .pp_q1       (pp_q1),
    .pp_r1       (pp_r1),
    .pp_q2       (pp_q2),
    .pp_pr       (pp_pr),
    .rom_waddr   (rom_waddr),
    .rom_wword   (rom_wword),
    .res_valid   (res_valid),
    .res         (res),
    .res_set     (res_set)
  );
endmodule
