// reconf_mult -- the reconfigurable multiplier: one N x N-bit pipelined
// multiplier with operand limb selection in front and the reconfigurable
// accumulation path behind it.
//
// Each cycle the controller may issue one N x N product (mul_cmd_t).  The
// operand multiplexers pick the N-bit limbs it names (the paper's Fig. 3):
//   PH_AB : a[ia] x b[jb]        ia, jb in 0..1   (2N x 2N, 4 products)
//   PH_QX : q1[ia] x x[jb]       ia in 0..2       (3N x 2N, 6 products)
//   PH_Q3 : q2[ia] x f*3^beta    ia in 0..1       (2N x N,  2 products)
// where the right-hand ROM limb arrives on `rom_word` (addressed by the
// controller).  An idle cycle feeds zeros, as in the paper's Fig. 4.  The
// command's first/last/offset/tag fields travel through a shift register
// beside the 9-stage multiplier and steer prod_accum, so a result is complete
// in `acc`, with `done` raised, LAT+1 = 10 cycles after its last product was
// issued.  Products of the two interleaved sets share the pipeline and the
// accumulator.
module reconf_mult
  import ffm_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic              clk,
  input  logic              rst,
  input  mul_cmd_t          cmd,
  input  logic [2*N-1:0]    a_q  [NSETS],
  input  logic [2*N-1:0]    b_q  [NSETS],
  input  logic [3*N-1:0]    q1_q [NSETS],
  input  logic [2*N-1:0]    q2_q [NSETS],
  input  logic [N-1:0]      rom_word,
  output logic [5*N-1:0]    acc,
  output logic              done,
  output acc_tag_t          done_tag
);
  localparam int unsigned LAT = MUL_LAT;

  // ---- operand selection ----------------------------------------------
  logic [N-1:0] op_a, op_b;
  always_comb begin
    op_a = '0;
    op_b = '0;
    if (cmd.valid) begin
      unique case (cmd.phase)
        PH_AB: begin
          op_a = a_q[cmd.set][cmd.ia[0]*N +: N];
          op_b = b_q[cmd.set][cmd.jb*N +: N];
        end
        PH_QX: begin
          op_a = (cmd.ia == 2'd2) ? q1_q[cmd.set][2*N +: N]
               : (cmd.ia == 2'd1) ? q1_q[cmd.set][N +: N]
               :                    q1_q[cmd.set][0 +: N];
          op_b = rom_word;
        end
        PH_Q3: begin
          op_a = q2_q[cmd.set][cmd.ia[0]*N +: N];
          op_b = rom_word;
        end
        default: ;
      endcase
    end
  end

  // ---- N x N multiplier ----------------------------------------------
  logic [2*N-1:0] prod;
  nxn_mult #(.N(N)) u_mul (
    .clk (clk),
    .a   (op_a),
    .b   (op_b),
    .p   (prod)
  );

  // ---- command tag pipeline, aligned with the product -----------------
  typedef struct packed {
    logic       valid;
    logic       first;
    logic       last;
    logic [2:0] shift;
    acc_tag_t   tag;
  } ptag_t;

  ptag_t tag_pipe [LAT];
  ptag_t tag_in;

  assign tag_in = '{valid: cmd.valid, first: cmd.first, last: cmd.last,
                    shift: 3'(cmd.ia) + 3'(cmd.jb),
                    tag: '{phase: cmd.phase, set: cmd.set}};

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int unsigned i = 0; i < LAT; i++) tag_pipe[i] <= '0;
    end else begin
      tag_pipe[0] <= tag_in;
      for (int unsigned i = 1; i < LAT; i++) tag_pipe[i] <= tag_pipe[i-1];
    end
  end

  // ---- accumulation path ------------------------------------------------
  prod_accum #(.N(N)) u_acc (
    .clk      (clk),
    .rst      (rst),
    .in_valid (tag_pipe[LAT-1].valid),
    .in_first (tag_pipe[LAT-1].first),
    .in_last  (tag_pipe[LAT-1].last),
    .in_shift (tag_pipe[LAT-1].shift),
    .in_tag   (tag_pipe[LAT-1].tag),
    .prod     (prod),
    .acc      (acc),
    .done     (done),
    .done_tag (done_tag)
  );
endmodule
