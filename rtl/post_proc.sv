// post_proc -- post-processing module: turns the intermediate results of one
// data set into the final product A*B mod p (Algorithm 3 of FFM2 from the
// Barrett remainder onward).
//
// Following the paper's Fig. 1, all arithmetic goes through one W-bit
// adder/subtractor (W = 2N+2) fed by two multiplexers that choose among the
// internal registers, the ROM and the module's own working registers.  The
// paper gives 7 cycles for the whole job but not the order of operations;
// the sequence below is this design's, one adder operation per cycle:
//   step 0 (start cycle)  r  = q1 - q2*m3           Barrett remainder
//   step 1                if r >= m3: r -= m3, c=1   Barrett correction
//   step 2                q2 = q2 + c
//   step 3                r  = r * 2^ALPHA + r1      r' = r2*2^a + r1
//   step 4                s  = q2 + r                C = q' + r'
//   step 5                d  = s - p                 (borrow kept)
//   step 6                res = borrow ? s : d       C < p
// With PLUS = 1 (p = T + 1, Algorithm 3 lines 12-17) steps 4-6 become
//   step 4                s  = r - q2                C = r' - q' (sign kept)
//   step 5                d  = s + p
//   step 6                res = (s < 0) ? d : s
// q1 and q2*m3 are taken modulo 2^W: their difference is below 2*m3, so
// the low bits are exact.  For A, B < p the final s is below 2p (PLUS = 0)
// or above -p (PLUS = 1), so one conditional subtraction or addition of p
// gives a fully reduced result.
// Interface: `start` for one cycle with the operands of set `start_set`
// valid on the pp_* inputs in that cycle (they are read only then);
// `res_valid` pulses 7 cycles later with `res` and `res_set`.  A start
// whose `start_valid` is low (an empty interleave slot) runs but raises no
// `res_valid`.  A new start is accepted in the cycle `res_valid` rises.
module post_proc
  import ffm_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned ALPHA = ALPHA_DEF,
  parameter bit          PLUS  = PLUS_DEF
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              start_set,
  input  logic              start_valid,
  input  logic [2*N+1:0]    pp_q1,
  input  logic [ALPHA-1:0]  pp_r1,
  input  logic [2*N-1:0]    pp_q2,
  input  logic [2*N+1:0]    pp_pr,
  // ROM wide port
  output rom_waddr_t        rom_waddr,
  input  logic [2*N+1:0]    rom_wword,
  // result
  output logic              res_valid,
  output logic [2*N-1:0]    res,
  output logic              res_set
);
  localparam int unsigned W = 2*N + 2;

  logic [2:0]       step;      // step of the operation in progress, 1..6
  logic             busy;
  logic             set_q, valid_q, corr_q, borrow_q, neg_q;
  logic [W-1:0]     r_q;       // remainder / recombined value / C
  logic [W-1:0]     q2_q;
  logic [2*N-1:0]   d_q;       // C - p (low bits; used only when no borrow)
  logic [ALPHA-1:0] r1_q;

  // ---- the single adder/subtractor and its input multiplexers ----------
  logic [W-1:0] opx, opy;
  logic         sub;
  logic [W:0]   sum;           // sum[W] is the borrow of a subtraction

  always_comb begin
    opx       = r_q;
    opy       = '0;
    sub       = 1'b0;
    rom_waddr = ROMW_M3;
    if (start && !busy) begin
      opx = pp_q1;  opy = pp_pr;  sub = 1'b1;
    end else begin
      unique case (step)
        3'd1: begin opx = r_q;  opy = rom_wword; sub = 1'b1; rom_waddr = ROMW_M3; end
        3'd2: begin opx = q2_q; opy = W'(corr_q); end
        3'd3: begin opx = r_q << ALPHA; opy = W'(r1_q); end
        3'd4: begin
          if (PLUS) begin opx = r_q; opy = q2_q; sub = 1'b1; end
          else      begin opx = q2_q; opy = r_q; end
        end
        3'd5: begin opx = r_q;  opy = rom_wword; sub = !PLUS; rom_waddr = ROMW_P; end
        default: ;
      endcase
    end
    sum = sub ? ({1'b0, opx} - {1'b0, opy}) : ({1'b0, opx} + {1'b0, opy});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      step      <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        step    <= 3'd1;
        set_q   <= start_set;
        valid_q <= start_valid;
        r_q     <= sum[W-1:0];
        q2_q    <= W'(pp_q2);
        r1_q    <= pp_r1;
      end else if (busy) begin
        step <= step + 3'd1;
        unique case (step)
          3'd1: begin
            corr_q <= ~sum[W];
            if (!sum[W]) r_q <= sum[W-1:0];
          end
          3'd2: q2_q <= sum[W-1:0];
          3'd3: r_q  <= sum[W-1:0];
          3'd4: begin
            r_q   <= sum[W-1:0];
            neg_q <= sum[W];
          end
          3'd5: begin
            d_q      <= sum[2*N-1:0];
            borrow_q <= sum[W];
          end
          3'd6: begin
            if (PLUS) res <= neg_q    ? d_q : r_q[2*N-1:0];
            else      res <= borrow_q ? r_q[2*N-1:0] : d_q;
            res_set   <= set_q;
            res_valid <= valid_q;
            busy      <= 1'b0;
            step      <= '0;
          end
          default: ;
        endcase
      end
    end
  end

  // A start must not arrive while a job is in progress.
  a_no_overlap: assert property (@(posedge clk) disable iff (rst) start |-> !busy)
    else $error("post_proc: start while busy");
endmodule
