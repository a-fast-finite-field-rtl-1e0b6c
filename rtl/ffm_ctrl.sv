// ffm_ctrl -- controller FSM of the finite field multiplier.
//
// It accepts operand pairs, issues the twelve N x N products per data set to
// the reconfigurable multiplier in the interleaved order of the paper's
// Figs. 4 and 5, and starts post-processing of each set when its last
// intermediate result is back.
//
// A batch holds two independent data sets (e.g. the real and imaginary
// parts of a GF(p^2) product).  In IDLE `in_ready` is high; the pair accepted
// there is set 0 and defines cycle 0 of the batch.  `in_ready` stays high
// for set 1 until cycle ST01-1 (= 5); a set 1 accepted by then fills the
// second interleave slot, otherwise that slot runs empty and produces no
// result.  The phase start times come from ffm_pkg::sched_start; within a
// phase, products are issued in the order of Fig. 4 (left limb fastest):
//   PH_AB : (a0,b0) (a1,b0) (a0,b1) (a1,b1)
//   PH_QX : (q1_0,x0) (q1_1,x0) (q1_2,x0) (q1_0,x1) (q1_1,x1) (q1_2,x1)
//   PH_Q3 : (q2_0,m3) (q2_1,m3)
// With the 9-cycle multiplier this gives, for set 0 / set 1, phase starts at
// cycles 1/6, 15/22, 31/38; post-processing starts at 43/50; the FSM returns
// to IDLE at cycle BATCH = 50, so a new batch can begin every 50 cycles.
// Post-processing is started one cycle after the accumulator reports the
// last (PH_Q3) result of a set, i.e. when it is in the internal registers.
// Reset: synchronous, active high.
module ffm_ctrl
  import ffm_pkg::*;
#(
  parameter int unsigned L = MUL_LAT
) (
  input  logic        clk,
  input  logic        rst,
  // operand handshake
  input  logic        in_valid,
  output logic        in_ready,
  output logic        load_in,
  output logic        load_set,
  // multiplier command and ROM limb address
  output mul_cmd_t    cmd,
  output rom_maddr_t  rom_maddr,
  // accumulator completion
  input  logic        acc_done,
  input  acc_tag_t    acc_tag,
  // post-processing start
  output logic        pp_start,
  output logic        pp_set,
  output logic        pp_valid,
  output logic        busy
);
  localparam int unsigned ST00  = sched_start(L, 0, 0);
  localparam int unsigned ST01  = sched_start(L, 0, 1);
  localparam int unsigned ST10  = sched_start(L, 1, 0);
  localparam int unsigned ST11  = sched_start(L, 1, 1);
  localparam int unsigned ST20  = sched_start(L, 2, 0);
  localparam int unsigned ST21  = sched_start(L, 2, 1);
  localparam int unsigned BATCH = sched_batch(L);
  localparam int unsigned TW    = $clog2(BATCH + 1);

  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t      state;
  logic [TW-1:0] t;               // cycle within the batch
  logic [1:0]  slot_v;            // interleave slot holds a real data set

  // ---- input acceptance --------------------------------------------------
  assign in_ready = (state == S_IDLE) ||
                    (state == S_RUN && !slot_v[1] && t < TW'(ST01));
  assign load_in  = in_valid && in_ready;
  assign load_set = (state == S_RUN);

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      t      <= '0;
      slot_v <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (load_in) begin
          state  <= S_RUN;
          t      <= TW'(1);
          slot_v <= 2'b01;
        end
        S_RUN: begin
          if (load_in) slot_v[1] <= 1'b1;
          if (t == TW'(BATCH - 1)) begin
            state <= S_IDLE;
            t     <= '0;
          end else begin
            t <= t + TW'(1);
          end
        end
      endcase
    end
  end

  assign busy = (state == S_RUN);

  // ---- product issue -----------------------------------------------------
  function automatic logic in_win(logic [TW-1:0] tt, int unsigned st, int unsigned n);
    return (tt >= TW'(st)) && (tt < TW'(st + n));
  endfunction

  always_comb begin
    logic [TW-1:0] idx;
    cmd       = '0;
    rom_maddr = ROM_X0;
    idx       = '0;
    if (state == S_RUN) begin
      if (in_win(t, ST00, nprod(0)) || in_win(t, ST01, nprod(0))) begin
        cmd.valid = 1'b1;
        cmd.phase = PH_AB;
        cmd.set   = in_win(t, ST01, nprod(0));
        idx       = t - TW'(cmd.set ? ST01 : ST00);
        cmd.ia    = {1'b0, idx[0]};
        cmd.jb    = idx[1];
        cmd.first = (idx == '0);
        cmd.last  = (idx == TW'(nprod(0) - 1));
      end else if (in_win(t, ST10, nprod(1)) || in_win(t, ST11, nprod(1))) begin
        cmd.valid = 1'b1;
        cmd.phase = PH_QX;
        cmd.set   = in_win(t, ST11, nprod(1));
        idx       = t - TW'(cmd.set ? ST11 : ST10);
        cmd.ia    = (idx >= TW'(3)) ? 2'(idx - TW'(3)) : 2'(idx);
        cmd.jb    = (idx >= TW'(3));
        cmd.first = (idx == '0);
        cmd.last  = (idx == TW'(nprod(1) - 1));
        rom_maddr = cmd.jb ? ROM_X1 : ROM_X0;
      end else if (in_win(t, ST20, nprod(2)) || in_win(t, ST21, nprod(2))) begin
        cmd.valid = 1'b1;
        cmd.phase = PH_Q3;
        cmd.set   = in_win(t, ST21, nprod(2));
        idx       = t - TW'(cmd.set ? ST21 : ST20);
        cmd.ia    = 2'(idx);
        cmd.jb    = 1'b0;
        cmd.first = (idx == '0);
        cmd.last  = (idx == TW'(nprod(2) - 1));
        rom_maddr = ROM_M3;
      end
    end
  end

  // ---- post-processing start ------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      pp_start <= 1'b0;
      pp_set   <= 1'b0;
    end else begin
      pp_start <= acc_done && (acc_tag.phase == PH_Q3);
      if (acc_done && (acc_tag.phase == PH_Q3)) pp_set <= acc_tag.set;
    end
  end
  assign pp_valid = slot_v[pp_set];

  // The schedule must keep the phases of one batch apart.
  if (!(ST01 + nprod(0) <= ST10 && ST11 + nprod(1) <= ST20)) begin : g_chk
    $error("ffm_ctrl: overlapping schedule");
  end
endmodule
