// tb_ffm_ctrl -- checks the controller cycle by cycle against the batch
// schedule written out by hand for the 9-cycle multiplier (cycle 0 is the
// cycle the first pair is accepted):
//   products        set 0        set 1
//   A*B   (4)       1..4         6..9
//   q1*x  (6)       15..20       22..27
//   q2*m3 (2)       31..32       38..39
//   post-processing starts at 43 and 50; idle again (in_ready) at 50.
// Limb order within a phase: left operand limb fastest.  The testbench also
// plays the accumulator's `done` pulses (10 cycles after each phase's last
// product) and checks the `in_ready` window for the second set (cycles
// 1..5), that a late second set is refused, that an empty second slot is
// flagged through pp_valid, and back-to-back batches.
module tb_ffm_ctrl;
  import ffm_pkg::*;
  localparam int unsigned NB = 60, BATCH = 50;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0, in_ready, load_in, load_set;
  mul_cmd_t cmd;
  rom_maddr_t rom_maddr;
  logic acc_done = 1'b0;
  acc_tag_t acc_tag = '0;
  logic pp_start, pp_set, pp_valid, busy;
  int checks = 0, failures = 0;
  int n_late = 0, n_empty = 0, n_two = 0, n_b2b = 0;

  always #5 clk = ~clk;

  ffm_ctrl u_dut (.clk, .rst, .in_valid, .in_ready, .load_in, .load_set, .cmd, .rom_maddr,
                  .acc_done, .acc_tag, .pp_start, .pp_set, .pp_valid, .busy);

  // expected product issue: returns valid and fills the fields
  function automatic bit exp_cmd(int t, output mul_cmd_t c, output rom_maddr_t ra);
    int st [3][2] = '{'{1, 6}, '{15, 22}, '{31, 38}};
    int n  [3]    = '{4, 6, 2};
    c = '0; ra = ROM_X0;
    for (int ph = 0; ph < 3; ph++)
      for (int s = 0; s < 2; s++)
        if (t >= st[ph][s] && t < st[ph][s] + n[ph]) begin
          int i = t - st[ph][s];
          c.valid = 1; c.phase = phase_t'(ph); c.set = s[0];
          c.first = (i == 0); c.last = (i == n[ph] - 1);
          case (ph)
            0: begin c.ia = 2'(i % 2); c.jb = (i >= 2); end
            1: begin c.ia = 2'(i % 3); c.jb = (i >= 3); ra = c.jb ? ROM_X1 : ROM_X0; end
            default: begin c.ia = 2'(i); c.jb = 0; ra = ROM_M3; end
          endcase
        end
    return c.valid;
  endfunction

  task automatic chk(input bit ok, input string what, input int t);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at batch cycle %0d", what, t);
    end
  endtask

  // absolute cycle (one per falling edge in the driver) and the cycles at
  // which post-processing must start, with the slot and its validity
  int abs_c = 0;
  int pp_c0 = -1, pp_c1 = -1;
  bit pp_v1 = 0;

  task automatic chk_pp(input int t);
    chk(pp_start == (abs_c == pp_c0 || abs_c == pp_c1), "pp_start", t);
    if (abs_c == pp_c0) chk(pp_set == 1'b0 && pp_valid == 1'b1, "pp slot 0", t);
    if (abs_c == pp_c1) chk(pp_set == 1'b1 && pp_valid == pp_v1, "pp slot 1", t);
  endtask

  initial begin
    mul_cmd_t ec;
    rom_maddr_t era;
    int g, idle;
    bit set1;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int bn = 0; bn < NB; bn++) begin
      g = $urandom_range(0, 8);                 // 0: no second set, 6..8: too late
      idle = ($urandom_range(0, 2) == 0) ? $urandom_range(1, 5) : 0;
      if (bn > 0 && idle == 0) n_b2b++;
      for (int i = 0; i < idle; i++) begin
        @(negedge clk); in_valid = 1'b0; acc_done = 1'b0; abs_c++; #1;
        chk(in_ready && !busy && !cmd.valid, "idle state", -1);
        chk_pp(-1);
      end
      set1 = 0;
      for (int t = 0; t < BATCH; t++) begin
        @(negedge clk);
        abs_c++;
        if (t == 0) begin pp_c0 = abs_c + 43; end
        in_valid = (t == 0) || (t == g);
        // accumulator done pulses 10 cycles after each phase's last product
        acc_done = 1'b0;
        case (t)
          14: begin acc_done = 1; acc_tag = '{phase: PH_AB, set: 1'b0}; end
          19: begin acc_done = 1; acc_tag = '{phase: PH_AB, set: 1'b1}; end
          30: begin acc_done = 1; acc_tag = '{phase: PH_QX, set: 1'b0}; end
          37: begin acc_done = 1; acc_tag = '{phase: PH_QX, set: 1'b1}; end
          42: begin acc_done = 1; acc_tag = '{phase: PH_Q3, set: 1'b0}; end
          49: begin acc_done = 1; acc_tag = '{phase: PH_Q3, set: 1'b1}; end
          default: ;
        endcase
        #1;
        // input handshake
        chk(in_ready == ((t == 0) || (t >= 1 && t <= 5 && !set1)), "in_ready", t);
        chk(load_in == (in_valid && in_ready), "load_in", t);
        if (load_in) chk(load_set == (t != 0), "load_set", t);
        chk(busy == (t != 0), "busy", t);
        // product issue
        void'(exp_cmd(t, ec, era));
        chk(cmd == ec, "cmd", t);
        if (ec.valid && ec.phase != PH_AB) chk(rom_maddr == era, "rom_maddr", t);
        // post-processing start
        chk_pp(t);
        if (t == g && t != 0) begin
          if (in_ready) begin set1 = 1; n_two++; end else n_late++;
        end
      end
      if (!set1) n_empty++;
      // post-processing of set 1 starts in the cycle after the batch (t = 50)
      pp_c1 = abs_c + 1;
      pp_v1 = set1;
    end
    @(negedge clk); in_valid = 1'b0; acc_done = 1'b0; abs_c++; #1;
    chk_pp(BATCH);
    chk(pp_start, "last pp slot 1", BATCH);
    checks++; if (n_late == 0 || n_empty == 0 || n_two == 0 || n_b2b == 0) begin
      failures++; $display("FAIL: coverage late=%0d empty=%0d two=%0d b2b=%0d", n_late, n_empty, n_two, n_b2b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NB * 70 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
