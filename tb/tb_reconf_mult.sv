// tb_reconf_mult -- checks the reconfigurable multiplier (N = 380) on the
// three product shapes of FFM2, issued the way the controller issues them
// but in a random limb order and for either data set:
//   PH_AB  a (2N) x b (2N)       4 products
//   PH_QX  q1 (3N) x x (2N)      6 products, x limbs from the ROM port
//   PH_Q3  q2 (2N) x m3 (N)      2 products, m3 from the ROM port
// The testbench plays the ROM (random constants).  For every group it
// expects `done`, the group's tag and the full-width product in `acc`
// exactly LAT+1 = 10 cycles after the group's last product was issued.
// Groups follow each other with one or more idle cycles, as in the design.
module tb_reconf_mult;
  import ffm_pkg::*;
  localparam int unsigned N = 380, NGRP = 300, LAT = 10;
  logic clk = 1'b0, rst = 1'b1;
  mul_cmd_t cmd = '0;
  logic [2*N-1:0] a_q [NSETS], b_q [NSETS], q2_q [NSETS];
  logic [3*N-1:0] q1_q [NSETS];
  logic [N-1:0]   rom_word;
  logic [2*N-1:0] xr;
  logic [N-1:0]   m3r;
  logic [5*N-1:0] acc;
  logic done;
  acc_tag_t done_tag;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;

  reconf_mult u_dut (.clk, .rst, .cmd, .a_q, .b_q, .q1_q, .q2_q, .rom_word,
                     .acc, .done, .done_tag);

  // the ROM, as the controller addresses it
  always_comb begin
    if (cmd.phase == PH_QX) rom_word = cmd.jb ? xr[N +: N] : xr[0 +: N];
    else                    rom_word = m3r;
  end

  function automatic logic [5*N-1:0] rndw(int unsigned bits);
    logic [5*N-1:0] r;
    r = '0;
    for (int i = 0; i < (bits + 31) / 32; i++) r = (r << 32) | (5*N)'($urandom);
    if ($urandom_range(0, 7) == 0) r = '1;
    return r & (((5*N)'(1) << bits) - 1);
  endfunction

  typedef struct { logic [5*N-1:0] val; acc_tag_t tag; longint when; } exp_t;
  exp_t q [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && done) begin
      checks++;
      if (q.size() == 0) begin
        failures++; $display("FAIL: unexpected done at %0d", cyc);
      end else begin
        exp_t e;
        e = q.pop_front();
        if (acc !== e.val || done_tag != e.tag || cyc != e.when) begin
          failures++;
          if (failures < 5) $display("FAIL: done at %0d (exp %0d) tag %h/%h value ok=%b",
                                     cyc, e.when, done_tag, e.tag, acc === e.val);
        end
      end
    end
  end

  initial begin
    int unsigned n, ph, s, order [6], tmp, j;
    exp_t e;
    logic [5*N-1:0] prodv;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int g = 0; g < NGRP; g++) begin
      ph = $urandom_range(0, 2);
      s  = $urandom_range(0, 1);
      a_q[s]  = rndw(2*N);  b_q[s] = rndw(2*N);
      q1_q[s] = rndw(3*N);  q2_q[s] = rndw(2*N);
      xr  = rndw(2*N);      m3r = rndw(N);
      n = nprod(ph);
      case (ph)
        0: prodv = (5*N)'(a_q[s])  * (5*N)'(b_q[s]);
        1: prodv = (5*N)'(q1_q[s]) * (5*N)'(xr);
        default: prodv = (5*N)'(q2_q[s]) * (5*N)'(m3r);
      endcase
      for (int k = 0; k < 6; k++) order[k] = k;
      for (int k = n - 1; k > 0; k--) begin
        j = $urandom_range(0, k);
        tmp = order[k]; order[k] = order[j]; order[j] = tmp;
      end
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        cmd.valid = 1'b1;
        cmd.phase = phase_t'(ph);
        cmd.set   = s[0];
        cmd.first = (k == 0);
        cmd.last  = (k == n - 1);
        case (ph)
          0: begin cmd.ia = 2'(order[k] % 2); cmd.jb = order[k] / 2 == 1; end
          1: begin cmd.ia = 2'(order[k] % 3); cmd.jb = order[k] / 3 == 1; end
          default: begin cmd.ia = 2'(order[k]); cmd.jb = 1'b0; end
        endcase
      end
      e.val = prodv; e.tag = '{phase: phase_t'(ph), set: s[0]};
      e.when = cyc + longint'(LAT);  // issued in the current cycle
      q.push_back(e);
      @(negedge clk);
      cmd = '0;
      // the next group overwrites the operand registers while this group's
      // products are still in the pipeline
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NGRP * 15 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
