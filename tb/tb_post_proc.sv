// tb_post_proc -- checks the post-processing module at the default
// configuration (SIKEp751).  For random A, B < p (plus corner cases) the
// testbench forms the intermediate values the multiplier would deliver:
// q1 = (A*B) >> alpha, r1 = (A*B) mod 2^alpha, a Barrett estimate q2 that
// is either exact or one too small (both occur in the real datapath), and
// q2*m3.  It plays the ROM's wide port, starts the module, and expects
// A*B mod p with the right slot exactly 7 cycles after the start.  Starts
// come back to back (a new one in the cycle the previous result appears)
// or with gaps; a start with start_valid low must produce no result.  The
// Barrett correction and the final subtraction must each be seen taken and
// skipped.
module tb_post_proc;
  import ffm_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 380, A = 372, B = 239, F = 1, NVEC = 400, LAT = 7;
  localparam int unsigned W = 2*N + 2;
  logic clk = 1'b0, rst = 1'b1;
  logic start = 1'b0, start_set = 1'b0, start_valid = 1'b0;
  logic [W-1:0] pp_q1, pp_pr;
  logic [A-1:0] pp_r1;
  logic [2*N-1:0] pp_q2;
  rom_waddr_t rom_waddr;
  logic [W-1:0] rom_wword;
  logic res_valid, res_set;
  logic [2*N-1:0] res;
  int checks = 0, failures = 0;
  int n_corr = 0, n_nocorr = 0, n_sub = 0, n_nosub = 0;
  longint cyc = 0;
  big_t P, M3;

  always #5 clk = ~clk;

  post_proc u_dut (.clk, .rst, .start, .start_set, .start_valid, .pp_q1, .pp_r1,
                   .pp_q2, .pp_pr, .rom_waddr, .rom_wword, .res_valid, .res, .res_set);

  assign rom_wword = (rom_waddr == ROMW_P) ? P[W-1:0] : M3[W-1:0];

  typedef struct { logic [2*N-1:0] val; logic set; longint when; } exp_t;
  exp_t q [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && res_valid) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL: unexpected result"); end
      else begin
        exp_t e;
        e = q.pop_front();
        if (res !== e.val || res_set !== e.set || cyc != e.when) begin
          failures++;
          if (failures < 5) $display("FAIL: res ok=%b set %b/%b at %0d exp %0d",
                                     res === e.val, res_set, e.set, cyc, e.when);
        end
      end
    end
  end

  initial begin
    big_t a, b, c, q1, r1, q2, q2t, x, rem, s;
    int unsigned k;
    exp_t e;
    P = ref_p(F, A, B); M3 = ref_m3(F, B); x = ref_x(F, A, B); k = ref_k(F, A, B);
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < NVEC; n++) begin
      case (n)
        0: begin a = P - 1; b = P - 1; end
        1: begin a = 0;     b = P - 1; end
        2: begin a = 1;     b = 1;     end
        default: begin a = rand_below(P); b = rand_below(P); end
      endcase
      c  = a * b;
      q1 = c >> A;
      r1 = c & ((big_t'(1) << A) - 1);
      q2t = q1 / M3;                               // exact quotient
      q2 = (q1 * x) >> k;                          // Barrett estimate
      if (q2 != q2t && q2 + 1 != q2t) begin failures++; $display("FAIL: reference Barrett bound"); end
      if (q2 == q2t && q2 != 0 && $urandom_range(0, 2) == 0) q2 = q2 - 1;  // force a correction
      rem = q1 - q2 * M3;
      if (rem >= M3) n_corr++; else n_nocorr++;
      s = q2t + (q1 - q2t * M3) * (big_t'(1) << A) + r1;
      if (s >= P) n_sub++; else n_nosub++;
      pp_q1 = q1[W-1:0]; pp_r1 = r1[A-1:0]; pp_q2 = q2[2*N-1:0]; pp_pr = (q2 * M3);
      start = 1'b1;
      start_set = $urandom_range(0, 1);
      start_valid = ($urandom_range(0, 9) != 0);
      if (start_valid) begin
        e.val = (c % P); e.set = start_set; e.when = cyc + longint'(LAT);
        q.push_back(e);
      end
      @(negedge clk);
      start = 1'b0;
      pp_q1 = '1; pp_r1 = '1; pp_q2 = '1; pp_pr = '1;   // read only at start
      repeat (LAT - 1) @(negedge clk);
      repeat ($urandom_range(0, 1) * $urandom_range(1, 4)) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("FAIL: results missing"); end
    checks++; if (n_corr == 0 || n_nocorr == 0) begin failures++; $display("FAIL: correction coverage"); end
    checks++; if (n_sub == 0 || n_nosub == 0) begin failures++; $display("FAIL: subtraction coverage"); end
    $display("coverage: corr=%0d/%0d sub=%0d/%0d", n_corr, n_nocorr, n_sub, n_nosub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NVEC * 15 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
