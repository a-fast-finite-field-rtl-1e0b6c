// tb_internal_reg -- checks the internal register file at the default
// configuration (N = 380, alpha = 372, Barrett shift k = 1130): operand
// loads into either set, and the slicing of accumulator results by tag
// (q1 = acc >> alpha and r1 = acc mod 2^alpha after A*B, q2 = acc >> k
// after q1*x, low 2N+2 bits after q2*m3), each visible one cycle after the
// load and only in the addressed set.
module tb_internal_reg;
  import ffm_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 380, A = 372, B = 239, F = 1, NOPS = 600;
  logic clk = 1'b0;
  logic load_in = 1'b0, load_set = 1'b0;
  logic [2*N-1:0] in_a, in_b;
  logic [5*N-1:0] acc;
  logic acc_done = 1'b0;
  acc_tag_t acc_tag = '0;
  logic [2*N-1:0] a_q [NSETS], b_q [NSETS], q2_q [NSETS];
  logic [3*N-1:0] q1_q [NSETS];
  logic pp_set = 1'b0;
  logic [2*N+1:0] pp_q1, pp_pr;
  logic [A-1:0] pp_r1;
  logic [2*N-1:0] pp_q2;
  int checks = 0, failures = 0;

  // model of the register contents
  big_t m_a [2], m_b [2], m_q1 [2], m_r1 [2], m_q2 [2], m_pr [2];
  bit   v_a [2], v_q1 [2], v_q2 [2], v_pr [2];

  always #5 clk = ~clk;

  internal_reg u_dut (.clk, .load_in, .load_set, .in_a, .in_b, .acc, .acc_done, .acc_tag,
                      .a_q, .b_q, .q1_q, .q2_q, .pp_set, .pp_q1, .pp_r1, .pp_q2, .pp_pr);

  function automatic big_t rnd(int unsigned bits);
    return rand_below(big_t'(1) << bits);
  endfunction

  task automatic chk(input string what, input big_t got, input big_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 6) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    big_t av;
    int unsigned k, s, op;
    k = ref_k(F, A, B);
    for (int i = 0; i < 2; i++) begin v_a[i] = 0; v_q1[i] = 0; v_q2[i] = 0; v_pr[i] = 0; end
    for (int n = 0; n < NOPS; n++) begin
      @(negedge clk);
      // check what the previous edge stored
      for (int i = 0; i < 2; i++) begin
        pp_set = i[0];
        #1;
        if (v_a[i])  begin chk("a", big_t'(a_q[i]), m_a[i]); chk("b", big_t'(b_q[i]), m_b[i]); end
        if (v_q1[i]) begin
          chk("q1", big_t'(q1_q[i]), m_q1[i]);
          chk("pp_q1", big_t'(pp_q1), m_q1[i] & ((big_t'(1) << (2*N+2)) - 1));
          chk("pp_r1", big_t'(pp_r1), m_r1[i]);
        end
        if (v_q2[i]) begin chk("q2", big_t'(q2_q[i]), m_q2[i]); chk("pp_q2", big_t'(pp_q2), m_q2[i]); end
        if (v_pr[i]) chk("pp_pr", big_t'(pp_pr), m_pr[i]);
      end
      // next operation
      load_in = 1'b0; acc_done = 1'b0;
      op = $urandom_range(0, 4);
      s  = $urandom_range(0, 1);
      in_a = rnd(2*N); in_b = rnd(2*N); acc = rnd(5*N);
      av = big_t'(acc);
      if (op == 0) begin
        load_in = 1'b1; load_set = s[0];
        m_a[s] = big_t'(in_a); m_b[s] = big_t'(in_b); v_a[s] = 1;
      end else if (op <= 3) begin
        acc_done = 1'b1;
        acc_tag = '{phase: phase_t'(op - 1), set: s[0]};
        case (op)
          1: begin
            m_q1[s] = (av >> A) & ((big_t'(1) << (3*N)) - 1);
            m_r1[s] = av & ((big_t'(1) << A) - 1);
            v_q1[s] = 1;
          end
          2: begin m_q2[s] = (av >> k) & ((big_t'(1) << (2*N)) - 1); v_q2[s] = 1; end
          default: begin m_pr[s] = av & ((big_t'(1) << (2*N+2)) - 1); v_pr[s] = 1; end
        endcase
      end
      // op 4: idle cycle, nothing may change
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NOPS * 2 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
