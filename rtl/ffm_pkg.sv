// ffm_pkg -- shared constants, types and elaboration-time arithmetic for the
// FFM2 finite field multiplier.
//
// The multiplier works in GF(p) for a SIKE prime p = f * 2^alpha * 3^beta - 1
// (PLUS = 0, the form of all SIKE primes) or, for the other branch of FFM2,
// p = f * 2^alpha * 3^beta + 1 (PLUS = 1).
// Its default configuration is SIKEp751 (f = 1, alpha = 372, beta = 239) with
// an N = 380-bit limb, so that operands are 2N = 760 bits and the sixteen
// sub-multipliers are N/4 = 95 bits wide, as in the paper's FPGA design.
//
// Everything the ROM holds (3^beta, p and the Barrett factor x) is computed
// here by constant functions on CW-bit numbers, so the prime is changed by
// changing three parameters.  The Barrett shift k is 2*bitlen(p) - alpha: the
// quotient q1 = (A*B) >> alpha of two field elements is below 2^k, which is the
// condition under which one correction step suffices.  This choice of k is this
// design's own; the paper only states the condition.
//
// The schedule functions give the cycle at which each of the three
// multiplication phases starts for each of the two interleaved data sets.  They
// follow one rule: a phase of a set starts as soon as its operands are back in
// the internal registers and the multiplier is free, and the second set always
// trails the first by the phase's product count plus one idle cycle (the "0"
// slot of the paper's Fig. 4).  With a 9-cycle multiplier this reproduces the
// paper's published timing: intermediate results at cycles 43 and 50, final
// products at 50 and 57, a new batch every 50 cycles.
package ffm_pkg;

  // ---- default configuration (SIKEp751, N = 380) -------------------------
  localparam int unsigned N_DEF     = 380;
  localparam int unsigned ALPHA_DEF = 372;
  localparam int unsigned BETA_DEF  = 239;
  localparam int unsigned F_DEF     = 1;
  localparam bit          PLUS_DEF  = 1'b0;   // 0: p = T - 1, 1: p = T + 1

  // Width of elaboration-time arithmetic; must exceed 2*bitlen(p).
  localparam int unsigned CW = 2048;
  typedef logic [CW-1:0] cnum_t;

  // ---- pipeline structure of the N x N multiplier ------------------------
  localparam int unsigned SUB_STAGES = 3;  // stages of each N/4 x N/4 multiplier
  localparam int unsigned ADD_STAGES = 4;  // adder tree levels (16 -> 1)
  // input buffer + sub-multiplier + adder tree + output register
  localparam int unsigned MUL_LAT    = 1 + SUB_STAGES + ADD_STAGES + 1;

  // ---- interleaving schedule ---------------------------------------------
  localparam int unsigned NSETS = 2;   // independent data sets per batch

  typedef enum logic [1:0] {
    PH_AB  = 2'd0,   // 2N x 2N : C = A*B               (Algorithm 3 line 1)
    PH_QX  = 2'd1,   // 3N x 2N : q1 * x                (Barrett estimate)
    PH_Q3  = 2'd2    // 2N x N  : q2 * f*3^beta         (Barrett remainder)
  } phase_t;

  // One N x N multiplication issued to the reconfigurable multiplier.
  typedef struct packed {
    logic       valid;
    phase_t     phase;
    logic       set;    // which interleaved data set
    logic [1:0] ia;     // limb of the left operand  (a, q1 or q2)
    logic       jb;     // limb of the right operand (b or x)
    logic       first;  // first product of this set and phase
    logic       last;   // last product of this set and phase
  } mul_cmd_t;

  // Tag that travels with a finished accumulation.
  typedef struct packed {
    phase_t phase;
    logic   set;
  } acc_tag_t;

  // ROM word addresses of the multiplier port (N-bit limbs).
  typedef enum logic [1:0] {
    ROM_X0 = 2'd0,   // Barrett factor x, limb 0
    ROM_X1 = 2'd1,   // Barrett factor x, limb 1
    ROM_M3 = 2'd2    // f * 3^beta
  } rom_maddr_t;

  // ROM addresses of the post-processing port (full width).
  typedef enum logic {
    ROMW_M3 = 1'b0,  // f * 3^beta
    ROMW_P  = 1'b1   // p
  } rom_waddr_t;

  function automatic int unsigned nprod(int unsigned ph);
    case (ph)
      0:       return 4;
      1:       return 6;
      default: return 2;
    endcase
  endfunction

  function automatic int unsigned max2(int unsigned x, int unsigned y);
    return (x > y) ? x : y;
  endfunction

  // Cycle (after the first set was accepted at cycle 0) at which the first
  // product of phase ph for set s enters the multiplier.  A phase's operands
  // are ready L+2 cycles after its predecessor's last product was issued:
  // L cycles in the multiplier, one in the accumulator, one into the
  // internal registers.
  function automatic int unsigned sched_start(int unsigned L, int unsigned ph,
                                              int unsigned s);
    int unsigned st0, st1, n_prev, r0, r1;
    st0 = 1;
    st1 = st0 + nprod(0) + 1;
    for (int unsigned p = 1; p <= ph; p++) begin
      n_prev = nprod(p - 1);
      r0  = st0 + n_prev - 1 + L + 2;
      r1  = st1 + n_prev - 1 + L + 2;
      st0 = max2(r0, st1 + n_prev);
      st1 = max2(r1, st0 + nprod(p) + 1);
    end
    return (s == 0) ? st0 : st1;
  endfunction

  // Cycle at which set s's last intermediate result (q2 * f*3^beta) is in
  // the internal registers and post-processing starts.
  function automatic int unsigned sched_mid(int unsigned L, int unsigned s);
    return sched_start(L, 2, s) + nprod(2) - 1 + L + 2;
  endfunction

  // Batch period: the next batch is accepted once the multiplier has
  // delivered the second set's intermediate result.
  function automatic int unsigned sched_batch(int unsigned L);
    return sched_mid(L, 1);
  endfunction

  // ---- elaboration-time big-number helpers -------------------------------
  function automatic cnum_t pow3(int unsigned e);
    cnum_t v;
    v = cnum_t'(1);
    for (int unsigned i = 0; i < e; i++) v = (v << 1) + v;
    return v;
  endfunction

  // f * 3^beta, the odd part of p + 1
  function automatic cnum_t odd_part(int unsigned f, int unsigned b);
    return cnum_t'(f) * pow3(b);
  endfunction

  function automatic cnum_t prime(int unsigned f, int unsigned a, int unsigned b,
                                  bit plus);
    return plus ? (odd_part(f, b) << a) + cnum_t'(1) : (odd_part(f, b) << a) - cnum_t'(1);
  endfunction

  function automatic int unsigned bitlen(cnum_t v);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < CW; i++) if (v[i]) n = i + 1;
    return n;
  endfunction

  function automatic int unsigned barrett_k(int unsigned f, int unsigned a,
                                            int unsigned b, bit plus);
    return 2 * bitlen(prime(f, a, b, plus)) - a;
  endfunction

  // x = floor(2^k / (f*3^beta))
  function automatic cnum_t barrett_x(int unsigned f, int unsigned a,
                                      int unsigned b, bit plus);
    return (cnum_t'(1) << barrett_k(f, a, b, plus)) / odd_part(f, b);
  endfunction

endpackage
