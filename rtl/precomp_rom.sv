// precomp_rom -- ROM of the precomputed values used by FFM2 ("Pre-computed
// Val." in the paper's Fig. 1).
//
// The paper lists the stored values as 2^alpha, 3^beta, p and the Barrett
// factor.  Multiplying or dividing by 2^alpha is only a wire shift here, so
// the ROM holds the other three, computed at elaboration from (F, ALPHA,
// BETA) by ffm_pkg's constant functions:
//   m3 = F * 3^BETA                     (N bits)
//   p  = m3 * 2^ALPHA - 1, or + 1 if PLUS   (2N bits)
//   x  = floor(2^k / m3), k = 2*bitlen(p) - ALPHA   (2N bits, 2 limbs)
// Port `maddr` reads an N-bit word for the multiplier (x limb 0, x limb 1 or
// m3); port `waddr` reads a (2N+2)-bit word for the post-processing adder
// (m3 or p).  Both reads are combinational.  Elaboration fails if a value does
// not fit the width given for it.
module precomp_rom
  import ffm_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned ALPHA = ALPHA_DEF,
  parameter int unsigned BETA  = BETA_DEF,
  parameter int unsigned F     = F_DEF,
  parameter bit          PLUS  = PLUS_DEF
) (
  input  rom_maddr_t        maddr,
  output logic [N-1:0]      mword,
  input  rom_waddr_t        waddr,
  output logic [2*N+1:0]    wword
);
  localparam cnum_t M3 = odd_part(F, BETA);
  localparam cnum_t P  = prime(F, ALPHA, BETA, PLUS);
  localparam cnum_t X  = barrett_x(F, ALPHA, BETA, PLUS);
  localparam int unsigned K = barrett_k(F, ALPHA, BETA, PLUS);

  if (bitlen(M3) > N)     begin : g_chk_m3 $error("precomp_rom: f*3^beta exceeds N bits");   end
  if (bitlen(P) > 2*N)    begin : g_chk_p  $error("precomp_rom: p exceeds 2N bits");         end
  if (bitlen(X) > 2*N)    begin : g_chk_x  $error("precomp_rom: Barrett x exceeds 2N bits"); end
  if (K > 3*N)            begin : g_chk_k  $error("precomp_rom: q1 exceeds 3N bits");        end

  logic [N-1:0] rom_m [3];
  assign rom_m[ROM_X0] = X[0 +: N];
  assign rom_m[ROM_X1] = X[N +: N];
  assign rom_m[ROM_M3] = M3[0 +: N];

  always_comb begin
    mword = (maddr == ROM_X0 || maddr == ROM_X1 || maddr == ROM_M3)
          ? rom_m[maddr] : '0;
    unique case (waddr)
      ROMW_M3: wword = M3[0 +: 2*N+2];
      ROMW_P:  wword = P[0 +: 2*N+2];
    endcase
  end
endmodule
