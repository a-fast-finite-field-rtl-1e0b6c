// tb_precomp_rom -- checks every word of the precomputed-value ROM at the
// default configuration (SIKEp751) against values computed independently in
// the testbench: the two limbs of the Barrett factor x, f*3^beta, and the
// wide words f*3^beta and p.  Also checks the known size of p (751 bits).
module tb_precomp_rom;
  import ffm_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 380, A = 372, B = 239, F = 1;
  rom_maddr_t maddr;
  rom_waddr_t waddr;
  logic [N-1:0] mword;
  logic [2*N+1:0] wword;
  int checks = 0, failures = 0;
  big_t x, m3, p;

  precomp_rom u_dut (.maddr, .mword, .waddr, .wword);

  task automatic chk(input string what, input logic [2*N+1:0] got, input big_t exp);
    checks++;
    if (got !== exp[2*N+1:0]) begin
      failures++;
      $display("FAIL: %s = %h expected %h", what, got, exp[2*N+1:0]);
    end
  endtask

  initial begin
    x = ref_x(F, A, B); m3 = ref_m3(F, B); p = ref_p(F, A, B);
    checks++;
    if (ref_bitlen(p) != 751) begin failures++; $display("FAIL: reference p is not 751 bits"); end
    maddr = ROM_X0; waddr = ROMW_M3; #1;
    chk("x limb 0", (2*N+2)'(mword), x & ((big_t'(1) << N) - 1));
    chk("m3 wide", wword, m3);
    maddr = ROM_X1; waddr = ROMW_P; #1;
    chk("x limb 1", (2*N+2)'(mword), (x >> N) & ((big_t'(1) << N) - 1));
    chk("p wide", wword, p);
    maddr = ROM_M3; #1;
    chk("m3 limb", (2*N+2)'(mword), m3);
    checks++;
    if ((x >> (2*N)) != 0) begin failures++; $display("FAIL: x does not fit 2N bits"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
