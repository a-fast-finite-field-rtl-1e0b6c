// tb_nxn_mult -- checks the 9-stage N x N multiplier (N = 380) against the
// * operator on random and extreme operands fed every cycle, and checks the
// 9-cycle latency (each product must appear exactly 9 rising edges after
// its operands were presented).
module tb_nxn_mult;
  localparam int unsigned N = 380, LAT = 9, NVEC = 1500;
  logic clk = 1'b0;
  logic [N-1:0] a, b;
  logic [2*N-1:0] p;
  logic [2*N-1:0] hist [LAT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nxn_mult u_dut (.clk, .a, .b, .p);

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] r;
    r = '0;
    case ($urandom_range(0, 5))
      0: r = '1;
      1: r = '0;
      2: r = N'(1) << $urandom_range(0, N - 1);
      default: for (int i = 0; i < (N + 31) / 32; i++) r = (r << 32) | N'($urandom);
    endcase
    return r;
  endfunction

  initial begin
    for (int i = 0; i < LAT; i++) hist[i] = '0;
    a = '0; b = '0;
    for (int n = 0; n < NVEC + LAT; n++) begin
      @(negedge clk);
      // hist[k]: product of the operands presented k+1 rising edges ago
      if (n >= LAT) begin
        checks++;
        if (p !== hist[LAT-1]) begin
          failures++;
          if (failures < 5) $display("FAIL: p=%h expected %h", p, hist[LAT-1]);
        end
      end
      a = rnd(); b = rnd();
      for (int i = LAT - 1; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = (2*N)'(a) * (2*N)'(b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NVEC * 2 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
