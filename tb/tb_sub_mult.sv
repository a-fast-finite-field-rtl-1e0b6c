// tb_sub_mult -- checks the 3-stage W x W sub-multiplier (W = 95) against
// the * operator on random and extreme operands fed every cycle, and checks
// that each product appears exactly 3 cycles after its operands.
module tb_sub_mult;
  localparam int unsigned W = 95, LAT = 3, NVEC = 2000;
  logic clk = 1'b0;
  logic [W-1:0] a, b;
  logic [2*W-1:0] p;
  logic [2*W-1:0] hist [LAT+1];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sub_mult u_dut (.clk, .a, .b, .p);

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] r;
    case ($urandom_range(0, 5))
      0: r = '1;
      1: r = '0;
      default: r = {$urandom, $urandom, $urandom};
    endcase
    return r;
  endfunction

  initial begin
    for (int i = 0; i <= LAT; i++) hist[i] = '0;
    a = '0; b = '0;
    for (int n = 0; n < NVEC + LAT + 1; n++) begin
      @(negedge clk);
      if (n > LAT) begin
        checks++;
        if (p !== hist[LAT-1]) begin
          failures++;
          if (failures < 5) $display("FAIL: p=%h expected %h", p, hist[LAT-1]);
        end
      end
      // hist[k]: product of the operands presented k+1 rising edges ago
      a = rnd(); b = rnd();
      for (int i = LAT; i > 0; i--) hist[i] = hist[i-1];
      hist[0] = (2*W)'(a) * (2*W)'(b);
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
