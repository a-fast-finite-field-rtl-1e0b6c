// tb_prod_accum -- checks the accumulation path (N = 380): random groups of
// 1..6 products with random limb offsets are fed (with idle cycles between
// some of them); after the group's last product the accumulator must hold
// the sum of the products shifted by offset*N, `done` must pulse exactly one
// cycle after the last product with that group's tag, and `first` must
// discard whatever the accumulator held before.
module tb_prod_accum;
  import ffm_pkg::*;
  localparam int unsigned N = 380, NGRP = 400;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [2:0] in_shift = '0;
  acc_tag_t in_tag = '0;
  logic [2*N-1:0] prod = '0;
  logic [5*N-1:0] acc;
  logic done;
  acc_tag_t done_tag;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  prod_accum u_dut (.clk, .rst, .in_valid, .in_first, .in_last, .in_shift,
                    .in_tag, .prod, .acc, .done, .done_tag);

  function automatic logic [2*N-1:0] rnd();
    logic [2*N-1:0] r;
    r = '0;
    for (int i = 0; i < (2*N + 31) / 32; i++) r = (r << 32) | (2*N)'($urandom);
    return ($urandom_range(0, 7) == 0) ? '1 : r;
  endfunction

  initial begin
    logic [5*N-1:0] ref_sum;
    acc_tag_t tag;
    int n;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int g = 0; g < NGRP; g++) begin
      n = $urandom_range(1, 6);
      ref_sum = '0;
      tag = acc_tag_t'($urandom_range(0, 5));
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_first = (k == 0);
        in_last  = (k == n - 1);
        in_shift = 3'($urandom_range(0, 3));
        in_tag   = tag;
        prod     = rnd();
        ref_sum  = ref_sum + ((5*N)'(prod) << (in_shift * N));
        checks++;
        if (done) begin failures++; $display("FAIL: done inside a group"); end
      end
      @(negedge clk);
      in_valid = 1'b0; in_last = 1'b0;
      prod = rnd();                           // ignored: not valid
      checks++;
      if (!done || done_tag != tag || acc !== ref_sum) begin
        failures++;
        if (failures < 5) $display("FAIL: group %0d done=%b tag=%h/%h acc mismatch=%b",
                                   g, done, done_tag, tag, acc !== ref_sum);
      end
      if ($urandom_range(0, 1) == 1) begin
        @(negedge clk);
        checks++;
        if (done || acc !== ref_sum) begin failures++; $display("FAIL: acc/done changed while idle"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NGRP * 10 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
