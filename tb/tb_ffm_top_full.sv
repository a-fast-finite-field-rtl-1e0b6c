// tb_ffm_top_full -- end-to-end test of the finite field multiplier at its
// default configuration: SIKEp751, p = 2^372 * 3^239 - 1, N = 380 (760-bit
// operands, sixteen 95 x 95-bit sub-multipliers), top parameters untouched.
//
// Same driver and monitor as tb_ffm_top, with fewer batches: corner cases
// (p-1)^2, (p-1)*1, 0 and 1, then random operand pairs below p in
// interleaved, single-set, late-second-set and back-to-back batches.  Every
// product is compared with A*B mod p computed here with wide integer
// arithmetic, and with its expected cycle (50 after the batch start for
// slot 0, 57 for slot 1).  A final throughput run streams 20 back-to-back
// two-set batches and checks they take 50*19 + 57 cycles, the paper's
// 25 cycles per product and 57-cycle latency.
module tb_ffm_top_full;
  localparam int unsigned N = 380, ALPHA = 372, BETA = 239, F = 1;
  localparam int unsigned NBATCH = 100;
  localparam int unsigned NSTREAM = 20;   // back-to-back two-set batches of the throughput run
  localparam int unsigned LAT0 = 50, LAT1 = 57, PERIOD = 50;

  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0, in_ready, res_valid, res_set, busy;
  logic [2*N-1:0] in_a = '0, in_b = '0, res;

  always #5 clk = ~clk;

  ffm_top u_dut (
    .clk, .rst, .in_valid, .in_ready, .in_a, .in_b,
    .res_valid, .res, .res_set, .busy
  );

  // ---- reference prime, computed independently -----------------------
  logic [4*N-1:0] P;
  initial begin
    P = 1;
    for (int i = 0; i < BETA; i++) P = P * 3;
    P = P * F;
    P = (P << ALPHA) - 1;
  end

  function automatic logic [2*N-1:0] rand_elem();
    logic [4*N-1:0] r;
    r = '0;
    for (int i = 0; i < (2*N + 31) / 32; i++) r = (r << 32) | 64'($urandom);
    r = r % P;
    return r[2*N-1:0];
  endfunction

  int checks = 0, failures = 0;
  longint cyc = 0;

  // ---- scoreboard ---------------------------------------------------------
  typedef struct { logic [2*N-1:0] val; longint when; } exp_t;
  exp_t q [2][$];
  longint batch_start = -1000, prev_batch_start = -1000;
  int n_two = 0, n_empty = 0, n_b2b = 0, n_corr = 0, n_nocorr = 0, n_sub = 0, n_nosub = 0;
  bit slot1_seen = 1'b1;
  longint last_res = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && in_valid && in_ready) begin
      exp_t e;
      logic [4*N-1:0] prod;
      prod  = ((4*N)'(in_a) * (4*N)'(in_b)) % P;
      e.val = prod[2*N-1:0];
      if (!busy) begin
        if (!slot1_seen) n_empty++;
        slot1_seen = 1'b0;
        prev_batch_start = batch_start;
        batch_start = cyc;
        if (batch_start - prev_batch_start == longint'(PERIOD)) n_b2b++;
        e.when = cyc + longint'(LAT0);
        q[0].push_back(e);
      end else begin
        slot1_seen = 1'b1;
        n_two++;
        e.when = batch_start + longint'(LAT1);
        q[1].push_back(e);
      end
    end
    if (!rst && res_valid) begin
      last_res = cyc;
      checks++;
      if (q[res_set].size() == 0) begin
        failures++;
        $display("FAIL: unexpected result in slot %0d at cycle %0d", res_set, cyc);
      end else begin
        exp_t e;
        e = q[res_set].pop_front();
        if (res !== e.val) begin
          failures++;
          $display("FAIL: slot %0d got %h expected %h", res_set, res, e.val);
        end
        checks++;
        if (cyc != e.when) begin
          failures++;
          $display("FAIL: slot %0d result at cycle %0d expected %0d", res_set, cyc, e.when);
        end
      end
    end
    // mechanism counters inside the post-processing module
    if (u_dut.u_pp.busy && u_dut.u_pp.step == 3'd2) begin
      if (u_dut.u_pp.corr_q) n_corr++; else n_nocorr++;
    end
    if (u_dut.u_pp.busy && u_dut.u_pp.step == 3'd6) begin
      if (u_dut.u_pp.borrow_q) n_nosub++; else n_sub++;
    end
  end

  // ---- driver (drives on the falling edge) --------------------------------
  task automatic offer(input logic [2*N-1:0] a, input logic [2*N-1:0] b);
    in_valid = 1'b1; in_a = a; in_b = b;
    // in_ready does not depend on in_valid: if it is high now, the pair is
    // taken on the next rising edge
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  logic [2*N-1:0] pm1;
  initial begin
    pm1 = P[2*N-1:0] - 1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    // corner cases
    offer(pm1, pm1);       offer(pm1, 1);
    offer('0, pm1);        offer(1, 1);
    for (int k = 0; k < NBATCH; k++) begin
      int mode, gap;
      mode = $urandom_range(0, 9);
      offer(rand_elem(), rand_elem());              // set 0
      if (mode < 7) begin                          // interleaved second set
        gap = $urandom_range(0, 4);
        repeat (gap) @(negedge clk);
        offer(rand_elem(), rand_elem());
      end else if (mode == 7) begin                // too late for this batch
        repeat (6) @(negedge clk);
      end
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 60)) @(negedge clk);
    end
    repeat (120) @(negedge clk);
    // throughput run (the paper's Table I workload): pairs offered without a
    // pause; 2*NSTREAM products must take 50*(NSTREAM-1) + 57 cycles from the
    // first acceptance to the last result, i.e. 25 cycles per product
    begin
      longint t0;
      t0 = -1;
      for (int k = 0; k < 2 * NSTREAM; k++) begin
        in_valid = 1'b1; in_a = rand_elem(); in_b = rand_elem();
        while (!in_ready) @(negedge clk);
        if (t0 < 0) t0 = cyc;
        @(negedge clk);
      end
      in_valid = 1'b0;
      repeat (80) @(negedge clk);
      checks++;
      if (last_res - t0 != longint'(PERIOD) * (NSTREAM - 1) + longint'(LAT1)) begin
        failures++;
        $display("FAIL: %0d products took %0d cycles", 2 * NSTREAM, last_res - t0);
      end else
        $display("throughput run: %0d products in %0d cycles (%0d.%0d cycles per product), latency %0d",
                 2 * NSTREAM, last_res - t0, (last_res - t0) / (2 * NSTREAM),
                 ((last_res - t0) * 10 / (2 * NSTREAM)) % 10, LAT1);
    end
    // every prediction must have been met
    checks++;
    if (q[0].size() != 0 || q[1].size() != 0) begin
      failures++;
      $display("FAIL: %0d/%0d results never appeared", q[0].size(), q[1].size());
    end
    checks++; if (n_two    == 0) begin failures++; $display("FAIL: no interleaved batch"); end
    checks++; if (n_empty  == 0) begin failures++; $display("FAIL: no empty slot"); end
    checks++; if (n_b2b    == 0) begin failures++; $display("FAIL: no back-to-back batch"); end
    checks++; if (n_corr   == 0) begin failures++; $display("FAIL: Barrett correction never taken"); end
    checks++; if (n_nocorr == 0) begin failures++; $display("FAIL: Barrett correction never skipped"); end
    checks++; if (n_sub    == 0) begin failures++; $display("FAIL: final subtraction never taken"); end
    checks++; if (n_nosub  == 0) begin failures++; $display("FAIL: final subtraction never skipped"); end
    $display("mechanisms: interleaved=%0d empty_slot=%0d back_to_back=%0d corr=%0d/%0d sub=%0d/%0d",
             n_two, n_empty, n_b2b, n_corr, n_nocorr, n_sub, n_nosub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- watchdog -------------------------------------------------------------
  initial begin
    repeat (NBATCH * 200 + 2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
