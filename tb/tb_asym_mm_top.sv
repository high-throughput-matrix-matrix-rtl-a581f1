// tb_asym_mm_top: end-to-end test of both engines at their default sizes.
//
// The same 4 x 8 x K matrix products run on both engines:
//  * SIMD unit: the 4 x 8 result is four 2x4 cells. For every 8-deep slice
//    of K the four instructions (rows 0-1 / 2-3 times columns 0-3 / 4-7)
//    reuse the same two A and two B registers, and one instruction is issued
//    every clock with each cell's accumulator kept stationary across slices.
//    Results are checked against a model that sums 8 products exactly and
//    then applies sticky 16-bit saturation; the burst must take exactly one
//    clock per instruction.
//  * Systolic array: the product streams through the 4x4 array as one tile
//    of depth K, with random input bubbles and output stalls on some tiles;
//    checked against a model with sticky saturation after every product.
// Three workloads are run: random data (both engines must also agree with
// each other), a biased product that clamps at -MAX and +MAX, and that
// product continued with the opposite sign, which must not move the clamped
// results. Each mechanism (back-to-back issue, positive and negative clamp,
// sticky hold, input bubble, output stall, back-to-back tiles) is counted and
// must occur at least once.
module tb_asym_mm_top;
  import asym_mm_pkg::*;

  localparam int R = 4, NC = 8, KMAX = 256;

  int checks = 0, failures = 0;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    mmla_valid_i = 1'b0, mmla_valid_o;
  logic [127:0]            mmla_a_i = '0, mmla_b_i = '0, mmla_c_i = '0, mmla_c_o;
  logic [7:0]              mmla_ovf_o;
  logic                    sa_in_valid = 1'b0, sa_in_ready, sa_in_last = 1'b0;
  act_t      [3:0]         sa_in_a = '0;
  wgt_pair_t [3:0]         sa_in_w = '0;
  logic                    sa_out_valid, sa_out_ready = 1'b0, sa_out_last;
  acc_t      [3:0][1:0]    sa_out_acc;

  asym_mm_top dut (.*);

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_b2b = 0, n_pos = 0, n_neg = 0, n_hold = 0;
  int n_sa_pos = 0, n_sa_neg = 0, n_sa_hold = 0, n_bubble = 0, n_stall = 0, n_sa_b2b = 0;

  int A [R][KMAX];
  int B [KMAX][NC];
  int ref_mmla [R][NC];
  int ref_sa   [R][NC];
  int got_mmla [R][NC];
  int got_sa   [R][NC];

  function automatic int sticky(int a, int d);
    int s = a + d;
    if (a == 32767 || a == -32768) return a;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  function automatic bit at_lim(int v);
    return v == 32767 || v == -32768;
  endfunction

  // Reference models over k in [k0, k1), continuing from the given state.
  task automatic models(int k0, int k1);
    for (int r = 0; r < R; r++)
      for (int n = 0; n < NC; n++) begin
        for (int q = k0; q < k1; q += 8) begin
          int dot = 0;
          for (int k = q; k < q + 8; k++) dot += A[r][k] * B[k][n];
          ref_mmla[r][n] = sticky(ref_mmla[r][n], dot);
        end
        for (int k = k0; k < k1; k++) ref_sa[r][n] = sticky(ref_sa[r][n], A[r][k] * B[k][n]);
      end
  endtask

  // ---------------- SIMD unit: k in [k0, k1), cells start from got_mmla.
  task automatic run_mmla(int k0, int k1);
    int nins = 0, first_cyc, last_cyc;
    int cell_p [$], cell_h [$], cell_q [$];
    for (int q = k0; q < k1 + 8; q += 8) begin
      for (int i = 0; i < 4; i++) begin
        int p = i / 2, h = i % 2;
        // Capture the previous instruction's result (issued one clock ago).
        if (cell_p.size() != 0) begin
          int pp = cell_p.pop_front(), hh = cell_h.pop_front(), qq = cell_q.pop_front();
          checks++;
          if (!mmla_valid_o) begin
            failures++;
            $display("FAIL mmla result missing one clock after issue");
          end
          for (int r = 0; r < 2; r++)
            for (int n = 0; n < 4; n++) begin
              int prev_v = got_mmla[2*pp+r][4*hh+n];
              int next_v = int'($signed(mmla_c_o[(r*4+n)*16 +: 16]));
              if (at_lim(next_v) && !at_lim(prev_v) && next_v > 0) n_pos++;
              if (at_lim(next_v) && !at_lim(prev_v) && next_v < 0) n_neg++;
              if (at_lim(prev_v) && next_v == prev_v &&
                  ((prev_v > 0) != (B[qq][4*hh+n] > 0))) n_hold++;
              got_mmla[2*pp+r][4*hh+n] = next_v;
            end
          if (nins > 1) n_b2b++;
        end
        if (q >= k1) break;
        // Issue: A rows 2p..2p+1 x B columns 4h..4h+3 over k = q..q+7.
        for (int r = 0; r < 2; r++)
          for (int k = 0; k < 8; k++)
            mmla_a_i[(r*8+k)*8 +: 8] = 8'(A[2*p+r][q+k]);
        for (int n = 0; n < 4; n++)
          for (int k = 0; k < 8; k++)
            mmla_b_i[(n*8+k)*4 +: 4] = 4'(B[q+k][4*h+n]);
        for (int r = 0; r < 2; r++)
          for (int n = 0; n < 4; n++)
            mmla_c_i[(r*4+n)*16 +: 16] = 16'(got_mmla[2*p+r][4*h+n]);
        mmla_valid_i = 1'b1;
        cell_p.push_back(p);
        cell_h.push_back(h);
        cell_q.push_back(q);
        if (nins == 0) first_cyc = cyc;
        last_cyc = cyc;
        nins++;
        @(posedge clk); #1;
      end
      if (q >= k1) break;
    end
    mmla_valid_i = 1'b0;
    checks++;
    if (last_cyc - first_cyc + 1 != nins) begin
      failures++;
      $display("FAIL %0d instructions took %0d clocks", nins, last_cyc - first_cyc + 1);
    end
    @(posedge clk); #1;
  endtask

  // ---------------- Systolic array: one tile over k in [k0, k1), from zero.
  task automatic run_sa(int k0, int k1, bit noisy, bit expect_b2b, int prev_end);
    int start;
    fork
      begin : producer
        for (int k = k0; k < k1; k++) begin
          while (noisy && ($urandom % 4) == 0) begin
            sa_in_valid = 1'b0;
            n_bubble++;
            @(posedge clk); #1;
          end
          sa_in_valid = 1'b1;
          sa_in_last  = (k == k1 - 1);
          for (int r = 0; r < 4; r++) sa_in_a[r] = act_t'(A[r][k]);
          for (int c = 0; c < 4; c++) sa_in_w[c] = wgt_pair_t'({4'(B[k][2*c+1]), 4'(B[k][2*c])});
          while (!sa_in_ready) begin
            @(posedge clk); #1;
          end
          if (k == k0) start = cyc;
          @(posedge clk); #1;
        end
        sa_in_valid = 1'b0;
        sa_in_last  = 1'b0;
      end
      begin : consumer
        for (int j = 0; j < 4; j++) begin
          int tries = 0;
          forever begin
            // noisy tiles: random stalls, and always one on output 1
            bit rdy = !noisy || (j == 1 ? tries > 0 : ($urandom % 3) != 0);
            tries++;
            sa_out_ready = rdy;
            if (sa_out_valid && rdy) break;
            if (sa_out_valid) n_stall++;
            @(posedge clk); #1;
          end
          for (int r = 0; r < 4; r++) begin
            got_sa[r][2*j]   = int'(sa_out_acc[r][0]);
            got_sa[r][2*j+1] = int'(sa_out_acc[r][1]);
          end
          @(posedge clk); #1;
        end
        sa_out_ready = 1'b0;
      end
    join
    if (expect_b2b && start == prev_end + 1) n_sa_b2b++;
  endtask

  task automatic compare(string what, bit both_agree);
    for (int r = 0; r < R; r++)
      for (int n = 0; n < NC; n++) begin
        checks++;
        if (got_mmla[r][n] != ref_mmla[r][n]) begin
          failures++;
          $display("FAIL %s SIMD C[%0d][%0d] = %0d, expected %0d", what, r, n,
                   got_mmla[r][n], ref_mmla[r][n]);
        end
        checks++;
        if (got_sa[r][n] != ref_sa[r][n]) begin
          failures++;
          $display("FAIL %s array C[%0d][%0d] = %0d, expected %0d", what, r, n,
                   got_sa[r][n], ref_sa[r][n]);
        end
        if (both_agree) begin
          checks++;
          if (got_sa[r][n] != got_mmla[r][n]) begin
            failures++;
            $display("FAIL %s engines disagree at C[%0d][%0d]", what, r, n);
          end
        end
      end
  endtask

  task automatic clear_state();
    for (int r = 0; r < R; r++)
      for (int n = 0; n < NC; n++) begin
        ref_mmla[r][n] = 0; ref_sa[r][n] = 0; got_mmla[r][n] = 0; got_sa[r][n] = 0;
      end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sa_end;
    sa_end = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;

    // 1. Random product, K = 64, both engines, quiet then noisy.
    for (int pass = 0; pass < 3; pass++) begin
      int K;
      K = (pass == 0) ? 64 : (pass == 1) ? 8 : 128;
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < R; r++) A[r][k] = int'($signed(8'($urandom)));
        for (int n = 0; n < NC; n++) B[k][n] = int'($signed(4'($urandom)));
      end
      clear_state();
      models(0, K);
      run_mmla(0, K);
      run_sa(0, K, pass == 2, 1'b0, 0);
      if (pass == 1) begin
        // a second tile straight after the first one's drain
        sa_end = cyc - 1;
        run_sa(0, K, 1'b0, 1'b1, sa_end);
      end
      compare("random", 1'b1);
    end

    // 2. Biased product that clamps: +127 activations, weights -8 for
    //    columns 0-3 and +7 for columns 4-7, K = 128 (|sum| >= 113792).
    for (int k = 0; k < 128; k++) begin
      for (int r = 0; r < R; r++) A[r][k] = 127 - r;
      for (int n = 0; n < NC; n++) B[k][n] = (n < 4) ? -8 : 7;
    end
    // 3. ... continued with the opposite sign for another 128 steps.
    for (int k = 128; k < 256; k++) begin
      for (int r = 0; r < R; r++) A[r][k] = 127 - r;
      for (int n = 0; n < NC; n++) B[k][n] = (n < 4) ? 7 : -8;
    end
    clear_state();
    models(0, 128);
    run_mmla(0, 128);
    run_sa(0, 128, 1'b1, 1'b0, 0);
    compare("clamp", 1'b1);
    models(128, 256);
    run_mmla(128, 256);
    // The array restarts each tile from zero: run the whole 256-deep product
    // as one tile, whose sticky result must equal the clamped one.
    for (int r = 0; r < R; r++)
      for (int n = 0; n < NC; n++) ref_sa[r][n] = 0;
    models_sa_only(0, 256);
    run_sa(0, 256, 1'b0, 1'b0, 0);
    compare("sticky", 1'b1);
    for (int r = 0; r < R; r++)
      for (int n = 0; n < NC; n++) begin
        if (got_sa[r][n] == 32767)  n_sa_pos++;
        if (got_sa[r][n] == -32768) n_sa_neg++;
        if (at_lim(got_sa[r][n]))   n_sa_hold++;  // opposite-sign tail did not move it
      end

    $display("mechanisms: back-to-back issue %0d, +clamp %0d, -clamp %0d, sticky hold %0d,",
             n_b2b, n_pos, n_neg, n_hold);
    $display("            array +clamp %0d, -clamp %0d, sticky hold %0d, bubbles %0d, stalls %0d, back-to-back tiles %0d",
             n_sa_pos, n_sa_neg, n_sa_hold, n_bubble, n_stall, n_sa_b2b);
    checks++;
    if (n_b2b == 0 || n_pos == 0 || n_neg == 0 || n_hold == 0 || n_sa_pos == 0 ||
        n_sa_neg == 0 || n_sa_hold == 0 || n_bubble == 0 || n_stall == 0 || n_sa_b2b == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic models_sa_only(int k0, int k1);
    for (int r = 0; r < R; r++)
      for (int n = 0; n < NC; n++)
        for (int k = k0; k < k1; k++) ref_sa[r][n] = sticky(ref_sa[r][n], A[r][k] * B[k][n]);
  endtask

endmodule
