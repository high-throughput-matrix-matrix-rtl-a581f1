// tb_resnet18_layers: runs the reduction depths of the ResNet18 3x3
// convolution layers through both engines at their default sizes.
//
// One output element of such a layer is a dot product of C_in x 3 x 3
// activation/weight pairs: 576 (64 channels), 1152 (128), 2304 (256) and
// 4608 (512). For each depth a 4 x 8 block of outputs (4 output pixels x 8
// output channels) is computed on the SIMD unit, as K/8 slices of four
// instructions issued one per clock, and on the systolic array, as one tile of
// depth K. The activations are synthetic: non-negative (as after ReLU),
// 0..31 and zero with probability 1/2; the weights are uniform signed 4-bit
// values. Results are checked against the integer models with sticky 16-bit
// saturation, and the number of clamped outputs is printed. The data are
// not ImageNet activations, so the clamp counts say nothing about the
// overflow rates of the trained network.
module tb_resnet18_layers;
  import asym_mm_pkg::*;

  localparam int R = 4, NC = 8, KMAX = 4608;

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

  int n_b2b = 0, n_pos = 0, n_neg = 0, n_hold = 0;
  int n_bubble = 0, n_stall = 0, n_sa_b2b = 0;

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

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int depths [4];
    depths = '{576, 1152, 2304, 4608};
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    foreach (depths[d]) begin
      int K, clamped, t0;
      K = depths[d];
      clamped = 0;
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < R; r++) A[r][k] = ($urandom % 2 != 0) ? 0 : int'($urandom % 32);
        for (int n = 0; n < NC; n++) B[k][n] = int'($signed(4'($urandom)));
      end
      for (int r = 0; r < R; r++)
        for (int n = 0; n < NC; n++) begin
          ref_mmla[r][n] = 0; ref_sa[r][n] = 0; got_mmla[r][n] = 0; got_sa[r][n] = 0;
        end
      models(0, K);
      t0 = cyc;
      run_mmla(0, K);
      $display("K=%0d: SIMD unit %0d instructions in %0d clocks", K, K / 2, cyc - t0);
      t0 = cyc;
      run_sa(0, K, 1'b0, 1'b0, 0);
      $display("K=%0d: systolic array tile in %0d clocks", K, cyc - t0);
      for (int r = 0; r < R; r++)
        for (int n = 0; n < NC; n++) begin
          checks += 2;
          if (got_mmla[r][n] != ref_mmla[r][n]) begin
            failures++;
            $display("FAIL K=%0d SIMD C[%0d][%0d] = %0d, expected %0d", K, r, n, got_mmla[r][n], ref_mmla[r][n]);
          end
          if (got_sa[r][n] != ref_sa[r][n]) begin
            failures++;
            $display("FAIL K=%0d array C[%0d][%0d] = %0d, expected %0d", K, r, n, got_sa[r][n], ref_sa[r][n]);
          end
          if (at_lim(got_sa[r][n])) clamped++;
        end
      $display("K=%0d: %0d of 32 outputs clamped", K, clamped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
