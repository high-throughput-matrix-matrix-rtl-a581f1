// tb_sa_engine_i8i4: streams random output tiles through the systolic-array
// engine and compares every drained column pair with a reference product
// (sticky 16-bit saturation). A producer inserts random input bubbles and a
// consumer random output stalls; in the no-bubble, no-stall phase the time
// from the first accepted beat to the last accepted result must be
// K + (ROWS+COLS-2) + COLS clocks, and a new tile must be accepted on the
// clock after the previous drain ends.
module tb_sa_engine_i8i4;
  import asym_mm_pkg::*;

  localparam int R = 4, C = 4, KMAX = 80, NTILES = 60;

  int checks = 0, failures = 0;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    in_valid = 1'b0, in_ready, in_last = 1'b0;
  act_t      [R-1:0]       in_a = '0;
  wgt_pair_t [C-1:0]       in_w = '0;
  logic                    out_valid, out_ready = 1'b0, out_last;
  acc_t      [R-1:0][1:0]  out_acc;

  sa_engine_i8i4 dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_sticky(int a, int d);
    int s = a + d;
    if (a == 32767 || a == -32768) return a;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Per tile: depth, first-beat cycle, reference results.
  int          tile_k     [NTILES];
  int          tile_first [NTILES];
  int          tile_ref   [NTILES][R][2*C];
  bit          timed      [NTILES];
  int          bubbles = 0, stalls = 0, timed_ok = 0;
  int          drain_end  [NTILES];

  task automatic produce();
    for (int t = 0; t < NTILES; t++) begin
      int K = 1 + ($urandom % KMAX);
      int A [R][KMAX];
      int B [KMAX][2*C];
      bit quiet = (t % 3 == 2);  // every third tile: no bubbles, no stalls
      if (t < 4) K = (t == 0) ? KMAX : (t == 1) ? KMAX : (t == 2) ? 1 : 5;
      tile_k[t] = K;
      timed[t]  = quiet;
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < R; r++)
          A[r][k] = (t == 0) ? 127 : (t == 1) ? -128 : int'($signed(8'($urandom)));
        for (int n = 0; n < 2*C; n++)
          B[k][n] = (t < 2) ? 7 : int'($signed(4'($urandom)));
      end
      for (int r = 0; r < R; r++)
        for (int n = 0; n < 2*C; n++) begin
          int acc = 0;
          for (int k = 0; k < K; k++) acc = ref_sticky(acc, A[r][k] * B[k][n]);
          tile_ref[t][r][n] = acc;
        end
      for (int k = 0; k < K; k++) begin
        // All driving and sampling happens mid-cycle; in_ready depends only
        // on the engine state, so its mid-cycle value is the one the next
        // clock edge sees.
        while (!quiet && ($urandom % 4) == 0) begin
          in_valid = 1'b0;
          bubbles++;
          @(posedge clk); #1;
        end
        in_valid = 1'b1;
        in_last  = (k == K - 1);
        for (int r = 0; r < R; r++) in_a[r] = act_t'(A[r][k]);
        for (int c = 0; c < C; c++) in_w[c] = wgt_pair_t'({4'(B[k][2*c+1]), 4'(B[k][2*c])});
        while (!in_ready) begin
          @(posedge clk); #1;
        end
        if (k == 0) tile_first[t] = cyc;
        if (k == 0 && quiet && t > 0 && cyc != drain_end[t-1] + 1) begin
          failures++;
          $display("FAIL tile %0d started at %0d, previous drain ended at %0d",
                   t, cyc, drain_end[t-1]);
        end
        @(posedge clk); #1;
      end
      in_valid = 1'b0;
      in_last  = 1'b0;
    end
  endtask

  task automatic consume();
    for (int t = 0; t < NTILES; t++) begin
      for (int j = 0; j < C; j++) begin
        forever begin
          bit rdy = timed[t] || ($urandom % 3) != 0;
          out_ready = rdy;
          if (out_valid && rdy) break;
          if (out_valid) stalls++;
          @(posedge clk); #1;
        end
        for (int r = 0; r < R; r++) begin
          checks++;
          if (int'(out_acc[r][0]) != tile_ref[t][r][2*j] ||
              int'(out_acc[r][1]) != tile_ref[t][r][2*j+1]) begin
            failures++;
            $display("FAIL tile %0d row %0d out %0d: %0d %0d, expected %0d %0d", t, r, j,
                     int'(out_acc[r][0]), int'(out_acc[r][1]),
                     tile_ref[t][r][2*j], tile_ref[t][r][2*j+1]);
          end
        end
        checks++;
        if (out_last != (j == C - 1)) begin
          failures++;
          $display("FAIL out_last %0b at output %0d", out_last, j);
        end
        if (j == C - 1) drain_end[t] = cyc;
        @(posedge clk); #1;
      end
      out_ready = 1'b0;
      if (timed[t]) begin
        checks++;
        if (drain_end[t] - tile_first[t] + 1 != tile_k[t] + (R + C - 2) + C) begin
          failures++;
          $display("FAIL tile %0d (K=%0d) took %0d clocks, expected %0d", t, tile_k[t],
                   drain_end[t] - tile_first[t] + 1, tile_k[t] + (R + C - 2) + C);
        end else timed_ok++;
      end
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    fork
      produce();
      consume();
    join
    checks++;
    if (bubbles == 0 || stalls == 0 || timed_ok == 0) begin
      failures++;
      $display("FAIL mechanisms not exercised: bubbles %0d stalls %0d timed %0d",
               bubbles, stalls, timed_ok);
    end
    $display("bubbles %0d, output stalls %0d, timed tiles %0d", bubbles, stalls, timed_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
