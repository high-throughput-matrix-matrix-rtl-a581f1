// tb_sa_array_i8i4: checks the 4x4 array on whole output tiles.
//
// The testbench skews the operand streams itself (row r of A delayed r
// clocks, weight column c delayed c clocks), waits for the last operands to
// reach the far corner, then raises shift_i for COLS clocks and reads the
// results at the left edge: output j of row r must equal C[r][2j] and
// C[r][2j+1] of a reference matrix product with sticky 16-bit saturation.
// Tiles follow one another without reset, which also checks that the drain
// leaves the accumulators at zero. The right-edge activation outputs are
// checked against the inputs delayed by COLS clocks.
module tb_sa_array_i8i4;
  import asym_mm_pkg::*;

  localparam int R = 4, C = 4, KMAX = 64;

  int checks = 0, failures = 0, sat_tiles = 0;

  logic                  clk = 1'b0, rst_n = 1'b0;
  act_t      [R-1:0]     a_i = '0, a_o;
  wgt_pair_t [C-1:0]     w_i = '0, w_o;
  logic                  shift_i = 1'b0;
  acc_t      [R-1:0][1:0] acc_o;

  sa_array_i8i4 dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_sticky(int a, int d);
    int s = a + d;
    if (a == 32767 || a == -32768) return a;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  int A [R][KMAX];
  int B [KMAX][2*C];
  int Cref [R][2*C];
  act_t a_hist [$];

  task automatic run_tile(int K, int mode);
    bit sat = 0;
    for (int r = 0; r < R; r++)
      for (int k = 0; k < K; k++)
        A[r][k] = (mode == 1) ? 127 : (mode == 2) ? -128 : int'($signed(8'($urandom)));
    for (int k = 0; k < K; k++)
      for (int n = 0; n < 2*C; n++)
        B[k][n] = (mode == 1) ? 7 : (mode == 2) ? 7 : int'($signed(4'($urandom)));
    for (int r = 0; r < R; r++)
      for (int n = 0; n < 2*C; n++) begin
        Cref[r][n] = 0;
        for (int k = 0; k < K; k++) Cref[r][n] = ref_sticky(Cref[r][n], A[r][k] * B[k][n]);
        if (Cref[r][n] == 32767 || Cref[r][n] == -32768) sat = 1;
      end
    if (sat) sat_tiles++;
    // accumulate phase, skewed feed
    for (int t = 0; t < K + R + C - 2; t++) begin
      for (int r = 0; r < R; r++)
        a_i[r] <= (t - r >= 0 && t - r < K) ? act_t'(A[r][t-r]) : '0;
      for (int c = 0; c < C; c++)
        w_i[c] <= (t - c >= 0 && t - c < K) ?
                  wgt_pair_t'({4'(B[t-c][2*c+1]), 4'(B[t-c][2*c])}) : '0;
      shift_i <= 1'b0;
      @(posedge clk);
    end
    a_i <= '0;
    w_i <= '0;
    // drain phase
    for (int j = 0; j < C; j++) begin
      #1;
      for (int r = 0; r < R; r++) begin
        checks++;
        if (int'(acc_o[r][0]) != Cref[r][2*j] || int'(acc_o[r][1]) != Cref[r][2*j+1]) begin
          failures++;
          $display("FAIL K=%0d row %0d out %0d: %0d %0d, expected %0d %0d", K, r, j,
                   int'(acc_o[r][0]), int'(acc_o[r][1]), Cref[r][2*j], Cref[r][2*j+1]);
        end
      end
      shift_i <= 1'b1;
      @(posedge clk);
    end
    shift_i <= 1'b0;
  endtask

  // Right-edge activation of row 0 is its input delayed by C clocks.
  always @(posedge clk) begin
    if (rst_n) begin
      a_hist.push_back(a_i[0]);
      if (a_hist.size() > C) begin
        checks++;
        if (a_o[0] != a_hist[0]) begin
          failures++;
          $display("FAIL right-edge activation %h, expected %h", a_o[0], a_hist[0]);
        end
        void'(a_hist.pop_front());
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_tile(1, 0);
    run_tile(8, 0);
    run_tile(KMAX, 1);   // 64 x 889 > 32767: positive clamp
    run_tile(KMAX, 2);   // 64 x -896: negative clamp
    for (int i = 0; i < 40; i++) run_tile(1 + ($urandom % KMAX), 0);
    checks++;
    if (sat_tiles < 2) begin
      failures++;
      $display("FAIL saturation tiles: %0d", sat_tiles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
