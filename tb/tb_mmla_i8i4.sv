// tb_mmla_i8i4: checks the asymmetric SIMD multiply-accumulate unit against
// an integer model of C += A x B with sticky 16-bit saturation.
//
// Instructions are issued on every clock (checking the one-instruction-per-
// clock rate and the one-clock latency), with random operands in three
// regimes: accumulators near zero, accumulators near the 16-bit limits, and
// the worst case of the overflow discussion (+127 x -8 products), where
// four instructions (32 products) must still fit and the fifth must clamp to
// -32768 and then stay there.
module tb_mmla_i8i4;

  localparam int M = 2, K = 8, N = 4;

  int checks = 0, failures = 0;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         valid_i = 1'b0, valid_o;
  logic [127:0] a_i = '0, b_i = '0, c_i = '0, c_o;
  logic [7:0]   ovf_o;

  mmla_i8i4 dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_sticky(int a, int d);
    int s = a + d;
    if (a == 32767 || a == -32768) return a;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  function automatic int aval(logic [127:0] a, int r, int k);
    return int'($signed(a[(r*K + k)*8 +: 8]));
  endfunction
  function automatic int bval(logic [127:0] b, int k, int n);
    return int'($signed(b[(n*K + k)*4 +: 4]));
  endfunction
  function automatic int cval(logic [127:0] c, int r, int n);
    return int'($signed(c[(r*N + n)*16 +: 16]));
  endfunction

  function automatic logic [127:0] ref_mmla(logic [127:0] a, logic [127:0] b, logic [127:0] c);
    logic [127:0] res;
    for (int r = 0; r < M; r++)
      for (int n = 0; n < N; n++) begin
        int dot = 0;
        for (int k = 0; k < K; k++) dot += aval(a, r, k) * bval(b, k, n);
        res[(r*N + n)*16 +: 16] = 16'(ref_sticky(cval(c, r, n), dot));
      end
    return res;
  endfunction

  // Expected results, one instruction behind the issue.
  logic [127:0] exp_q;
  logic         exp_v = 1'b0;
  int           issued = 0, seen = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (exp_v !== valid_o) begin
        failures++;
        $display("FAIL valid_o %0b, expected %0b", valid_o, exp_v);
      end
      if (exp_v) begin
        checks++;
        seen++;
        if (c_o !== exp_q) begin
          failures++;
          $display("FAIL result %h, expected %h", c_o, exp_q);
        end
      end
    end
  end

  task automatic issue(logic [127:0] a, logic [127:0] b, logic [127:0] c);
    a_i     <= a;
    b_i     <= b;
    c_i     <= c;
    valid_i <= 1'b1;
    @(posedge clk);
    // The unit registers the result on this edge; the checker above compares
    // at the next edge, one clock later.
    exp_q <= ref_mmla(a, b, c);
    exp_v <= 1'b1;
    issued++;
  endtask

  task automatic idle();
    valid_i <= 1'b0;
    @(posedge clk);
    exp_v <= 1'b0;
  endtask

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] a_wc, b_wc, c;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // Random operands, accumulators near zero, back-to-back issue.
    for (int i = 0; i < 300; i++) begin
      c = '0;
      for (int l = 0; l < 8; l++) c[l*16 +: 16] = 16'($signed(12'($urandom)));
      issue(rnd128(), rnd128(), c);
    end
    idle();
    // Accumulators anywhere in range, including near the limits.
    for (int i = 0; i < 300; i++) begin
      issue(rnd128(), rnd128(), rnd128());
      if (i % 7 == 0) idle();
    end
    idle();

    // Worst case: every product is +127 x -8 = -1016.
    for (int k = 0; k < 16; k++) a_wc[k*8 +: 8] = 8'sd127;
    for (int k = 0; k < 32; k++) b_wc[k*4 +: 4] = 4'b1000;
    c = '0;
    for (int i = 0; i < 6; i++) begin
      issue(a_wc, b_wc, c);
      idle();
      c = c_o;
      checks++;
      if (i < 4 && c[15:0] != 16'(-8128 * (i + 1))) begin
        failures++;
        $display("FAIL worst case after %0d instructions: %0d", i + 1, $signed(c[15:0]));
      end
      if (i >= 4 && c[15:0] != 16'h8000) begin
        failures++;
        $display("FAIL worst case did not clamp: %0d", $signed(c[15:0]));
      end
      if (i == 4 && ovf_o != 8'hff) begin
        failures++;
        $display("FAIL overflow flags %b", ovf_o);
      end
    end
    // Sticky: a positive contribution must not move a clamped lane.
    for (int k = 0; k < 32; k++) b_wc[k*4 +: 4] = 4'sd7;
    issue(a_wc, b_wc, c);
    idle();
    checks++;
    if (c_o[15:0] != 16'h8000) begin
      failures++;
      $display("FAIL sticky lane moved to %0d", $signed(c_o[15:0]));
    end
    idle();

    checks++;
    if (seen != issued) begin
      failures++;
      $display("FAIL %0d issued, %0d completed", issued, seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
