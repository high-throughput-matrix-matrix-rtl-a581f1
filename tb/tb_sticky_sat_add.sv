// tb_sticky_sat_add: checks the sticky saturating accumulate against an
// integer model, for the sticky (default) and the wrapping configuration,
// and for a 12-bit sticky accumulator.
// Directed cases cover both clamps, the sticky hold at -MAX and +MAX and the
// plain in-range sum; random cases cover the rest of the 16-bit range.
module tb_sticky_sat_add;

  int checks = 0, failures = 0;

  logic signed [15:0] acc, acc_s, acc_w;
  logic signed [15:0] add;
  logic               ovf_s, ovf_w;

  sticky_sat_add #(.ACC_W(16), .ADD_W(16), .STICKY(1'b1)) dut_s (
    .acc_i(acc), .add_i(add), .acc_o(acc_s), .ovf_o(ovf_s));
  sticky_sat_add #(.ACC_W(16), .ADD_W(16), .STICKY(1'b0)) dut_w (
    .acc_i(acc), .add_i(add), .acc_o(acc_w), .ovf_o(ovf_w));

  // A 12-bit accumulator, the narrowest width of the overflow study.
  logic signed [11:0] acc12, acc12_o;
  logic               ovf12;
  sticky_sat_add #(.ACC_W(12), .ADD_W(16), .STICKY(1'b1)) dut_12 (
    .acc_i(acc12), .add_i(add), .acc_o(acc12_o), .ovf_o(ovf12));

  task automatic check12(int a, int d);
    int s = a + d, e;
    if (a == 2047 || a == -2048) e = a;
    else if (s > 2047)           e = 2047;
    else if (s < -2048)          e = -2048;
    else                         e = s;
    acc12 = 12'(a);
    add   = 16'(d);
    #1;
    checks++;
    if (int'(acc12_o) != e || ovf12 != (s > 2047 || s < -2048)) begin
      failures++;
      $display("FAIL 12-bit: %0d + %0d -> %0d (exp %0d)", a, d, acc12_o, e);
    end
  endtask

  function automatic int ref_sticky(int a, int d);
    int s = a + d;
    if (a == 32767 || a == -32768) return a;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  function automatic int ref_wrap(int a, int d);
    logic signed [15:0] t;
    t = 16'(a + d);
    return int'(t);
  endfunction

  task automatic check(int a, int d);
    int s = a + d;
    bit ovf_exp = (s > 32767) || (s < -32768);
    acc = 16'(a);
    add = 16'(d);
    #1;
    checks++;
    if (int'(acc_s) != ref_sticky(a, d) || ovf_s != ovf_exp) begin
      failures++;
      $display("FAIL sticky: %0d + %0d -> %0d ovf %0b (exp %0d %0b)",
               a, d, acc_s, ovf_s, ref_sticky(a, d), ovf_exp);
    end
    checks++;
    if (int'(acc_w) != ref_wrap(a, d) || ovf_w != ovf_exp) begin
      failures++;
      $display("FAIL wrap: %0d + %0d -> %0d (exp %0d)", a, d, acc_w, ref_wrap(a, d));
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(100, 23);          // plain sum
    check(32000, 1000);      // positive clamp
    check(-32000, -1000);    // negative clamp
    check(32767, -500);      // sticky at +MAX
    check(-32768, 500);      // sticky at -MAX
    check(32767, 0);
    check(32766, 1);         // exactly reaches +MAX
    check(-32767, -1);       // exactly reaches -MAX
    check(-32768, -32768);
    for (int i = 0; i < 20000; i++) begin
      check(int'($signed(16'($urandom))), int'($signed(16'($urandom))));
    end
    for (int i = 0; i < 4000; i++) begin
      check12(int'($signed(12'($urandom))), int'($signed(13'($urandom))));
    end
    check12(2047, -100);
    check12(-2048, 100);
    // Accumulators already clamped, random addends: must not move.
    for (int i = 0; i < 2000; i++) begin
      check((i % 2 != 0) ? 32767 : -32768, int'($signed(16'($urandom))));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
