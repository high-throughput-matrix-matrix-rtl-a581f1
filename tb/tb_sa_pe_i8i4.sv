// tb_sa_pe_i8i4: checks one systolic-array PE clock by clock against a model:
// both 16-bit accumulators take the product of the shared activation with
// their own 4-bit weight, or the right neighbour's value when shift_i is set;
// the activation and weight pair come out one clock later. Values shifted in
// near +-32767 drive both accumulators into sticky saturation.
module tb_sa_pe_i8i4;
  import asym_mm_pkg::*;

  int checks = 0, failures = 0, sat_hits = 0;

  logic       clk = 1'b0, rst_n = 1'b0;
  act_t       a_i = '0, a_o;
  wgt_pair_t  w_i = '0, w_o;
  logic       shift_i = 1'b0;
  acc_t [1:0] acc_right_i = '0, acc_o;

  sa_pe_i8i4 dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_sticky(int a, int d);
    int s = a + d;
    if (a == 32767 || a == -32768) return a;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  int        m_acc [2];
  act_t      m_a;
  wgt_pair_t m_w;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_acc = '{0, 0};
    m_a = '0;
    m_w = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int i = 0; i < 5000; i++) begin
      int wl, wh;
      // drive
      a_i     <= act_t'($urandom);
      w_i     <= wgt_pair_t'($urandom);
      shift_i <= ($urandom % 8) == 0;
      if (($urandom % 2) == 0) begin
        acc_right_i[0] <= acc_t'(($urandom % 2 != 0) ? 32700 - ($urandom % 64) : -32700 + ($urandom % 64));
        acc_right_i[1] <= acc_t'(($urandom % 2 != 0) ? 32700 - ($urandom % 64) : -32700 + ($urandom % 64));
      end else begin
        acc_right_i <= {acc_t'($urandom % 4096), acc_t'($urandom % 4096)};
      end
      #1;
      // model update for this clock
      wl = int'(w_i.lo);
      wh = int'(w_i.hi);
      @(posedge clk);
      if (shift_i) begin
        m_acc[0] = int'(acc_right_i[0]);
        m_acc[1] = int'(acc_right_i[1]);
      end else begin
        m_acc[0] = ref_sticky(m_acc[0], int'(a_i) * wl);
        m_acc[1] = ref_sticky(m_acc[1], int'(a_i) * wh);
      end
      m_a = a_i;
      m_w = w_i;
      #1;
      checks++;
      if (int'(acc_o[0]) != m_acc[0] || int'(acc_o[1]) != m_acc[1]) begin
        failures++;
        $display("FAIL acc %0d %0d, expected %0d %0d", int'(acc_o[0]), int'(acc_o[1]), m_acc[0], m_acc[1]);
      end
      checks++;
      if (a_o != m_a || w_o != m_w) begin
        failures++;
        $display("FAIL pipeline registers a=%h w=%h, expected %h %h", a_o, w_o, m_a, m_w);
      end
      if (m_acc[0] == 32767 || m_acc[0] == -32768) sat_hits++;
    end
    checks++;
    if (sat_hits == 0) begin
      failures++;
      $display("FAIL saturation never reached");
    end
    $display("saturated cycles: %0d", sat_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
