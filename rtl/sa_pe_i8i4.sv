// sa_pe_i8i4: processing element of the output-stationary systolic array,
// extended to two 8-bit x 4-bit MACs per cycle.
//
// The 8-bit weight operand slot of a conventional 8x8-bit PE carries two
// packed 4-bit weights (lo = even output column, hi = odd output column).
// The one 8-bit activation coming from the left is multiplied by both, giving
// two 12-bit products, and each product is added to its own 16-bit
// accumulator; the two accumulators together fill the 32-bit ACC register of
// the conventional PE. In front of each accumulator a mux chooses between the
// adder (accumulate) and the accumulator of the right-hand neighbour (shift),
// so that finished results move one PE to the left per clock and leave the
// array at its left edge. Pipeline flip-flops pass the activation on to the
// right and the weight pair on downwards, so all data movement is between
// neighbours. This structure is the one of the paper's modified PE; the
// sticky saturation in the adders and the single shift_i select are this
// design's choices.
//
// Interface and timing:
//   a_i / a_o       8-bit activation in from the left, out to the right (1 clock)
//   w_i / w_o       packed weight pair in from above, out below (1 clock)
//   shift_i         1: ACC <= acc_right_i; 0: ACC <= ACC + a_i*w_i (both halves)
//   acc_right_i     the right neighbour's ACC (zero at the right edge)
//   acc_o           this PE's ACC, to the left neighbour or the array output
// Products of a_i and w_i are taken in the cycle they arrive (before the
// pipeline flip-flops). Reset clears all registers.
module sa_pe_i8i4
  import asym_mm_pkg::*;
#(
  parameter bit STICKY = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  act_t      a_i,
  input  wgt_pair_t w_i,
  input  logic      shift_i,
  input  acc_t [1:0] acc_right_i,
  output act_t      a_o,
  output wgt_pair_t w_o,
  output acc_t [1:0] acc_o
);

  acc_t [1:0] acc_q, acc_sum;
  wgt_t [1:0] wgt;

  assign wgt[0] = w_i.lo;
  assign wgt[1] = w_i.hi;

  for (genvar h = 0; h < 2; h++) begin : g_mac
    prod_t prod;
    assign prod = mul_a8w4(a_i, wgt[h]);

    sticky_sat_add #(.ACC_W(ACC_W), .ADD_W(PROD_W), .STICKY(STICKY)) u_add (
      .acc_i (acc_q[h]),
      .add_i (prod),
      .acc_o (acc_sum[h]),
      .ovf_o ()
    );
  end

  // The mux in front of ACC: shift the neighbour's results in, or accumulate.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc_q <= '0;
    else if (shift_i) acc_q <= acc_right_i;
    else              acc_q <= acc_sum;
  end

  assign acc_o = acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_o <= '0;
      w_o <= '0;
    end else begin
      a_o <= a_i;
      w_o <= w_i;
    end
  end

endmodule
