// asym_mm_pkg: widths and helper functions shared by the asymmetric-operand
// (8-bit x 4-bit -> 16-bit) matrix-multiply datapaths.
//
// Both engines in this design multiply signed 8-bit activations by signed
// 4-bit weights, so a single product is at most 12 bits wide
// (+127 x -8 = -1016), and products are summed into 16-bit accumulators.
// Two 4-bit weights share one 8-bit operand slot; the package defines how they
// are packed: the weight with the lower index sits in bits [3:0].
package asym_mm_pkg;

  localparam int unsigned ACT_W  = 8;   // activation element width
  localparam int unsigned WGT_W  = 4;   // weight element width
  localparam int unsigned PROD_W = ACT_W + WGT_W;  // 12-bit product
  localparam int unsigned ACC_W  = 16;  // accumulator element width

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Two 4-bit weights packed into one 8-bit operand slot.
  typedef struct packed {
    wgt_t hi;  // weight of the odd output column
    wgt_t lo;  // weight of the even output column
  } wgt_pair_t;

  // Signed product of one activation and one weight.
  function automatic prod_t mul_a8w4(act_t a, wgt_t w);
    return prod_t'(a) * prod_t'(w);
  endfunction

endpackage
