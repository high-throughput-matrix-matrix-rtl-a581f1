// sticky_sat_add: signed accumulate with saturating, sticky overflow.
//
// acc_o = acc_i + add_i, computed exactly in ADD_W+1 or ACC_W+1 bits and then
// fitted into ACC_W bits. With STICKY=1 (the default) a sum that does not fit
// is clamped to the most negative or most positive ACC_W-bit value, and an
// accumulator that already holds one of those two values keeps it whatever is
// added. The extreme values therefore mark every result that overflowed at
// any point of a long reduction, and software can find them by scanning the
// outputs, or simply use the clamped values. With STICKY=0 the sum wraps
// (plain two's-complement), as an unprotected narrow accumulator would.
//
// The sticky rule is the one the overflow discussion proposes; treating any
// value equal to -MAX/+MAX as "already overflowed" (there is no separate flag
// bit in a 16-bit register lane) is this design's reading of it.
//
// Purely combinational. ovf_o is high when the exact sum did not fit.
module sticky_sat_add #(
  parameter int unsigned ACC_W  = 16,
  parameter int unsigned ADD_W  = 16,
  parameter bit          STICKY = 1'b1
) (
  input  logic signed [ACC_W-1:0] acc_i,
  input  logic signed [ADD_W-1:0] add_i,
  output logic signed [ACC_W-1:0] acc_o,
  output logic                    ovf_o
);

  localparam int unsigned SUM_W = ((ACC_W > ADD_W) ? ACC_W : ADD_W) + 1;
  localparam logic signed [ACC_W-1:0] ACC_MAX = {1'b0, {(ACC_W-1){1'b1}}};
  localparam logic signed [ACC_W-1:0] ACC_MIN = {1'b1, {(ACC_W-1){1'b0}}};

  logic signed [SUM_W-1:0] sum;
  logic                    too_big, too_small, at_limit;

  always_comb begin
    sum       = SUM_W'(acc_i) + SUM_W'(add_i);
    too_big   = sum > SUM_W'(ACC_MAX);
    too_small = sum < SUM_W'(ACC_MIN);
    at_limit  = (acc_i == ACC_MAX) || (acc_i == ACC_MIN);
    ovf_o     = too_big || too_small;
    if (!STICKY)        acc_o = sum[ACC_W-1:0];
    else if (at_limit)  acc_o = acc_i;
    else if (too_big)   acc_o = ACC_MAX;
    else if (too_small) acc_o = ACC_MIN;
    else                acc_o = sum[ACC_W-1:0];
  end

endmodule
