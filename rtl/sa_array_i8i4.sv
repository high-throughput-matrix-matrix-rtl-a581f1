// sa_array_i8i4: ROWS x COLS output-stationary systolic array of
// sa_pe_i8i4 processing elements (4 x 4 by default, as drawn in the paper).
//
// Row r of the array owns output row r; PE column c owns the two output
// columns 2c (lo) and 2c+1 (hi), so a 4 x 4 array holds a 4 x 8 tile of 16-bit
// results, where the 8-bit x 8-bit array it is derived from held a 4 x 4 tile
// of 32-bit results in the same accumulator storage.
//   a_i[r]   activation entering row r at the left edge
//   w_i[c]   packed weight pair entering PE column c at the top edge
//   a_o[r]   activation leaving row r at the right edge (one clock per PE)
//   w_o[c]   weight pair leaving column c at the bottom edge
//   shift_i  broadcast to every PE: 1 moves every accumulator one PE to the
//            left, the rightmost PEs taking in zeros
//   acc_o[r] the two accumulators of PE (r,0), i.e. the results that leave
//            the left edge
// The operand streams must be skewed by the caller: the row-r activation
// stream delayed by r clocks and the column-c weight stream by c clocks, so
// that element k of both meets in PE (r,c) at clock k + r + c. After shift_i has been high for COLS clocks all
// results have left and every accumulator holds zero, ready for the next
// tile. The zero fill at the right edge is this design's choice.
module sa_array_i8i4
  import asym_mm_pkg::*;
#(
  parameter int unsigned ROWS   = 4,
  parameter int unsigned COLS   = 4,
  parameter bit          STICKY = 1'b1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  act_t      [ROWS-1:0]        a_i,
  input  wgt_pair_t [COLS-1:0]        w_i,
  input  logic                        shift_i,
  output act_t      [ROWS-1:0]        a_o,
  output wgt_pair_t [COLS-1:0]        w_o,
  output acc_t      [ROWS-1:0][1:0]   acc_o
);

  // Horizontal activation links (COLS+1 per row), vertical weight links
  // (ROWS+1 per column) and leftward accumulator links (COLS+1 per row).
  act_t      [ROWS-1:0][COLS:0]      a_link;
  wgt_pair_t [ROWS:0][COLS-1:0]      w_link;
  acc_t      [ROWS-1:0][COLS:0][1:0] acc_link;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_link[r][0]      = a_i[r];
    assign a_o[r]            = a_link[r][COLS];
    assign acc_link[r][COLS] = '0;
    assign acc_o[r]          = acc_link[r][0];

    for (genvar c = 0; c < COLS; c++) begin : g_col
      sa_pe_i8i4 #(.STICKY(STICKY)) u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .a_i         (a_link[r][c]),
        .w_i         (w_link[r][c]),
        .shift_i     (shift_i),
        .acc_right_i (acc_link[r][c+1]),
        .a_o         (a_link[r][c+1]),
        .w_o         (w_link[r+1][c]),
        .acc_o       (acc_link[r][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_edge
    assign w_link[0][c] = w_i[c];
    assign w_o[c]       = w_link[ROWS][c];
  end

endmodule
