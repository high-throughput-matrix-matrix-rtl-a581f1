// sa_engine_i8i4: runs output tiles through the 8-bit x 4-bit systolic array.
//
// The array (sa_array_i8i4) is output stationary: results stay in the PEs
// while operands are streamed through. This engine computes one
// ROWS x (2*COLS) tile C = A x B at a time, A being ROWS x K signed 8-bit
// activations and B being K x (2*COLS) signed 4-bit weights, for any depth K.
//
// Operation, per tile:
//   FEED   one beat per clock is accepted on the input (in_valid & in_ready):
//          in_a[r] = A[r][k] and in_w[c] = {B[k][2c+1], B[k][2c]} for one k.
//          A clock without a beat feeds zeros (a bubble), which leaves every
//          accumulator unchanged. The beat with in_last ends the tile.
//   FLUSH  ROWS+COLS-2 clocks of zeros, until the last beat has reached the
//          bottom-right PE through the skew and pipeline registers.
//   DRAIN  out_valid is high and out_acc shows the results at the array's
//          left edge; each accepted output (out_valid & out_ready) shifts the
//          accumulators one PE to the left. Output j (j = 0..COLS-1) carries
//          out_acc[r][0] = C[r][2j] and out_acc[r][1] = C[r][2j+1];
//          out_last marks j = COLS-1. A low out_ready stalls the drain.
//          Zeros shift in from the right, so the array is clear when the
//          drain ends and FEED of the next tile starts at once.
// Timing: a tile of depth K takes K + (ROWS+COLS-2) + COLS clocks without
// bubbles or stalls; the first result appears ROWS+COLS-1 clocks after the
// last input beat. The skew delay lines (row r delayed r clocks, column c
// delayed c clocks) and this sequencing are this design's own; the paper
// describes the array and its dataflow but not how it is fed.
module sa_engine_i8i4
  import asym_mm_pkg::*;
#(
  parameter int unsigned ROWS   = 4,
  parameter int unsigned COLS   = 4,
  parameter bit          STICKY = 1'b1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // operand stream
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic                       in_last,
  input  act_t      [ROWS-1:0]       in_a,
  input  wgt_pair_t [COLS-1:0]       in_w,
  // result stream
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic                       out_last,
  output acc_t      [ROWS-1:0][1:0]  out_acc
);

  localparam int unsigned FLUSH_N = ROWS + COLS - 2;
  localparam int unsigned CNT_W   = $clog2(FLUSH_N + COLS + 1);

  typedef enum logic [1:0] {S_FEED, S_FLUSH, S_DRAIN} state_t;

  state_t           state_q;
  logic [CNT_W-1:0] cnt_q;
  logic             beat, shift;

  act_t      [ROWS-1:0] a_feed, a_skew;
  wgt_pair_t [COLS-1:0] w_feed, w_skew;

  assign in_ready  = (state_q == S_FEED);
  assign beat      = in_valid && in_ready;
  assign out_valid = (state_q == S_DRAIN);
  assign out_last  = out_valid && (cnt_q == CNT_W'(COLS - 1));
  assign shift     = out_valid && out_ready;

  // Zeros enter the array on every clock without an accepted beat.
  assign a_feed = beat ? in_a : '0;
  assign w_feed = beat ? in_w : '0;

  // Sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_FEED;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_FEED: if (beat && in_last) begin
          cnt_q   <= '0;
          state_q <= (FLUSH_N == 0) ? S_DRAIN : S_FLUSH;
        end
        S_FLUSH: begin
          if (cnt_q == CNT_W'(FLUSH_N - 1)) begin
            cnt_q   <= '0;
            state_q <= S_DRAIN;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        S_DRAIN: if (shift) begin
          if (cnt_q == CNT_W'(COLS - 1)) begin
            cnt_q   <= '0;
            state_q <= S_FEED;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
        default: state_q <= S_FEED;
      endcase
    end
  end

  // Input skew: row r of the activations is delayed by r clocks.
  for (genvar r = 0; r < ROWS; r++) begin : g_skew_a
    if (r == 0) begin : g_direct
      assign a_skew[r] = a_feed[r];
    end else begin : g_delay
      act_t [r-1:0] dl;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) dl <= '0;
        else begin
          for (int i = 0; i < r - 1; i++) dl[i] <= dl[i+1];
          dl[r-1] <= a_feed[r];
        end
      end
      assign a_skew[r] = dl[0];
    end
  end

  // Input skew: weight column c is delayed by c clocks.
  for (genvar c = 0; c < COLS; c++) begin : g_skew_w
    if (c == 0) begin : g_direct
      assign w_skew[c] = w_feed[c];
    end else begin : g_delay
      wgt_pair_t [c-1:0] dl;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) dl <= '0;
        else begin
          for (int i = 0; i < c - 1; i++) dl[i] <= dl[i+1];
          dl[c-1] <= w_feed[c];
        end
      end
      assign w_skew[c] = dl[0];
    end
  end

  sa_array_i8i4 #(.ROWS(ROWS), .COLS(COLS), .STICKY(STICKY)) u_array (
    .clk     (clk),
    .rst_n   (rst_n),
    .a_i     (a_skew),
    .w_i     (w_skew),
    .shift_i (shift),
    .a_o     (),
    .w_o     (),
    .acc_o   (out_acc)
  );

  // A stalled result must hold still.
  a_out_stable : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_acc));

endmodule
