// mmla_i8i4: asymmetric-operand SIMD matrix multiply-accumulate unit.
//
// One instruction computes C += A x B on three 128-bit vector registers:
//   A : 2x8 matrix of signed 8-bit activations   (16 lanes x 8 bits)
//   B : 8x4 matrix of signed 4-bit weights       (32 lanes x 4 bits)
//   C : 2x4 matrix of signed 16-bit accumulators ( 8 lanes x 16 bits)
// That is 64 multiply-accumulates per instruction, twice the 32 of an
// 8-bit x 8-bit instruction producing 2x2 32-bit results from registers of
// the same size, because the weights are packed at 4 bits and the results
// kept at 16 bits. The shapes, element widths and register width follow the
// paper's instruction; everything about lane order, pipelining and overflow
// handling below is this design's choice.
//
// Register layouts (lane 0 in the least significant bits):
//   A[r][k] at a_i[(r*K + k)*A_W +: A_W]      (row-major)
//   B[k][n] at b_i[(n*K + k)*B_W +: B_W]      (each column of B contiguous)
//   C[r][n] at c_i[(r*N + n)*ACC_W +: ACC_W]  (row-major)
// For each output the K products are summed exactly (12 + log2 K bits) and
// then added to the accumulator through sticky_sat_add: with STICKY=1 a
// result that leaves the 16-bit range is clamped to -MAX/+MAX and stays
// there in later instructions.
//
// Timing: one instruction may be issued every cycle (valid_i); the result
// appears on c_o with valid_o one clock later. ovf_o flags, per C lane, that
// this instruction's exact sum did not fit. Reset clears valid_o only.
module mmla_i8i4 #(
  parameter int unsigned M      = 2,
  parameter int unsigned K      = 8,
  parameter int unsigned N      = 4,
  parameter int unsigned A_W    = 8,
  parameter int unsigned B_W    = 4,
  parameter int unsigned ACC_W  = 16,
  parameter bit          STICKY = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid_i,
  input  logic [M*K*A_W-1:0]     a_i,
  input  logic [K*N*B_W-1:0]     b_i,
  input  logic [M*N*ACC_W-1:0]   c_i,
  output logic                   valid_o,
  output logic [M*N*ACC_W-1:0]   c_o,
  output logic [M*N-1:0]         ovf_o
);

  localparam int unsigned PROD_W = A_W + B_W;
  localparam int unsigned DOT_W  = PROD_W + $clog2(K) + 1;

  logic [M*N*ACC_W-1:0] c_next;
  logic [M*N-1:0]       ovf_next;

  for (genvar r = 0; r < M; r++) begin : g_row
    for (genvar n = 0; n < N; n++) begin : g_col
      logic signed [DOT_W-1:0] dot;

      always_comb begin
        dot = '0;
        for (int k = 0; k < K; k++) begin
          dot += DOT_W'($signed(a_i[(r*K + k)*A_W +: A_W]) *
                        $signed(b_i[(n*K + k)*B_W +: B_W]));
        end
      end

      sticky_sat_add #(.ACC_W(ACC_W), .ADD_W(DOT_W), .STICKY(STICKY)) u_acc (
        .acc_i (c_i[(r*N + n)*ACC_W +: ACC_W]),
        .add_i (dot),
        .acc_o (c_next[(r*N + n)*ACC_W +: ACC_W]),
        .ovf_o (ovf_next[r*N + n])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

  always_ff @(posedge clk) begin
    if (valid_i) begin
      c_o   <= c_next;
      ovf_o <= ovf_next;
    end
  end

endmodule
