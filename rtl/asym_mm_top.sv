// asym_mm_top: the two engines for 8-bit x 4-bit matrix multiplication with
// 16-bit accumulation, side by side.
//
//  * mmla_i8i4 is the execution unit of the SIMD instruction for a CPU:
//    C(2x4, INT16) += A(2x8, INT8) x B(8x4, INT4) on 128-bit registers, one
//    instruction per clock, result one clock later. Its operands come from
//    and go to the CPU's vector register file, which is outside this design:
//    the three registers are ports here.
//  * sa_engine_i8i4 is the accelerator form: a 4x4 output-stationary
//    systolic array whose PEs each do two 8x4-bit MACs per clock into two
//    16-bit accumulators, fed by operand streams and drained column by column.
//
// Both use the same arithmetic (signed operands, sticky saturation of the
// 16-bit accumulators when STICKY=1) and share one clock and active-low
// asynchronous reset. Putting the CPU unit and the accelerator in one top is
// only a convenient way to build and test both; they do not exchange data.
module asym_mm_top
  import asym_mm_pkg::*;
#(
  parameter int unsigned SA_ROWS = 4,
  parameter int unsigned SA_COLS = 4,
  parameter bit          STICKY  = 1'b1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // SIMD matrix multiply-accumulate instruction (128-bit registers)
  input  logic                          mmla_valid_i,
  input  logic [127:0]                  mmla_a_i,
  input  logic [127:0]                  mmla_b_i,
  input  logic [127:0]                  mmla_c_i,
  output logic                          mmla_valid_o,
  output logic [127:0]                  mmla_c_o,
  output logic [7:0]                    mmla_ovf_o,
  // systolic-array operand stream
  input  logic                          sa_in_valid,
  output logic                          sa_in_ready,
  input  logic                          sa_in_last,
  input  act_t      [SA_ROWS-1:0]       sa_in_a,
  input  wgt_pair_t [SA_COLS-1:0]       sa_in_w,
  // systolic-array result stream
  output logic                          sa_out_valid,
  input  logic                          sa_out_ready,
  output logic                          sa_out_last,
  output acc_t      [SA_ROWS-1:0][1:0]  sa_out_acc
);

  mmla_i8i4 #(
    .M(2), .K(8), .N(4), .A_W(ACT_W), .B_W(WGT_W), .ACC_W(ACC_W), .STICKY(STICKY)
  ) u_mmla (
    .clk     (clk),
    .rst_n   (rst_n),
    .valid_i (mmla_valid_i),
    .a_i     (mmla_a_i),
    .b_i     (mmla_b_i),
    .c_i     (mmla_c_i),
    .valid_o (mmla_valid_o),
    .c_o     (mmla_c_o),
    .ovf_o   (mmla_ovf_o)
  );

  sa_engine_i8i4 #(.ROWS(SA_ROWS), .COLS(SA_COLS), .STICKY(STICKY)) u_sa (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sa_in_valid),
    .in_ready  (sa_in_ready),
    .in_last   (sa_in_last),
    .in_a      (sa_in_a),
    .in_w      (sa_in_w),
    .out_valid (sa_out_valid),
    .out_ready (sa_out_ready),
    .out_last  (sa_out_last),
    .out_acc   (sa_out_acc)
  );

endmodule
