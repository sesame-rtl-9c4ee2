// gemm_tile: one 8x8 GEMM execution tile (64 int8 multiply-accumulators).
//
// acc_out[j] = acc_in[j] + sum_i inp[i] * wgt[j][i] for j, i in 0..7, with
// signed 8-bit operands and 32-bit accumulators; when clr is set acc_in is
// taken as zero.  Purely combinational: the compute unit registers the operands
// in its scratchpad read and writes the result back in the next cycle, so one
// tile does one 8x8 matrix-vector step per issue slot.  There is no zero
// skipping or other data-driven shortcut, so GEMM and GEMM_C take the same,
// data-independent time.
//
// Packing: inp lane i is inp[8*i +: 8]; weight row j, column i is
// wgt[64*j + 8*i +: 8]; accumulator lane j is acc[32*j +: 32].
module gemm_tile
  import sesame_pkg::*;
(
  input  logic [INP_W-1:0] inp,
  input  logic [WGT_W-1:0] wgt,
  input  logic [ACC_W-1:0] acc_in,
  input  logic             clr,
  output logic [ACC_W-1:0] acc_out
);
  always_comb begin
    for (int j = 0; j < VL; j++) begin
      automatic logic signed [31:0] sum = clr ? 32'sd0 : $signed(acc_in[32*j +: 32]);
      for (int i = 0; i < VL; i++)
        sum += 32'($signed(inp[8*i +: 8]) * $signed(wgt[64*j + 8*i +: 8]));
      acc_out[32*j +: 32] = sum;
    end
  end
endmodule
