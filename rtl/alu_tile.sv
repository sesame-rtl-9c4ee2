// alu_tile: one 8-lane vector ALU tile (activation, pooling, bias, requantise).
//
// Lane j: res[j] = op(a[j], b[j]) on signed 32-bit accumulators, where b is
// either the second accumulator vector or the sign-extended 16-bit immediate
// replicated over the lanes.  Operations: MAX (ReLU with b = 0, max pooling),
// MIN (clipping), ADD, SHR (arithmetic right shift by b[4:0]).  Combinational;
// every operation takes the same time whatever the data, so ALU and ALU_C
// behave alike.
module alu_tile
  import sesame_pkg::*;
(
  input  alu_op_e          op,
  input  logic [ACC_W-1:0] a,
  input  logic [ACC_W-1:0] b,
  input  logic             use_imm,
  input  logic [15:0]      imm,
  output logic [ACC_W-1:0] res
);
  always_comb begin
    for (int j = 0; j < VL; j++) begin
      automatic logic signed [31:0] x = $signed(a[32*j +: 32]);
      automatic logic signed [31:0] y = use_imm ? 32'($signed(imm)) : $signed(b[32*j +: 32]);
      unique case (op)
        ALU_MAX: res[32*j +: 32] = (x > y) ? x : y;
        ALU_MIN: res[32*j +: 32] = (x < y) ? x : y;
        ALU_ADD: res[32*j +: 32] = x + y;
        default: res[32*j +: 32] = x >>> y[4:0];
      endcase
    end
  end
endmodule
