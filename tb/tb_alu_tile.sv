// tb_alu_tile: checks the four vector ALU operations (MAX, MIN, ADD, arithmetic
// shift right) lane by lane against a reference, with both a vector and a
// sign-extended 16-bit immediate as second operand.
module tb_alu_tile;
  import sesame_pkg::*;
  alu_op_e op;
  logic [ACC_W-1:0] a, b, res;
  logic use_imm;
  logic [15:0] imm;
  int checks = 0, failures = 0;
  alu_tile dut (.*);
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 800; n++) begin
      automatic int bad = 0;
      op = alu_op_e'(n % 4); use_imm = n[2];
      imm = (n % 16 < 8) ? 16'($urandom_range(0, 40)) - 16'd8 : 16'($urandom);
      for (int j = 0; j < VL; j++) begin a[32*j +: 32] = $urandom; b[32*j +: 32] = $urandom; end
      #1;
      for (int j = 0; j < VL; j++) begin
        automatic int x = signed'(a[32*j +: 32]);
        automatic int y = use_imm ? int'(signed'(imm)) : int'(signed'(b[32*j +: 32]));
        int e;
        case (op)
          ALU_MAX: e = (x > y) ? x : y;
          ALU_MIN: e = (x < y) ? x : y;
          ALU_ADD: e = x + y;
          default: e = x >>> (y & 31);
        endcase
        if (res[32*j +: 32] != 32'(e)) bad++;
      end
      checks++; if (bad) begin failures++; $display("FAIL: op %0d case %0d, %0d lanes", op, n, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
