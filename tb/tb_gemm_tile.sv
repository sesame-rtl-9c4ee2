// tb_gemm_tile: compares the 8x8 int8 GEMM tile (acc[j] += sum_i inp[i]*w[j][i])
// with a reference computed here, for random operands including the extreme
// values -128 and 127, both with accumulation and with clear.
module tb_gemm_tile;
  import sesame_pkg::*;
  logic [INP_W-1:0] inp;
  logic [WGT_W-1:0] wgt;
  logic [ACC_W-1:0] acc_in, acc_out;
  logic clr;
  int checks = 0, failures = 0;
  gemm_tile dut (.*);
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int n = 0; n < 500; n++) begin
      automatic int bad = 0;
      for (int i = 0; i < VL; i++) inp[8*i +: 8] = (n < 4) ? ((n % 2) ? 8'h80 : 8'h7F) : 8'($urandom);
      for (int k = 0; k < VL*VL; k++) wgt[8*k +: 8] = (n < 2) ? 8'h80 : 8'($urandom);
      for (int j = 0; j < VL; j++) acc_in[32*j +: 32] = $urandom;
      clr = n[0];
      #1;
      for (int j = 0; j < VL; j++) begin
        automatic int s = clr ? 0 : int'(signed'(acc_in[32*j +: 32]));
        for (int i = 0; i < VL; i++) s += int'(signed'(inp[8*i +: 8])) * int'(signed'(wgt[64*j + 8*i +: 8]));
        if (acc_out[32*j +: 32] != 32'(s)) bad++;
      end
      checks++; if (bad) begin failures++; $display("FAIL: vector %0d, %0d lanes wrong", n, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
