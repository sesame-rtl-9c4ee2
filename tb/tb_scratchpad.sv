// tb_scratchpad: checks the banked scratchpad at the input-buffer size (64-bit
// words, 4 banks of 8192): independent writes to all banks in one cycle,
// synchronous reads with one cycle latency on two read ports per bank, and that
// a bank's contents are not touched by writes to another bank.
module tb_scratchpad;
  localparam int W = 64, WORDS = 32768, NBANK = 4, NRD = 2, BW = WORDS / NBANK;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NBANK-1:0] wr_en = '0;
  logic [$clog2(BW)-1:0] wr_addr [NBANK], rd_addr [NBANK][NRD];
  logic [W-1:0] wr_data [NBANK], rd_data [NBANK][NRD];
  logic [NRD-1:0] rd_en [NBANK];
  int checks = 0, failures = 0;
  scratchpad #(.W(W), .WORDS(WORDS), .NBANK(NBANK), .NRD(NRD)) dut (.*);
  function automatic logic [W-1:0] pat(int b, int a); return {32'(b * 32'h1000_0001), 32'(a * 7 + 1)}; endfunction
  initial begin #10000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    automatic int bad = 0;
    for (int b = 0; b < NBANK; b++) rd_en[b] = '0;
    @(negedge clk);
    for (int a = 0; a < BW; a += 61) begin
      for (int b = 0; b < NBANK; b++) begin wr_addr[b] = 13'(a); wr_data[b] = pat(b, a); end
      wr_en = '1; @(negedge clk);
    end
    wr_en = '0;
    for (int a = 0; a < BW; a += 61) begin
      for (int b = 0; b < NBANK; b++) begin
        rd_en[b] = '1; rd_addr[b][0] = 13'(a); rd_addr[b][1] = 13'((a / 61 * 61 + 61 >= BW) ? 0 : a + 61);
      end
      @(negedge clk);
      for (int b = 0; b < NBANK; b++) begin
        if (rd_data[b][0] != pat(b, a)) bad++;
        if (rd_data[b][1] != pat(b, (a + 61 >= BW) ? 0 : a + 61)) bad++;
      end
    end
    checks++; if (bad) begin failures++; $display("FAIL: %0d read mismatches", bad); end
    // write one bank, others keep their data
    wr_en = 4'b0100; wr_addr[2] = 13'd0; wr_data[2] = '1; @(negedge clk); wr_en = '0;
    for (int b = 0; b < NBANK; b++) begin rd_en[b] = 2'b01; rd_addr[b][0] = 13'd0; end
    @(negedge clk);
    checks++; if (rd_data[2][0] != '1 || rd_data[1][0] != pat(1, 0) || rd_data[3][0] != pat(3, 0)) begin
      failures++; $display("FAIL: bank isolation"); end
    // read enable low holds the output
    for (int b = 0; b < NBANK; b++) begin rd_en[b] = '0; rd_addr[b][0] = 13'd61; end
    @(negedge clk);
    checks++; if (rd_data[2][0] != '1) begin failures++; $display("FAIL: output not held"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
