// tb_base_bound_checker: fills an ownership table with a pattern and checks,
// exhaustively over all addresses and tenants, that an access is allowed exactly
// when the address lies inside the scratchpad and its 16 kB region is owned by
// the requesting tenant.  Purely combinational.
module tb_base_bound_checker;
  import sesame_pkg::*;
  localparam int WORDS = INP_WORDS, NREG = INP_NREG, RW = WORDS / NREG;
  logic [TW-1:0] tenant;
  logic [15:0] addr;
  own_t own [NREG];
  logic ok;
  int checks = 0, failures = 0;
  base_bound_checker #(.WORDS(WORDS), .NREG(NREG)) dut (.*);
  initial begin #10000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int bad = 0, n = 0, allowed = 0;
    for (int r = 0; r < NREG; r++) own[r] = '{v: (r % 5) != 4, id: TW'(r / 4)};
    for (int t = 0; t < NT; t++)
      for (int a = 0; a < 65536; a += 37) begin
        logic exp;
        tenant = TW'(t); addr = 16'(a); #1;
        exp = (a < WORDS) && own[a / RW].v && own[a / RW].id == TW'(t);
        if (ok !== exp) bad++;
        if (ok) allowed++;
        n++;
      end
    checks++; if (bad != 0) begin failures++; $display("FAIL: %0d of %0d wrong", bad, n); end
    checks++; if (allowed == 0) begin failures++; $display("FAIL: nothing allowed"); end
    // region edges
    tenant = 0; addr = 16'(RW - 1); #1; checks++; if (!ok) failures++;
    tenant = 0; addr = 16'(4 * RW);  #1; checks++; if (ok)  failures++;   // region 4 is tenant 1's
    tenant = 1; addr = 16'(4 * RW);  #1; checks++; if (ok)  failures++;   // region 4: r%5==4, not owned
    tenant = 1; addr = 16'(5 * RW);  #1; checks++; if (!ok) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
