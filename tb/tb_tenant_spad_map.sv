// tb_tenant_spad_map: checks claims and releases of the scratchmap: a valid
// claim (tiles + region ranges in the tiles' banks) is granted in one cycle and
// recorded; a claim of an owned tile, an owned region, a region in a bank of a
// tile not requested, or a range past the end of a scratchpad is refused and
// changes nothing; release frees exactly the tenant's entries.
module tb_tenant_spad_map;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic claim = 0, claim_done, claim_ok, release_req = 0;
  logic [TW-1:0] claim_tenant = '0, release_tenant = '0;
  logic [NTILE-1:0] claim_tiles = '0;
  rrange_t claim_rng [4];
  own_t tile_own [NTILE], inp_own [INP_NREG], wgt_own [WGT_NREG], acc_own [ACC_NREG], out_own [OUT_NREG];
  int checks = 0, failures = 0;
  tenant_spad_map dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic do_claim(input int t, input int tiles, input int bi, input int ni, input int bw, input int nw,
                          input int ba, input int na, input int bo, input int no, output logic ok);
    claim_tenant = TW'(t); claim_tiles = NTILE'(tiles);
    claim_rng[0] = '{8'(bi), 8'(ni)}; claim_rng[1] = '{8'(bw), 8'(nw)};
    claim_rng[2] = '{8'(ba), 8'(na)}; claim_rng[3] = '{8'(bo), 8'(no)};
    claim = 1; @(negedge clk); claim = 0;
    check(claim_done, "claim_done one cycle after claim");
    ok = claim_ok;
    @(negedge clk);
  endtask
  function automatic int owned_by(int t);
    int n = 0;
    for (int r = 0; r < INP_NREG; r++) if (inp_own[r].v && inp_own[r].id == TW'(t)) n++;
    for (int r = 0; r < WGT_NREG; r++) if (wgt_own[r].v && wgt_own[r].id == TW'(t)) n++;
    for (int r = 0; r < ACC_NREG; r++) if (acc_own[r].v && acc_own[r].id == TW'(t)) n++;
    for (int r = 0; r < OUT_NREG; r++) if (out_own[r].v && out_own[r].id == TW'(t)) n++;
    return n;
  endfunction
  initial begin
    logic ok;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    // tenant 0: tile 0, 2 input regions, 4 weight, 1 acc, 1 out (all in bank 0)
    do_claim(0, 4'b0001, 0, 2, 0, 4, 0, 1, 0, 1, ok);
    check(ok && tile_own[0] == '{1'b1, 2'd0} && owned_by(0) == 8, "tenant 0 granted");
    // tenant 1 on tile 0 again: refused
    do_claim(1, 4'b0001, 2, 1, 0, 0, 0, 0, 0, 0, ok);
    check(!ok && owned_by(1) == 0, "owned tile refused");
    // tenant 1 on tile 1 but an input region in bank 0: refused
    do_claim(1, 4'b0010, 3, 2, 32, 1, 8, 1, 4, 1, ok);
    check(!ok && owned_by(1) == 0 && !tile_own[1].v, "region outside own tiles' banks refused");
    // range past the end of the weight buffer
    do_claim(1, 4'b0010, 4, 1, 127, 2, 8, 1, 4, 1, ok);
    check(!ok && owned_by(1) == 0, "range past the end refused");
    // valid tenant 1 claim
    do_claim(1, 4'b0010, 4, 4, 32, 32, 8, 8, 4, 4, ok);
    check(ok && owned_by(1) == 48 && tile_own[1] == '{1'b1, 2'd1}, "tenant 1 granted a whole bank");
    // tenant 2 tries tenant 1's region through a tile it doesn't own
    do_claim(2, 4'b0100, 5, 1, 64, 1, 16, 1, 8, 1, ok);
    check(!ok, "region of another tile refused");
    // release tenant 0
    release_req = 1; release_tenant = 0; @(negedge clk); release_req = 0; @(negedge clk);
    check(owned_by(0) == 0 && !tile_own[0].v && owned_by(1) == 48, "release frees only tenant 0");
    // temporal-style claim of everything left
    do_claim(3, 4'b1101, 0, 4, 0, 32, 0, 8, 0, 4, ok);
    check(ok && tile_own[0].id == 3 && tile_own[2].id == 3 && tile_own[3].id == 3, "multi-tile claim");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
