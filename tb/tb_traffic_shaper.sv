// tb_traffic_shaper: checks the per-tenant shaper on one channel.
//  * Tenant 0 is shaped with bandwidth 10: with nothing to send it emits one
//    fake burst exactly every 10 cycles, inside its fake address range; when a
//    shaped real burst waits, the next slot carries it instead (still every 10
//    cycles), so the bus pattern does not depend on the program.
//  * An unshaped burst of the shaped tenant bypasses the timer (issued at once).
//  * Tenant 1 is unshaped: its bursts go out as soon as the channel is free.
//  * With issue_ready low nothing is lost: the slot waits.
module tb_traffic_shaper;
  import sesame_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  shaper_cfg_t cfg [NT];
  logic [NT-1:0] q_valid = '0, q_pop, slot_dbg;
  burst_t q_head [NT];
  logic [7:0] q_data [NT];
  logic [DRAM_BANKS-1:0] free_banks = '1;
  logic issue_valid, issue_ready = 1, issue_fake, issue_enc, issue_aes;
  logic [MEM_AW-1:0] issue_addr;
  logic [TW-1:0] issue_tenant;
  logic [7:0] issue_data;
  logic [31:0] fake_count, bypass_count;
  int checks = 0, failures = 0;
  traffic_shaper #(.DATA_W(8)) dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // record every accepted issue
  int cyc = 0, n_iss [NT], last_t0 = -1, bad_gap = 0, t0_real = 0, t0_fake = 0, bad_range = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && issue_valid && issue_ready) begin
      n_iss[issue_tenant] <= n_iss[issue_tenant] + 1;
      if (issue_tenant == 0 && (issue_fake || q_head[0].shaped)) begin
        if (last_t0 >= 0 && cyc - last_t0 != 10) bad_gap <= bad_gap + 1;
        last_t0 <= cyc;
        if (issue_fake) begin
          t0_fake <= t0_fake + 1;
          if (issue_addr < 32'h0080_0000 || issue_addr >= 32'h0081_0000) bad_range <= bad_range + 1;
        end else t0_real <= t0_real + 1;
      end
    end
  end

  initial begin
    for (int k = 0; k < NT; k++) begin
      cfg[k] = '0; q_head[k] = '0; q_data[k] = 8'(k); n_iss[k] = 0;
    end
    cfg[0] = '{shaper_en: 1'b1, bandwidth: 16'd10, addr_base: 32'h0080_0000, addr_log2: 5'd16, cipher_aes: 1'b0};
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (100) @(negedge clk);
    check(t0_fake >= 9 && t0_real == 0, $sformatf("idle shaped tenant sends fakes (%0d)", t0_fake));
    check(bad_gap == 0, "fake bursts exactly every 10 cycles");
    check(bad_range == 0, "fakes inside the tenant's range");
    check(fake_count == 32'(t0_fake), "fake counter");
    // shaped real bursts: 3 of them, consumed one per slot
    q_head[0] = '{addr: 32'h1000, shaped: 1'b1, enc: 1'b1};
    begin
      automatic int sent = 0;
      q_valid[0] = 1;
      while (sent < 3) begin
        @(posedge clk); #1;
        if (q_pop[0]) begin sent++; q_head[0].addr = q_head[0].addr + 32'd128; end
      end
      @(negedge clk); q_valid[0] = 0;
    end
    check(t0_real == 3, $sformatf("3 real shaped bursts (%0d)", t0_real));
    repeat (40) @(negedge clk);
    check(bad_gap == 0, "real and fake bursts share the 10-cycle grid");
    // bypass: unshaped head of the shaped tenant goes out immediately
    begin
      automatic int waited = 0;
      
      @(negedge clk);
      q_head[0] = '{addr: 32'h2000, shaped: 1'b0, enc: 1'b0}; q_valid[0] = 1;
      #1;
      while (!q_pop[0]) begin @(negedge clk); waited++; #1; end
      @(negedge clk); q_valid[0] = 0;
      check(waited == 0, "unshaped burst bypasses the timer");
      check(bypass_count == 1, "bypass counted");
    end
    // unshaped tenant 1: issued in the same cycle it appears, unless tenant 0 wins that cycle
    begin
      automatic int waited = 0;
      q_head[1] = '{addr: 32'h3000, shaped: 1'b0, enc: 1'b0}; q_valid[1] = 1; #1;
      while (!q_pop[1]) begin @(negedge clk); waited++; #1; end
      @(negedge clk); q_valid[1] = 0;
      check(waited <= 1, "unshaped tenant not delayed");
    end
    // back-pressure: hold issue_ready low across two slots; one burst when released
    begin
      automatic int f0 = t0_fake;
      issue_ready = 0; repeat (25) @(negedge clk);
      check(issue_valid && issue_tenant == 0 && issue_fake, "slot pending under back-pressure");
      issue_ready = 1; @(negedge clk);
      check(t0_fake == f0 + 1, "one burst per slot, none lost or doubled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
