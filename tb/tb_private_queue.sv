// tb_private_queue: checks the partitioned queue.  Spatial mode: each of the four
// tenants gets its own window of TOTAL/NT entries; filling tenant 0's partition
// (full, overflow) does not change tenant 1's ability to push (no shared
// back-pressure), data comes out in FIFO order per tenant, the depth register
// is clipped to the window, and flush empties one partition only.  Temporal
// mode: one tenant may use the whole storage.  push and pop in one cycle keep
// the count.
module tb_private_queue;
  localparam int NT = 4, WIDTH = 8, TOTAL = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic temporal = 0;
  logic [$clog2(TOTAL):0] req_depth [NT];
  logic [NT-1:0] flush = '0, push = '0, pop = '0, full, empty, overflow;
  logic [WIDTH-1:0] push_data [NT], head [NT];
  int checks = 0, failures = 0;
  private_queue #(.NT(NT), .WIDTH(WIDTH), .TOTAL(TOTAL)) dut (.*);
  task automatic check(input logic c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int k = 0; k < NT; k++) begin req_depth[k] = 4; push_data[k] = '0; end
    req_depth[2] = 16;   // asks for more than its window
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    check(empty == '1 && full == '0, "empty after reset");
    // tenant 0 pushes 5 (one too many); tenant 1 pushes 2 concurrently
    for (int i = 0; i < 5; i++) begin
      push = 4'b0001 | (i < 2 ? 4'b0010 : 4'b0000);
      push_data[0] = 8'(8'h10 + i); push_data[1] = 8'(8'h20 + i);
      @(negedge clk);
    end
    push = '0;
    check(full[0] && overflow[0], "tenant 0 full and overflowed");
    check(!full[1] && !overflow[1], "tenant 1 unaffected");
    push = 4'b0010; push_data[1] = 8'h22; @(negedge clk); push = '0;
    check(!overflow[1], "tenant 1 can still push while tenant 0 is full");
    // tenant 2: depth clipped to the window of 4
    for (int i = 0; i < 6; i++) begin push = 4'b0100; push_data[2] = 8'(i); @(negedge clk); end
    push = '0;
    check(full[2] && overflow[2], "depth clipped to TOTAL/NT");
    // FIFO order
    for (int i = 0; i < 4; i++) begin
      check(head[0] == 8'(8'h10 + i), $sformatf("tenant 0 order %0d", i));
      pop = 4'b0001; @(negedge clk); pop = '0;
    end
    check(empty[0], "tenant 0 drained");
    for (int i = 0; i < 3; i++) begin
      check(head[1] == 8'(8'h20 + i), $sformatf("tenant 1 order %0d", i));
      pop = 4'b0010; @(negedge clk); pop = '0;
    end
    // simultaneous push and pop
    push = 4'b1000; push_data[3] = 8'hA0; @(negedge clk);
    push = 4'b1000; pop = 4'b1000; push_data[3] = 8'hA1; @(negedge clk);
    push = '0; pop = '0;
    check(head[3] == 8'hA1 && !empty[3], "push+pop in one cycle");
    // flush one partition
    flush = 4'b0100; @(negedge clk); flush = '0;
    check(empty[2] && !overflow[2] && !empty[3], "flush is per tenant");
    // temporal mode: tenant 0 may use all 16 entries
    flush = '1; @(negedge clk); flush = '0;
    temporal = 1; req_depth[0] = 16;
    for (int i = 0; i < 16; i++) begin push = 4'b0001; push_data[0] = 8'(i); @(negedge clk); end
    push = '0;
    check(full[0] && !overflow[0], "temporal: 16 entries");
    begin
      automatic int bad = 0;
      for (int i = 0; i < 16; i++) begin
        if (head[0] != 8'(i)) bad++;
        pop = 4'b0001; @(negedge clk);
      end
      pop = '0;
      check(bad == 0 && empty[0], "temporal order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
