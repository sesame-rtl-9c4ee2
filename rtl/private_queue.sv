// private_queue: a FIFO whose storage is partitioned between tenants.
//
// This is the "private queue" primitive: it replaces an ordinary shared queue
// between pipeline stages.  Every tenant has its own push/pop port, its own
// read/write pointers and its own slice of the storage, so one tenant filling
// its partition can never make another tenant's push stall (no contention
// channel).  The tenant id selects the port; the partition a port may use is
// its base-and-bound window:
//   spatial mode  : tenant k owns entries [k*TOTAL/NT, k*TOTAL/NT + depth_k)
//   temporal mode : the single tenant may use entries [0, depth_k)
// depth_k is the tenant's configured queue depth (queue_depth register),
// clipped to the window.  A push into a full partition is dropped and sets
// the tenant's sticky overflow flag; a pop of an empty one is ignored.
//
// Timing: head[k] is the oldest entry of tenant k, valid whenever !empty[k]
// (first-word fall-through).  push and pop take effect at the clock edge; a
// push and a pop in the same cycle are both honoured.  flush[k] empties the
// tenant's partition (used at launch and teardown).
//
// Following the paper: partitioning four ways, tenant-id steering, depth from a
// configuration register.  The fixed equal windows and the overflow flag are
// this design's choices.
module private_queue #(
  parameter int unsigned NT    = 4,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned TOTAL = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       temporal,
  input  logic [$clog2(TOTAL):0]     req_depth [NT],
  input  logic [NT-1:0]              flush,
  input  logic [NT-1:0]              push,
  input  logic [WIDTH-1:0]           push_data [NT],
  input  logic [NT-1:0]              pop,
  output logic [WIDTH-1:0]           head [NT],
  output logic [NT-1:0]              full,
  output logic [NT-1:0]              empty,
  output logic [NT-1:0]              overflow
);
  localparam int unsigned AW   = $clog2(TOTAL) + 1;
  localparam int unsigned SLOT = TOTAL / NT;

  logic [WIDTH-1:0] mem [TOTAL];
  logic [AW-1:0] rd_off [NT], wr_off [NT], cnt [NT];
  logic [AW-1:0] base [NT], depth [NT];

  always_comb begin
    for (int k = 0; k < NT; k++) begin
      automatic logic [AW-1:0] lim = temporal ? AW'(TOTAL) : AW'(SLOT);
      depth[k] = (req_depth[k] > lim) ? lim : req_depth[k];
      base[k]  = temporal ? '0 : AW'(k * SLOT);
      full[k]  = (cnt[k] >= depth[k]);
      empty[k] = (cnt[k] == '0);
      head[k]  = mem[(base[k] + rd_off[k]) % TOTAL];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NT; k++) begin
        rd_off[k] <= '0; wr_off[k] <= '0; cnt[k] <= '0;
      end
      overflow <= '0;
    end else begin
      for (int k = 0; k < NT; k++) begin
        automatic logic do_push = push[k] && !full[k];
        automatic logic do_pop  = pop[k] && !empty[k];
        if (flush[k]) begin
          rd_off[k] <= '0; wr_off[k] <= '0; cnt[k] <= '0; overflow[k] <= 1'b0;
        end else begin
          if (push[k] && full[k]) overflow[k] <= 1'b1;
          if (do_push) wr_off[k] <= (wr_off[k] + 1'b1 >= depth[k]) ? '0 : wr_off[k] + 1'b1;
          if (do_pop)  rd_off[k] <= (rd_off[k] + 1'b1 >= depth[k]) ? '0 : rd_off[k] + 1'b1;
          cnt[k] <= cnt[k] + AW'(do_push) - AW'(do_pop);
        end
      end
    end
  end

  // storage has no reset: only entries that were pushed are ever read
  always_ff @(posedge clk) begin
    for (int k = 0; k < NT; k++)
      if (push[k] && !full[k] && !flush[k])
        mem[(base[k] + wr_off[k]) % TOTAL] <= push_data[k];
  end

  // a partition never exceeds its window
  always_ff @(posedge clk)
    if (rst_n)
      for (int k = 0; k < NT; k++)
        assert (cnt[k] <= depth[k] || depth[k] == '0 || flush[k])
          else $error("private_queue: tenant %0d partition overrun", k);
endmodule
