// slab_alloc: hands out 64-byte slots from a pre-allocated memory pool.
//
// For inserts the KV APU needs room for a new key-value item, and for a full
// bucket room for a chained bucket. The host CPU pre-allocates one pool and
// registers it (base and size); the allocator then bumps a pointer through it
// one 64-byte slot at a time, so allocation is a single cycle and needs no
// CPU call. The paper says only that the slab allocator places new pairs in
// the pre-defined pool; one size class and no freeing are this design's
// simplifications (items and buckets are both one line, and the workloads
// never delete).
// Interface: 'addr' is the next free slot; pulsing 'alloc' while 'exhausted'
// is low takes it. 'clear' restarts the pool at 'base'.
module slab_alloc
  import orca_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [ADDR_W-1:0]  base,
  input  logic [ADDR_W-1:0]  bytes,
  input  logic               alloc,
  output logic [ADDR_W-1:0]  addr,
  output logic               exhausted
);

  logic [ADDR_W-1:0] used;

  assign addr      = base + used;
  assign exhausted = (used + ADDR_W'(64)) > bytes;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     used <= '0;
    else if (clear)                 used <= '0;
    else if (alloc && !exhausted)   used <= used + ADDR_W'(64);
  end

endmodule
