// cpoll_checker: turns coherence signals into request-arrival notifications.
//
// It sits on the snoop path of the coherence controller. Software registers
// one contiguous address range, the cpoll region. When a coherence signal
// (for example a Modified->Invalid transition caused by a client's RDMA write
// or a CPU store) hits that range, the checker works out from the address
// offset which request buffer was written, because all buffers have the same
// fixed size. Two layouts are supported, as in the paper:
//   * pointer mode (ptr_mode=1): the region is the pointer buffer, one 4-byte
//     entry per request buffer holding that buffer's tail index. The buffer is
//     offset/4 and the new tail is the 32-bit value carried by the snoop.
//   * direct mode (ptr_mode=0): the region is the request buffers themselves,
//     RING_ENTRIES lines of 64 bytes each. The buffer is offset/(64*RING_ENTRIES)
//     and the new tail is the written entry index plus one.
// That the snoop carries the new 32-bit value of the written word is this
// design's assumption about the coherence controller's interface.
// Output: a cpoll signal {sig_buf, sig_ptr} one cycle after the snoop; signals
// outside the region or above NUM_BUFS are dropped. There is no backpressure:
// the queues behind the checker coalesce instead.
module cpoll_checker
  import orca_pkg::*;
#(
  parameter int unsigned NUM_BUFS = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ptr_mode,
  input  logic [ADDR_W-1:0]    region_base,
  input  logic [ADDR_W-1:0]    region_bytes,
  input  logic                 snp_valid,
  input  logic [ADDR_W-1:0]    snp_addr,
  input  logic [31:0]          snp_data,
  output logic                 sig_valid,
  output logic [BUF_ID_W-1:0]  sig_buf,
  output logic [RING_W-1:0]    sig_ptr
);

  localparam int unsigned LINE_SHIFT = 6;                       // 64-byte entries
  localparam int unsigned BUF_SHIFT  = LINE_SHIFT + RING_W;     // bytes per request buffer

  logic [ADDR_W-1:0]   offset;
  logic                in_region;
  logic [ADDR_W-1:0]   buf_wide;
  logic [RING_W-1:0]   ptr_n;

  always_comb begin
    offset    = snp_addr - region_base;
    in_region = (snp_addr >= region_base) && (offset < region_bytes);
    if (ptr_mode) begin
      buf_wide = offset >> $clog2(PTR_ENTRY_BYTES);
      ptr_n    = snp_data[RING_W-1:0];
    end else begin
      buf_wide = offset >> BUF_SHIFT;
      ptr_n    = offset[BUF_SHIFT-1:LINE_SHIFT] + RING_W'(1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sig_valid <= 1'b0;
      sig_buf   <= '0;
      sig_ptr   <= '0;
    end else begin
      sig_valid <= snp_valid && in_region && (buf_wide < ADDR_W'(NUM_BUFS));
      sig_buf   <= buf_wide[BUF_ID_W-1:0];
      sig_ptr   <= ptr_n;
    end
  end

endmodule
