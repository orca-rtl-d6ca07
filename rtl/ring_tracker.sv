// ring_tracker: converts tail-pointer signals into request counts.
//
// cpoll signals can be coalesced, so one signal may stand for several new
// requests. The tracker keeps, per request buffer, the tail pointer it last
// reported. For an incoming pointer it tells the application processing unit
// that (new - old) mod RING_ENTRIES requests arrived, starting at index 'old',
// and records the new pointer. This follows the paper's ring tracker; the
// handshake and the choice to drop a signal that reports no movement are this
// design's.
// Interface: valid/ready on both sides; a notification is registered, so the
// count for a signal appears one cycle after it is accepted and is held until
// the APU takes it. The tails start at 0 (empty rings) after reset.
module ring_tracker
  import orca_pkg::*;
#(
  parameter int unsigned NUM_BUFS = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [BUF_ID_W-1:0]  in_buf,
  input  logic [RING_W-1:0]    in_ptr,
  output logic                 out_valid,
  input  logic                 out_ready,
  output notif_t               out
);

  logic [RING_W-1:0] tail [NUM_BUFS];
  logic [RING_W-1:0] old_tail;
  logic [RING_W-1:0] diff;

  assign in_ready = !out_valid || out_ready;
  assign old_tail = tail[in_buf[$clog2(NUM_BUFS)-1:0]];
  assign diff     = in_ptr - old_tail;          // modulo RING_ENTRIES

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      for (int i = 0; i < NUM_BUFS; i++) tail[i] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready && diff != '0) begin
        tail[in_buf[$clog2(NUM_BUFS)-1:0]] <= in_ptr;
        out_valid    <= 1'b1;
        out.buf_id   <= in_buf;
        out.start    <= old_tail;
        out.count    <= {1'b0, diff};
      end
    end
  end

endmodule
