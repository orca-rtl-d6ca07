// cpoll_queues: one small FIFO of cpoll signals per request buffer.
//
// Each queue holds the tail pointers reported for its request buffer, oldest
// first. A signal is pushed into the queue of its buffer. If that queue is
// already full the new pointer overwrites the newest entry instead: this
// coalesces notifications, which is safe because a ring pointer only moves
// forward and the ring tracker counts requests from the difference between
// pointers, so only the latest pointer matters. The paper notes that coherence
// signals may already be coalesced by the hardware; the queue depth (4) and
// the overwrite-on-full policy are this design's choices.
// Interface: one push per cycle (in_valid/in_buf/in_ptr), a one-hot pop per
// cycle from the scheduler; per queue 'nonempty' and the head pointer are
// visible combinationally. A push and a pop of the same queue in one cycle
// are both honoured. 'coalesced' pulses when an overwrite happened.
module cpoll_queues
  import orca_pkg::*;
#(
  parameter int unsigned NUM_BUFS = 16,
  parameter int unsigned DEPTH    = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [BUF_ID_W-1:0]  in_buf,
  input  logic [RING_W-1:0]    in_ptr,
  input  logic [NUM_BUFS-1:0]  pop,
  output logic [NUM_BUFS-1:0]  nonempty,
  output logic [RING_W-1:0]    head_ptr [NUM_BUFS],
  output logic                 coalesced
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [RING_W-1:0] mem   [NUM_BUFS][DEPTH];
  logic [PW-1:0]     rd    [NUM_BUFS];
  logic [PW:0]       cnt   [NUM_BUFS];

  always_comb begin
    for (int q = 0; q < NUM_BUFS; q++) begin
      nonempty[q] = (cnt[q] != '0);
      head_ptr[q] = mem[q][rd[q]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coalesced <= 1'b0;
      for (int q = 0; q < NUM_BUFS; q++) begin
        rd[q]  <= '0;
        cnt[q] <= '0;
        for (int e = 0; e < DEPTH; e++) mem[q][e] <= '0;
      end
    end else begin
      coalesced <= 1'b0;
      for (int q = 0; q < NUM_BUFS; q++) begin
        logic push, popq;
        logic [PW-1:0] wr;
        push = in_valid && (in_buf == BUF_ID_W'(q));
        popq = pop[q] && (cnt[q] != '0);
        wr   = PW'(rd[q] + PW'(cnt[q]));
        if (push && cnt[q] == (PW+1)'(DEPTH) && !popq) begin
          // full: replace the newest entry
          mem[q][PW'(wr - PW'(1))] <= in_ptr;
          coalesced <= 1'b1;
        end else if (push) begin
          mem[q][wr] <= in_ptr;
        end
        if (popq) rd[q] <= PW'(rd[q] + PW'(1));
        if (push && !popq && cnt[q] != (PW+1)'(DEPTH)) cnt[q] <= cnt[q] + 1'b1;
        else if (!push && popq)                         cnt[q] <= cnt[q] - 1'b1;
      end
    end
  end

endmodule
