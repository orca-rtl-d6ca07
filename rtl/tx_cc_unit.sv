// tx_cc_unit: concurrency-control unit of the transaction APU (ORCA TX).
//
// What it does. A transaction must hold a key-value pair before it touches
// it, and only one outstanding transaction may hold a given pair; any other
// transaction asking for it waits, and waiters are served in order of
// arrival. As in the paper, the unit is a small hash table indexed by the key.
//
// How it works. The key is XOR-folded to an index into ENTRIES lock entries.
// An entry is either free or held, and a held entry has a FIFO of waiting
// transactions, kept as a linked list in a shared pool of WAITERS nodes with a
// free bitmap. An acquire of a free entry is granted at once; an acquire of a
// held entry joins the end of its list. A release of an entry with waiters
// hands the entry straight to the first waiter (grant), otherwise frees it.
// Two keys that fold to the same entry share its lock, so they are
// serialized too; this never lets two holders of one key run together and
// keeps the arrival order of each key, at the cost of some false conflicts.
// The folding, the sizes, the waiter pool and this handling of collisions are
// this design's choices; the paper gives only the unit's function.
//
// Interface and timing. acq_valid/acq_ready with acq_key and acq_txn (the
// transaction's id); acq_ready is low while a release is presented or the
// waiter pool is full. rel_valid with rel_key, from the current holder; a
// release is always taken. grant_valid pulses for one cycle, one cycle after
// the acquire or release that caused it, with the granted transaction's id
// and key. One acquire or one release is processed per cycle (release first).
module tx_cc_unit #(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned WAITERS = 64,
  parameter int unsigned TXN_W   = 16,
  parameter int unsigned KEY_W   = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               acq_valid,
  output logic               acq_ready,
  input  logic [KEY_W-1:0]   acq_key,
  input  logic [TXN_W-1:0]   acq_txn,
  input  logic               rel_valid,
  input  logic [KEY_W-1:0]   rel_key,
  output logic               grant_valid,
  output logic [TXN_W-1:0]   grant_txn,
  output logic [KEY_W-1:0]   grant_key,
  output logic [31:0]        stat_conflict,   // acquires that had to wait
  output logic [31:0]        stat_handoff     // grants made on a release
);

  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned WW = $clog2(WAITERS);

  function automatic logic [IW-1:0] fold(input logic [KEY_W-1:0] k);
    logic [IW-1:0] f;
    f = '0;
    for (int i = 0; i < KEY_W; i += IW) f ^= IW'(k >> i);
    return f;
  endfunction

  // lock entries
  logic          e_busy [ENTRIES];
  logic [WW-1:0] e_head [ENTRIES];
  logic [WW-1:0] e_tail [ENTRIES];
  logic [WW:0]   e_cnt  [ENTRIES];
  // waiter pool
  logic [TXN_W-1:0] w_txn  [WAITERS];
  logic [KEY_W-1:0] w_key  [WAITERS];
  logic [WW-1:0]    w_next [WAITERS];
  logic [WAITERS-1:0] w_free;

  logic          have_free;
  logic [WW-1:0] free_i;
  always_comb begin
    have_free = 1'b0;
    free_i    = '0;
    for (int i = WAITERS - 1; i >= 0; i--) begin
      if (w_free[i]) begin
        have_free = 1'b1;
        free_i    = WW'(i);
      end
    end
  end

  logic [IW-1:0] a_idx, r_idx;
  logic          do_acq;
  assign a_idx     = fold(acq_key);
  assign r_idx     = fold(rel_key);
  assign acq_ready = !rel_valid && have_free;
  assign do_acq    = acq_valid && acq_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        e_busy[i] <= 1'b0; e_head[i] <= '0; e_tail[i] <= '0; e_cnt[i] <= '0;
      end
      for (int i = 0; i < WAITERS; i++) begin
        w_txn[i] <= '0; w_key[i] <= '0; w_next[i] <= '0;
      end
      w_free        <= '1;
      grant_valid   <= 1'b0;
      grant_txn     <= '0;
      grant_key     <= '0;
      stat_conflict <= '0;
      stat_handoff  <= '0;
    end else begin
      grant_valid <= 1'b0;
      if (rel_valid) begin
        if (e_cnt[r_idx] == '0) begin
          e_busy[r_idx] <= 1'b0;
        end else begin
          grant_valid           <= 1'b1;
          grant_txn             <= w_txn[e_head[r_idx]];
          grant_key             <= w_key[e_head[r_idx]];
          e_head[r_idx]         <= w_next[e_head[r_idx]];
          e_cnt[r_idx]          <= e_cnt[r_idx] - 1'b1;
          w_free[e_head[r_idx]] <= 1'b1;
          stat_handoff          <= stat_handoff + 1;
        end
      end else if (do_acq) begin
        if (!e_busy[a_idx]) begin
          e_busy[a_idx] <= 1'b1;
          grant_valid   <= 1'b1;
          grant_txn     <= acq_txn;
          grant_key     <= acq_key;
        end else begin
          w_txn[free_i]  <= acq_txn;
          w_key[free_i]  <= acq_key;
          w_free[free_i] <= 1'b0;
          if (e_cnt[a_idx] == '0) e_head[a_idx]         <= free_i;
          else                    w_next[e_tail[a_idx]] <= free_i;
          e_tail[a_idx] <= free_i;
          e_cnt[a_idx]  <= e_cnt[a_idx] + 1'b1;
          stat_conflict <= stat_conflict + 1;
        end
      end
    end
  end

endmodule
