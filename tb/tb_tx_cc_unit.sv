// tb_tx_cc_unit: random transactions on a small key set (12 keys, so that
// keys conflict and some share a lock entry) acquire keys, hold them for a
// random time after their grant, and release them. A key-level reference
// checks that a key never has two holders at once, that the waiters of each
// key are granted in the order they asked, that a grant is only given to a
// transaction that asked and is not yet granted, and that every transaction
// is granted in the end. Both immediate grants and hand-offs on release must
// occur; the unit counts at lock-entry level, so its conflict and hand-off
// counters must be at least the key-level numbers.
module tb_tx_cc_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic acq_valid, acq_ready, rel_valid, grant_valid;
  logic [63:0] acq_key, rel_key, grant_key;
  logic [15:0] acq_txn, grant_txn;
  logic [31:0] stat_conflict, stat_handoff;

  tx_cc_unit #(.ENTRIES(8), .WAITERS(16)) dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NTX = 600;
  logic [63:0] keyset [12];
  int          holder [logic [63:0]];     // key -> txn holding it
  int          waitq  [logic [63:0]][$];  // key -> txns waiting, in order of asking
  int          rel_at [int];              // txn -> cycle it releases
  logic [63:0] tx_key [int];
  int          granted = 0, immediate = 0, handoffs = 0, waited = 0;
  longint      now = 0;

  // grant monitor and key-level reference
  always @(posedge clk) if (rst_n) begin
    now++;
    if (grant_valid) begin
      automatic int t = int'(grant_txn);
      chk(tx_key.exists(t) && tx_key[t] == grant_key && !rel_at.exists(t), $sformatf("grant to txn %0d", t));
      chk(!holder.exists(grant_key), $sformatf("key %h granted to %0d while held", grant_key, t));
      chk(waitq[grant_key].size() > 0 && waitq[grant_key][0] == t,
          $sformatf("txn %0d granted out of order", t));
      if (waitq[grant_key].size() > 0) void'(waitq[grant_key].pop_front());
      holder[grant_key] = t;
      rel_at[t] = int'(now) + $urandom_range(1, 20);
      granted++;
    end
  end

  initial begin
    int next_tx = 0;
    acq_valid = 0; rel_valid = 0; acq_key = 0; rel_key = 0; acq_txn = 0;
    for (int i = 0; i < 12; i++) keyset[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk); #1 rst_n = 1;
    while (granted < NTX) begin
      @(negedge clk);
      acq_valid = 0; rel_valid = 0;
      // a holder whose time is up releases (one per cycle)
      foreach (holder[k]) begin
        if (!rel_valid && rel_at[holder[k]] <= int'(now)) begin
          rel_valid = 1; rel_key = k;
          rel_at[holder[k]] = 32'h7fff_ffff;
          if (waitq[k].size() > 0) handoffs++;
          holder.delete(k);
          break;
        end
      end
      if (!rel_valid && next_tx < NTX && $urandom_range(0, 2) == 0 && acq_ready) begin
        automatic logic [63:0] k = keyset[$urandom_range(0, 11)];
        acq_valid = 1; acq_key = k; acq_txn = 16'(next_tx);
        tx_key[next_tx] = k;
        if (holder.exists(k) || waitq[k].size() > 0) waited++;
        waitq[k].push_back(next_tx);
        next_tx++;
      end
    end
    repeat (5) @(posedge clk);
    chk(granted == NTX, $sformatf("%0d of %0d transactions granted", granted, NTX));
    chk(handoffs > 20 && stat_handoff >= 32'(handoffs), $sformatf("hand-offs %0d counted %0d", handoffs, stat_handoff));
    chk(stat_conflict >= 32'(waited) && waited > 20, $sformatf("conflicts %0d, key-level waits %0d", stat_conflict, waited));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
