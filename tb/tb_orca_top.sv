// tb_orca_top: end-to-end run of the whole accelerator at its default sizes
// (16 request rings of 1024 entries, 256 requests in flight, doorbell batch
// 32), with a host-memory model behind the coherent interconnect that answers
// after 300..600 cycles, out of order.
//
// Host software is played by the testbench: it writes the configuration
// registers (pointer-buffer mode, one TLB entry that maps the request rings'
// virtual page to another physical page, a 4-bucket hash table so that
// buckets fill and get linked), and ten clients, as in the key-value
// evaluation, write requests into their rings and then bump their tail
// pointers, which reaches the accelerator as snoops on the pointer buffer.
//   A. 60 inserts spread over the clients, one at a time, plus one request
//      with a bad opcode;
//   B. a GET of every key and of absent keys, 60 per client, with one pointer
//      update per request fired back to back so the per-ring queues coalesce;
//   C. 30 updates;  D. GETs again.
// After each phase it waits for the idle-timeout flushes and then reads every
// new WQE the send-queue handler wrote, checking each inline response against
// a reference key-value map, checks that the last doorbell of each queue pair
// announces all of its WQEs, and at the end checks that each mechanism
// happened at least once: coherence signals, queue coalescing, notifications,
// ORT full, port stalls, bucket-chain walks and links, TLB hits and misses,
// doorbell batches, idle-timeout flushes, signaled WQEs, and on the RNIC side
// TPH set and cleared, and TX lock conflicts and hand-offs.
module tb_orca_top;
  import orca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NB = 16, CLIENTS = 10;
  localparam logic [47:0] CPOLL = 48'h3000_0000, REQ_VA = 48'h1000_0000, REQ_PA = 48'h0200_0000,
                          TBL = 48'h0400_0000, SLAB = 48'h0600_0000, SQ = 48'h0800_0000,
                          RESP = 48'h0A00_0000, DB = 48'hF000_0000;

  logic cfg_we; logic [11:0] cfg_addr; logic [63:0] cfg_wdata, cfg_rdata;
  logic cc_req_valid, cc_req_ready, cc_rsp_valid, cc_rsp_ready;
  mem_req_t cc_req; mem_rsp_t cc_rsp;
  logic snp_valid; logic [ADDR_W-1:0] snp_addr; logic [31:0] snp_data;
  logic tph_knob_en, tph_reg_we, tph_reg_valid, tph_reg_dram, tlp_in_valid, tlp_out_valid;
  logic [2:0] tph_reg_idx; logic [63:0] tph_reg_base, tph_reg_len, tlp_in_addr;
  logic [127:0] tlp_in_hdr, tlp_out_hdr;
  logic [31:0] stat_cpoll_sig, stat_coalesced, stat_notif, stat_chain_follow, stat_bucket_link,
               stat_ort_full, stat_port_stall, stat_wqe, stat_doorbell, stat_signaled,
               stat_timeout_flush, stat_tlb_miss, stat_tph_set, stat_tph_clr;
  logic [ORT_W:0] stat_inflight_max;
  logic tx_acq_valid, tx_acq_ready, tx_rel_valid, tx_grant_valid;
  logic [63:0] tx_acq_key, tx_rel_key, tx_grant_key;
  logic [15:0] tx_acq_txn, tx_grant_txn;
  logic [31:0] stat_tx_conflict, stat_tx_handoff;

  orca_top dut (.*);
  host_mem_model #(.MIN_LAT(300), .MAX_LAT(600), .READY_PCT(90)) u_mem (
    .clk, .rst_n, .req_valid(cc_req_valid), .req_ready(cc_req_ready), .req(cc_req),
    .rsp_valid(cc_rsp_valid), .rsp_ready(cc_rsp_ready), .rsp(cc_rsp));

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog: sent %0d wqe %0d sig %0d notif %0d", sent, stat_wqe, stat_cpoll_sig, stat_notif);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] fmix(input logic [63:0] k);
    k ^= k >> 33; k *= 64'hff51afd7ed558ccd;
    k ^= k >> 33; k *= 64'hc4ceb9fe1a85ec53;
    k ^= k >> 33;
    return k;
  endfunction

  logic [VAL_W-1:0] kv [logic [63:0]];
  bit   tag_used [logic [14:0]];
  int   tail [NB];
  int   wqe_seen [NB];
  int   sent = 0;
  int   tlb_hits = 0;

  // translated request-ring reads reach the physical page
  always @(posedge clk) if (cc_req_valid && cc_req_ready && cc_req.op == MEM_RD
                            && cc_req.addr[47:21] == REQ_PA[47:21]) tlb_hits++;

  function automatic logic [63:0] fresh_key();
    logic [63:0] k;
    do k = {$urandom, $urandom}; while (tag_used.exists(fmix(k)[63:49]));
    tag_used[fmix(k)[63:49]] = 1;
    return k;
  endfunction

  function automatic logic [VAL_W-1:0] rnd_val();
    logic [VAL_W-1:0] v;
    for (int i = 0; i < VAL_W / 32; i++) v[32 * i +: 32] = $urandom;
    return v;
  endfunction

  task automatic wr(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // a client writes one request entry into its ring (physical address)
  task automatic put_req(input int c, input logic [7:0] op, input logic [63:0] key, input logic [VAL_W-1:0] val);
    u_mem.poke(REQ_PA + 48'((c * 1024 + tail[c]) * 64), {56'd0, val, key, op});
    tail[c] = (tail[c] + 1) % 1024;
    sent++;
  endtask

  // the client's pointer update, seen by the accelerator as a snoop
  task automatic bump(input int c);
    @(negedge clk); snp_valid = 1; snp_addr = CPOLL + 48'(4 * c); snp_data = 32'(tail[c]);
    @(negedge clk); snp_valid = 0;
  endtask

  // wait for all responses and the idle flushes, then check the new WQEs
  task automatic drain_and_check(input string phase);
    int guard = 0;
    while (stat_wqe != 32'(sent) && guard < 200_000) begin @(posedge clk); guard++; end
    chk(stat_wqe == 32'(sent), $sformatf("%s: %0d of %0d responses", phase, stat_wqe, sent));
    repeat (NB * 800) @(posedge clk);
    for (int q = 0; q < NB; q++) begin
      int last = -1;
      foreach (u_mem.db_addr_q[i]) if (u_mem.db_addr_q[i] == DB + 48'(8 * q)) last = int'(u_mem.db_data_q[i][15:0]);
      while (wqe_seen[q] < int'(dut.u_sq.pi[q])) begin
        logic [511:0] l1; logic [63:0] k; logic [7:0] op, stt;
        l1 = u_mem.peek(SQ + 48'((q * 1024 + wqe_seen[q] % 1024) * 128 + 64));
        op = l1[23:16]; stt = l1[15:8]; k = l1[87:24];
        if (op == 8'(KV_GET)) begin
          if (kv.exists(k)) chk(stt == 8'(ST_OK) && l1[471:88] == kv[k], $sformatf("%s: GET %h", phase, k));
          else              chk(stt == 8'(ST_NOT_FOUND), $sformatf("%s: GET absent %h got %0d", phase, k, stt));
        end else if (op == 8'(KV_PUT)) chk(stt == 8'(ST_OK), $sformatf("%s: PUT %h status %0d", phase, k, stt));
        else chk(stt == 8'(ST_BAD_OP), $sformatf("%s: bad op %0d status %0d", phase, op, stt));
        wqe_seen[q]++;
      end
      if (wqe_seen[q] > 0) chk(last == wqe_seen[q], $sformatf("%s: q%0d last doorbell %0d of %0d", phase, q, last, wqe_seen[q]));
    end
  endtask

  // RNIC side: TPH knob traffic, alongside the rest
  initial begin
    tph_knob_en = 1; tph_reg_we = 0; tph_reg_idx = 0; tph_reg_valid = 0; tph_reg_dram = 0;
    tph_reg_base = 0; tph_reg_len = 0; tlp_in_valid = 0; tlp_in_hdr = 0; tlp_in_addr = 0;
    wait (rst_n);
    @(negedge clk); tph_reg_we = 1; tph_reg_idx = 0; tph_reg_valid = 1; tph_reg_dram = 1;
    tph_reg_base = 64'h1000_0000; tph_reg_len = 64'h1000_0000;
    @(negedge clk); tph_reg_idx = 1; tph_reg_dram = 0; tph_reg_base = 64'h8_0000_0000;
    @(negedge clk); tph_reg_we = 0;
    for (int i = 0; i < 40; i++) begin
      logic [63:0] a; bit e;
      a = (i % 2) ? 64'h8_0000_0000 + 64'($urandom_range(0, 1000)) : 64'h1000_0000 + 64'($urandom_range(0, 1000));
      e = !(i % 2);
      @(negedge clk); tlp_in_valid = 1; tlp_in_hdr = {4{$urandom}}; tlp_in_addr = a;
      @(negedge clk); tlp_in_valid = 0;
      chk(tlp_out_valid && tlp_out_hdr[16] == e, "TPH bit");
    end
  end

  // TX lock unit: three transactions on one key, then release them in turn;
  // the second and third must wait and be handed the key in order
  initial begin
    tx_acq_valid = 0; tx_rel_valid = 0; tx_acq_key = 0; tx_rel_key = 0; tx_acq_txn = 0;
    wait (rst_n);
    for (int t = 0; t < 3; t++) begin
      @(negedge clk); tx_acq_valid = 1; tx_acq_key = 64'hABCD; tx_acq_txn = 16'(t);
      @(negedge clk); tx_acq_valid = 0;
      if (t == 0) chk(tx_grant_valid && tx_grant_txn == 16'd0, "TX immediate grant");
      else        chk(!tx_grant_valid, "TX conflicting acquire waits");
    end
    for (int t = 1; t < 3; t++) begin
      @(negedge clk); tx_rel_valid = 1; tx_rel_key = 64'hABCD;
      @(negedge clk); tx_rel_valid = 0;
      chk(tx_grant_valid && tx_grant_txn == 16'(t), $sformatf("TX hand-off to %0d", t));
    end
    @(negedge clk); tx_rel_valid = 1;
    @(negedge clk); tx_rel_valid = 0;
  end

  initial begin
    logic [63:0] keys [60];
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; snp_valid = 0; snp_addr = 0; snp_data = 0;
    for (int i = 0; i < NB; i++) begin tail[i] = 0; wqe_seen[i] = 0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // host software: set up the accelerator
    wr(12'h001, 64'(CPOLL)); wr(12'h002, 64'(4 * NB));
    wr(12'h003, 64'(REQ_VA)); wr(12'h004, 64'(TBL)); wr(12'h005, 64'd3);
    wr(12'h006, 64'(SLAB));   wr(12'h007, 64'h10_0000);
    wr(12'h008, 64'(SQ));     wr(12'h009, 64'(DB));
    for (int q = 0; q < NB; q++) begin
      wr(12'h100 + 12'(q), 64'(RESP + 48'(q * 65536)));
      wr(12'h200 + 12'(q), 64'(32'h1000 + q));
    end
    wr(12'h300, {1'b1, 36'd0, 27'(REQ_VA >> 21)});
    wr(12'h301, 64'(REQ_PA >> 21));
    wr(12'h000, 64'd3);   // enable, pointer-buffer mode
    @(negedge clk); cfg_addr = 12'h003;
    @(negedge clk); chk(cfg_rdata == 64'(REQ_VA), "register read-back");

    // A. inserts
    for (int i = 0; i < 60; i++) begin
      keys[i] = fresh_key();
      kv[keys[i]] = rnd_val();
      put_req(i % CLIENTS, KV_PUT, keys[i], kv[keys[i]]);
      // inserts are issued one at a time: the APU does not order two
      // inserts that land in the same bucket
      bump(i % CLIENTS);
      while (stat_wqe != 32'(sent)) @(posedge clk);
    end
    put_req(3, 8'h55, keys[0], '0); bump(3);
    drain_and_check("insert");

    // B. reads, one pointer update per request, back to back
    for (int r = 0; r < 60; r++)
      for (int c = 0; c < CLIENTS; c++) begin
        if (r % 6 == 5) put_req(c, KV_GET, fresh_key(), '0);
        else            put_req(c, KV_GET, keys[(r * CLIENTS + c) % 60], '0);
        bump(c);
      end
    drain_and_check("read");

    // C. updates of keys 0..29
    for (int i = 0; i < 30; i++) begin
      kv[keys[i]] = rnd_val();
      put_req(i % CLIENTS, KV_PUT, keys[i], kv[keys[i]]);
    end
    for (int c = 0; c < CLIENTS; c++) bump(c);
    drain_and_check("update");

    // D. reads again
    for (int r = 0; r < 30; r++)
      for (int c = 0; c < CLIENTS; c++) put_req(c, KV_GET, keys[(r * CLIENTS + c) % 60], '0);
    for (int c = 0; c < CLIENTS; c++) bump(c);
    drain_and_check("read again");

    // every mechanism must have happened
    chk(stat_cpoll_sig > 0,      $sformatf("coherence signals %0d", stat_cpoll_sig));
    chk(stat_coalesced > 0,      $sformatf("queue coalescing %0d", stat_coalesced));
    chk(stat_notif > 0 && stat_notif < stat_cpoll_sig, $sformatf("notifications %0d", stat_notif));
    chk(stat_ort_full > 0,       $sformatf("ORT full cycles %0d", stat_ort_full));
    chk(stat_inflight_max == 9'(256), $sformatf("peak in flight %0d", stat_inflight_max));
    chk(stat_port_stall > 0,     $sformatf("port stalls %0d", stat_port_stall));
    chk(stat_chain_follow > 0,   $sformatf("chain walks %0d", stat_chain_follow));
    chk(stat_bucket_link > 0,    $sformatf("bucket links %0d", stat_bucket_link));
    chk(tlb_hits > 0,            $sformatf("TLB hits %0d", tlb_hits));
    chk(stat_tlb_miss > 0,       $sformatf("TLB misses %0d", stat_tlb_miss));
    chk(stat_doorbell > stat_timeout_flush, $sformatf("batched doorbells %0d", stat_doorbell - stat_timeout_flush));
    chk(stat_timeout_flush > 0,  $sformatf("timeout flushes %0d", stat_timeout_flush));
    chk(stat_signaled > 0,       $sformatf("signaled WQEs %0d", stat_signaled));
    chk(stat_tx_conflict == 2 && stat_tx_handoff == 2, $sformatf("TX conflicts %0d hand-offs %0d", stat_tx_conflict, stat_tx_handoff));
    chk(stat_tph_set > 0 && stat_tph_clr > 0, $sformatf("TPH set %0d clear %0d", stat_tph_set, stat_tph_clr));
    $display("events: sig=%0d coal=%0d notif=%0d ortfull=%0d stall=%0d chain=%0d link=%0d tlbhit=%0d tlbmiss=%0d db=%0d tmo=%0d signaled=%0d tph=%0d/%0d",
             stat_cpoll_sig, stat_coalesced, stat_notif, stat_ort_full, stat_port_stall, stat_chain_follow,
             stat_bucket_link, tlb_hits, stat_tlb_miss, stat_doorbell, stat_timeout_flush, stat_signaled,
             stat_tph_set, stat_tph_clr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
