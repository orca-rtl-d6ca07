// tb_kv_apu: runs the key-value APU against a host-memory model with long,
// random, out-of-order latencies.
//  1. With a large table: one insert, one read and one update, checking the
//     number of memory accesses of each (4, 3 and 3); in direct mode a read
//     also clears its ring entry (one more write).
//  2. With a two-bucket table: 40 inserts one by one, which must fill buckets
//     and link new ones, then a burst of 1200 reads (present and absent keys,
//     16 rings) and updates, checked against a reference key-value map. The
//     burst must fill all 256 request slots and follow bucket links.
// Keys whose 15-bit hash tags would collide are skipped, since the APU
// treats a tag hit with a different key as a miss.
module tb_kv_apu;
  import orca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [47:0] REQ_BASE = 48'h10_0000, TBL_A = 48'h40_0000,
                          TBL_B = 48'h50_0000, SLAB = 48'h60_0000;

  cfg_t cfg;
  logic notif_valid, notif_ready, mreq_valid, mreq_ready, mrsp_valid, mrsp_ready, rsp_valid, rsp_ready;
  notif_t notif; mem_req_t mreq; mem_rsp_t mrsp; kv_resp_t rsp;
  logic [31:0] stat_chain_follow, stat_bucket_link, stat_ort_full, stat_port_stall;
  logic [ORT_W:0] stat_inflight_max;

  kv_apu dut (.*);
  host_mem_model #(.MIN_LAT(200), .MAX_LAT(400), .READY_PCT(90)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_ready(mrsp_ready), .rsp(mrsp));

  function automatic logic [63:0] fmix(input logic [63:0] k);
    k ^= k >> 33; k *= 64'hff51afd7ed558ccd;
    k ^= k >> 33; k *= 64'hc4ceb9fe1a85ec53;
    k ^= k >> 33;
    return k;
  endfunction

  logic [VAL_W-1:0] kv [logic [63:0]];
  bit   tag_used [logic [14:0]];
  int   tail [16];
  int   issued = 0, answered = 0;

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // response checker
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    answered++;
    checks++;
    if (rsp.op == KV_GET) begin
      if (kv.exists(rsp.key)) begin
        if (rsp.status != ST_OK || rsp.value != kv[rsp.key]) begin
          failures++; $display("FAIL GET %h status %0d", rsp.key, rsp.status);
        end
      end else if (rsp.status != ST_NOT_FOUND) begin
        failures++; $display("FAIL GET absent %h status %0d", rsp.key, rsp.status);
      end
    end else if (rsp.op == KV_PUT) begin
      if (rsp.status != ST_OK) begin failures++; $display("FAIL PUT %h status %0d", rsp.key, rsp.status); end
    end else if (rsp.status != ST_BAD_OP) begin
      failures++; $display("FAIL bad op not reported");
    end
  end

  always @(negedge clk) rsp_ready <= ($urandom_range(0, 9) != 0);

  // place a request in ring b (not yet announced)
  task automatic put_req(input int b, input logic [7:0] op, input logic [63:0] key, input logic [VAL_W-1:0] val);
    u_mem.poke(REQ_BASE + 48'((b * 1024 + tail[b]) * 64), {56'd0, val, key, op});
    tail[b] = (tail[b] + 1) % 1024;
    issued++;
  endtask

  task automatic announce(input int b, input int start, input int count);
    @(negedge clk);
    notif_valid = 1; notif.buf_id = 8'(b); notif.start = 10'(start); notif.count = 11'(count);
    while (!notif_ready) @(negedge clk);
    @(posedge clk); #1 notif_valid = 0;
  endtask

  task automatic wait_done();
    while (answered != issued) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

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

  task automatic single(input int b, input logic [7:0] op, input logic [63:0] key,
                        input logic [VAL_W-1:0] val, input int exp_acc, input string what);
    int acc0, s;
    acc0 = u_mem.n_rd + u_mem.n_wr;
    s = tail[b];
    put_req(b, op, key, val);
    if (op == KV_PUT) kv[key] = val;
    announce(b, s, 1);
    wait_done();
    if (exp_acc > 0) chk(u_mem.n_rd + u_mem.n_wr - acc0 == exp_acc,
                         $sformatf("%s: %0d memory accesses", what, u_mem.n_rd + u_mem.n_wr - acc0));
  endtask

  initial begin
    logic [63:0] keys [40];
    logic [63:0] k0;
    notif_valid = 0; notif = '0;
    for (int i = 0; i < 16; i++) tail[i] = 0;
    cfg = '0;
    cfg.enable = 1; cfg.ptr_mode = 1; cfg.req_base = REQ_BASE; cfg.table_base = TBL_A; cfg.bucket_mask = 32'd1023;
    cfg.slab_base = SLAB; cfg.slab_bytes = 48'h10_0000;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;

    // 1. access counts
    k0 = fresh_key();
    single(0, KV_PUT, k0, rnd_val(), 4, "insert");
    single(0, KV_GET, k0, '0, 3, "GET hit");
    single(0, KV_PUT, k0, rnd_val(), 3, "update");
    single(0, KV_GET, k0, '0, 3, "GET after update");
    single(1, 8'd77, k0, '0, 1, "bad op");
    // direct mode: a finished request also clears its ring entry
    cfg.ptr_mode = 0;
    begin
      int s0; s0 = tail[2];
      single(2, KV_GET, k0, '0, 4, "GET in direct mode");
      chk(u_mem.peek(REQ_BASE + 48'((2 * 1024 + s0) * 64)) == '0, "ring entry cleared in direct mode");
    end
    cfg.ptr_mode = 1;
    kv.delete();

    // 2. chained buckets
    cfg.table_base = TBL_B; cfg.bucket_mask = 32'd1;
    for (int i = 0; i < 40; i++) begin
      keys[i] = fresh_key();
      single(i % 16, KV_PUT, keys[i], rnd_val(), 0, "chain insert");
    end
    chk(stat_bucket_link >= 4, $sformatf("bucket links %0d", stat_bucket_link));
    for (int i = 0; i < 40; i++) single(i % 16, KV_GET, keys[i], '0, 0, "chain get");

    // burst: reads of every key and of absent keys, and updates, on 16 rings
    begin
      int start [16];
      for (int b = 0; b < 16; b++) start[b] = tail[b];
      for (int n = 0; n < 1200; n++) begin
        int b; b = n % 16;
        if (n % 10 == 9) begin
          // update a key that is not read in this burst (keys 32..39)
          logic [63:0] k; logic [VAL_W-1:0] v;
          k = keys[32 + (n / 10) % 8]; v = rnd_val();
          put_req(b, KV_PUT, k, v);
        end else if (n % 10 == 8) put_req(b, KV_GET, fresh_key(), '0);
        else                      put_req(b, KV_GET, keys[n % 32], '0);
      end
      for (int b = 0; b < 16; b++) announce(b, start[b], (tail[b] - start[b] + 1024) % 1024);
      wait_done();
    end
    chk(answered == issued, "all requests answered");
    chk(stat_inflight_max == 9'(256), $sformatf("peak in flight %0d", stat_inflight_max));
    chk(stat_ort_full > 0, "issue stalled on a full table");
    chk(stat_chain_follow > 0, "links followed");
    $display("events: chain_follow=%0d bucket_link=%0d ort_full_cycles=%0d port_stall=%0d",
             stat_chain_follow, stat_bucket_link, stat_ort_full, stat_port_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
