// kv_apu: application processing unit of the key-value store accelerator.
//
// What it does. For each new request announced by the ring tracker it reads
// the request entry from the request ring in host memory, hashes the key,
// reads the hash bucket the hash selects, and then, for a GET, reads the item
// the matching slot points to and returns its value; for a PUT it overwrites
// the item of a matching slot, or takes a new 64-byte slot from the slab pool,
// writes the item there and writes the bucket back with the new slot filled.
// A bucket whose seven slots are taken links to another bucket of the same
// format (slot 7 holds the link); lookups follow the chain, and an insert into
// a full, unlinked bucket allocates and links a new bucket. A GET thus costs
// three memory accesses and an insert four, as in the paper. In direct mode
// (the request rings themselves are the cpoll region) a finished request
// also writes its ring entry back to zero before it answers, as the paper
// prescribes, so that the accelerator's cache owns that line again.
//
// How it works. Up to MAX_OUTSTANDING (256) requests are in flight at once.
// Each holds a tag, and the outstanding-request table (ORT), indexed by that
// tag, stores its state and fields. The tag travels with every memory request
// and comes back with the response, so responses may arrive in any order: a
// response simply looks up its ORT entry, advances that request's state
// machine one step and issues the next action. This is the paper's
// table-based state machine; the paper keeps the table in a TCAM or cuckoo
// hash, while a tag-indexed table is enough here because the tag returns with
// each response. Three sources compete for the single memory request port:
// responses being processed (highest priority), keys leaving the hash unit,
// and new requests being issued from the ring (lowest).
//
// Interface and timing. notif_*: {buffer, first index, count} from the ring
// tracker, valid/ready. mreq_*/mrsp_*: the coherent read/write interface,
// valid/ready, with ORT tags in tag[7:0]. rsp_*: response records for the SQ
// handler, valid/ready, in completion order. mreq and rsp are registered
// outputs; a finished request waits in a queue of tags until the output is
// free, and its tag is released only then. Line layouts,
// bucket format and status codes are this design's choices (see orca_pkg).
// Concurrent PUTs to one bucket are not serialized: keys are assumed
// partitioned among clients, as in MICA, on which the paper's KVS is modelled.
module kv_apu
  import orca_pkg::*;
#(
  parameter int unsigned MAX_OUT = MAX_OUTSTANDING
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  // cpoll-signal reception (from the ring tracker)
  input  logic                 notif_valid,
  output logic                 notif_ready,
  input  notif_t               notif,
  // coherent data read/write
  output logic                 mreq_valid,
  input  logic                 mreq_ready,
  output mem_req_t             mreq,
  input  logic                 mrsp_valid,
  output logic                 mrsp_ready,
  input  mem_rsp_t             mrsp,
  // RDMA response output (to the SQ handler)
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output kv_resp_t             rsp,
  // event counters
  output logic [31:0]          stat_chain_follow,   // link pointers followed
  output logic [31:0]          stat_bucket_link,    // new buckets linked
  output logic [31:0]          stat_ort_full,       // cycles issue blocked on a full ORT
  output logic [31:0]          stat_port_stall,     // cycles a source lost the memory port
  output logic [ORT_W:0]       stat_inflight_max
);

  localparam int unsigned TW = $clog2(MAX_OUT);

  typedef enum logic [3:0] {
    S_IDLE,
    S_REQ,          // waiting for the request entry
    S_HASH,         // key in the hash unit
    S_BKT,          // waiting for a bucket line
    S_ITEM,         // GET: waiting for the item
    S_WITEM_DONE,   // PUT update: waiting for the item-write ack
    S_WITEM_BKT,    // PUT insert: item written, then write bucket
    S_WITEM_NEW,    // PUT insert into full chain end: item written, then new bucket
    S_WNEW_LINK,    // new bucket written, then write old bucket with link
    S_WBKT_DONE,    // waiting for the final bucket-write ack
    S_RST_DONE      // direct mode: waiting for the request-entry reset ack
  } st_e;

  // ---------------------------------------------------------------- ORT
  st_e                 ort_st    [MAX_OUT];
  logic [BUF_ID_W-1:0] ort_conn  [MAX_OUT];
  logic [7:0]          ort_op    [MAX_OUT];
  logic [KEY_W-1:0]    ort_key   [MAX_OUT];
  logic [VAL_W-1:0]    ort_val   [MAX_OUT];
  logic [14:0]         ort_ktag  [MAX_OUT];
  logic [ADDR_W-1:0]   ort_baddr [MAX_OUT];
  logic [LINE_BITS-1:0] ort_bline[MAX_OUT];
  logic [ADDR_W-1:0]   ort_iptr  [MAX_OUT];
  logic [ADDR_W-1:0]   ort_raddr [MAX_OUT];   // the request's ring entry
  kv_status_e          ort_stat  [MAX_OUT];

  // ---------------------------------------------------------------- completion queue
  // Tags of finished requests wait here for the response output; the ORT
  // entry (and so the tag) is released only when its response leaves. With
  // room for every tag, a memory response never waits for the SQ handler,
  // which would otherwise deadlock: the SQ handler may itself be waiting for
  // a write ack queued behind that memory response on the shared channel.
  logic [TW-1:0] cq     [MAX_OUT];
  logic [TW-1:0] cq_rd, cq_wr;
  logic [TW:0]   cq_cnt;
  logic          cq_pop;
  logic [TW-1:0] cq_tag;

  // ---------------------------------------------------------------- tag pool
  // Tags 0..MAX_OUT-1 are handed out fresh after reset, then recycled
  // through a FIFO of freed tags.
  logic [TW:0]   fresh_cnt;
  logic [TW-1:0] recyc   [MAX_OUT];
  logic [TW-1:0] rc_rd, rc_wr;
  logic [TW:0]   rc_cnt;
  logic          tag_avail;
  logic [TW-1:0] tag_next;
  logic [TW:0]   inflight;

  assign tag_avail = (fresh_cnt != (TW+1)'(MAX_OUT)) || (rc_cnt != '0);
  assign tag_next  = (fresh_cnt != (TW+1)'(MAX_OUT)) ? fresh_cnt[TW-1:0] : recyc[rc_rd];

  // ---------------------------------------------------------------- hash unit
  logic          h_in_valid, h_in_ready;
  logic [63:0]   h_in_key;
  logic [TW-1:0] h_in_tag;
  logic          h_out_valid, h_out_ready;
  logic [63:0]   h_out_hash;
  logic [TW-1:0] h_out_tag;

  hash_unit #(.TAG_W(TW)) u_hash (
    .clk, .rst_n,
    .in_valid (h_in_valid), .in_ready (h_in_ready),
    .in_key   (h_in_key),   .in_tag   (h_in_tag),
    .out_valid(h_out_valid), .out_ready(h_out_ready),
    .out_hash (h_out_hash),  .out_tag  (h_out_tag)
  );

  // ---------------------------------------------------------------- slab
  logic              slab_alloc_i;
  logic [ADDR_W-1:0] slab_addr;
  logic              slab_exh;

  slab_alloc u_slab (
    .clk, .rst_n,
    .clear    (!cfg.enable),
    .base     (cfg.slab_base),
    .bytes    (cfg.slab_bytes),
    .alloc    (slab_alloc_i),
    .addr     (slab_addr),
    .exhausted(slab_exh)
  );

  // ---------------------------------------------------------------- issue cursor
  logic                cur_valid;
  logic [BUF_ID_W-1:0] cur_buf;
  logic [RING_W-1:0]   cur_idx;
  logic [RING_W:0]     cur_left;

  assign notif_ready = !cur_valid;

  // ---------------------------------------------------------------- decisions
  logic port_free, rsp_free;
  assign port_free = !mreq_valid || mreq_ready;
  assign rsp_free  = !rsp_valid  || rsp_ready;

  // response path
  logic [TW-1:0]  r_tag;
  st_e            r_st;
  logic           r_need_port, r_need_rsp, r_need_hash, r_go;
  mem_req_t       r_req;
  kv_resp_t       r_rsp;
  st_e            r_next;
  logic           r_alloc;
  logic           r_set_baddr, r_set_iptr, r_set_bline, r_set_req;
  logic [ADDR_W-1:0]    r_baddr_n, r_iptr_n;
  logic [LINE_BITS-1:0] r_bline_n;
  logic           r_chain, r_link;
  logic           r_fin;       // finished, but the ring entry is reset first

  // bucket search on the returned line
  logic          b_hit, b_has_free, b_has_link;
  logic [2:0]    b_hit_i, b_free_i;
  slot_t         b_slot [8];

  assign r_tag = mrsp.tag[TW-1:0];
  assign r_st  = ort_st[r_tag];

  always_comb begin
    for (int i = 0; i < 8; i++) b_slot[i] = slot_t'(mrsp.data[64*i +: 64]);
    b_hit = 1'b0; b_hit_i = '0; b_has_free = 1'b0; b_free_i = '0;
    for (int i = SLOTS_PER_BUCKET - 1; i >= 0; i--) begin
      if (b_slot[i].valid && b_slot[i].ktag == ort_ktag[r_tag]) begin
        b_hit = 1'b1; b_hit_i = 3'(i);
      end
      if (!b_slot[i].valid) begin
        b_has_free = 1'b1; b_free_i = 3'(i);
      end
    end
    b_has_link = b_slot[7].valid;
  end

  always_comb begin
    r_need_port = 1'b0; r_need_rsp = 1'b0; r_need_hash = 1'b0;
    r_req       = '0;
    r_rsp       = '0;
    r_rsp.conn  = ort_conn[r_tag];
    r_rsp.op    = kv_op_e'(ort_op[r_tag]);
    r_rsp.key   = ort_key[r_tag];
    r_next      = r_st;
    r_alloc     = 1'b0;
    r_set_baddr = 1'b0; r_set_iptr = 1'b0; r_set_bline = 1'b0; r_set_req = 1'b0;
    r_baddr_n   = '0; r_iptr_n = '0; r_bline_n = mrsp.data;
    r_chain     = 1'b0; r_link = 1'b0;
    r_req.tag   = {1'b0, 8'(r_tag)};
    unique case (r_st)
      S_REQ: begin
        r_set_req = 1'b1;
        if (req_op(mrsp.data) == KV_GET || req_op(mrsp.data) == KV_PUT) begin
          r_need_hash = 1'b1;
          r_next      = S_HASH;
        end else begin
          r_need_rsp    = 1'b1;
          r_rsp.op      = kv_op_e'(req_op(mrsp.data));
          r_rsp.key     = req_key(mrsp.data);
          r_rsp.status  = ST_BAD_OP;
          r_next        = S_IDLE;
        end
      end
      S_BKT: begin
        if (ort_op[r_tag] == KV_GET) begin
          if (b_hit) begin
            r_need_port = 1'b1;
            r_req.op    = MEM_RD;
            r_req.addr  = b_slot[b_hit_i].ptr;
            r_next      = S_ITEM;
          end else if (b_has_link) begin
            r_need_port = 1'b1; r_chain = 1'b1;
            r_req.op    = MEM_RD;
            r_req.addr  = b_slot[7].ptr;
            r_set_baddr = 1'b1; r_baddr_n = b_slot[7].ptr;
          end else begin
            r_need_rsp   = 1'b1;
            r_rsp.status = ST_NOT_FOUND;
            r_next       = S_IDLE;
          end
        end else begin // PUT
          if (b_hit) begin
            r_need_port = 1'b1;
            r_req.op    = MEM_WR;
            r_req.addr  = b_slot[b_hit_i].ptr;
            r_req.data  = {64'd0, ort_val[r_tag], ort_key[r_tag]};
            r_next      = S_WITEM_DONE;
          end else if (b_has_link) begin
            r_need_port = 1'b1; r_chain = 1'b1;
            r_req.op    = MEM_RD;
            r_req.addr  = b_slot[7].ptr;
            r_set_baddr = 1'b1; r_baddr_n = b_slot[7].ptr;
          end else if (slab_exh) begin
            r_need_rsp   = 1'b1;
            r_rsp.status = ST_NO_SPACE;
            r_next       = S_IDLE;
          end else begin
            // new item; remember the bucket with the slot filled in (or as is)
            r_need_port = 1'b1;
            r_alloc     = 1'b1;
            r_req.op    = MEM_WR;
            r_req.addr  = slab_addr;
            r_req.data  = {64'd0, ort_val[r_tag], ort_key[r_tag]};
            r_set_iptr  = 1'b1; r_iptr_n = slab_addr;
            r_set_bline = 1'b1;
            if (b_has_free) begin
              r_bline_n[64*b_free_i +: 64] = {1'b1, ort_ktag[r_tag], slab_addr};
              r_next = S_WITEM_BKT;
            end else begin
              r_next = S_WITEM_NEW;
            end
          end
        end
      end
      S_ITEM: begin
        r_need_rsp = 1'b1;
        r_next     = S_IDLE;
        if (mrsp.data[63:0] == ort_key[r_tag]) begin
          r_rsp.status = ST_OK;
          r_rsp.value  = mrsp.data[64 +: VAL_W];
        end else begin
          r_rsp.status = ST_NOT_FOUND;
        end
      end
      S_WITEM_DONE, S_WBKT_DONE: begin
        r_need_rsp   = 1'b1;
        r_rsp.status = ST_OK;
        r_next       = S_IDLE;
      end
      S_WITEM_BKT: begin
        r_need_port = 1'b1;
        r_req.op    = MEM_WR;
        r_req.addr  = ort_baddr[r_tag];
        r_req.data  = ort_bline[r_tag];
        r_next      = S_WBKT_DONE;
      end
      S_WITEM_NEW: begin
        if (slab_exh) begin
          r_need_rsp   = 1'b1;
          r_rsp.status = ST_NO_SPACE;
          r_next       = S_IDLE;
        end else begin
          // new bucket: slot 0 holds the new item, the rest empty
          r_need_port = 1'b1;
          r_alloc     = 1'b1;
          r_req.op    = MEM_WR;
          r_req.addr  = slab_addr;
          r_req.data  = {448'd0, 1'b1, ort_ktag[r_tag], ort_iptr[r_tag]};
          r_set_iptr  = 1'b1; r_iptr_n = slab_addr;   // now: the new bucket
          r_next      = S_WNEW_LINK;
        end
      end
      S_WNEW_LINK: begin
        r_need_port = 1'b1; r_link = 1'b1;
        r_req.op    = MEM_WR;
        r_req.addr  = ort_baddr[r_tag];
        r_req.data  = {1'b1, 15'd0, ort_iptr[r_tag], ort_bline[r_tag][447:0]};
        r_next      = S_WBKT_DONE;
      end
      S_RST_DONE: begin
        r_need_rsp   = 1'b1;
        r_rsp.op     = kv_op_e'(ort_op[r_tag]);
        r_rsp.key    = ort_key[r_tag];
        r_rsp.value  = ort_val[r_tag];
        r_rsp.status = ort_stat[r_tag];
        r_next       = S_IDLE;
      end
      default: ;
    endcase
    // Direct mode: the request rings are the cpoll region, so a finished
    // request first clears its ring entry (the accelerator's cache then owns
    // the line again and the next write to it raises a coherence signal).
    r_fin = 1'b0;
    if (r_need_rsp && !cfg.ptr_mode && r_st != S_RST_DONE) begin
      r_fin       = 1'b1;
      r_need_rsp  = 1'b0;
      r_need_port = 1'b1;
      r_req.op    = MEM_WR;
      r_req.addr  = ort_raddr[r_tag];
      r_req.data  = '0;
      r_next      = S_RST_DONE;
    end
    r_go = mrsp_valid
           && (!r_need_port || port_free)
           && (!r_need_hash || h_in_ready);
  end

  assign mrsp_ready   = r_go;
  assign cq_tag       = cq[cq_rd];
  assign cq_pop       = (cq_cnt != '0) && rsp_free;
  assign h_in_valid   = mrsp_valid && r_go && r_need_hash;
  assign h_in_key     = req_key(mrsp.data);
  assign h_in_tag     = r_tag;
  assign slab_alloc_i = r_go && r_alloc;

  // hash path: bucket read
  logic          hp_go;
  logic [ADDR_W-1:0] hp_baddr;
  assign hp_baddr    = cfg.table_base + ADDR_W'({h_out_hash[31:0] & cfg.bucket_mask, 6'd0});
  assign hp_go       = h_out_valid && port_free && !(mrsp_valid && r_need_port);
  assign h_out_ready = hp_go;

  // issue path: request-entry read
  logic          is_go;
  logic [ADDR_W-1:0] is_addr;
  assign is_addr = cfg.req_base + ADDR_W'({cur_buf, cur_idx, 6'd0});
  assign is_go   = cfg.enable && cur_valid && tag_avail && port_free
                   && !(mrsp_valid && r_need_port) && !h_out_valid;

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_OUT; i++) ort_st[i] <= S_IDLE;
      fresh_cnt  <= '0;
      rc_rd      <= '0;
      rc_wr      <= '0;
      rc_cnt     <= '0;
      cq_rd      <= '0;
      cq_wr      <= '0;
      cq_cnt     <= '0;
      inflight   <= '0;
      cur_valid  <= 1'b0;
      cur_buf    <= '0;
      cur_idx    <= '0;
      cur_left   <= '0;
      mreq_valid <= 1'b0;
      mreq       <= '0;
      rsp_valid  <= 1'b0;
      rsp        <= '0;
      stat_chain_follow <= '0;
      stat_bucket_link  <= '0;
      stat_ort_full     <= '0;
      stat_port_stall   <= '0;
      stat_inflight_max <= '0;
    end else begin
      if (mreq_valid && mreq_ready) mreq_valid <= 1'b0;
      if (rsp_valid && rsp_ready)   rsp_valid  <= 1'b0;

      // notification intake
      if (notif_valid && notif_ready && notif.count != '0) begin
        cur_valid <= 1'b1;
        cur_buf   <= notif.buf_id;
        cur_idx   <= notif.start;
        cur_left  <= notif.count;
      end

      // response path
      if (r_go) begin
        ort_st[r_tag] <= r_next;
        if (r_set_req) begin
          ort_op[r_tag]  <= req_op(mrsp.data);
          ort_key[r_tag] <= req_key(mrsp.data);
          ort_val[r_tag] <= req_val(mrsp.data);
        end
        if (r_set_baddr) ort_baddr[r_tag] <= r_baddr_n;
        if (r_set_iptr)  ort_iptr[r_tag]  <= r_iptr_n;
        if (r_set_bline) ort_bline[r_tag] <= r_bline_n;
        if (r_need_port) begin
          mreq_valid <= 1'b1;
          mreq       <= r_req;
        end
        if (r_need_rsp || r_fin) begin
          ort_op[r_tag]   <= 8'(r_rsp.op);
          ort_key[r_tag]  <= r_rsp.key;
          ort_val[r_tag]  <= r_rsp.value;
          ort_stat[r_tag] <= r_rsp.status;
        end
        if (r_need_rsp) begin
          cq[cq_wr]       <= r_tag;
          cq_wr           <= cq_wr + 1'b1;
        end
        if (r_chain) stat_chain_follow <= stat_chain_follow + 1;
        if (r_link)  stat_bucket_link  <= stat_bucket_link + 1;
      end

      // hash path
      if (hp_go) begin
        ort_st[h_out_tag]    <= S_BKT;
        ort_baddr[h_out_tag] <= hp_baddr;
        ort_ktag[h_out_tag]  <= key_tag(h_out_hash);
        mreq_valid <= 1'b1;
        mreq.op    <= MEM_RD;
        mreq.addr  <= hp_baddr;
        mreq.data  <= '0;
        mreq.tag   <= {1'b0, 8'(h_out_tag)};
      end

      // issue path
      if (is_go) begin
        ort_st[tag_next]   <= S_REQ;
        ort_conn[tag_next]  <= cur_buf;
        ort_raddr[tag_next] <= is_addr;
        mreq_valid <= 1'b1;
        mreq.op    <= MEM_RD;
        mreq.addr  <= is_addr;
        mreq.data  <= '0;
        mreq.tag   <= {1'b0, 8'(tag_next)};
        cur_idx    <= cur_idx + 1'b1;                 // wraps modulo RING_ENTRIES
        cur_left   <= cur_left - 1'b1;
        if (cur_left == (RING_W+1)'(1)) cur_valid <= 1'b0;
        if (fresh_cnt != (TW+1)'(MAX_OUT)) fresh_cnt <= fresh_cnt + 1'b1;
        else                               rc_rd     <= rc_rd + 1'b1;
      end

      // response output; the tag is recycled as its response leaves
      if (cq_pop) begin
        rsp_valid    <= 1'b1;
        rsp.conn     <= ort_conn[cq_tag];
        rsp.op       <= kv_op_e'(ort_op[cq_tag]);
        rsp.status   <= ort_stat[cq_tag];
        rsp.key      <= ort_key[cq_tag];
        rsp.value    <= ort_val[cq_tag];
        cq_rd        <= cq_rd + 1'b1;
        recyc[rc_wr] <= cq_tag;
        rc_wr        <= rc_wr + 1'b1;
      end
      cq_cnt   <= cq_cnt + (TW+1)'(r_go && r_need_rsp) - (TW+1)'(cq_pop);
      rc_cnt   <= rc_cnt + (TW+1)'(cq_pop)
                         - (TW+1)'(is_go && fresh_cnt == (TW+1)'(MAX_OUT));
      inflight <= inflight + (TW+1)'(is_go) - (TW+1)'(cq_pop);
      if (inflight > stat_inflight_max) stat_inflight_max <= inflight;
      if (cfg.enable && cur_valid && !tag_avail) stat_ort_full <= stat_ort_full + 1;
      if ((mrsp_valid && !r_go) || (h_out_valid && !hp_go) ||
          (cfg.enable && cur_valid && tag_avail && !is_go))
        stat_port_stall <= stat_port_stall + 1;
    end
  end

  // ORT entries are only touched by one path per cycle, and memory responses
  // only arrive for requests that are waiting for one.
  logic same_tag, rsp_unexpected;
  assign same_tag       = r_go && hp_go && (r_tag == h_out_tag);
  assign rsp_unexpected = mrsp_valid && (r_st == S_IDLE || r_st == S_HASH);
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_one_path:     assert (!same_tag)
        else $error("tag %0d taken by the response and hash paths at once", r_tag);
      a_rsp_expected: assert (!rsp_unexpected)
        else $error("response for tag %0d in state %0d", r_tag, r_st);
    end
  end

endmodule
