// orca_top: the ORCA cache-coherent accelerator for a key-value store.
//
// Clients put requests into per-connection request rings in server memory
// with one-sided RDMA writes, and bump a 4-byte tail pointer per ring in the
// pointer buffer. The accelerator sits on the CPU's coherent interconnect and
// never polls: the pointer buffer is registered as its cpoll region, so a
// client's pointer update reaches it as a coherence signal. The datapath is
//
//   snoop -> coh_ctrl/cpoll_checker -> cpoll_queues (one per ring)
//         -> rr_scheduler -> ring_tracker -> kv_apu -> sq_handler
//
// The checker maps the signal's address to a ring and its new tail; the
// per-ring queues hold (and coalesce) those signals; the round-robin
// scheduler picks one ring at a time; the ring tracker turns the tail into
// "n new requests from index i"; the APU reads and serves them with up to 256
// in flight, reading request entries, hash buckets and items through the
// coherence controller; the SQ handler writes one RDMA-write WQE per response
// into the ring's send queue and rings the RNIC doorbell once per batch.
// conf_regs holds what host software sets up at initialization.
//
// tph_tagger is not part of the accelerator: it is the per-region TPH knob
// the paper proposes for the RNIC's DMA engine. It shares no signal with the
// rest and is placed here, on its own ports, only so that the whole design
// sits in one hierarchy.
//
// tx_cc_unit is the concurrency-control unit of the paper's transaction APU
// (ORCA TX). The rest of that APU (log handling and chain replication) is not
// built, so the unit is brought out on its own tx_* ports, where that APU
// would drive it.
//
// Ports: a 64-bit configuration register port; the coherent interconnect as
// one request channel (cc_req_*, valid/ready, tagged) and one response channel
// (cc_rsp_*); the snoop input (address and new 32-bit value of a written
// word); the RNIC-side TPH tagger ports; event counters.
module orca_top
  import orca_pkg::*;
#(
  parameter int unsigned NUM_BUFS = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration / management (host MMIO)
  input  logic                 cfg_we,
  input  logic [11:0]          cfg_addr,
  input  logic [63:0]          cfg_wdata,
  output logic [63:0]          cfg_rdata,
  // cc-interconnect memory channel
  output logic                 cc_req_valid,
  input  logic                 cc_req_ready,
  output mem_req_t             cc_req,
  input  logic                 cc_rsp_valid,
  output logic                 cc_rsp_ready,
  input  mem_rsp_t             cc_rsp,
  // coherence signals
  input  logic                 snp_valid,
  input  logic [ADDR_W-1:0]    snp_addr,
  input  logic [31:0]          snp_data,
  // RNIC DMA header path (adaptive DDIO)
  input  logic                 tph_knob_en,
  input  logic                 tph_reg_we,
  input  logic [2:0]           tph_reg_idx,
  input  logic                 tph_reg_valid,
  input  logic                 tph_reg_dram,
  input  logic [63:0]          tph_reg_base,
  input  logic [63:0]          tph_reg_len,
  input  logic                 tlp_in_valid,
  input  logic [127:0]         tlp_in_hdr,
  input  logic [63:0]          tlp_in_addr,
  output logic                 tlp_out_valid,
  output logic [127:0]         tlp_out_hdr,
  // transaction concurrency control (ORCA TX)
  input  logic                 tx_acq_valid,
  output logic                 tx_acq_ready,
  input  logic [KEY_W-1:0]     tx_acq_key,
  input  logic [15:0]          tx_acq_txn,
  input  logic                 tx_rel_valid,
  input  logic [KEY_W-1:0]     tx_rel_key,
  output logic                 tx_grant_valid,
  output logic [15:0]          tx_grant_txn,
  output logic [KEY_W-1:0]     tx_grant_key,
  // event counters
  output logic [31:0]          stat_cpoll_sig,
  output logic [31:0]          stat_coalesced,
  output logic [31:0]          stat_notif,
  output logic [31:0]          stat_chain_follow,
  output logic [31:0]          stat_bucket_link,
  output logic [31:0]          stat_ort_full,
  output logic [31:0]          stat_port_stall,
  output logic [ORT_W:0]       stat_inflight_max,
  output logic [31:0]          stat_wqe,
  output logic [31:0]          stat_doorbell,
  output logic [31:0]          stat_signaled,
  output logic [31:0]          stat_timeout_flush,
  output logic [31:0]          stat_tlb_miss,
  output logic [31:0]          stat_tph_set,
  output logic [31:0]          stat_tph_clr,
  output logic [31:0]          stat_tx_conflict,
  output logic [31:0]          stat_tx_handoff
);

  localparam int unsigned TLB_ENTRIES = 8;
  localparam int unsigned QW = $clog2(NUM_BUFS);

  // ---------------------------------------------------------------- config
  cfg_t              cfg;
  logic [ADDR_W-1:0] resp_base [NUM_BUFS];
  logic [31:0]       rkey      [NUM_BUFS];
  logic              tlb_valid [TLB_ENTRIES];
  logic [26:0]       tlb_vpn   [TLB_ENTRIES];
  logic [26:0]       tlb_ppn   [TLB_ENTRIES];

  conf_regs #(.NUM_BUFS(NUM_BUFS), .TLB_ENTRIES(TLB_ENTRIES)) u_conf (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .cfg, .resp_base, .rkey, .tlb_valid, .tlb_vpn, .tlb_ppn
  );

  // ---------------------------------------------------------------- coherence controller
  logic      apu_req_valid, apu_req_ready, apu_rsp_valid, apu_rsp_ready;
  mem_req_t  apu_req;
  mem_rsp_t  apu_rsp;
  logic      sq_req_valid, sq_req_ready, sq_rsp_valid, sq_rsp_ready;
  mem_req_t  sq_req;
  mem_rsp_t  sq_rsp;
  logic                sig_valid;
  logic [BUF_ID_W-1:0] sig_buf;
  logic [RING_W-1:0]   sig_ptr;

  coh_ctrl #(.NUM_BUFS(NUM_BUFS), .TLB_ENTRIES(TLB_ENTRIES)) u_coh (
    .clk, .rst_n, .cfg, .tlb_valid, .tlb_vpn, .tlb_ppn,
    .a_req_valid(apu_req_valid), .a_req_ready(apu_req_ready), .a_req(apu_req),
    .a_rsp_valid(apu_rsp_valid), .a_rsp_ready(apu_rsp_ready), .a_rsp(apu_rsp),
    .b_req_valid(sq_req_valid),  .b_req_ready(sq_req_ready),  .b_req(sq_req),
    .b_rsp_valid(sq_rsp_valid),  .b_rsp_ready(sq_rsp_ready),  .b_rsp(sq_rsp),
    .cc_req_valid, .cc_req_ready, .cc_req,
    .cc_rsp_valid, .cc_rsp_ready, .cc_rsp,
    .snp_valid, .snp_addr, .snp_data,
    .sig_valid, .sig_buf, .sig_ptr,
    .stat_tlb_miss
  );

  // ---------------------------------------------------------------- cpoll queues + scheduler
  logic [NUM_BUFS-1:0] q_nonempty, q_pop;
  logic [RING_W-1:0]   q_head [NUM_BUFS];
  logic                q_coal;
  logic                sch_valid;
  logic [QW-1:0]       sch_idx;
  logic                rt_in_ready;

  cpoll_queues #(.NUM_BUFS(NUM_BUFS)) u_queues (
    .clk, .rst_n,
    .in_valid(sig_valid), .in_buf(sig_buf), .in_ptr(sig_ptr),
    .pop(q_pop), .nonempty(q_nonempty), .head_ptr(q_head), .coalesced(q_coal)
  );

  rr_scheduler #(.N(NUM_BUFS)) u_sched (
    .clk, .rst_n,
    .req(q_nonempty), .ready(rt_in_ready),
    .valid(sch_valid), .grant(q_pop), .grant_idx(sch_idx)
  );

  // ---------------------------------------------------------------- ring tracker
  logic   notif_valid, notif_ready;
  notif_t notif;

  ring_tracker #(.NUM_BUFS(NUM_BUFS)) u_tracker (
    .clk, .rst_n,
    .in_valid(sch_valid), .in_ready(rt_in_ready),
    .in_buf(BUF_ID_W'(sch_idx)), .in_ptr(q_head[sch_idx]),
    .out_valid(notif_valid), .out_ready(notif_ready), .out(notif)
  );

  // ---------------------------------------------------------------- APU
  logic     rsp_valid, rsp_ready;
  kv_resp_t rsp;

  kv_apu u_apu (
    .clk, .rst_n, .cfg,
    .notif_valid, .notif_ready, .notif,
    .mreq_valid(apu_req_valid), .mreq_ready(apu_req_ready), .mreq(apu_req),
    .mrsp_valid(apu_rsp_valid), .mrsp_ready(apu_rsp_ready), .mrsp(apu_rsp),
    .rsp_valid, .rsp_ready, .rsp,
    .stat_chain_follow, .stat_bucket_link, .stat_ort_full,
    .stat_port_stall, .stat_inflight_max
  );

  // ---------------------------------------------------------------- SQ handler
  sq_handler #(.NUM_BUFS(NUM_BUFS)) u_sq (
    .clk, .rst_n, .cfg, .resp_base, .rkey,
    .rsp_valid, .rsp_ready, .rsp,
    .mreq_valid(sq_req_valid), .mreq_ready(sq_req_ready), .mreq(sq_req),
    .mrsp_valid(sq_rsp_valid), .mrsp_ready(sq_rsp_ready), .mrsp(sq_rsp),
    .stat_wqe, .stat_doorbell, .stat_signaled, .stat_timeout_flush
  );

  // ---------------------------------------------------------------- RNIC TPH knob
  tph_tagger u_tph (
    .clk, .rst_n,
    .knob_en  (tph_knob_en),
    .reg_we   (tph_reg_we),   .reg_idx (tph_reg_idx), .reg_valid(tph_reg_valid),
    .reg_dram (tph_reg_dram), .reg_base(tph_reg_base), .reg_len (tph_reg_len),
    .in_valid (tlp_in_valid), .in_hdr  (tlp_in_hdr),  .in_addr (tlp_in_addr),
    .out_valid(tlp_out_valid), .out_hdr(tlp_out_hdr),
    .stat_tph_set, .stat_tph_clr
  );

  // ---------------------------------------------------------------- TX concurrency control
  tx_cc_unit u_txcc (
    .clk, .rst_n,
    .acq_valid(tx_acq_valid), .acq_ready(tx_acq_ready), .acq_key(tx_acq_key), .acq_txn(tx_acq_txn),
    .rel_valid(tx_rel_valid), .rel_key(tx_rel_key),
    .grant_valid(tx_grant_valid), .grant_txn(tx_grant_txn), .grant_key(tx_grant_key),
    .stat_conflict(stat_tx_conflict), .stat_handoff(stat_tx_handoff)
  );

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_cpoll_sig <= '0;
      stat_coalesced <= '0;
      stat_notif     <= '0;
    end else begin
      if (sig_valid)                  stat_cpoll_sig <= stat_cpoll_sig + 1;
      if (q_coal)                     stat_coalesced <= stat_coalesced + 1;
      if (notif_valid && notif_ready) stat_notif     <= stat_notif + 1;
    end
  end

endmodule
