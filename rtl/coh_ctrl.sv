// coh_ctrl: front end of the accelerator's coherence controller.
//
// In the paper the coherence controller carries all traffic between the
// accelerator and the coherent interconnect: ordinary reads and writes,
// cpoll notifications, and virtual-to-physical translation in a TLB. The
// coherence protocol engine and the 64 KB local cache are platform IP and are
// not modelled here; this block is the part around them:
//   * two request ports (A: the APU, B: the RDMA SQ handler) are merged onto
//     the single request channel of the interconnect, round-robin when both
//     are waiting; the port number travels in the tag MSB and steers the
//     response back;
//   * read and write addresses are virtual and are translated by a fully
//     associative TLB of 2 MB pages that software loads through the
//     configuration registers; MMIO writes and fences carry physical
//     addresses and pass untranslated; a TLB miss is counted and the address
//     passed on unchanged (the page-walk is not described in the paper);
//   * the snoop path (coherence signals) feeds the cpoll checker, which the
//     paper places in this controller's datapath.
// Timing: a request is registered, so it leaves one cycle after it is
// accepted; responses pass combinationally. Page size, TLB organisation and
// the arbitration policy are this design's choices.
module coh_ctrl
  import orca_pkg::*;
#(
  parameter int unsigned NUM_BUFS    = 16,
  parameter int unsigned TLB_ENTRIES = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 tlb_valid [TLB_ENTRIES],
  input  logic [26:0]          tlb_vpn   [TLB_ENTRIES],
  input  logic [26:0]          tlb_ppn   [TLB_ENTRIES],
  // port A
  input  logic                 a_req_valid,
  output logic                 a_req_ready,
  input  mem_req_t             a_req,
  output logic                 a_rsp_valid,
  input  logic                 a_rsp_ready,
  output mem_rsp_t             a_rsp,
  // port B
  input  logic                 b_req_valid,
  output logic                 b_req_ready,
  input  mem_req_t             b_req,
  output logic                 b_rsp_valid,
  input  logic                 b_rsp_ready,
  output mem_rsp_t             b_rsp,
  // cc-interconnect
  output logic                 cc_req_valid,
  input  logic                 cc_req_ready,
  output mem_req_t             cc_req,
  input  logic                 cc_rsp_valid,
  output logic                 cc_rsp_ready,
  input  mem_rsp_t             cc_rsp,
  // coherence signals and cpoll output
  input  logic                 snp_valid,
  input  logic [ADDR_W-1:0]    snp_addr,
  input  logic [31:0]          snp_data,
  output logic                 sig_valid,
  output logic [BUF_ID_W-1:0]  sig_buf,
  output logic [RING_W-1:0]    sig_ptr,
  output logic [31:0]          stat_tlb_miss
);

  // ---------------------------------------------------------------- arbiter
  logic      last_b;      // port B won the last contested grant
  logic      out_free;
  logic      pick_a, pick_b;
  mem_req_t  sel;
  logic      hit;
  logic [26:0] ppn;

  assign out_free = !cc_req_valid || cc_req_ready;
  assign pick_a   = out_free && a_req_valid && (!b_req_valid || last_b);
  assign pick_b   = out_free && b_req_valid && !pick_a;
  assign a_req_ready = pick_a;
  assign b_req_ready = pick_b;

  always_comb begin
    sel = pick_a ? a_req : b_req;
    hit = 1'b0;
    ppn = '0;
    for (int i = 0; i < TLB_ENTRIES; i++) begin
      if (tlb_valid[i] && tlb_vpn[i] == sel.addr[ADDR_W-1:21]) begin
        hit = 1'b1;
        ppn = tlb_ppn[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cc_req_valid  <= 1'b0;
      cc_req        <= '0;
      last_b        <= 1'b0;
      stat_tlb_miss <= '0;
    end else begin
      if (cc_req_valid && cc_req_ready) cc_req_valid <= 1'b0;
      if (pick_a || pick_b) begin
        cc_req_valid <= 1'b1;
        cc_req       <= sel;
        cc_req.tag   <= {pick_b, sel.tag[TAG_W-2:0]};
        if (sel.op == MEM_RD || sel.op == MEM_WR) begin
          if (hit) cc_req.addr <= {ppn, sel.addr[20:0]};
          else     stat_tlb_miss <= stat_tlb_miss + 1;
        end
        if (a_req_valid && b_req_valid) last_b <= pick_b;
      end
    end
  end

  // ---------------------------------------------------------------- responses
  assign a_rsp_valid  = cc_rsp_valid && !cc_rsp.tag[TAG_W-1];
  assign b_rsp_valid  = cc_rsp_valid &&  cc_rsp.tag[TAG_W-1];
  assign a_rsp        = '{data: cc_rsp.data, tag: {1'b0, cc_rsp.tag[TAG_W-2:0]}};
  assign b_rsp        = '{data: cc_rsp.data, tag: {1'b0, cc_rsp.tag[TAG_W-2:0]}};
  assign cc_rsp_ready = cc_rsp.tag[TAG_W-1] ? b_rsp_ready : a_rsp_ready;

  // ---------------------------------------------------------------- cpoll
  cpoll_checker #(.NUM_BUFS(NUM_BUFS)) u_cpoll (
    .clk, .rst_n,
    .ptr_mode    (cfg.ptr_mode),
    .region_base (cfg.cpoll_base),
    .region_bytes(cfg.cpoll_bytes),
    .snp_valid, .snp_addr, .snp_data,
    .sig_valid, .sig_buf, .sig_ptr
  );

endmodule
