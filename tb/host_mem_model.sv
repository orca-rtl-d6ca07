// host_mem_model: behavioural model of host memory behind the coherent
// interconnect, for simulation only (not synthesizable).
// Lines live in an associative array addressed by 64-byte-aligned byte
// address; unwritten lines read as zero. A request is accepted when
// req_ready is high (randomly withheld READY_PCT percent of the time), takes
// effect at once (writes update memory, reads capture the line) and is
// answered after a random latency of MIN_LAT..MAX_LAT cycles. Among answers
// that are due, one is picked at random, so responses return out of order.
// MMIO writes (doorbells) are logged in db_addr_q/db_data_q; fences are
// counted. Every request kind gets exactly one response carrying its tag.
module host_mem_model
  import orca_pkg::*;
#(
  parameter int MIN_LAT   = 2,
  parameter int MAX_LAT   = 20,
  parameter int READY_PCT = 85
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output mem_rsp_t  rsp
);

  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];

  typedef struct { mem_rsp_t r; longint due; } pend_t;
  pend_t pend [$];
  longint now = 0;
  int     cur = -1;

  logic [ADDR_W-1:0] db_addr_q [$];
  logic [63:0]       db_data_q [$];
  int n_rd = 0, n_wr = 0, n_mmio = 0, n_fence = 0;

  function automatic logic [LINE_BITS-1:0] peek(input logic [ADDR_W-1:0] a);
    logic [ADDR_W-1:0] la;
    la = {a[ADDR_W-1:6], 6'd0};
    return mem.exists(la) ? mem[la] : '0;
  endfunction
  function automatic void poke(input logic [ADDR_W-1:0] a, input logic [LINE_BITS-1:0] d);
    mem[{a[ADDR_W-1:6], 6'd0}] = d;
  endfunction

  always @(negedge clk) req_ready <= rst_n && ($urandom_range(0, 99) < READY_PCT);

  always @(posedge clk) begin
    now++;
    if (!rst_n) begin
      pend.delete(); cur = -1; rsp_valid <= 1'b0;
    end else begin
      // retire the response shown in this cycle
      if (rsp_valid && rsp_ready && cur >= 0) begin
        pend.delete(cur);
        cur = -1;
      end
      // accept a request
      if (req_valid && req_ready) begin
        automatic pend_t p;
        p.r.tag  = req.tag;
        p.r.data = '0;
        unique case (req.op)
          MEM_RD:      begin p.r.data = peek(req.addr); n_rd++; end
          MEM_WR:      begin poke(req.addr, req.data); n_wr++; end
          MEM_MMIO_WR: begin db_addr_q.push_back(req.addr); db_data_q.push_back(req.data[63:0]); n_mmio++; end
          MEM_SFENCE:  n_fence++;
        endcase
        p.due = now + longint'($urandom_range(MIN_LAT, MAX_LAT));
        pend.push_back(p);
      end
      // choose the next response to show
      if (cur < 0) begin
        automatic int due_idx [$];
        due_idx.delete();
        for (int i = 0; i < pend.size(); i++) if (pend[i].due <= now) due_idx.push_back(i);
        if (due_idx.size() != 0) cur = due_idx[$urandom_range(0, due_idx.size() - 1)];
      end
      rsp_valid <= (cur >= 0);
      if (cur >= 0) rsp <= pend[cur].r;
    end
  end

endmodule
