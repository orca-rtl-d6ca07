// sq_handler: RDMA send-queue handler of the cc-accelerator.
//
// It turns each response record from the APU into an RDMA WRITE work-queue
// entry (WQE) that sends the response into the client's response ring, and
// tells the RNIC about new WQEs by writing its doorbell register, an MMIO
// write into the RNIC's PCIe BAR. Following the paper:
//   * the server side tracks the tail of each client's response ring, so the
//     remote address of a response is resp_base[qp] + 64 * tail;
//   * doorbells are batched: the doorbell of a queue pair is rung once
//     DB_BATCH WQEs (32, the batch size of the paper's evaluation) are
//     pending on it, and the doorbell write is preceded by an sfence so the
//     WQE writes are visible first;
//   * WQEs are unsignaled except every SIGNAL_EVERY-th one, so the RNIC writes
//     few completions (the CPU, not this block, polls the completion queues).
// This design's own choices: the WQE layout (two 64-byte lines, control and
// address segment then the response inline; it is not the layout of any real
// NIC), the doorbell value {qp, producer count} at db_addr + 8*qp, one send
// queue of SQ_ENTRIES WQEs per connection, and an idle timeout (DB_TIMEOUT
// cycles without a new response) that flushes a partial batch so a lone
// response is not held back.
//
// WQE line 0: [7:0] opcode 0x08 (RDMA write), [8] signaled, [9] inline,
//   [31:16] WQE index, [39:32] QP, [95:64] length 64, [159:96] remote address,
//   [191:160] rkey.
// WQE line 1 (inline payload, one response-ring entry): [7:0] valid=1,
//   [15:8] status, [23:16] op, [87:24] key, [471:88] value.
// Interface: rsp_* valid/ready in; mreq_*/mrsp_* to the coherence controller
// (write acks are consumed and counted). One WQE takes two write cycles; a
// doorbell adds a fence round trip and one MMIO write.
module sq_handler
  import orca_pkg::*;
#(
  parameter int unsigned NUM_BUFS     = 16,
  parameter int unsigned DB_BATCH     = 32,
  parameter int unsigned SQ_ENTRIES   = 1024,
  parameter int unsigned SIGNAL_EVERY = 32,
  parameter int unsigned DB_TIMEOUT   = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic [ADDR_W-1:0]    resp_base [NUM_BUFS],
  input  logic [31:0]          rkey      [NUM_BUFS],
  input  logic                 rsp_valid,
  output logic                 rsp_ready,
  input  kv_resp_t             rsp,
  output logic                 mreq_valid,
  input  logic                 mreq_ready,
  output mem_req_t             mreq,
  input  logic                 mrsp_valid,
  output logic                 mrsp_ready,
  input  mem_rsp_t             mrsp,
  output logic [31:0]          stat_wqe,
  output logic [31:0]          stat_doorbell,
  output logic [31:0]          stat_signaled,
  output logic [31:0]          stat_timeout_flush
);

  localparam int unsigned QW  = $clog2(NUM_BUFS);
  localparam int unsigned SQW = $clog2(SQ_ENTRIES);
  localparam logic [7:0]  OPC_RDMA_WRITE = 8'h08;

  typedef enum logic [2:0] {
    H_IDLE, H_LINE0, H_LINE1, H_FENCE, H_FENCE_WAIT, H_DOORBELL
  } hst_e;

  hst_e               st;
  kv_resp_t           cur;
  logic [QW-1:0]      qp;          // queue pair being worked on
  logic [15:0]        pi     [NUM_BUFS];   // WQEs posted (producer count)
  logic [RING_W-1:0]  rtail  [NUM_BUFS];   // client response-ring tail
  logic [15:0]        pend   [NUM_BUFS];   // WQEs since last doorbell
  logic [15:0]        sigcnt [NUM_BUFS];
  logic [15:0]        idle;
  logic [15:0]        outst;               // writes/fences not yet acked
  logic               timeout_flush;

  // first queue pair with pending WQEs (for the idle flush)
  logic               any_pend;
  logic [QW-1:0]      pend_qp;
  always_comb begin
    any_pend = 1'b0;
    pend_qp  = '0;
    for (int i = NUM_BUFS - 1; i >= 0; i--) begin
      if (pend[i] != '0) begin
        any_pend = 1'b1;
        pend_qp  = QW'(i);
      end
    end
  end

  logic port_free;
  assign port_free  = !mreq_valid || mreq_ready;
  assign rsp_ready  = (st == H_IDLE);
  assign mrsp_ready = 1'b1;

  logic              signaled;
  logic [ADDR_W-1:0] wqe_addr;
  logic [ADDR_W-1:0] raddr;
  assign signaled = (sigcnt[qp] == 16'(SIGNAL_EVERY - 1));
  assign wqe_addr = cfg.sq_base
                    + ADDR_W'({ADDR_W'(qp) * ADDR_W'(SQ_ENTRIES) + ADDR_W'(pi[qp][SQW-1:0]), 7'd0});
  assign raddr    = resp_base[qp] + ADDR_W'({rtail[qp], 6'd0});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= H_IDLE;
      cur        <= '0;
      qp         <= '0;
      idle       <= '0;
      outst      <= '0;
      timeout_flush <= 1'b0;
      mreq_valid <= 1'b0;
      mreq       <= '0;
      stat_wqe   <= '0;
      stat_doorbell <= '0;
      stat_signaled <= '0;
      stat_timeout_flush <= '0;
      for (int i = 0; i < NUM_BUFS; i++) begin
        pi[i] <= '0; rtail[i] <= '0; pend[i] <= '0; sigcnt[i] <= '0;
      end
    end else begin
      logic issued;
      issued = 1'b0;
      if (mreq_valid && mreq_ready) mreq_valid <= 1'b0;
      unique case (st)
        H_IDLE: begin
          if (rsp_valid) begin
            cur  <= rsp;
            qp   <= rsp.conn[QW-1:0];
            idle <= '0;
            st   <= H_LINE0;
          end else if (any_pend && idle >= 16'(DB_TIMEOUT)) begin
            qp   <= pend_qp;
            idle <= '0;
            timeout_flush <= 1'b1;
            st   <= H_FENCE;
          end else if (any_pend) begin
            idle <= idle + 1'b1;
          end
        end
        H_LINE0: if (port_free) begin
          mreq_valid <= 1'b1;
          mreq.op    <= MEM_WR;
          mreq.addr  <= wqe_addr;
          mreq.tag   <= '0;
          mreq.data  <= {320'd0, rkey[qp], 64'(raddr), 32'd64,
                         24'd0, 8'(qp), pi[qp], 6'd0, 1'b1, signaled, OPC_RDMA_WRITE};
          issued = 1'b1;
          st <= H_LINE1;
        end
        H_LINE1: if (port_free) begin
          mreq_valid <= 1'b1;
          mreq.op    <= MEM_WR;
          mreq.addr  <= wqe_addr + ADDR_W'(64);
          mreq.tag   <= '0;
          mreq.data  <= {40'd0, cur.value, cur.key, cur.op, cur.status, 8'd1};
          issued = 1'b1;
          pi[qp]     <= pi[qp] + 1'b1;
          rtail[qp]  <= rtail[qp] + 1'b1;
          pend[qp]   <= pend[qp] + 1'b1;
          sigcnt[qp] <= signaled ? '0 : sigcnt[qp] + 1'b1;
          stat_wqe   <= stat_wqe + 1;
          if (signaled) stat_signaled <= stat_signaled + 1;
          st <= (pend[qp] + 1'b1 >= 16'(DB_BATCH)) ? H_FENCE : H_IDLE;
        end
        H_FENCE: if (port_free) begin
          mreq_valid <= 1'b1;
          mreq.op    <= MEM_SFENCE;
          mreq.addr  <= '0;
          mreq.data  <= '0;
          mreq.tag   <= '0;
          issued = 1'b1;
          st <= H_FENCE_WAIT;
        end
        H_FENCE_WAIT: if (outst == '0 || (outst == 16'd1 && mrsp_valid)) begin
          st <= H_DOORBELL;
        end
        H_DOORBELL: if (port_free) begin
          mreq_valid <= 1'b1;
          mreq.op    <= MEM_MMIO_WR;
          mreq.addr  <= cfg.db_addr + ADDR_W'({qp, 3'd0});
          mreq.data  <= {448'd0, 40'd0, 8'(qp), pi[qp]};
          mreq.tag   <= '0;
          issued = 1'b1;
          pend[qp]   <= '0;
          stat_doorbell <= stat_doorbell + 1;
          if (timeout_flush) stat_timeout_flush <= stat_timeout_flush + 1;
          timeout_flush <= 1'b0;
          st <= H_IDLE;
        end
        default: st <= H_IDLE;
      endcase
      outst <= outst + 16'(issued) - 16'(mrsp_valid);
    end
  end

endmodule
