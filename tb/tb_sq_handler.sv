// tb_sq_handler: feeds a stream of APU responses for random connections into
// the send-queue handler (4 queue pairs, batch of 8, every 4th WQE signaled,
// idle flush after 30 cycles) backed by the host-memory model, then checks:
//  * every WQE in memory: opcode, signaled flag, queue pair, index, length,
//    remote address (response-ring base + 64 * ring tail), rkey and the inline
//    response (key, value, status, op);
//  * doorbells: one per full batch while the stream runs, one idle-timeout
//    flush per queue pair left with a partial batch, each preceded by a fence,
//    each carrying {qp, producer count}, and at the doorbell time the newest
//    WQE it announces is already in memory.
module tb_sq_handler;
  import orca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NB = 4, BATCH = 8, SIGE = 4, TMO = 30, SQE = 1024;
  localparam logic [47:0] SQ_BASE = 48'h20_0000, DB = 48'hF000_0000;

  cfg_t cfg;
  logic [ADDR_W-1:0] resp_base [NB];
  logic [31:0]       rkey      [NB];
  logic rsp_valid, rsp_ready, mreq_valid, mreq_ready, mrsp_valid, mrsp_ready;
  kv_resp_t rsp; mem_req_t mreq; mem_rsp_t mrsp;
  logic [31:0] stat_wqe, stat_doorbell, stat_signaled, stat_timeout_flush;

  sq_handler #(.NUM_BUFS(NB), .DB_BATCH(BATCH), .SQ_ENTRIES(SQE), .SIGNAL_EVERY(SIGE),
               .DB_TIMEOUT(TMO)) dut (.*);
  host_mem_model #(.MIN_LAT(2), .MAX_LAT(30)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_ready(mrsp_ready), .rsp(mrsp));

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  kv_resp_t sent [NB][$];
  int       last_db [NB];

  // doorbell monitor: the announced WQEs must already be in memory
  always @(posedge clk) if (rst_n && mreq_valid && mreq_ready && mreq.op == MEM_MMIO_WR) begin
    automatic int q  = int'(mreq.data[23:16]);
    automatic int p  = int'(mreq.data[15:0]);
    automatic logic [511:0] l1;
    chk(mreq.addr == DB + 48'(q * 8), $sformatf("doorbell address %h", mreq.addr));
    chk(u_mem.n_fence == u_mem.n_mmio + 1, "fence before doorbell");
    l1 = u_mem.peek(SQ_BASE + 48'((q * SQE + p - 1) * 128 + 64));
    chk(p > 0 && l1[87:24] == sent[q][p - 1].key, $sformatf("doorbell q%0d p%0d before its WQE", q, p));
    last_db[q] = p;
  end

  initial begin
    int n = 200;
    int exp_db = 0, exp_tmo = 0;
    cfg = '0; cfg.sq_base = SQ_BASE; cfg.db_addr = DB;
    for (int q = 0; q < NB; q++) begin
      resp_base[q] = 48'h80_0000 + 48'(q) * 48'h1_0000;
      rkey[q] = $urandom; last_db[q] = 0;
    end
    rsp_valid = 0; rsp = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // stream without gaps longer than the timeout
    for (int i = 0; i < n; i++) begin
      kv_resp_t r;
      r.conn = 8'($urandom_range(0, NB - 1)); r.op = KV_GET; r.status = ST_OK;
      r.key = {$urandom, $urandom};
      for (int w = 0; w < VAL_W / 32; w++) r.value[32 * w +: 32] = $urandom;
      sent[r.conn].push_back(r);
      @(negedge clk); rsp_valid = 1; rsp = r;
      while (!rsp_ready) @(negedge clk);
      @(posedge clk); #1 rsp_valid = 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    repeat (TMO * (NB + 2) + 400) @(posedge clk);
    for (int q = 0; q < NB; q++) begin
      exp_db  += sent[q].size() / BATCH + (sent[q].size() % BATCH != 0);
      exp_tmo += (sent[q].size() % BATCH != 0);
      chk(last_db[q] == sent[q].size(), $sformatf("q%0d last doorbell %0d of %0d", q, last_db[q], sent[q].size()));
      for (int i = 0; i < sent[q].size(); i++) begin
        logic [511:0] l0, l1;
        l0 = u_mem.peek(SQ_BASE + 48'((q * SQE + i) * 128));
        l1 = u_mem.peek(SQ_BASE + 48'((q * SQE + i) * 128 + 64));
        chk(l0[7:0] == 8'h08 && l0[9] == 1'b1 && l0[8] == ((i + 1) % SIGE == 0)
            && l0[31:16] == 16'(i) && l0[39:32] == 8'(q) && l0[95:64] == 32'd64
            && l0[159:96] == 64'(resp_base[q] + 48'(i * 64)) && l0[191:160] == rkey[q],
            $sformatf("WQE q%0d #%0d control %h", q, i, l0[191:0]));
        chk(l1[7:0] == 8'd1 && l1[15:8] == 8'(sent[q][i].status) && l1[23:16] == 8'(sent[q][i].op)
            && l1[87:24] == sent[q][i].key && l1[471:88] == sent[q][i].value,
            $sformatf("WQE q%0d #%0d payload", q, i));
      end
    end
    chk(stat_wqe == 32'(n), "WQE count");
    chk(stat_doorbell == 32'(exp_db) && u_mem.n_mmio == exp_db,
        $sformatf("doorbells %0d expected %0d", stat_doorbell, exp_db));
    chk(stat_timeout_flush == 32'(exp_tmo), $sformatf("timeout flushes %0d expected %0d", stat_timeout_flush, exp_tmo));
    chk(u_mem.n_fence == exp_db, "one fence per doorbell");
    begin
      int sig = 0;
      for (int q = 0; q < NB; q++) sig += sent[q].size() / SIGE;
      chk(stat_signaled == 32'(sig), $sformatf("signaled %0d expected %0d", stat_signaled, sig));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
