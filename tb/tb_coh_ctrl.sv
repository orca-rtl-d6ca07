// tb_coh_ctrl: drives both request ports of the coherence-controller front
// end with random reads, writes, MMIO writes and fences, half of them to
// virtual pages loaded in the TLB. A scoreboard computes each request's
// expected form on the interconnect (translated address for a read or write
// that hits, unchanged otherwise, port number in the tag MSB) and checks that
// every request appears once and in order per port, that contested cycles
// alternate between the ports, that responses with a tag MSB of 0/1 reach
// port A/B with the MSB cleared, and that misses are counted. It also sends
// one snoop into the cpoll region and checks the signal that comes out.
module tb_coh_ctrl;
  import orca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int TLBN = 8;
  cfg_t cfg;
  logic        tlb_valid [TLBN];
  logic [26:0] tlb_vpn   [TLBN];
  logic [26:0] tlb_ppn   [TLBN];
  logic a_req_valid, a_req_ready, a_rsp_valid, a_rsp_ready;
  logic b_req_valid, b_req_ready, b_rsp_valid, b_rsp_ready;
  mem_req_t a_req, b_req, cc_req; mem_rsp_t a_rsp, b_rsp, cc_rsp;
  logic cc_req_valid, cc_req_ready, cc_rsp_valid, cc_rsp_ready;
  logic snp_valid; logic [ADDR_W-1:0] snp_addr; logic [31:0] snp_data;
  logic sig_valid; logic [BUF_ID_W-1:0] sig_buf; logic [RING_W-1:0] sig_ptr;
  logic [31:0] stat_tlb_miss;

  coh_ctrl #(.NUM_BUFS(16), .TLB_ENTRIES(TLBN)) dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mem_req_t exp_q [2][$];
  int       misses = 0, contested = 0, alternations = 0;
  int       last_win = -1;

  function automatic mem_req_t expect_of(input mem_req_t r, input int port, output bit miss);
    mem_req_t e;
    e = r; e.tag = {1'(port), r.tag[TAG_W-2:0]}; miss = 0;
    if (r.op == MEM_RD || r.op == MEM_WR) begin
      miss = 1;
      for (int i = 0; i < TLBN; i++)
        if (tlb_valid[i] && tlb_vpn[i] == r.addr[47:21]) begin e.addr = {tlb_ppn[i], r.addr[20:0]}; miss = 0; end
    end
    return e;
  endfunction

  function automatic mem_req_t rnd_req();
    mem_req_t r;
    r.op   = mem_op_e'($urandom_range(0, 3));
    r.addr = {($urandom_range(0, 1) ? 27'(100 + $urandom_range(0, 7)) : 27'($urandom)), 21'($urandom)};
    r.data = {16{$urandom}};
    r.tag  = 9'($urandom_range(0, 255));
    return r;
  endfunction

  // port drivers: new request after each acceptance, random idle gaps
  int a_left = 300, b_left = 300;
  always @(posedge clk) if (rst_n) begin
    bit m;
    if (a_req_valid && a_req_ready) begin
      exp_q[0].push_back(expect_of(a_req, 0, m)); misses += m; a_left--; a_req_valid <= 0;
    end
    if (b_req_valid && b_req_ready) begin
      exp_q[1].push_back(expect_of(b_req, 1, m)); misses += m; b_left--; b_req_valid <= 0;
    end
    if (a_req_valid && b_req_valid && (a_req_ready || b_req_ready)) begin
      contested++;
      if (last_win >= 0 && ((a_req_ready && last_win == 1) || (b_req_ready && last_win == 0))) alternations++;
      last_win = a_req_ready ? 0 : 1;
    end
    if ((!a_req_valid || a_req_ready) && a_left > (a_req_valid && a_req_ready) && $urandom_range(0, 3) != 0) begin
      a_req_valid <= 1; a_req <= rnd_req();
    end
    if ((!b_req_valid || b_req_ready) && b_left > (b_req_valid && b_req_ready) && $urandom_range(0, 3) != 0) begin
      b_req_valid <= 1; b_req <= rnd_req();
    end
  end

  // interconnect side: accept requests at random, answer each one later
  mem_rsp_t rsp_q [$];
  int seen = 0;
  always @(negedge clk) cc_req_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (cc_req_valid && cc_req_ready) begin
      automatic int p = int'(cc_req.tag[TAG_W-1]);
      seen++;
      if (exp_q[p].size() == 0) chk(0, "request from nowhere");
      else chk(cc_req == exp_q[p].pop_front(), $sformatf("port %0d request %h", p, cc_req.addr));
      rsp_q.push_back('{data: cc_req.data, tag: cc_req.tag});
    end
  end

  // responses: present queued ones in random order, check routing
  int pick = -1;
  always @(posedge clk) if (rst_n) begin
    if (cc_rsp_valid && cc_rsp_ready) begin
      if (cc_rsp.tag[TAG_W-1]) chk(b_rsp_valid && !a_rsp_valid && b_rsp.tag == {1'b0, cc_rsp.tag[7:0]} && b_rsp.data == cc_rsp.data, "B response");
      else                     chk(a_rsp_valid && !b_rsp_valid && a_rsp.tag == cc_rsp.tag && a_rsp.data == cc_rsp.data, "A response");
      rsp_q.delete(pick); pick = -1;
    end
    if (pick < 0 && rsp_q.size() > 0) pick = $urandom_range(0, rsp_q.size() - 1);
    cc_rsp_valid <= (pick >= 0);
    if (pick >= 0) cc_rsp <= rsp_q[pick];
  end
  always @(negedge clk) begin a_rsp_ready <= $urandom_range(0, 1); b_rsp_ready <= $urandom_range(0, 1); end

  initial begin
    cfg = '0; cfg.ptr_mode = 1; cfg.cpoll_base = 48'h30_0000; cfg.cpoll_bytes = 48'd64;
    for (int i = 0; i < TLBN; i++) begin
      tlb_valid[i] = (i != 3); tlb_vpn[i] = 27'(100 + i); tlb_ppn[i] = 27'(5000 + 7 * i);
    end
    a_req_valid = 0; b_req_valid = 0; a_req = '0; b_req = '0;
    cc_rsp_valid = 0; cc_rsp = '0; snp_valid = 0; snp_addr = '0; snp_data = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // one coherence signal: ring 5's pointer word becomes 77
    @(negedge clk); snp_valid = 1; snp_addr = 48'h30_0000 + 48'd20; snp_data = 32'd77;
    @(negedge clk); snp_valid = 0;
    chk(sig_valid && sig_buf == 8'd5 && sig_ptr == 10'd77, "cpoll signal");
    wait (a_left == 0 && b_left == 0);
    repeat (2000) @(posedge clk);
    repeat (200) @(posedge clk);
    chk(seen == 600 && exp_q[0].size() == 0 && exp_q[1].size() == 0, $sformatf("%0d of 600 requests seen", seen));
    chk(rsp_q.size() == 0, "all responses delivered");
    chk(stat_tlb_miss == 32'(misses), $sformatf("TLB misses %0d expected %0d", stat_tlb_miss, misses));
    chk(contested > 20 && alternations == contested - 1,
        $sformatf("round robin: %0d contested, %0d alternations", contested, alternations));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
