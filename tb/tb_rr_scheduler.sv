// tb_rr_scheduler: checks round-robin order against a reference pointer,
// that only requesting queues are granted, that no grant happens while
// 'ready' is low, and that every requester is served within N grants.
module tb_rr_scheduler;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req, grant;
  logic ready, valid;
  logic [3:0] grant_idx;

  rr_scheduler #(.N(N)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_prio = 0;
  int wait_cnt [N];

  initial begin
    req = 0; ready = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < N; i++) wait_cnt[i] = 0;
    for (int t = 0; t < 1000; t++) begin
      int exp_idx; bit any;
      req   = N'({$urandom, $urandom});
      if (t % 7 == 0) req = '0;
      if (t < 100) req = 16'hFFFF;
      ready = (t % 5 != 0);
      #1;
      any = 0; exp_idx = 0;
      for (int k = 0; k < N; k++) begin
        automatic int idx = (ref_prio + k) % N;
        if (!any && req[idx]) begin any = 1; exp_idx = idx; end
      end
      checks++;
      if (valid != any || (any && grant_idx != 4'(exp_idx))) begin
        failures++; $display("FAIL t=%0d valid=%0d idx=%0d exp=%0d", t, valid, grant_idx, exp_idx);
      end
      checks++;
      if (grant != ((any && ready) ? (N'(1) << exp_idx) : '0)) begin
        failures++; $display("FAIL grant t=%0d %h", t, grant);
      end
      if (any && ready) ref_prio = (exp_idx + 1) % N;
      // starvation bound for continuously requesting queues
      for (int i = 0; i < N; i++) begin
        if (grant[i] || !req[i]) wait_cnt[i] = 0;
        else if (ready && any) wait_cnt[i]++;
        if (wait_cnt[i] > N) begin failures++; $display("FAIL starvation %0d", i); wait_cnt[i] = 0; end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
