// tb_cpoll_queues: pushes random cpoll signals and pops random queues while a
// reference model (a bounded queue per buffer that overwrites its newest
// entry when full) predicts every head pointer, 'nonempty' and coalesce pulse.
module tb_cpoll_queues;
  import orca_pkg::*;
  localparam int NB = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, coalesced;
  logic [BUF_ID_W-1:0] in_buf;
  logic [RING_W-1:0] in_ptr;
  logic [NB-1:0] pop, nonempty;
  logic [RING_W-1:0] head_ptr [NB];

  cpoll_queues #(.NUM_BUFS(NB), .DEPTH(D)) dut (.*);

  int q [NB][$];
  int n_coal = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_buf = 0; in_ptr = 0; pop = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      bit exp_coal; int b, p;
      // compare state
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (nonempty[i] != (q[i].size() != 0) || (q[i].size() != 0 && head_ptr[i] != RING_W'(q[i][0]))) begin
          failures++; $display("FAIL t=%0d q%0d ne=%0d head=%0d", t, i, nonempty[i], head_ptr[i]);
        end
      end
      // stimulus: bursts on few queues make them fill up
      in_valid = ($urandom_range(0, 3) != 0);
      b = (t < 1500) ? $urandom_range(0, 2) : $urandom_range(0, NB - 1);
      p = $urandom_range(0, 1023);
      in_buf = BUF_ID_W'(b); in_ptr = RING_W'(p);
      pop = '0;
      if ($urandom_range(0, 2) == 0) pop[$urandom_range(0, NB - 1)] = 1'b1;
      if (t % 50 == 0) pop = '1;
      // model
      exp_coal = 0;
      for (int i = 0; i < NB; i++) begin
        automatic bit popq = pop[i] && q[i].size() != 0;
        automatic bit push = in_valid && b == i;
        if (popq) void'(q[i].pop_front());
        if (push) begin
          if (q[i].size() == D) begin q[i][D - 1] = p; exp_coal = 1; end
          else q[i].push_back(p);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (coalesced != exp_coal) begin failures++; $display("FAIL coalesce t=%0d", t); end
      if (exp_coal) n_coal++;
    end
    in_valid = 0;
    checks++;
    if (n_coal == 0) begin failures++; $display("FAIL no coalescing exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
