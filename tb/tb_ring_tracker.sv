// tb_ring_tracker: feeds tail pointers for several rings, including wrap-around
// past 1023, repeated (coalesced) jumps and duplicates, and checks each
// notification's start index and count against a per-ring reference tail,
// with random backpressure from the consumer.
module tb_ring_tracker;
  import orca_pkg::*;
  localparam int NB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [BUF_ID_W-1:0] in_buf;
  logic [RING_W-1:0] in_ptr;
  notif_t out;

  ring_tracker #(.NUM_BUFS(NB)) dut (.*);

  int ref_tail [NB];
  notif_t expq [$];
  int total_in [NB], total_out [NB];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    notif_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected notif"); end
    else begin
      e = expq.pop_front();
      if (out != e) begin
        failures++; $display("FAIL notif buf=%0d start=%0d count=%0d exp %0d %0d %0d",
                             out.buf_id, out.start, out.count, e.buf_id, e.start, e.count);
      end
      total_out[out.buf_id] += int'(out.count);
    end
  end

  initial begin
    in_valid = 0; in_buf = 0; in_ptr = 0; out_ready = 1;
    for (int i = 0; i < NB; i++) begin ref_tail[i] = 0; total_in[i] = 0; total_out[i] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int b, step, np;
      b = $urandom_range(0, NB - 1);
      step = (t % 10 == 0) ? 0 : $urandom_range(1, (t % 3 == 0) ? 300 : 8);
      np = (ref_tail[b] + step) % 1024;
      in_valid = 1; in_buf = BUF_ID_W'(b); in_ptr = RING_W'(np);
      out_ready = ($urandom_range(0, 3) != 0);
      begin
        bit acc;
        do begin
          @(negedge clk); acc = in_ready;
          @(posedge clk);
          if (!acc) begin #1; out_ready = 1; end
        end while (!acc);
      end
      if (step != 0) begin
        notif_t e;
        e.buf_id = BUF_ID_W'(b); e.start = RING_W'(ref_tail[b]); e.count = (RING_W+1)'(step);
        expq.push_back(e);
        total_in[b] += step;
        ref_tail[b] = np;
      end
      #1;
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(posedge clk);
    for (int i = 0; i < NB; i++) begin
      checks++;
      if (total_in[i] != total_out[i]) begin failures++; $display("FAIL total ring %0d", i); end
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d notifs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
