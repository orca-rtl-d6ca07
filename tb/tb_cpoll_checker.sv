// tb_cpoll_checker: sends coherence signals inside, around and outside the
// registered region in both layouts and checks the buffer index and pointer
// the checker reports against the address arithmetic of the two layouts.
module tb_cpoll_checker;
  import orca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ptr_mode, snp_valid, sig_valid;
  logic [ADDR_W-1:0] region_base, region_bytes, snp_addr;
  logic [31:0] snp_data;
  logic [BUF_ID_W-1:0] sig_buf;
  logic [RING_W-1:0] sig_ptr;

  cpoll_checker #(.NUM_BUFS(16)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic snoop(input logic [ADDR_W-1:0] a, input logic [31:0] d,
                       input bit exp_v, input int exp_b, input int exp_p);
    snp_valid = 1; snp_addr = a; snp_data = d;
    @(posedge clk); #1; snp_valid = 0;
    checks++;
    if (sig_valid != exp_v || (exp_v && (sig_buf != BUF_ID_W'(exp_b) || sig_ptr != RING_W'(exp_p)))) begin
      failures++;
      $display("FAIL a=%h v=%0d/%0d b=%0d/%0d p=%0d/%0d", a, sig_valid, exp_v, sig_buf, exp_b, sig_ptr, exp_p);
    end
  endtask

  initial begin
    snp_valid = 0; snp_addr = 0; snp_data = 0;
    ptr_mode = 1; region_base = 48'h4000_0000; region_bytes = 48'd64;  // 16 x 4 B
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // pointer mode
    for (int i = 0; i < 200; i++) begin
      automatic int b = $urandom_range(0, 15); automatic int p = $urandom_range(0, 1023);
      snoop(region_base + 48'(4 * b), 32'(p), 1, b, p);
    end
    snoop(region_base - 48'd4, 32'd5, 0, 0, 0);            // below
    snoop(region_base + 48'd64, 32'd5, 0, 0, 0);           // just past
    snoop(48'h0, 32'd5, 0, 0, 0);
    // no signal without snp_valid
    @(posedge clk); #1; checks++; if (sig_valid) begin failures++; $display("FAIL idle"); end
    // direct mode: 16 rings x 1024 x 64 B
    ptr_mode = 0; region_base = 48'h8000_0000; region_bytes = 48'(16 * 1024 * 64);
    for (int i = 0; i < 200; i++) begin
      automatic int b = $urandom_range(0, 15); automatic int e = $urandom_range(0, 1023);
      snoop(region_base + 48'(b * 65536 + e * 64 + $urandom_range(0, 63)), 32'h0, 1, b, (e + 1) % 1024);
    end
    snoop(region_base + 48'(16 * 65536), 32'd0, 0, 0, 0);
    // region larger than NUM_BUFS buffers: index 16 dropped
    region_bytes = 48'(32 * 65536);
    snoop(region_base + 48'(16 * 65536), 32'd0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
