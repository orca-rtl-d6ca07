// tb_slab_alloc: checks that the slab allocator hands out consecutive 64-byte
// slots from the registered pool, reports exhaustion exactly when the pool is
// used up, and restarts on clear.
module tb_slab_alloc;
  import orca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, alloc, exhausted;
  logic [ADDR_W-1:0] base, bytes, addr;

  slab_alloc dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; alloc = 0; base = 48'h10_0000; bytes = 48'd640;   // 10 slots
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 10; i++) begin
      chk(!exhausted, $sformatf("not exhausted at %0d", i));
      chk(addr == base + 48'(64 * i), $sformatf("slot %0d addr %h", i, addr));
      alloc = 1; @(posedge clk); #1; alloc = 0;
    end
    chk(exhausted, "exhausted after 10");
    alloc = 1; @(posedge clk); #1; alloc = 0;
    chk(addr == base + 48'd640 && exhausted, "no allocation past the pool");
    clear = 1; @(posedge clk); #1; clear = 0;
    chk(addr == base && !exhausted, "clear restarts");
    // hold without alloc
    repeat (3) @(posedge clk); #1;
    chk(addr == base, "no change without alloc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
