// tb_conf_regs: writes every register of the configuration block with random
// values and checks both the decoded outputs and the read-back port, plus the
// reset values and that writes to unmapped addresses change nothing.
module tb_conf_regs;
  import orca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we; logic [11:0] cfg_addr; logic [63:0] cfg_wdata, cfg_rdata;
  cfg_t cfg;
  logic [ADDR_W-1:0] resp_base [16];
  logic [31:0] rkey [16];
  logic tlb_valid [8]; logic [26:0] tlb_vpn [8]; logic [26:0] tlb_ppn [8];

  conf_regs #(.NUM_BUFS(16), .TLB_ENTRIES(8)) dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic wr(input logic [11:0] a, input logic [63:0] d);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d; @(posedge clk); #1; cfg_we = 0;
  endtask
  logic [63:0] r;
  task automatic rd(input logic [11:0] a);
    cfg_addr = a; #1; r = cfg_rdata;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] v [10];
    logic [63:0] rb [16]; logic [31:0] rk [16];
    logic [26:0] vp [8], pp [8];
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    rd(12'h000); chk(cfg == '0 && r == 0, "reset values");
    for (int i = 0; i < 10; i++) v[i] = {$urandom, $urandom};
    for (int i = 0; i < 10; i++) wr(12'(i), v[i]);
    chk(cfg.enable == v[0][0] && cfg.ptr_mode == v[0][1], "ctrl");
    chk(cfg.cpoll_base == v[1][47:0], "cpoll_base");
    chk(cfg.cpoll_bytes == v[2][47:0], "cpoll_bytes");
    chk(cfg.req_base == v[3][47:0], "req_base");
    chk(cfg.table_base == v[4][47:0], "table_base");
    chk(cfg.bucket_mask == v[5][31:0], "bucket_mask");
    chk(cfg.slab_base == v[6][47:0], "slab_base");
    chk(cfg.slab_bytes == v[7][47:0], "slab_bytes");
    chk(cfg.sq_base == v[8][47:0], "sq_base");
    chk(cfg.db_addr == v[9][47:0], "db_addr");
    rd(12'h005); chk(r == {32'd0, v[5][31:0]}, "readback mask");
    rd(12'h009); chk(r == {16'd0, v[9][47:0]}, "readback db");
    for (int i = 0; i < 16; i++) begin
      rb[i] = {$urandom, $urandom}; rk[i] = $urandom;
      wr(12'h100 + 12'(i), rb[i]); wr(12'h200 + 12'(i), {32'd0, rk[i]});
    end
    for (int i = 0; i < 16; i++) begin
      chk(resp_base[i] == rb[i][47:0], $sformatf("resp_base %0d", i));
      chk(rkey[i] == rk[i], $sformatf("rkey %0d", i));
      rd(12'h100 + 12'(i)); chk(r == {16'd0, rb[i][47:0]}, "readback resp_base");
    end
    for (int i = 0; i < 8; i++) begin
      vp[i] = 27'($urandom); pp[i] = 27'($urandom);
      wr(12'h300 + 12'(2 * i), {1'b1, 36'd0, vp[i]}); wr(12'h301 + 12'(2 * i), {37'd0, pp[i]});
    end
    for (int i = 0; i < 8; i++)
      chk(tlb_valid[i] && tlb_vpn[i] == vp[i] && tlb_ppn[i] == pp[i], $sformatf("tlb %0d", i));
    wr(12'h300, 64'd0);
    chk(!tlb_valid[0], "tlb invalidate");
    wr(12'h0FF, 64'hdead); wr(12'h110, 64'hbeef);
    chk(cfg.db_addr == v[9][47:0] && resp_base[0] == rb[0][47:0], "unmapped writes ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
