// tb_tph_tagger: registers a few DRAM and NVM regions, then sends random DMA
// write headers with addresses inside DRAM regions, inside NVM regions, at
// region edges and outside all regions. One cycle later each header must come
// out unchanged except bit 16 of DW0, which must be set only for a DRAM
// target while the knob is on. The knob is switched off for a stretch (every
// bit must then be clear), and one region is re-registered from DRAM to NVM.
module tb_tph_tagger;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic knob_en, reg_we, reg_valid, reg_dram, in_valid, out_valid;
  logic [2:0] reg_idx;
  logic [63:0] reg_base, reg_len, in_addr;
  logic [127:0] in_hdr, out_hdr;
  logic [31:0] stat_tph_set, stat_tph_clr;

  tph_tagger dut (.*);

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference region table
  bit          m_valid [8];
  bit          m_dram  [8];
  logic [63:0] m_base  [8];
  logic [63:0] m_len   [8];

  task automatic set_region(input int i, input bit v, input bit d, input logic [63:0] b, input logic [63:0] l);
    @(negedge clk);
    reg_we = 1; reg_idx = 3'(i); reg_valid = v; reg_dram = d; reg_base = b; reg_len = l;
    m_valid[i] = v; m_dram[i] = d; m_base[i] = b; m_len[i] = l;
    @(negedge clk); reg_we = 0;
  endtask

  function automatic bit ref_tph(input logic [63:0] a);
    for (int i = 0; i < 8; i++)
      if (m_valid[i] && m_dram[i] && a >= m_base[i] && a < m_base[i] + m_len[i]) return knob_en;
    return 0;
  endfunction

  int n_set = 0, n_clr = 0;

  task automatic send(input logic [63:0] a);
    logic [127:0] h; bit e;
    h = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk); in_valid = 1; in_hdr = h; in_addr = a; e = ref_tph(a);
    @(negedge clk); in_valid = 0;
    h[16] = e;
    chk(out_valid && out_hdr == h, $sformatf("addr %h: tph %0d expected %0d", a, out_hdr[16], e));
    if (e) n_set++; else n_clr++;
  endtask

  function automatic logic [63:0] pick_addr();
    int i = $urandom_range(0, 7);
    unique case ($urandom_range(0, 3))
      0: return m_base[i];
      1: return m_base[i] + m_len[i] - 1;
      2: return m_base[i] + m_len[i];
      default: return {$urandom, $urandom};
    endcase
  endfunction

  initial begin
    knob_en = 1; reg_we = 0; reg_idx = 0; reg_valid = 0; reg_dram = 0; reg_base = 0; reg_len = 0;
    in_valid = 0; in_hdr = 0; in_addr = 0;
    for (int i = 0; i < 8; i++) begin m_valid[i] = 0; m_dram[i] = 0; m_base[i] = 0; m_len[i] = 0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 6; i++)
      set_region(i, 1, i % 2 == 0, 64'h1_0000_0000 * (i + 1), 64'(32'h100_0000 * (i + 1)));
    repeat (400) send(pick_addr());
    knob_en = 0;
    repeat (100) send(pick_addr());
    knob_en = 1;
    set_region(2, 1, 0, m_base[2], m_len[2]);
    repeat (400) send(pick_addr());
    chk(stat_tph_set == 32'(n_set) && stat_tph_clr == 32'(n_clr),
        $sformatf("counters %0d/%0d expected %0d/%0d", stat_tph_set, stat_tph_clr, n_set, n_clr));
    chk(n_set > 50 && n_clr > 50, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
