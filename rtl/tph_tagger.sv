// tph_tagger: per-packet TPH control for NVM-aware DDIO (an RNIC-side knob).
//
// With DDIO switched off globally, a DMA write from a device still lands in
// the CPU's last-level cache if the TLP Processing Hints (TPH) bit of its
// PCIe header is set, and goes to memory if it is clear. Writes aimed at DRAM
// benefit from landing in the cache; writes aimed at NVM should go to memory,
// because lines evicted from the cache reach NVM in random order and waste its
// 256-byte access granularity. So the device keeps a table of registered
// memory regions, each marked DRAM or NVM when it is registered, and for every
// outgoing write header sets the TPH bit only if the target address lies in a
// DRAM region. That is the paper's proposal; the table size, the lookup
// (parallel compare of all regions) and treating an unregistered address like
// NVM (TPH clear) are this design's choices. The paper places TPH at "the
// 16th bit in the PCIe header"; here that is bit 16 of header DW0, which is
// where the PCIe TH bit sits.
// Interface: regions are written with reg_we/reg_idx; headers enter with
// in_valid and leave one cycle later on out_valid with bit 16 of DW0
// (in_hdr[31:0]) rewritten and everything else unchanged. With knob_en low the
// bit is forced to 0, as in today's devices.
module tph_tagger #(
  parameter int unsigned REGIONS = 8,
  parameter int unsigned TPH_BIT = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        knob_en,
  input  logic                        reg_we,
  input  logic [$clog2(REGIONS)-1:0]  reg_idx,
  input  logic                        reg_valid,
  input  logic                        reg_dram,
  input  logic [63:0]                 reg_base,
  input  logic [63:0]                 reg_len,
  input  logic                        in_valid,
  input  logic [127:0]                in_hdr,
  input  logic [63:0]                 in_addr,
  output logic                        out_valid,
  output logic [127:0]                out_hdr,
  output logic [31:0]                 stat_tph_set,
  output logic [31:0]                 stat_tph_clr
);

  logic        r_valid [REGIONS];
  logic        r_dram  [REGIONS];
  logic [63:0] r_base  [REGIONS];
  logic [63:0] r_len   [REGIONS];
  logic        to_dram;

  always_comb begin
    to_dram = 1'b0;
    for (int i = 0; i < REGIONS; i++) begin
      if (r_valid[i] && r_dram[i] && in_addr >= r_base[i] && (in_addr - r_base[i]) < r_len[i])
        to_dram = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < REGIONS; i++) begin
        r_valid[i] <= 1'b0; r_dram[i] <= 1'b0; r_base[i] <= '0; r_len[i] <= '0;
      end
      out_valid    <= 1'b0;
      out_hdr      <= '0;
      stat_tph_set <= '0;
      stat_tph_clr <= '0;
    end else begin
      if (reg_we) begin
        r_valid[reg_idx] <= reg_valid;
        r_dram[reg_idx]  <= reg_dram;
        r_base[reg_idx]  <= reg_base;
        r_len[reg_idx]   <= reg_len;
      end
      out_valid <= in_valid;
      if (in_valid) begin
        out_hdr          <= in_hdr;
        out_hdr[TPH_BIT] <= knob_en && to_dram;
        if (knob_en && to_dram) stat_tph_set <= stat_tph_set + 1;
        else                    stat_tph_clr <= stat_tph_clr + 1;
      end
    end
  end

endmodule
