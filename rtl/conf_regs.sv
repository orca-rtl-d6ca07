// conf_regs: configuration and management registers of the cc-accelerator.
//
// Host software writes these once, at initialization, through a simple
// 64-bit register port (MMIO from the CPU): the cpoll region it registers for
// snooping, whether that region is the pointer buffer or the request buffers
// themselves, the layout of the request rings, hash table, slab pool and send
// queues, the RNIC doorbell address, and per connection the client's response
// ring base and remote key. It also loads the TLB of the coherence controller.
// Writes take effect on the next clock edge; reads are combinational.
// The paper names this block ("Conf/mgmt Interface & Logic") without
// describing it; the register map below is this design's own.
//
// Word address map (cfg_addr):
//   0x000 ctrl {ptr_mode[1], enable[0]}     0x005 bucket_mask
//   0x001 cpoll_base                         0x006 slab_base
//   0x002 cpoll_bytes                        0x007 slab_bytes
//   0x003 req_base                           0x008 sq_base
//   0x004 table_base                         0x009 db_addr
//   0x100+i resp_base[i]   0x200+i rkey[i]
//   0x300+2i TLB i virtual page {valid[63], vpn[26:0]}, 0x301+2i physical page
module conf_regs
  import orca_pkg::*;
#(
  parameter int unsigned NUM_BUFS    = 16,
  parameter int unsigned TLB_ENTRIES = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [11:0]           cfg_addr,
  input  logic [63:0]           cfg_wdata,
  output logic [63:0]           cfg_rdata,
  output cfg_t                  cfg,
  output logic [ADDR_W-1:0]     resp_base [NUM_BUFS],
  output logic [31:0]           rkey      [NUM_BUFS],
  output logic                  tlb_valid [TLB_ENTRIES],
  output logic [26:0]           tlb_vpn   [TLB_ENTRIES],
  output logic [26:0]           tlb_ppn   [TLB_ENTRIES]
);

  // register indices, cut to the width of the arrays they select in
  localparam int unsigned BW = $clog2(NUM_BUFS);
  localparam int unsigned TW = $clog2(TLB_ENTRIES);
  logic [BW-1:0] bidx;
  logic [TW-1:0] tidx;
  logic          bok, tok;
  assign bidx = cfg_addr[BW-1:0];
  assign tidx = cfg_addr[TW:1];
  assign bok  = (32'(cfg_addr[7:0]) < NUM_BUFS);
  assign tok  = (32'(cfg_addr[7:1]) < TLB_ENTRIES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0;
      for (int i = 0; i < NUM_BUFS; i++) begin
        resp_base[i] <= '0;
        rkey[i]      <= '0;
      end
      for (int i = 0; i < TLB_ENTRIES; i++) begin
        tlb_valid[i] <= 1'b0;
        tlb_vpn[i]   <= '0;
        tlb_ppn[i]   <= '0;
      end
    end else if (cfg_we) begin
      unique case (cfg_addr[11:8])
        4'h0: begin
          unique case (cfg_addr[7:0])
            8'h00: {cfg.ptr_mode, cfg.enable} <= cfg_wdata[1:0];
            8'h01: cfg.cpoll_base  <= cfg_wdata[ADDR_W-1:0];
            8'h02: cfg.cpoll_bytes <= cfg_wdata[ADDR_W-1:0];
            8'h03: cfg.req_base    <= cfg_wdata[ADDR_W-1:0];
            8'h04: cfg.table_base  <= cfg_wdata[ADDR_W-1:0];
            8'h05: cfg.bucket_mask <= cfg_wdata[31:0];
            8'h06: cfg.slab_base   <= cfg_wdata[ADDR_W-1:0];
            8'h07: cfg.slab_bytes  <= cfg_wdata[ADDR_W-1:0];
            8'h08: cfg.sq_base     <= cfg_wdata[ADDR_W-1:0];
            8'h09: cfg.db_addr     <= cfg_wdata[ADDR_W-1:0];
            default: ;
          endcase
        end
        4'h1: if (bok) resp_base[bidx] <= cfg_wdata[ADDR_W-1:0];
        4'h2: if (bok) rkey[bidx] <= cfg_wdata[31:0];
        4'h3: begin
          if (tok) begin
            if (!cfg_addr[0]) begin
              tlb_valid[tidx] <= cfg_wdata[63];
              tlb_vpn[tidx]   <= cfg_wdata[26:0];
            end else begin
              tlb_ppn[tidx]   <= cfg_wdata[26:0];
            end
          end
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    cfg_rdata = '0;
    unique case (cfg_addr[11:8])
      4'h0: begin
        unique case (cfg_addr[7:0])
          8'h00: cfg_rdata = {62'd0, cfg.ptr_mode, cfg.enable};
          8'h01: cfg_rdata = 64'(cfg.cpoll_base);
          8'h02: cfg_rdata = 64'(cfg.cpoll_bytes);
          8'h03: cfg_rdata = 64'(cfg.req_base);
          8'h04: cfg_rdata = 64'(cfg.table_base);
          8'h05: cfg_rdata = 64'(cfg.bucket_mask);
          8'h06: cfg_rdata = 64'(cfg.slab_base);
          8'h07: cfg_rdata = 64'(cfg.slab_bytes);
          8'h08: cfg_rdata = 64'(cfg.sq_base);
          8'h09: cfg_rdata = 64'(cfg.db_addr);
          default: cfg_rdata = '0;
        endcase
      end
      4'h1: if (bok) cfg_rdata = 64'(resp_base[bidx]);
      4'h2: if (bok) cfg_rdata = 64'(rkey[bidx]);
      4'h3: begin
        if (tok) begin
          if (!cfg_addr[0]) cfg_rdata = {tlb_valid[tidx], 36'd0, tlb_vpn[tidx]};
          else              cfg_rdata = {37'd0, tlb_ppn[tidx]};
        end
      end
      default: cfg_rdata = '0;
    endcase
  end

endmodule
