// v2p_xlate - virtual to physical address translation for the DMA writes.
//
// Receive buffers are known to the NIC by the virtual addresses the
// application sees; a PCIe write needs the physical (bus) address.  The host
// driver pins each buffer and writes one entry per page into this table:
// virtual page number -> physical page number.  The table is direct mapped:
// entry (vpn mod ENTRIES) holds the rest of the vpn as a tag, so the pages of
// the registered buffers must not collide on an index (with 64 KiB pages and
// 256 entries, any 16 MiB of contiguous virtual space fits).  A lookup that
// finds no valid matching entry reports a miss.
//
// Interface: cfg_we writes the entry for cfg_vpn (cfg_valid 0 removes it).
// A lookup (lk_valid, lk_vaddr) is answered in the next cycle on res_valid,
// res_hit, res_paddr (physical page joined to the page offset); one lookup
// per cycle.  The table is a plain array read synchronously, so it maps onto
// an FPGA block RAM; the valid bits are kept apart in flip-flops so that
// reset clears them.
//
// From the paper: the function, done by the Nios II firmware in NaNet-1,
// which the paper proposes to move into dedicated logic.  Own choices: the
// page size (64 KiB, the GPU page size of GPUDirect RDMA), table size and
// organisation.
module v2p_xlate
  import nanet_pkg::*;
#(
  parameter int unsigned PAGE_BITS = 16,
  parameter int unsigned ENTRIES   = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  logic                        cfg_valid,
  input  logic [ADDR_W-PAGE_BITS-1:0] cfg_vpn,
  input  logic [ADDR_W-PAGE_BITS-1:0] cfg_ppn,
  input  logic                        lk_valid,
  input  logic [ADDR_W-1:0]           lk_vaddr,
  output logic                        res_valid,
  output logic                        res_hit,
  output logic [ADDR_W-1:0]           res_paddr
);

  localparam int unsigned IW  = $clog2(ENTRIES);
  localparam int unsigned VPW = ADDR_W - PAGE_BITS;
  localparam int unsigned TW  = VPW - IW;

  typedef struct packed {
    logic [TW-1:0]  tag;
    logic [VPW-1:0] ppn;
  } entry_t;

  entry_t             table_q [ENTRIES];
  logic [ENTRIES-1:0] valid_q;

  wire [VPW-1:0] lk_vpn = lk_vaddr[ADDR_W-1:PAGE_BITS];

  entry_t              rd;
  logic                rd_valid;
  logic [TW-1:0]       rd_tag_want;
  logic [PAGE_BITS-1:0] rd_off;

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_vpn[IW-1:0]] <= '{tag: cfg_vpn[VPW-1:IW], ppn: cfg_ppn};
    if (lk_valid) begin
      rd          <= table_q[lk_vpn[IW-1:0]];
      rd_tag_want <= lk_vpn[VPW-1:IW];
      rd_off      <= lk_vaddr[PAGE_BITS-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0; res_valid <= 1'b0; rd_valid <= 1'b0;
    end else begin
      if (cfg_we) valid_q[cfg_vpn[IW-1:0]] <= cfg_valid;
      res_valid <= lk_valid;
      if (lk_valid) rd_valid <= valid_q[lk_vpn[IW-1:0]];
    end
  end

  assign res_hit   = rd_valid && (rd.tag == rd_tag_want);
  assign res_paddr = {rd.ppn, rd_off};

endmodule
