// nanet_top - NaNet-1 receive datapath, from the GbE MAC to PCIe DMA writes.
//
// A UDP stream arriving on the Gigabit Ethernet port is put, payload only,
// straight into a ring of receive buffers in GPU (or host) memory, with no
// intermediate copy and no CPU work per packet:
//
//   MAC rx --> udp_offloader --> nanet_ctrl --+
//   APElink 1..3 (ports) ---------------------+--> apenet_router --> ni_tx --> PCIe writes
//                                                                  |   |
//                                          clop_addr_gen <---------+   +--> v2p_xlate
//
// udp_offloader strips the Ethernet/IP/UDP headers (32-bit words),
// nanet_ctrl packs the payload into 128-bit APEnet+ packets, the router
// merges them with the APElink channels, and ni_tx writes each packet to the
// address chosen by clop_addr_gen and translated by v2p_xlate, reporting each
// filled buffer on evt_*.  prof_timer is the cycle counter whose values are
// stamped into the optional profiling footer.
//
// Outside this module (vendor parts, brought out as ports): the Ethernet MAC
// (mac_*), the PCIe x8 Gen2 core (dma_* write requests), the APElink channels
// (ape_*), and the host's register access (cfg_*).
//
// Register map (cfg_we, cfg_addr, cfg_wdata, one write per cycle):
//   0x0000          bit 0 profiling footer on, bit 1 cycle counter runs,
//                   bit 2 (write 1) clears the cycle counter
//   0x0001          number of buffers in the ring (restarts it at buffer 0)
//   0x1000 + 2*i    virtual base address of buffer i
//   0x1001 + 2*i    size of buffer i in bytes (a multiple of 16)
//   0x2000          V2P entry: [47:0] virtual page, [95:48] physical page,
//                   [96] valid (64 KiB pages)
//
// One clock for everything.  At 200 MHz the 32-bit payload path carries
// 6.4 Gbit/s; the MAC's own clock crossing is in the MAC.  From the paper:
// the block chain of Fig. 3 for NaNet-1, the widths (32/128 bits), four I/O
// channels.  Own choices: everything about registers, formats, ring and
// translation organisation, as described in each block.
module nanet_top
  import nanet_pkg::*;
#(
  parameter int unsigned N_APELINK   = 3,
  parameter int unsigned MAX_BUFS    = 32,
  parameter int unsigned PAGE_BITS   = 16,
  parameter int unsigned V2P_ENTRIES = 256,
  parameter int unsigned MAX_BURST   = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Ethernet MAC receive stream
  input  logic                        mac_valid,
  output logic                        mac_ready,
  input  logic [31:0]                 mac_data,
  input  logic                        mac_sop,
  input  logic                        mac_eop,
  // APElink channels, packets towards the host
  input  logic      [N_APELINK-1:0]   ape_valid,
  output logic      [N_APELINK-1:0]   ape_ready,
  input  ape_beat_t [N_APELINK-1:0]   ape_beat,
  // write requests to the PCIe core
  output logic                        dma_valid,
  input  logic                        dma_ready,
  output logic [ADDR_W-1:0]           dma_addr,
  output logic [APE_W-1:0]            dma_data,
  output logic                        dma_sop,
  output logic                        dma_eop,
  // receive buffer completed
  output logic                        evt_valid,
  output clop_evt_t                   evt,
  // register writes from the host
  input  logic                        cfg_we,
  input  logic [15:0]                 cfg_addr,
  input  logic [127:0]                cfg_wdata,
  // statistics
  output logic [31:0]                 udp_pkt_cnt,
  output logic [31:0]                 udp_drop_cnt,
  output logic [31:0]                 ni_pkt_cnt,
  output logic [31:0]                 ni_drop_cnt,
  output logic [31:0]                 ni_miss_cnt,
  output logic [TS_W-1:0]             cycle_count,
  output logic [$clog2(MAX_BUFS)-1:0] ring_buf,    // buffer being filled
  output logic [31:0]                 ring_off     // bytes already in it
);

  localparam int unsigned NP  = N_APELINK + 1;
  localparam int unsigned VPW = ADDR_W - PAGE_BITS;
  localparam int unsigned BW  = $clog2(MAX_BUFS);

  // ---- registers ----
  logic prof_en, tmr_en, tmr_clr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prof_en <= 1'b0; tmr_en <= 1'b0; tmr_clr <= 1'b0;
    end else begin
      tmr_clr <= 1'b0;
      if (cfg_we && cfg_addr == 16'h0000) begin
        prof_en <= cfg_wdata[0];
        tmr_en  <= cfg_wdata[1];
        tmr_clr <= cfg_wdata[2];
      end
    end
  end

  logic          clop_we;
  logic [1:0]    clop_sel;
  logic [BW-1:0] clop_idx;
  always_comb begin
    clop_we  = 1'b0;
    clop_sel = 2'd2;
    clop_idx = '0;
    if (cfg_we && cfg_addr == 16'h0001) clop_we = 1'b1;
    if (cfg_we && cfg_addr[15:12] == 4'h1) begin
      clop_we  = 1'b1;
      clop_sel = {1'b0, cfg_addr[0]};
      clop_idx = BW'(cfg_addr[11:1]);
    end
  end

  wire v2p_we = cfg_we && (cfg_addr == 16'h2000);

  // ---- profiling counter ----
  prof_timer #(.W(TS_W)) u_timer (
    .clk, .rst_n, .en(tmr_en), .clr(tmr_clr), .count(cycle_count));

  // ---- GbE channel: UDP offloader and NaNet controller ----
  logic             pay_valid, pay_ready, pay_sop, pay_eop;
  logic [PAY_W-1:0] pay_data;
  udp_meta_t        pay_meta;

  udp_offloader u_udp (
    .clk, .rst_n, .now(cycle_count),
    .rx_valid(mac_valid), .rx_ready(mac_ready), .rx_data(mac_data),
    .rx_sop(mac_sop), .rx_eop(mac_eop),
    .out_valid(pay_valid), .out_ready(pay_ready), .out_data(pay_data),
    .out_sop(pay_sop), .out_eop(pay_eop), .out_meta(pay_meta),
    .drop_cnt(udp_drop_cnt), .pkt_cnt(udp_pkt_cnt));

  logic      [NP-1:0] rt_valid, rt_ready;
  ape_beat_t [NP-1:0] rt_beat;

  nanet_ctrl #(.CHANNEL(2'd0)) u_ctrl (
    .clk, .rst_n, .now(cycle_count), .prof_en,
    .in_valid(pay_valid), .in_ready(pay_ready), .in_data(pay_data),
    .in_sop(pay_sop), .in_eop(pay_eop), .in_meta(pay_meta),
    .out_valid(rt_valid[0]), .out_ready(rt_ready[0]), .out_beat(rt_beat[0]));

  // ---- APElink channels enter the router as ports 1..N ----
  assign rt_valid[NP-1:1] = ape_valid;
  assign rt_beat[NP-1:1]  = ape_beat;
  assign ape_ready        = rt_ready[NP-1:1];

  // ---- router ----
  logic      ni_valid, ni_ready;
  ape_beat_t ni_beat;
  logic [$clog2(NP)-1:0] ni_port;

  apenet_router #(.N_PORTS(NP)) u_router (
    .clk, .rst_n, .in_valid(rt_valid), .in_ready(rt_ready), .in_beat(rt_beat),
    .out_valid(ni_valid), .out_ready(ni_ready), .out_beat(ni_beat), .out_port(ni_port));

  // ---- Network Interface ----
  logic              req_valid, resp_valid, lk_valid, res_valid, res_hit;
  logic [31:0]       req_bytes;
  clop_resp_t        resp;
  logic [ADDR_W-1:0] lk_vaddr, res_paddr;

  ni_tx #(.MAX_BURST(MAX_BURST)) u_ni (
    .clk, .rst_n, .now(cycle_count),
    .in_valid(ni_valid), .in_ready(ni_ready), .in_beat(ni_beat),
    .req_valid, .req_bytes, .resp_valid, .resp,
    .lk_valid, .lk_vaddr, .res_valid, .res_hit, .res_paddr,
    .dma_valid, .dma_ready, .dma_addr, .dma_data, .dma_sop, .dma_eop,
    .evt_valid, .evt,
    .pkt_cnt(ni_pkt_cnt), .drop_cnt(ni_drop_cnt), .miss_cnt(ni_miss_cnt));

  clop_addr_gen #(.MAX_BUFS(MAX_BUFS)) u_clop (
    .clk, .rst_n,
    .cfg_we(clop_we), .cfg_sel(clop_sel), .cfg_idx(clop_idx), .cfg_wdata(cfg_wdata[ADDR_W-1:0]),
    .req_valid, .req_ready(), .req_bytes, .resp_valid, .resp,
    .cur_buf(ring_buf), .cur_off(ring_off));

  v2p_xlate #(.PAGE_BITS(PAGE_BITS), .ENTRIES(V2P_ENTRIES)) u_v2p (
    .clk, .rst_n,
    .cfg_we(v2p_we), .cfg_valid(cfg_wdata[96]),
    .cfg_vpn(cfg_wdata[VPW-1:0]), .cfg_ppn(cfg_wdata[48 +: VPW]),
    .lk_valid, .lk_vaddr, .res_valid, .res_hit, .res_paddr);

endmodule
