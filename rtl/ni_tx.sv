// ni_tx - Network Interface block that writes incoming packets to memory.
//
// Takes APEnet+ packets from the router and writes their payload into the
// receive buffers with PCIe memory writes (RDMA: the host is not involved per
// packet).  For each packet it
//   1. reads the header and asks the CLOP address generator where the payload
//      goes (a virtual address inside the current receive buffer),
//   2. cuts the payload into bursts that do not cross a MAX_BURST-byte
//      boundary (the largest PCIe write; pages are multiples of it, so no
//      burst crosses a page either), translates each burst's start address
//      with the V2P table, and
//   3. streams the 128-bit words to the PCIe core as one write burst each,
//      start address on dma_addr, first word flagged dma_sop, last dma_eop.
// The header itself is not written.  If the packet carries a profiling
// footer, its last word gets the two remaining cycle-counter values: when the
// destination address was obtained (t_addr) and when the first payload word
// was accepted by the PCIe core (t_dma).
//
// Buffer-complete events from the address generator are passed on (evt_*):
// a buffer closed to make room is reported as soon as the answer arrives;
// a buffer filled by this packet is reported after the packet's last word was
// accepted, so the host never sees a buffer before its data is on its way.
// A packet with no room in the ring (resp.drop) or an untranslated address
// (V2P miss) is discarded and counted.
//
// The data path is cut-through: dma_data is the incoming word itself (only
// the footer's two upper fields are replaced), so most of dma_data is wired
// straight from in_beat, and the low four bits of dma_addr are always zero
// because every burst starts on a 16-byte word.
//
// Timing: header word, 1 cycle request, 1 cycle answer, then per burst
// 1 cycle lookup + 1 cycle answer, then one word per cycle while dma_ready.
//
// From the paper: the function (packet injection/processing logic with
// hardware support for RDMA towards CPU and GPU memory, fed by the router and
// driving the PCIe core), inherited from APEnet+, and the Tx block as the
// third profiled stage.  Its insides are not given; this is a plain in-order
// design.  Own choices: burst rule, event ordering, discard policy.
module ni_tx
  import nanet_pkg::*;
#(
  parameter int unsigned MAX_BURST = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TS_W-1:0]   now,
  // packets from the router
  input  logic              in_valid,
  output logic              in_ready,
  input  ape_beat_t         in_beat,
  // CLOP address generator
  output logic              req_valid,
  output logic [31:0]       req_bytes,
  input  logic              resp_valid,
  input  clop_resp_t        resp,
  // V2P translation
  output logic              lk_valid,
  output logic [ADDR_W-1:0] lk_vaddr,
  input  logic              res_valid,
  input  logic              res_hit,
  input  logic [ADDR_W-1:0] res_paddr,
  // write requests to the PCIe core
  output logic              dma_valid,
  input  logic              dma_ready,
  output logic [ADDR_W-1:0] dma_addr,
  output logic [APE_W-1:0]  dma_data,
  output logic              dma_sop,
  output logic              dma_eop,
  // buffer-complete events
  output logic              evt_valid,
  output clop_evt_t         evt,
  // statistics
  output logic [31:0]       pkt_cnt,
  output logic [31:0]       drop_cnt,
  output logic [31:0]       miss_cnt
);

  localparam int unsigned BB = $clog2(MAX_BURST);

  typedef enum logic [2:0] {S_HDR, S_REQ, S_WRESP, S_LOOK, S_WXL, S_DATA, S_SKIP} state_t;
  state_t state;

  logic              prof, hdr_eop;
  logic [31:0]       bytes, left;      // packet footprint, bytes still to write
  logic [ADDR_W-1:0] va, pa;
  logic [BB-4:0]     beats;            // beats left in the burst
  logic              first_beat, pkt_first;
  logic              this_done;
  clop_evt_t         this_evt;
  logic [TS_W-1:0]   t_addr, t_dma;

  ape_hdr_t hdr;
  assign hdr = ape_hdr_t'(in_beat.data);

  // bytes up to the next burst boundary
  logic [31:0] to_bound, burst_bytes;
  always_comb begin
    to_bound    = MAX_BURST - 32'(va[BB-1:0]);
    burst_bytes = (left < to_bound) ? left : to_bound;
  end

  assign req_valid = (state == S_REQ);
  assign req_bytes = bytes;
  assign lk_valid  = (state == S_LOOK);
  assign lk_vaddr  = va;

  assign dma_valid = (state == S_DATA) && in_valid;
  assign dma_addr  = pa;
  assign dma_sop   = first_beat;
  assign dma_eop   = (beats == 1) || in_beat.eop;
  always_comb begin
    dma_data = in_beat.data;
    if (prof && in_beat.eop) begin
      dma_data[127:96] = pkt_first ? now : t_dma;
      dma_data[95:64]  = t_addr;
    end
  end

  always_comb begin
    unique case (state)
      S_HDR, S_SKIP: in_ready = 1'b1;
      S_DATA:        in_ready = dma_ready;
      default:       in_ready = 1'b0;
    endcase
  end

  wire in_fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HDR; prof <= 1'b0; hdr_eop <= 1'b0; bytes <= '0; left <= '0;
      va <= '0; pa <= '0; beats <= '0; first_beat <= 1'b0;
      pkt_first <= 1'b0; this_done <= 1'b0; this_evt <= '0; t_addr <= '0; t_dma <= '0;
      evt_valid <= 1'b0; evt <= '0; pkt_cnt <= '0; drop_cnt <= '0; miss_cnt <= '0;
    end else begin
      evt_valid <= 1'b0;
      unique case (state)
        S_HDR: if (in_fire && in_beat.sop) begin
          prof    <= hdr.prof;
          hdr_eop <= in_beat.eop;
          bytes   <= pkt_bytes(hdr.length, hdr.prof);
          state   <= S_REQ;
        end
        S_REQ: state <= S_WRESP;
        S_WRESP: if (resp_valid) begin
          if (resp.drop) begin
            drop_cnt <= drop_cnt + 1;
            state    <= hdr_eop ? S_HDR : S_SKIP;
          end else begin
            t_addr    <= now;
            va        <= resp.vaddr;
            left      <= bytes;
            this_done <= resp.this_done;
            this_evt  <= resp.this_evt;
            pkt_first <= 1'b1;
            evt_valid <= resp.prev_done;
            evt       <= resp.prev_evt;
            state     <= S_LOOK;
          end
        end
        S_LOOK: state <= S_WXL;
        S_WXL: if (res_valid) begin
          if (!res_hit) begin
            miss_cnt <= miss_cnt + 1;
            state    <= S_SKIP;
          end else begin
            pa         <= res_paddr;
            beats      <= (BB-3)'(burst_bytes >> 4);
            first_beat <= 1'b1;
            state      <= S_DATA;
          end
        end
        S_DATA: if (in_fire) begin
          first_beat <= 1'b0;
          pkt_first  <= 1'b0;
          if (pkt_first) t_dma <= now;
          beats <= beats - 1'b1;
          left  <= left - APE_B;
          va    <= va + ADDR_W'(APE_B);
          if (in_beat.eop || left <= APE_B) begin
            pkt_cnt   <= pkt_cnt + 1;
            evt_valid <= this_done;
            evt       <= this_evt;
            state     <= in_beat.eop ? S_HDR : S_SKIP;
          end else if (beats == 1) begin
            state <= S_LOOK;
          end
        end
        S_SKIP: if (in_fire && in_beat.eop) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end

endmodule
