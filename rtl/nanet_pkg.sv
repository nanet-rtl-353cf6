// nanet_pkg - types and constants shared by the NaNet-1 receive datapath.
//
// The datapath moves UDP payload from a Gigabit Ethernet MAC into GPU (or
// host) memory: the UDP offloader yields 32-bit payload words, the NaNet
// controller wraps them into 128-bit APEnet+ packets, the router multiplexes
// the I/O channels and the Network Interface TX block writes the packets to
// memory with PCIe DMA writes.
//
// What follows the paper: the 32-bit offloader output, the 128-bit APEnet+
// word, four I/O channels (one GbE plus three APElink), a profiling footer of
// up to four cycle-counter values.  Everything about field layout (header,
// footer, byte order) is this design's own choice, since the APEnet+ packet
// format is not given.
package nanet_pkg;

  localparam int unsigned PAY_W   = 32;    // UDP offloader output width
  localparam int unsigned APE_W   = 128;   // APEnet+ word width
  localparam int unsigned APE_B   = APE_W / 8;
  localparam int unsigned ADDR_W  = 64;    // PCIe / GPU virtual address width
  localparam int unsigned TS_W    = 32;    // profiling cycle counter width
  localparam logic [7:0]  HDR_MAGIC = 8'hA5;

  // Sideband of one UDP datagram, valid with the first payload word.
  typedef struct packed {
    logic [15:0]     len;     // UDP payload bytes (UDP length - 8)
    logic [15:0]     sport;   // UDP source port
    logic [15:0]     dport;   // UDP destination port
    logic [31:0]     src_ip;  // IPv4 source address
    logic [TS_W-1:0] t_rx;    // cycle count when the frame entered the offloader
  } udp_meta_t;

  // APEnet+ packet header: the first 128-bit word of every packet.
  typedef struct packed {
    logic [7:0]  magic;     // HDR_MAGIC
    logic [1:0]  channel;   // I/O channel that produced the packet (0 = GbE)
    logic        prof;      // last payload word is the profiling footer
    logic [4:0]  rsvd;
    logic [15:0] length;    // payload bytes, footer excluded
    logic [15:0] dport;
    logic [15:0] sport;
    logic [31:0] src_ip;
    logic [31:0] seq;       // per-channel packet sequence number
  } ape_hdr_t;

  // One beat of an APEnet+ packet stream (valid/ready are separate wires).
  typedef struct packed {
    logic [APE_W-1:0] data;
    logic             sop;
    logic             eop;
  } ape_beat_t;

  // Profiling footer, one 128-bit word: four cycle-counter values.
  typedef struct packed {
    logic [TS_W-1:0] t_dma;    // first DMA write beat of the packet accepted
    logic [TS_W-1:0] t_addr;   // destination address generated
    logic [TS_W-1:0] t_pay;    // first payload word left the UDP offloader
    logic [TS_W-1:0] t_rx;     // frame start entered the UDP offloader
  } prof_footer_t;

  // Receive-buffer completion event, reported to the host.
  typedef struct packed {
    logic [15:0] buf_idx;   // index of the completed buffer in the CLOP
    logic [31:0] bytes;     // bytes written into it
  } clop_evt_t;

  // Answer of the CLOP address generator to one packet.
  typedef struct packed {
    logic [ADDR_W-1:0] vaddr;     // destination virtual address of the packet
    logic              drop;      // no buffer can hold the packet
    logic              prev_done; // the previous buffer was closed to make room
    clop_evt_t         prev_evt;
    logic              this_done; // this packet fills its buffer
    clop_evt_t         this_evt;
  } clop_resp_t;

  // Bytes a packet occupies in the receive buffer: payload rounded up to
  // whole 128-bit words, plus one word for the profiling footer.
  function automatic logic [31:0] pkt_bytes(input logic [15:0] len, input logic prof);
    logic [31:0] words;
    words = ({16'd0, len} + 32'(APE_B - 1)) / APE_B + (prof ? 32'd1 : 32'd0);
    return words * APE_B;
  endfunction

  // Reverse the byte order of a 32-bit word (network order to memory order).
  function automatic logic [31:0] bswap32(input logic [31:0] w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

endpackage
