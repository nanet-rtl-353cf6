// clop_addr_gen - destination address generation inside a circular list of
// persistent receive buffers (CLOP).
//
// The host registers a ring of receive buffers in GPU or host memory (their
// virtual base addresses and sizes) and the NIC fills them in turn, packet
// after packet, with no further host involvement.  For every packet this
// block returns the virtual address where its payload goes and advances the
// write offset.  When a packet does not fit in what is left of the current
// buffer, that buffer is closed and the packet goes to the start of the next;
// when a packet fills its buffer exactly, the buffer is closed after it.
// Each close is reported as an event (buffer index, bytes written), which the
// host uses to hand the buffer to the application, e.g. to start a GPU kernel.
// Buffers are reused in a circle; the host is expected to consume a buffer
// before the ring comes round to it again (there is no flow control).
//
// Interface: registration through cfg_* (cfg_sel 0: virtual base of buffer
// cfg_idx, 1: its size in bytes, 2: number of buffers in the ring, which also
// restarts filling at buffer 0, offset 0; 0 buffers disarms the ring and every
// packet is dropped).  Sizes should be multiples of 16 bytes.  A request
// (req_valid with req_bytes, the packet's footprint) is answered in the next
// cycle by resp_valid/resp; one request per cycle can be taken, so
// req_ready is constant 1 and is there only to complete the handshake.
//
// From the paper: the function, which in NaNet-1 runs as software on the
// embedded Nios II microcontroller; the paper names the variability this adds
// (Fig. 5) and calls for dedicated logic, which this block is.  Own choices:
// the ring size, the close rules, register layout and the event format.
module clop_addr_gen
  import nanet_pkg::*;
#(
  parameter int unsigned MAX_BUFS = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // registration
  input  logic                        cfg_we,
  input  logic [1:0]                  cfg_sel,
  input  logic [$clog2(MAX_BUFS)-1:0] cfg_idx,
  input  logic [ADDR_W-1:0]           cfg_wdata,
  // per-packet request / response
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic [31:0]                 req_bytes,
  output logic                        resp_valid,
  output clop_resp_t                  resp,
  // state, for the host
  output logic [$clog2(MAX_BUFS)-1:0] cur_buf,
  output logic [31:0]                 cur_off
);

  localparam int unsigned IW = $clog2(MAX_BUFS);

  logic [ADDR_W-1:0] vbase [MAX_BUFS];
  logic [31:0]       bsize [MAX_BUFS];
  logic [IW:0]       nbufs;

  assign req_ready = 1'b1;

  function automatic logic [IW-1:0] next_buf(input logic [IW-1:0] b, input logic [IW:0] n);
    return (({1'b0, b} + 1'b1) >= n) ? '0 : b + 1'b1;
  endfunction

  // placement of the requested packet
  logic          sw;          // packet goes to the next buffer
  logic [IW-1:0] b;
  logic [31:0]   o, o2;
  logic          drop;
  always_comb begin
    sw   = (cur_off != 0) && (cur_off + req_bytes > bsize[cur_buf]);
    b    = sw ? next_buf(cur_buf, nbufs) : cur_buf;
    o    = sw ? 32'd0 : cur_off;
    o2   = o + req_bytes;
    drop = (nbufs == 0) || (req_bytes > bsize[b]) || (req_bytes == 0);
  end

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == 2'd0) vbase[cfg_idx] <= cfg_wdata;
    if (cfg_we && cfg_sel == 2'd1) bsize[cfg_idx] <= cfg_wdata[31:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbufs <= '0; cur_buf <= '0; cur_off <= '0; resp_valid <= 1'b0; resp <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (cfg_we && cfg_sel == 2'd2) begin
        nbufs   <= (cfg_wdata > ADDR_W'(MAX_BUFS)) ? (IW+1)'(MAX_BUFS) : cfg_wdata[IW:0];
        cur_buf <= '0;
        cur_off <= '0;
      end else if (req_valid) begin
        resp_valid     <= 1'b1;
        resp           <= '0;
        resp.drop      <= drop;
        if (!drop) begin
          resp.vaddr     <= vbase[b] + ADDR_W'(o);
          resp.prev_done <= sw;
          resp.prev_evt  <= '{buf_idx: 16'(cur_buf), bytes: cur_off};
          resp.this_done <= (o2 >= bsize[b]);
          resp.this_evt  <= '{buf_idx: 16'(b), bytes: o2};
          if (o2 >= bsize[b]) begin
            cur_buf <= next_buf(b, nbufs);
            cur_off <= '0;
          end else begin
            cur_buf <= b;
            cur_off <= o2;
          end
        end
      end
    end
  end

endmodule
