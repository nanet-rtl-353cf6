// nanet_ctrl - the NaNet controller: wraps UDP payload into APEnet+ packets.
//
// Takes the 32-bit payload stream of the UDP offloader and produces an
// APEnet+ packet on a 128-bit stream: one header word (ape_hdr_t) followed by
// the payload, four 32-bit words per 128-bit word.  The header can be sent
// before any payload has arrived because the offloader announces the payload
// length with the first word, so the controller never stores a whole
// datagram: it holds at most one 128-bit word.
//
// Byte order: the offloader delivers network order (first byte in [31:24]);
// the controller swaps each word so that payload byte k ends up in bits
// [8k+7:8k] of its 128-bit word, i.e. at the k-th byte address once written to
// memory.  A last, partial 128-bit word is zero filled.  With prof_en set the
// packet ends with one more word, the profiling footer (prof_footer_t), whose
// t_rx and t_pay fields are filled here; the Network Interface fills the other
// two.
//
// Timing: the header leaves one cycle after the first payload word is
// offered (a cycle in which no payload is taken); after that one payload
// word is taken per cycle and a 128-bit word leaves every fourth cycle.
// A packet of L payload bytes takes 1 + ceil(L/4) cycles at the input.  While
// the output register waits, the input still takes words into the free lanes
// of the packing register, so a downstream pause of up to three cycles costs
// the offloader nothing; a last word taken that way waits in S_LAST until
// the output register is free.
//
// From the paper: the function (encapsulation in the APEnet+ protocol,
// parallelising 32-bit words into 128-bit ones) and the profiling footer of
// up to four cycle counters.  Own choices: header layout, byte order, the
// per-channel sequence number, the footer's place and fields.
module nanet_ctrl
  import nanet_pkg::*;
#(
  parameter logic [1:0] CHANNEL = 2'd0   // I/O channel number put in the header
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TS_W-1:0]  now,
  input  logic             prof_en,
  // payload stream from the UDP offloader
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PAY_W-1:0] in_data,
  input  logic             in_sop,
  input  logic             in_eop,
  input  udp_meta_t        in_meta,
  // APEnet+ packet stream
  output logic             out_valid,
  input  logic             out_ready,
  output ape_beat_t        out_beat
);

  typedef enum logic [1:0] {S_IDLE, S_DATA, S_LAST, S_PROF} state_t;
  state_t state;

  logic [1:0]       lane;
  logic [APE_W-1:0] pack;
  logic             prof;      // prof_en latched for the packet
  logic [31:0]      seq;
  logic [TS_W-1:0]  t_rx, t_pay;

  wire out_free = !out_valid || out_ready;
  // lanes 0..2 only fill the packing register; lane 3 completes a 128-bit
  // word and needs the output register free.  A last word that arrives in
  // lanes 0..2 while the output is busy is parked in S_LAST.
  assign in_ready = (state == S_DATA) && (out_free || lane != 2'd3);

  // the word being completed, with the incoming 32-bit word in its lane
  logic [APE_W-1:0] pack_next;
  always_comb begin
    pack_next = pack;
    pack_next[32*lane +: 32] = bswap32(in_data);
  end

  ape_hdr_t     hdr_w;
  prof_footer_t foot_w;
  always_comb begin
    hdr_w  = '{magic: HDR_MAGIC, channel: CHANNEL, prof: prof_en, rsvd: '0,
               length: in_meta.len, dport: in_meta.dport, sport: in_meta.sport,
               src_ip: in_meta.src_ip, seq: seq};
    foot_w = '{t_dma: '0, t_addr: '0, t_pay: t_pay, t_rx: t_rx};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; lane <= '0; pack <= '0; prof <= 1'b0; seq <= '0;
      t_rx <= '0; t_pay <= '0; out_valid <= 1'b0; out_beat <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && in_sop && out_free) begin
          out_valid <= 1'b1;
          out_beat  <= '{data: hdr_w, sop: 1'b1, eop: 1'b0};
          prof  <= prof_en;
          seq   <= seq + 1;
          t_rx  <= in_meta.t_rx;
          t_pay <= now;
          lane  <= '0;
          pack  <= '0;
          state <= S_DATA;
        end
        S_DATA: if (in_valid && in_ready) begin
          if (in_eop && !out_free) begin
            pack  <= pack_next;
            state <= S_LAST;
          end else if (lane == 2'd3 || in_eop) begin
            out_valid <= 1'b1;
            out_beat  <= '{data: pack_next, sop: 1'b0, eop: in_eop && !prof};
            pack <= '0;
            lane <= '0;
            if (in_eop) state <= prof ? S_PROF : S_IDLE;
          end else begin
            pack <= pack_next;
            lane <= lane + 2'd1;
          end
        end
        S_LAST: if (out_free) begin
          out_valid <= 1'b1;
          out_beat  <= '{data: pack, sop: 1'b0, eop: !prof};
          pack  <= '0;
          lane  <= '0;
          state <= prof ? S_PROF : S_IDLE;
        end
        S_PROF: if (out_free) begin
          out_valid <= 1'b1;
          out_beat  <= '{data: foot_w, sop: 1'b0, eop: 1'b1};
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
