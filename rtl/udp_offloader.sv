// udp_offloader - extracts the UDP payload from Ethernet frames.
//
// The receive side of the Gigabit Ethernet MAC delivers each frame as a
// stream of 32-bit words, first byte of the frame in bits [31:24], starting at
// the destination MAC address, with the frame check sequence already removed.
// This block walks the Ethernet, IPv4 and UDP headers as they pass, checks
// that the frame is an unfragmented IPv4/UDP datagram, and streams out only
// the UDP payload, again 32 bits per word, so that the CPU never handles the
// protocol.  Frames that are not IPv4/UDP, or are fragments, or carry an
// empty payload, are consumed and dropped (counted in drop_cnt).
//
// Because the payload begins 22 + 4*IHL bytes into the frame, it always sits
// two bytes off a word boundary: each output word is the low half of one input
// word joined to the high half of the next.  The output register adds one
// cycle of latency; the block moves one word per cycle in and out, so at
// 200 MHz it carries 6.4 Gbit/s, the figure the paper gives for its 32-bit
// channel.  Ethernet padding after the payload is discarded.  A frame that
// ends before its UDP length says is completed with zero bytes, so the length
// announced in out_meta always holds.
//
// Interface: Avalon-ST-like sink (rx_*) with ready, valid/ready source
// (out_*).  out_meta is valid with the first payload word (out_sop) and held
// until the next one.  out_eop marks the last word; bytes past out_meta.len in
// that word are zero.  now is the profiling cycle counter; its value at the
// frame's first word is reported as out_meta.t_rx.
//
// From the paper: function (UDP payload extraction from the MAC stream), the
// 32-bit output and its 6.4 Gbit/s rate.  Own choices: the MAC word format,
// the checks applied, dropping rather than forwarding bad frames, zero fill.
module udp_offloader
  import nanet_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TS_W-1:0]   now,
  // from the Ethernet MAC
  input  logic              rx_valid,
  output logic              rx_ready,
  input  logic [31:0]       rx_data,
  input  logic              rx_sop,
  input  logic              rx_eop,
  // UDP payload stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PAY_W-1:0]  out_data,
  output logic              out_sop,
  output logic              out_eop,
  output udp_meta_t         out_meta,
  // statistics
  output logic [31:0]       drop_cnt,
  output logic [31:0]       pkt_cnt
);

  typedef enum logic [2:0] {S_IDLE, S_HDR, S_PAY, S_FLUSH, S_DRAIN} state_t;
  state_t state;

  logic [5:0]  widx;        // index of the input word being received
  logic [3:0]  ihl;
  logic        bad;
  logic [15:0] hold;        // low half of the previous input word
  logic [15:0] left;        // payload bytes not yet emitted
  logic        first;       // next output word is the first of the payload
  logic        in_done;     // the frame's last input word has been taken
  logic [15:0] sport, dport, ulen;
  logic [31:0] src_ip;
  logic [TS_W-1:0] t_rx;
  logic [5:0]  uw;          // word holding the UDP source port (low half)

  assign uw = 6'd3 + 6'(ihl);          // 14 + 4*IHL bytes = word 3+IHL, low half
  wire out_free = !out_valid || out_ready;
  wire rx_fire  = rx_valid && rx_ready;

  always_comb begin
    unique case (state)
      S_IDLE, S_HDR, S_DRAIN: rx_ready = 1'b1;
      S_PAY:                  rx_ready = out_free;
      default:                rx_ready = 1'b0;
    endcase
  end

  // Emit one output word; last when it covers the remaining payload.
  function automatic logic is_last(input logic [15:0] l);
    return l <= 16'd4;
  endfunction

  // Keep the first l bytes of a word (l >= 4 keeps all): clears Ethernet
  // padding that follows the payload in its last word.
  function automatic logic [31:0] keep(input logic [31:0] w, input logic [15:0] l);
    unique case (l)
      16'd1:   return {w[31:24], 24'h0};
      16'd2:   return {w[31:16], 16'h0};
      16'd3:   return {w[31:8], 8'h0};
      default: return w;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; widx <= '0; ihl <= '0; bad <= 1'b0; hold <= '0; left <= '0;
      first <= 1'b0; in_done <= 1'b0; sport <= '0; dport <= '0; ulen <= '0; src_ip <= '0; t_rx <= '0;
      out_valid <= 1'b0; out_data <= '0; out_sop <= 1'b0; out_eop <= 1'b0; out_meta <= '0;
      drop_cnt <= '0; pkt_cnt <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (rx_fire && rx_sop) begin
          t_rx <= now; widx <= 6'd1; bad <= 1'b0; ihl <= 4'd5; in_done <= 1'b0;
          state <= rx_eop ? S_IDLE : S_HDR;
          if (rx_eop) drop_cnt <= drop_cnt + 1;
        end
        S_HDR: if (rx_fire) begin
          widx <= widx + 6'd1;
          // Ethernet type, IP version and header length
          if (widx == 6'd3) begin
            if (rx_data[31:16] != 16'h0800 || rx_data[15:12] != 4'd4 || rx_data[11:8] < 4'd5)
              bad <= 1'b1;
            ihl <= (rx_data[11:8] < 4'd5) ? 4'd5 : rx_data[11:8];
          end
          // more-fragments flag, fragment offset, protocol
          if (widx == 6'd5 && (rx_data[29] || rx_data[28:16] != 13'd0 || rx_data[7:0] != 8'd17))
            bad <= 1'b1;
          if (widx == 6'd6) src_ip[31:16] <= rx_data[15:0];
          if (widx == 6'd7) src_ip[15:0]  <= rx_data[31:16];
          if (widx == uw)   sport <= rx_data[15:0];
          if (widx == uw + 6'd1) begin
            dport <= rx_data[31:16];
            ulen  <= rx_data[15:0];
          end
          if (rx_eop) begin
            drop_cnt <= drop_cnt + 1;
            state    <= S_IDLE;
          end else if (widx == uw + 6'd2) begin
            // word holds the UDP checksum and the first two payload bytes
            hold <= rx_data[15:0];
            if (bad || ulen <= 16'd8) begin
              drop_cnt <= drop_cnt + 1;
              state    <= S_DRAIN;
            end else begin
              left  <= ulen - 16'd8;
              first <= 1'b1;
              state <= (ulen - 16'd8 <= 16'd2) ? S_FLUSH : S_PAY;
            end
          end
        end
        S_PAY: if (rx_fire) begin
          out_valid <= 1'b1;
          out_data  <= keep({hold, rx_data[31:16]}, left);
          out_sop   <= first;
          if (first) out_meta <= '{len: ulen - 16'd8, sport: sport, dport: dport,
                                   src_ip: src_ip, t_rx: t_rx};
          first <= 1'b0;
          hold  <= rx_data[15:0];
          left  <= left - 16'd4;
          out_eop <= is_last(left);
          if (rx_eop) in_done <= 1'b1;
          if (is_last(left)) begin
            pkt_cnt <= pkt_cnt + 1;
            state   <= rx_eop ? S_IDLE : S_DRAIN;
          end else if (rx_eop) begin
            state <= S_FLUSH;   // frame shorter than its UDP length
          end else if (left <= 16'd6) begin
            state <= S_FLUSH;   // the rest is all in hold
          end
        end
        S_FLUSH: if (out_free) begin
          // last word(s) come from hold and zero fill, no input consumed
          out_valid <= 1'b1;
          out_data  <= keep({hold, 16'h0}, left);
          out_sop   <= first;
          if (first) out_meta <= '{len: ulen - 16'd8, sport: sport, dport: dport,
                                   src_ip: src_ip, t_rx: t_rx};
          first <= 1'b0;
          hold  <= 16'h0;
          left  <= left - 16'd4;
          out_eop <= is_last(left);
          if (is_last(left)) begin
            pkt_cnt <= pkt_cnt + 1;
            state   <= in_done ? S_IDLE : S_DRAIN;
          end
        end
        S_DRAIN: if (rx_fire && rx_eop) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
