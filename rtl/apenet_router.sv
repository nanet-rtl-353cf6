// apenet_router - multiplexes the I/O channels onto the Network Interface.
//
// NaNet-1 has four I/O channels: the GbE channel (port 0) and three APElink
// channels (ports 1 to 3).  Each delivers whole APEnet+ packets on a 128-bit
// stream.  The router grants one channel at a time, for a whole packet (from
// the word with sop to the word with eop), and passes its words to the
// Network Interface unchanged.  Channels are served round robin: after a
// packet from port i the search for the next packet starts at port i+1, so a
// busy channel cannot starve the others.
//
// Timing: choosing a channel takes one cycle with no word passing; the words
// of the granted packet then pass combinationally (valid, data and ready), one
// per cycle.  out_port tells which channel the current packet came from.
//
// From the paper: a router doing I/O channel multiplexing, inherited from
// APEnet+, and the channel count.  Its insides are not described; this is the
// simplest router that does the job, for the receive direction only (packets
// towards host/GPU memory).
module apenet_router
  import nanet_pkg::*;
#(
  parameter int unsigned N_PORTS = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic      [N_PORTS-1:0]    in_valid,
  output logic      [N_PORTS-1:0]    in_ready,
  input  ape_beat_t [N_PORTS-1:0]    in_beat,
  output logic                       out_valid,
  input  logic                       out_ready,
  output ape_beat_t                  out_beat,
  output logic [$clog2(N_PORTS)-1:0] out_port
);

  localparam int unsigned PW = $clog2(N_PORTS);

  logic          busy;     // a packet is being passed
  logic [PW-1:0] grant;
  logic [PW-1:0] rr;       // first port to look at when idle

  // next port with a packet start waiting, searching from rr
  logic          found;
  logic [PW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int unsigned k = 0; k < N_PORTS; k++) begin
      int unsigned p;
      p = (int'(rr) + k) % N_PORTS;
      if (!found && in_valid[p] && in_beat[p].sop) begin
        found = 1'b1;
        pick  = PW'(p);
      end
    end
  end

  assign out_valid = busy && in_valid[grant];
  assign out_beat  = in_beat[grant];
  assign out_port  = grant;
  always_comb begin
    in_ready = '0;
    in_ready[grant] = busy && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; grant <= '0; rr <= '0;
    end else if (!busy) begin
      if (found) begin
        busy  <= 1'b1;
        grant <= pick;
      end
    end else if (out_valid && out_ready && out_beat.eop) begin
      busy <= 1'b0;
      rr   <= (int'(grant) == N_PORTS - 1) ? '0 : grant + 1'b1;
    end
  end

endmodule
