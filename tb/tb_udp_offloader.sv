// tb_udp_offloader - self-checking test of the UDP offloader.
//
// Sends a mix of frames through the offloader: valid UDP datagrams of random
// length (1..1472 bytes) with and without IP options, frames it must drop
// (other EtherType, TCP, IP fragments) and a frame cut short of its UDP
// length.  Input valid and output ready are randomly withheld.  Every payload
// word and the sideband are compared with what the frame builder put in,
// and the drop counter with the number of bad frames.  With no stalls, the
// first payload word must leave one cycle after the frame word holding payload
// bytes 2-3 was taken, and a 1168-byte payload (292 words) must stream out at
// one word per cycle.
module tb_udp_offloader;
  import nanet_pkg::*;
  import tb_eth_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] now;
  logic        rx_valid, rx_ready, rx_sop, rx_eop;
  logic [31:0] rx_data;
  logic        out_valid, out_ready, out_sop, out_eop;
  logic [31:0] out_data;
  udp_meta_t   out_meta;
  logic [31:0] drop_cnt, pkt_cnt;

  udp_offloader dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always_ff @(posedge clk) now <= rst_n ? now + 1 : 0;
  initial now = 0;

  // expected datagrams
  typedef struct { bytes_t pl; frame_opt_t o; int true_len; } exp_t;
  exp_t exp_q[$];
  int   n_bad = 0;
  bit   stall_in = 1, stall_out = 1;
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- driver ----
  task automatic send(bytes_t pl, frame_opt_t o, int cut_words);
    words_t w;
    w = to_words(frame_bytes(pl, o));
    if (cut_words > 0) w = w[0:w.size()-1-cut_words];
    foreach (w[i]) begin
      @(negedge clk);
      while (stall_in && ($urandom % 4 == 0)) begin
        rx_valid = 0;
        @(negedge clk);
      end
      rx_valid = 1; rx_data = w[i]; rx_sop = (i == 0); rx_eop = (i == w.size() - 1);
      while (!rx_ready) @(negedge clk);
      @(posedge clk);   // word taken at this edge
    end
    @(negedge clk);
    rx_valid = 0;
  endtask

  // cycle at which frame word 11 (payload bytes 2..3) is taken
  int in_idx = 0, t_word11 = -1;
  always @(posedge clk) if (rx_valid && rx_ready) begin
    in_idx = rx_sop ? 1 : in_idx + 1;
    if (in_idx == 12) t_word11 = cyc;
  end

  // ---- monitor ----
  int npkts = 0;
  bytes_t got;
  int first_cycle, last_cycle;
  always @(posedge clk) begin
    out_ready <= stall_out ? ($urandom % 3 != 0) : 1'b1;
    if (out_valid && out_ready) begin
      if (out_sop) begin
        got.delete();
        first_cycle = cyc;
      end
      for (int k = 0; k < 4; k++) got.push_back(out_data[31-8*k -: 8]);
      if (out_eop) begin
        exp_t e;
        last_cycle = cyc;
        if (exp_q.size() == 0) check(0, "unexpected datagram");
        else begin
          e = exp_q.pop_front();
          check(out_meta.len == 16'(e.pl.size()), $sformatf("len %0d exp %0d", out_meta.len, e.pl.size()));
          check(out_meta.sport == e.o.sport && out_meta.dport == e.o.dport, "ports");
          check(out_meta.src_ip == e.o.src_ip, "src ip");
          check(got.size() == 4 * ((e.pl.size() + 3) / 4), $sformatf("word count %0d for len %0d", got.size(), e.pl.size()));
          for (int i = 0; i < got.size(); i++) begin
            byte unsigned x;
            x = (i < e.true_len) ? e.pl[i] : 8'h00;
            if (got[i] != x) begin
              check(0, $sformatf("pkt %0d byte %0d got %02x exp %02x", npkts, i, got[i], x));
              break;
            end
          end
          checks++;
        end
        npkts++;
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame_opt_t o;
    bytes_t pl;
    rx_valid = 0; rx_sop = 0; rx_eop = 0; rx_data = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- latency and rate, no stalls ----
    stall_in = 0; stall_out = 0;
    o = default_opt();
    pl = rand_payload(1168);
    exp_q.push_back('{pl, o, 1168});
    begin
      send(pl, o, 0);
      wait (npkts == 1);
      check(first_cycle == t_word11 + 1, $sformatf("first word latency: at %0d, word 11 taken at %0d", first_cycle, t_word11));
      check(last_cycle - first_cycle == 291, $sformatf("1168 B payload took %0d cycles, expected 291", last_cycle - first_cycle));
    end

    // ---- random traffic with stalls ----
    stall_in = 1; stall_out = 1;
    for (int n = 0; n < 60; n++) begin
      int len, kind;
      o = default_opt();
      len = 1 + $urandom % ((n % 4 == 0) ? 1472 : 80);
      kind = $urandom % 10;
      o.sport = 16'($urandom); o.dport = 16'($urandom); o.src_ip = $urandom;
      pl = rand_payload(len);
      if (kind == 0) begin o.ethertype = 16'h86DD; n_bad++; end
      else if (kind == 1) begin o.proto = 8'd6; n_bad++; end
      else if (kind == 2) begin o.more_frag = 1; n_bad++; end
      else begin
        if (kind == 3) o.ihl = 5 + $urandom % 11;
        exp_q.push_back('{pl, o, len});
      end
      send(pl, o, 0);
    end
    // truncated frame: UDP length claims 40 more bytes than present
    o = default_opt();
    pl = rand_payload(100);
    o.udp_len_adj = 40;
    begin
      bytes_t full;
      full = pl;
      for (int i = 0; i < 40; i++) full.push_back(8'h00);
      exp_q.push_back('{full, o, 100});
    end
    send(pl, o, 0);
    // tiny payload
    o = default_opt();
    pl = rand_payload(2);
    exp_q.push_back('{pl, o, 2});
    send(pl, o, 0);

    repeat (200) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d datagrams never came out", exp_q.size()));
    check(drop_cnt == 32'(n_bad), $sformatf("drop_cnt %0d expected %0d", drop_cnt, n_bad));
    check(pkt_cnt == 32'(npkts), "pkt_cnt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
