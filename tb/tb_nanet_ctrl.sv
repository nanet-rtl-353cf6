// tb_nanet_ctrl - self-checking test of the NaNet controller.
//
// Feeds random datagrams (1..1472 bytes, random sideband) as 32-bit payload
// words in network byte order, with random gaps on the input and random
// back-pressure on the output, and rebuilds each APEnet+ packet from the
// 128-bit output: the header fields (magic, channel, length, ports, source
// address, sequence number, footer flag), the payload bytes in memory order
// with zero fill, and, when profiling is on, the footer's two stamps.  With no
// stalls the last word of a W-word datagram must leave W cycles after the
// header (W + 1 with the footer).
module tb_nanet_ctrl;
  import nanet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] now;
  logic        prof_en;
  logic        in_valid, in_ready, in_sop, in_eop;
  logic [31:0] in_data;
  udp_meta_t   in_meta;
  logic        out_valid, out_ready;
  ape_beat_t   out_beat;

  nanet_ctrl #(.CHANNEL(2'd2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign now = 32'(cyc) + 32'h1000;

  typedef byte unsigned bytes_t[$];
  typedef struct { bytes_t pl; udp_meta_t m; bit prof; int t_sop; } exp_t;
  exp_t exp_q[$];
  bit stall_in = 1, stall_out = 1;

  task automatic send(bytes_t pl, udp_meta_t m);
    int nw;
    nw = (pl.size() + 3) / 4;
    for (int i = 0; i < nw; i++) begin
      logic [31:0] w;
      w = '0;
      for (int k = 0; k < 4; k++) if (4*i + k < pl.size()) w[31-8*k -: 8] = pl[4*i+k];
      @(negedge clk);
      while (stall_in && ($urandom % 4 == 0)) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1; in_data = w; in_sop = (i == 0); in_eop = (i == nw - 1); in_meta = m;
      if (i == 0) exp_q[exp_q.size()-1].t_sop = cyc;   // first offered
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // ---- monitor ----
  int npk = 0, hdr_cyc, seq_exp = 0;
  bytes_t got;
  ape_hdr_t h;
  logic [127:0] last_beat;
  always @(posedge clk) begin
    out_ready <= stall_out ? ($urandom % 3 != 0) : 1'b1;
    if (out_valid && out_ready) begin
      if (out_beat.sop) begin
        h = ape_hdr_t'(out_beat.data);
        hdr_cyc = cyc;
        got.delete();
      end else begin
        for (int k = 0; k < 16; k++) got.push_back(out_beat.data[8*k +: 8]);
        last_beat = out_beat.data;
      end
      if (out_beat.eop) begin
        exp_t e;
        int nb;
        e = exp_q.pop_front();
        check(h.magic == HDR_MAGIC && h.channel == 2'd2, "magic/channel");
        check(h.length == 16'(e.pl.size()), $sformatf("length %0d exp %0d", h.length, e.pl.size()));
        check(h.sport == e.m.sport && h.dport == e.m.dport && h.src_ip == e.m.src_ip, "ports/ip");
        check(h.seq == 32'(seq_exp), $sformatf("seq %0d exp %0d", h.seq, seq_exp));
        check(h.prof == e.prof, "prof flag");
        seq_exp++;
        nb = 16 * ((e.pl.size() + 15) / 16);
        check(got.size() == nb + (e.prof ? 16 : 0), $sformatf("bytes %0d exp %0d", got.size(), nb + (e.prof ? 16 : 0)));
        for (int i = 0; i < nb; i++) begin
          byte unsigned x;
          x = (i < e.pl.size()) ? e.pl[i] : 8'h00;
          if (got[i] != x) begin
            check(0, $sformatf("pkt %0d byte %0d got %02x exp %02x", npk, i, got[i], x));
            break;
          end
        end
        if (e.prof) begin
          prof_footer_t f;
          f = prof_footer_t'(last_beat);
          check(f.t_rx == e.m.t_rx, "footer t_rx");
          // stamped when the header was built: not before the first word was
          // offered, before the header left, exactly one cycle before without stalls
          check(f.t_pay >= 32'(e.t_sop) + 32'h1000 && f.t_pay <= 32'(hdr_cyc) - 1 + 32'h1000,
                $sformatf("footer t_pay %0h, sop offered %0h, header out %0h", f.t_pay, e.t_sop + 'h1000, hdr_cyc + 'h1000));
          if (!stall_in && !stall_out) check(f.t_pay == 32'(hdr_cyc) - 1 + 32'h1000, "t_pay exact");
          check(f.t_addr == 0 && f.t_dma == 0, "footer NI fields empty");
        end
        if (!stall_in && !stall_out)
          check(cyc - hdr_cyc == (e.pl.size() + 3) / 4 + (e.prof ? 1 : 0),
                $sformatf("packet took %0d cycles after header", cyc - hdr_cyc));
        npk++;
      end
    end
  end

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_sop = 0; in_eop = 0; in_data = 0; in_meta = '0; out_ready = 1; prof_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 80; n++) begin
      bytes_t pl;
      udp_meta_t m;
      int len;
      pl.delete();
      stall_in  = (n >= 4);
      stall_out = (n >= 4);
      prof_en = (n % 3 == 1);
      len = (n < 4) ? 1168 - n : 1 + $urandom % ((n % 5 == 0) ? 1472 : 70);
      for (int i = 0; i < len; i++) pl.push_back(8'($urandom));
      m = '{len: 16'(len), sport: 16'($urandom), dport: 16'($urandom), src_ip: $urandom, t_rx: $urandom};
      exp_q.push_back('{pl, m, prof_en, 0});
      send(pl, m);
      wait (exp_q.size() == 0);
    end
    repeat (20) @(posedge clk);
    check(npk == 80, $sformatf("%0d packets out of 80", npk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
