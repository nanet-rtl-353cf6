// tb_nanet_workloads - the receive-buffer workloads of the NaNet-1 evaluation,
// run on the whole datapath with every parameter at its default.
//
// The readout board sends UDP datagrams of 1168 bytes (16 detector events of
// 73 bytes) into a ring of four GPU receive buffers, each sized a whole number
// k of datagrams.  k is swept over 1, 2, 4, 8, 16, 32 and 64 datagrams, that is
// 16 to 1024 events per buffer, which covers both the 1..64-datagram latency
// sweep and the 128..1024-event buffers of the trigger throughput test.  For
// each k, 2k datagrams (at least 8) are sent back to back at the MAC port,
// and the test checks:
//   - one buffer-full event per k datagrams, for the right buffer, holding
//     exactly k x 1168 bytes, and no other event;
//   - every packet's first write at the translated address the ring rules
//     give (buffers span 64 KiB pages that are scattered physically);
//   - the event comes at most 40 cycles after the last MAC word of the
//     datagram that filled the buffer (store-and-forward is not allowed: the
//     datapath must cut through);
//   - the datapath keeps up with the MAC running back to back (one 32-bit
//     word per cycle, at most one mac_ready stall per datagram, for the
//     packet header, which the Ethernet inter-frame gap covers), so its event
//     rate at 200 MHz is
//     well above the 1.7 MEvents/s the trigger system needs and a Gigabit
//     Ethernet link (one 1168-byte datagram every 1974 cycles at 200 MHz,
//     preamble, header, FCS and gap included) cannot fill it.
module tb_nanet_workloads;
  import nanet_pkg::*;
  import tb_eth_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;     // 200 MHz

  logic               mac_valid, mac_ready, mac_sop, mac_eop;
  logic [31:0]        mac_data;
  logic      [2:0]    ape_valid, ape_ready;
  ape_beat_t [2:0]    ape_beat;
  logic               dma_valid, dma_ready, dma_sop, dma_eop;
  logic [63:0]        dma_addr;
  logic [127:0]       dma_data;
  logic               evt_valid;
  clop_evt_t          evt;
  logic               cfg_we;
  logic [15:0]        cfg_addr;
  logic [127:0]       cfg_wdata;
  logic [31:0]        udp_pkt_cnt, udp_drop_cnt, ni_pkt_cnt, ni_drop_cnt, ni_miss_cnt, cycle_count;
  logic [4:0]         ring_buf;
  logic [31:0]        ring_off;

  nanet_top dut (.*);

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

  localparam int PKT    = 1168;      // datagram payload: 16 events of 73 bytes
  localparam int EVENTS = 16;
  localparam int NBUF   = 4;

  // ---------------- host side ----------------
  logic [47:0] ppn_of [logic [47:0]];
  logic [63:0] base [NBUF];
  int          bsize, cur, off;

  task automatic wr(logic [15:0] a, logic [127:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic logic [63:0] xlate(logic [63:0] va);
    return {ppn_of[va[63:16]], va[15:0]};
  endfunction

  // ---------------- PCIe side ----------------
  typedef struct { int buf_idx; int bytes; int cyc; } got_t;
  got_t        got_q[$];
  logic [63:0] exp_va_q[$];
  int          in_pkt = 0, n_wr = 0;

  int words_left = 0;
  always @(posedge clk) begin
    if (evt_valid && rst_n) got_q.push_back('{int'(evt.buf_idx), int'(evt.bytes), cyc});
    if (dma_valid && dma_ready) begin
      if (words_left == 0) begin
        logic [63:0] va;
        check(exp_va_q.size() > 0, "write with no packet due");
        va = exp_va_q.pop_front();
        check(dma_sop && dma_addr == xlate(va),
              $sformatf("packet at %h, expected %h", dma_addr, xlate(va)));
        words_left = (PKT + 15) / 16;
        in_pkt = 1;
      end
      words_left--;
      if (words_left == 0) begin
        check(dma_eop, "last word of a packet ends its burst");
        in_pkt = 0;
        n_wr++;
      end
    end
  end

  int n_stall = 0;
  always @(posedge clk) if (mac_valid && !mac_ready) n_stall++;

  // ---------------- MAC side ----------------
  int last_eop_cyc;
  task automatic send_datagram(int seq);
    bytes_t pl;
    words_t w;
    pl = rand_payload(PKT);
    for (int k = 0; k < 4; k++) pl[k] = 8'(seq >> (8 * k));
    w = to_words(frame_bytes(pl, default_opt()));
    foreach (w[i]) begin
      @(negedge clk);
      mac_valid = 1; mac_data = w[i]; mac_sop = (i == 0); mac_eop = (i == w.size() - 1);
      while (!mac_ready) @(negedge clk);
      @(posedge clk);
      if (i == w.size() - 1) last_eop_cyc = cyc;
    end
    @(negedge clk);
    mac_valid = 0;
  endtask

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ks [7] = '{1, 2, 4, 8, 16, 32, 64};
    int n_events = 0, n_events_exp = 0, n_pkts = 0, worst_lat = 0, t0, t1;
    real cyc_per_pkt, mev_s;
    mac_valid = 0; mac_sop = 0; mac_eop = 0; mac_data = 0;
    ape_valid = 0; ape_beat = '0; dma_ready = 1;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // 4 buffers of up to 64 x 1168 = 74752 bytes: 5 pages each at most; map
    // 24 pages, physically scattered
    for (int p = 0; p < 24; p++) begin
      logic [47:0] vpn, ppn;
      vpn = 48'h0000_0500_0000 + 48'(p);
      ppn = 48'h0000_0009_0000 + 48'((p * 11) % 24) * 48'h3;
      ppn_of[vpn] = ppn;
      wr(16'h2000, {31'd0, 1'b1, ppn, vpn});
    end
    wr(16'h0000, 128'h2);

    t0 = cyc;
    foreach (ks[j]) begin
      int k, n;
      k = ks[j];
      n = (2 * k < 8) ? 8 : 2 * k;
      bsize = k * PKT;
      for (int i = 0; i < NBUF; i++) begin
        // buffers back to back in virtual memory, from an odd 4 KiB offset
        base[i] = 64'h0500_0000_3000 + 64'(i * bsize);
        wr(16'h1000 + 16'(2 * i), 128'(base[i]));
        wr(16'h1001 + 16'(2 * i), 128'(bsize));
      end
      wr(16'h0001, 128'(NBUF));
      cur = 0; off = 0;
      got_q.delete();
      for (int s = 0; s < n; s++) begin
        exp_va_q.push_back(base[cur] + 64'(off));
        send_datagram(s);
        off += PKT;
        if (off == bsize) begin
          int buf_exp;
          buf_exp = cur;
          cur = (cur + 1) % NBUF; off = 0;
          // the event for this buffer must follow closely
          fork
            begin
              int lat;
              wait (got_q.size() > 0);
              lat = got_q[0].cyc - last_eop_cyc;
              check(got_q[0].buf_idx == buf_exp && got_q[0].bytes == bsize,
                    $sformatf("k=%0d: event buf %0d bytes %0d, expected buf %0d bytes %0d",
                              k, got_q[0].buf_idx, got_q[0].bytes, buf_exp, bsize));
              check(lat >= 0 && lat <= 40, $sformatf("k=%0d: event %0d cycles after last MAC word", k, lat));
              if (lat > worst_lat) worst_lat = lat;
              void'(got_q.pop_front());
              n_events++;
            end
            begin
              repeat (400) @(posedge clk);
              check(0, $sformatf("k=%0d: no event for buffer %0d", k, buf_exp));
            end
          join_any
          disable fork;
        end
      end
      n_pkts += n;
      n_events_exp += n / k;
      wait (exp_va_q.size() == 0 && in_pkt == 0);
      repeat (30) @(posedge clk);
      check(got_q.size() == 0, $sformatf("k=%0d: %0d extra events", k, got_q.size()));
      $display("buffers of %0d datagrams (%0d events, %0d bytes): %0d buffers filled",
               k, k * EVENTS, bsize, n / k);
    end
    t1 = cyc;
    repeat (50) @(posedge clk);

    check(n_events == n_events_exp, $sformatf("%0d buffer-full events, expected %0d", n_events, n_events_exp));
    check(n_wr == n_pkts, $sformatf("%0d packets written, expected %0d", n_wr, n_pkts));
    check(udp_pkt_cnt == 32'(n_pkts) && udp_drop_cnt == 0 && ni_drop_cnt == 0 && ni_miss_cnt == 0,
          "counters");
    // the controller spends one cycle on each packet header, which the
    // Ethernet inter-frame gap and preamble (20 bytes, 5 words) cover
    check(n_stall <= n_pkts, $sformatf("MAC stalled for %0d cycles in %0d datagrams", n_stall, n_pkts));
    cyc_per_pkt = real'(t1 - t0) / real'(n_pkts);
    mev_s = real'(EVENTS) / (cyc_per_pkt * 5.0e-9) / 1.0e6;
    $display("%0d datagrams in %0d cycles: %.1f cycles per datagram, %.2f MEvents/s at 200 MHz",
             n_pkts, t1 - t0, cyc_per_pkt, mev_s);
    $display("worst buffer-full event delay after the last MAC word: %0d cycles", worst_lat);
    $display("MAC stall cycles: %0d", n_stall);
    check(cyc_per_pkt < 1974.0, "datapath keeps up with a Gigabit Ethernet link");
    check(mev_s > 1.7, "event rate above 1.7 MEvents/s");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
