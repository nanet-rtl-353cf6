// tb_nanet_top - end-to-end test of the NaNet-1 receive datapath.
//
// The top runs with all parameters at their defaults.  Frames go in on the
// MAC port, APEnet+ packets on the three APElink ports, and a memory model on
// the PCIe side stores every DMA write by physical address.  The host side
// (register writes, page table, receive ring) is played by the test, which
// also keeps its own model of the ring to know where each packet must land.
// Every payload carries its packet number in its first four bytes, so the
// checker can recognise packets in whatever order the router passes them;
// each packet is checked in memory as soon as its last word is written.
//
// Phases:
//   1. The NaNet-1 scope measurement: 32 datagrams of 1168 bytes (16 events
//      each) into a ring of four buffers of 8 x 1168 bytes: four buffer-full
//      events, data checked byte by byte in memory.  The cycles from the
//      first frame word to the first DMA word are reported.
//   2. Profiling footer on, APElink traffic on all three APElink ports at the
//      same time as UDP traffic, random PCIe stalls (which back-pressure the
//      MAC), a non-UDP frame, buffers that straddle a 64 KiB page and packet
//      sizes that force buffers to close early for lack of room; a last
//      APElink packet fills the current buffer exactly.  Events are compared
//      in order at the end of the phase.
//   3. A ring whose buffer has no page-table entry: translation miss.
//   4. A ring of buffers too small for the datagram: packet refused.
// Each mechanism is counted and must have happened at least once.
module tb_nanet_top;
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

  // ---------------- host: registers, page table, ring model ----------------
  logic [47:0] ppn_of [logic [47:0]];   // page table the test registered
  logic [63:0] m_base [32];
  int          m_size [32];
  int          m_n = 0, m_cur = 0, m_off = 0;
  clop_evt_t   evt_q[$];               // events the test expects, in order
  clop_evt_t   got_evt_q[$];           // events the hardware reported

  // events are compared at the end of each phase: a buffer closed for room
  // is reported before the packet's first write reaches the checker
  task automatic check_events(string phase);
    check(got_evt_q.size() == evt_q.size(), $sformatf("%s: %0d events, expected %0d",
                                                       phase, got_evt_q.size(), evt_q.size()));
    while (got_evt_q.size() > 0 && evt_q.size() > 0) begin
      clop_evt_t g, e;
      g = got_evt_q.pop_front();
      e = evt_q.pop_front();
      check(g == e, $sformatf("%s: event buf %0d bytes %0d, expected buf %0d bytes %0d",
                              phase, g.buf_idx, g.bytes, e.buf_idx, e.bytes));
    end
    got_evt_q.delete();
    evt_q.delete();
  endtask

  task automatic wr(logic [15:0] a, logic [127:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic map_page(logic [47:0] vpn, logic [47:0] ppn);
    ppn_of[vpn] = ppn;
    wr(16'h2000, {31'd0, 1'b1, ppn, vpn});
  endtask

  task automatic set_ring(int n, logic [63:0] base[], int size[]);
    for (int i = 0; i < n; i++) begin
      wr(16'h1000 + 16'(2 * i), 128'(base[i]));
      wr(16'h1001 + 16'(2 * i), 128'(size[i]));
      m_base[i] = base[i];
      m_size[i] = size[i];
    end
    wr(16'h0001, 128'(n));
    m_n = n; m_cur = 0; m_off = 0;
  endtask

  function automatic logic [63:0] xlate(logic [63:0] va);
    return {ppn_of[va[63:16]], va[15:0]};
  endfunction

  // where the ring puts a packet of the given footprint (same rules the
  // hardware documents: close for room, close when full)
  int n_room = 0, n_full = 0;
  function automatic logic [63:0] place(int bytes);
    int b, o;
    bit sw;
    sw = (m_off != 0) && (m_off + bytes > m_size[m_cur]);
    b  = sw ? (m_cur + 1) % m_n : m_cur;
    o  = sw ? 0 : m_off;
    if (sw) begin
      evt_q.push_back('{buf_idx: 16'(m_cur), bytes: 32'(m_off)});
      n_room++;
    end
    if (o + bytes >= m_size[b]) begin
      evt_q.push_back('{buf_idx: 16'(b), bytes: 32'(o + bytes)});
      n_full++;
      m_cur = (b + 1) % m_n; m_off = 0;
    end else begin
      m_cur = b; m_off = o + bytes;
    end
    return m_base[b] + 64'(o);
  endfunction

  // ---------------- packets ----------------
  typedef struct { bytes_t pl; bit prof; int t_mac; } pkt_t;
  pkt_t pk [int];
  int   next_id = 1;

  function automatic bytes_t tagged_payload(int id, int len);
    bytes_t p;
    p = rand_payload(len);
    for (int k = 0; k < 4; k++) p[k] = 8'(id >> (8 * k));
    return p;
  endfunction

  // MAC side
  bit mac_gaps = 0;
  int n_mac_stall = 0;
  always @(posedge clk) if (mac_valid && !mac_ready) n_mac_stall++;

  task automatic mac_send(bytes_t f, int id);
    words_t w;
    w = to_words(f);
    foreach (w[i]) begin
      @(negedge clk);
      while (mac_gaps && $urandom % 4 == 0) begin
        mac_valid = 0;
        @(negedge clk);
      end
      mac_valid = 1; mac_data = w[i]; mac_sop = (i == 0); mac_eop = (i == w.size() - 1);
      if (i == 0 && id > 0) pk[id].t_mac = cyc;
      while (!mac_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    mac_valid = 0;
  endtask

  task automatic udp_send(int len, bit prof);
    int id;
    frame_opt_t o;
    id = next_id++;
    pk[id] = '{tagged_payload(id, len), prof, 0};
    o = default_opt();
    mac_send(frame_bytes(pk[id].pl, o), id);
  endtask

  // APElink side
  task automatic ape_send(int port, int len);
    int id, nw;
    ape_hdr_t h;
    id = next_id++;
    pk[id] = '{tagged_payload(id, len), 0, 0};
    h = '{magic: HDR_MAGIC, channel: 2'(port + 1), prof: 0, rsvd: 0, length: 16'(len),
          dport: 0, sport: 0, src_ip: 0, seq: 32'(id)};
    nw = (len + 15) / 16;
    for (int j = -1; j < nw; j++) begin
      logic [127:0] d;
      d = '0;
      if (j < 0) d = h;
      else for (int k = 0; k < 16; k++) if (16 * j + k < len) d[8*k +: 8] = pk[id].pl[16*j+k];
      @(negedge clk);
      while ($urandom % 3 == 0) begin
        ape_valid[port] = 0;
        @(negedge clk);
      end
      ape_valid[port] = 1;
      ape_beat[port]  = '{data: d, sop: (j < 0), eop: (j == nw - 1)};
      while (!ape_ready[port]) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    ape_valid[port] = 0;
  endtask

  // ---------------- PCIe side: memory model and checker ----------------
  logic [7:0] mem [logic [63:0]];
  bit   dma_stalls = 0;
  int   cur_id = -1, cur_w, cur_nw, n_done = 0, n_footer = 0, n_cross = 0, n_ape_done = 0;
  int   first_lat = -1;
  logic [63:0] cur_va, burst_pa;
  int   burst_i;
  logic [63:0] mem_va [int];           // virtual address each packet was put at

  always @(posedge clk) begin
    dma_ready <= dma_stalls ? ($urandom % 4 != 0) : 1'b1;
    if (evt_valid && rst_n) got_evt_q.push_back(evt);
    if (dma_valid && dma_ready) begin
      if (cur_id < 0) begin
        // a new packet: identify it by its tag
        cur_id = int'(dma_data[31:0]);
        check(pk.exists(cur_id), $sformatf("unknown packet tag %0d", cur_id));
        cur_w  = 0;
        cur_nw = (pk[cur_id].pl.size() + 15) / 16 + (pk[cur_id].prof ? 1 : 0);
        cur_va = place(cur_nw * 16);
        mem_va[cur_id] = cur_va;
        if (cur_va[63:16] != (cur_va + 64'(cur_nw * 16 - 1)) >> 16) n_cross++;
        if (first_lat < 0) first_lat = cyc - pk[cur_id].t_mac;
        check(dma_sop, "packet starts a burst");
      end
      if (dma_sop) begin
        burst_pa = dma_addr;
        burst_i  = 0;
        check(dma_addr == xlate(cur_va + 64'(16 * cur_w)),
              $sformatf("pkt %0d word %0d: burst at %h, expected %h", cur_id, cur_w, dma_addr,
                        xlate(cur_va + 64'(16 * cur_w))));
      end
      for (int k = 0; k < 16; k++) mem[burst_pa + 64'(16 * burst_i + k)] = dma_data[8*k +: 8];
      if (pk[cur_id].prof && cur_w == cur_nw - 1) begin
        prof_footer_t f;
        f = prof_footer_t'(dma_data);
        check(f.t_rx != 0 && f.t_rx <= f.t_pay && f.t_pay <= f.t_addr && f.t_addr <= f.t_dma,
              $sformatf("footer stamps out of order: %0d %0d %0d %0d", f.t_rx, f.t_pay, f.t_addr, f.t_dma));
        check(f.t_dma - f.t_rx < 32'd4000, "footer path latency bounded");
        n_footer++;
      end
      burst_i++;
      cur_w++;
      if (cur_w == cur_nw) begin
        check(dma_eop, "packet ends a burst");
        check_packet(cur_id);
        cur_id = -1;
        n_done++;
      end
    end
  end

  // compare memory with the payload of a packet just written (later packets
  // may overwrite it once the ring wraps)
  task automatic check_packet(int id);
    bit ok;
    ok = 1;
    for (int j = 0; j < pk[id].pl.size(); j++) begin
      logic [63:0] pa;
      pa = xlate(mem_va[id] + 64'(j));
      if (!mem.exists(pa) || mem[pa] != pk[id].pl[j]) begin ok = 0; break; end
    end
    check(ok, $sformatf("payload of packet %0d in memory", id));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] base[];
    int size[];
    mac_valid = 0; mac_sop = 0; mac_eop = 0; mac_data = 0;
    ape_valid = 0; ape_beat = '0; dma_ready = 1;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // page table: 16 pages of 64 KiB from 0x7f00_0000_0000, scattered physically
    for (int p = 0; p < 16; p++) map_page(48'h7f00_0000 + 48'(p), 48'h0000_0030_0000 + 48'(p * 37 % 16) * 48'h11);
    wr(16'h0000, 128'h2);      // cycle counter on, no footer

    // ---- phase 1: 32 datagrams of 1168 B into 4 buffers of 8 x 1168 B ----
    base = new[4]; size = new[4];
    for (int i = 0; i < 4; i++) begin base[i] = 64'h7f00_0000_0000 + 64'(i) * 64'h4000; size[i] = 8 * 1168; end
    set_ring(4, base, size);
    for (int n = 0; n < 32; n++) begin
      udp_send(1168, 0);
      repeat (20) @(negedge clk);   // inter-frame gap
    end
    wait (n_done == 32);
    repeat (10) @(posedge clk);
    check(n_full == 4 && n_room == 0, $sformatf("phase 1: %0d full, %0d room events", n_full, n_room));
    check_events("phase 1");
    $display("phase 1: first frame word to first DMA word: %0d cycles", first_lat);
    check(first_lat > 0 && first_lat < 400, "phase 1 latency");

    // ---- phase 2: footer, all channels, stalls, bad frame, page crossing ----
    wr(16'h0000, 128'h3);
    base = new[3]; size = new[3];
    base[0] = 64'h7f00_0001_e000; size[0] = 16 * 700;   // straddles a page
    base[1] = 64'h7f00_0003_f800; size[1] = 16 * 300;   // straddles a page
    base[2] = 64'h7f00_0005_0000; size[2] = 16 * 250;
    set_ring(3, base, size);
    dma_stalls = 1;
    mac_gaps = 1;
    fork
      for (int n = 0; n < 24; n++) begin
        if (n == 5) begin
          frame_opt_t o;
          o = default_opt();
          o.proto = 8'd6;
          mac_send(frame_bytes(rand_payload(100), o), 0);
        end
        udp_send(4 + $urandom % 1469, 1);
      end
      for (int n = 0; n < 10; n++) ape_send(0, 4 + $urandom % 600);
      for (int n = 0; n < 10; n++) ape_send(1, 4 + $urandom % 600);
      for (int n = 0; n < 10; n++) ape_send(2, 4 + $urandom % 600);
    join
    wait (n_done == 32 + 24 + 30);
    // one more packet sized to fill the current buffer exactly
    ape_send(0, size[m_cur] - m_off);
    wait (n_done == 32 + 24 + 31);
    repeat (20) @(posedge clk);
    dma_stalls = 0; mac_gaps = 0;
    check_events("phase 2");
    check(udp_drop_cnt == 1, "non-UDP frame dropped");

    // ---- phase 3: buffer without page-table entry ----
    base = new[1]; size = new[1];
    base[0] = 64'h0000_1234_0000; size[0] = 65536;
    set_ring(1, base, size);
    udp_send(200, 0);
    repeat (400) @(posedge clk);
    check(ni_miss_cnt == 1, "translation miss counted");

    // ---- phase 4: buffer too small ----
    base[0] = 64'h7f00_0000_0000; size[0] = 256;
    set_ring(1, base, size);
    udp_send(1168, 0);
    repeat (600) @(posedge clk);
    check(ni_drop_cnt == 1, "oversized packet refused");
    check(n_done == 87, $sformatf("%0d packets written, expected 87", n_done));
    check(ni_pkt_cnt == 32'(n_done), "ni_pkt_cnt");
    check(udp_pkt_cnt == 32 + 24 + 2, "udp_pkt_cnt");

    // ---- mechanisms ----
    $display("mechanisms: full-buffer events %0d, close-for-room events %0d, footers %0d,",
             n_full, n_room, n_footer);
    $display("  page-crossing packets %0d, MAC stall cycles %0d, APElink packets %0d,",
             n_cross, n_mac_stall, 30);
    $display("  non-UDP drops %0d, translation misses %0d, refused packets %0d",
             udp_drop_cnt, ni_miss_cnt, ni_drop_cnt);
    check(n_full > 4, "buffer-full close happened");
    check(n_room > 0, "close-for-room happened");
    check(n_footer == 24, "profiling footers");
    check(n_cross > 0, "page crossing happened");
    check(n_mac_stall > 0, "back-pressure reached the MAC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
