// tb_ni_tx - self-checking test of the Network Interface write block.
//
// The address generator and the translation table are replaced by simple
// models that answer one cycle after each request: the address generator
// hands out planned addresses (some packets are refused, some close buffers),
// the table maps page p to page p ^ 0xABCD and misses on one page.  Packets
// of 1..1472 payload bytes, some with a profiling footer, come in with random
// gaps while the PCIe side stalls at random.  The test checks every DMA word:
// burst start addresses are the translated packet addresses, no burst crosses
// a 256-byte boundary, data arrive in order, refused and untranslated packets
// write nothing, the footer gets the address and DMA stamps, and the events
// come in the right order (a buffer closed for room at once, a buffer filled
// by a packet after its last word).  Without stalls the first write word
// must follow the header by 5 cycles.
module tb_ni_tx;
  import nanet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0]  now;
  logic         in_valid, in_ready;
  ape_beat_t    in_beat;
  logic         req_valid;
  logic [31:0]  req_bytes;
  logic         resp_valid;
  clop_resp_t   resp;
  logic         lk_valid;
  logic [63:0]  lk_vaddr;
  logic         res_valid, res_hit;
  logic [63:0]  res_paddr;
  logic         dma_valid, dma_ready, dma_sop, dma_eop;
  logic [63:0]  dma_addr;
  logic [127:0] dma_data;
  logic         evt_valid;
  clop_evt_t    evt;
  logic [31:0]  pkt_cnt, drop_cnt, miss_cnt;

  ni_tx #(.MAX_BURST(256)) dut (.*);

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
  assign now = 32'(cyc) + 32'h5000;

  localparam logic [47:0] BAD_PAGE = 48'h0000_0777_0001;
  function automatic logic [63:0] xlate(logic [63:0] va);
    return {va[63:16] ^ 48'hABCD, va[15:0]};
  endfunction

  typedef struct {
    int len; bit prof; clop_resp_t r; int id;
  } plan_t;
  plan_t resp_q[$];     // answers the address generator model will give
  plan_t wr_q[$];       // packets whose words must appear on the DMA side
  int    n_drop = 0, n_miss = 0, n_ok = 0;
  bit    gaps = 0, stalls = 0;

  // ---- address generator model ----
  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (req_valid) begin
      plan_t p;
      p = resp_q.pop_front();
      check(req_bytes == pkt_bytes(16'(p.len), p.prof), $sformatf("req_bytes %0d", req_bytes));
      resp_valid <= 1'b1;
      resp       <= p.r;
    end
  end
  // ---- translation model ----
  always @(posedge clk) begin
    res_valid <= lk_valid;
    res_hit   <= lk_vaddr[63:16] != BAD_PAGE;
    res_paddr <= xlate(lk_vaddr);
  end

  // ---- packet source ----
  function automatic logic [127:0] pay_word(int id, int j);
    return {32'(id), 32'(j), 32'h5EED_0000 ^ 32'(id * 131 + j), 32'(j * 7)};
  endfunction

  task automatic send(plan_t p);
    int nw;
    ape_hdr_t h;
    h = '{magic: HDR_MAGIC, channel: 0, prof: p.prof, rsvd: 0, length: 16'(p.len),
          dport: 0, sport: 0, src_ip: 0, seq: 32'(p.id)};
    nw = (p.len + 15) / 16 + (p.prof ? 1 : 0);
    for (int j = -1; j < nw; j++) begin
      @(negedge clk);
      while (gaps && $urandom % 4 == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_beat  = '{data: (j < 0) ? 128'(h) : pay_word(p.id, j), sop: (j < 0), eop: (j == nw - 1)};
      if (j < 0) hdr_cyc = cyc;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // ---- DMA sink and checker ----
  int hdr_cyc;
  int cur = -1, widx, bidx;
  logic [63:0] burst_pa;
  int evt_expect_this = 0, n_evt = 0;
  clop_evt_t pending_evt;
  bit pending = 0;
  int last_word_cyc;
  logic [31:0] t_dma_exp, t_addr_exp;
  always @(posedge clk) if (resp_valid && !resp.drop) t_addr_exp = now;
  always @(posedge clk) begin
    dma_ready <= stalls ? ($urandom % 3 != 0) : 1'b1;
    if (evt_valid) begin
      n_evt++;
      check(pending && evt == pending_evt, "event content / order");
      pending = 0;
    end
    if (dma_valid && dma_ready) begin
      plan_t p;
      logic [63:0] va;
      if (cur < 0) begin
        check(wr_q.size() > 0, "write with no packet due");
        cur = 0; widx = 0;
        t_dma_exp = now;
        if (!gaps && !stalls) check(cyc - hdr_cyc == 5, $sformatf("first write %0d cycles after header offered", cyc - hdr_cyc));
      end
      p  = wr_q[0];
      va = p.r.vaddr + 64'(16 * widx);
      if (dma_sop) begin
        burst_pa = dma_addr;
        bidx = 0;
        check(dma_addr == xlate(va), $sformatf("burst address %h exp %h", dma_addr, xlate(va)));
      end
      check(dma_addr == burst_pa, "address constant in a burst");
      check((burst_pa[7:0] + 16 * bidx) < 256, "burst crosses 256-byte boundary");
      if (p.prof && widx == (p.len + 15) / 16) begin
        logic [127:0] src;
        src = pay_word(p.id, widx);
        check(dma_data[63:0] == src[63:0], "footer low half kept");
        check(dma_data[127:96] == t_dma_exp, $sformatf("t_dma %h exp %h", dma_data[127:96], t_dma_exp));
        check(dma_data[95:64] == t_addr_exp, $sformatf("t_addr %h exp %h", dma_data[95:64], t_addr_exp));
      end else
        check(dma_data == pay_word(p.id, widx), $sformatf("pkt %0d word %0d data", p.id, widx));
      bidx++;
      widx++;
      if (widx == (p.len + 15) / 16 + (p.prof ? 1 : 0)) begin
        check(dma_eop, "eop on last word");
        void'(wr_q.pop_front());
        cur = -1;
        n_ok++;
        last_word_cyc = cyc;
        if (p.r.this_done) begin
          pending = 1;
          pending_evt = p.r.this_evt;
        end
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
    logic [63:0] addr;
    int n_evt_exp;
    in_valid = 0; in_beat = '0; dma_ready = 1; resp_valid = 0; resp = '0;
    res_valid = 0; res_hit = 0; res_paddr = 0;
    n_evt_exp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    addr = 64'h0000_0200_0000_0000;
    for (int n = 0; n < 150; n++) begin
      plan_t p;
      int kind;
      gaps = (n >= 5); stalls = (n >= 5);
      p.id   = n;
      p.len  = (n < 5) ? 1168 : 1 + $urandom % ((n % 4 == 0) ? 1472 : 200);
      p.prof = (n % 3 == 0);
      p.r    = '0;
      kind   = (n < 5) ? 9 : $urandom % 10;
      if (kind == 0) begin
        p.r.drop = 1; n_drop++;
      end else if (kind == 1 && p.len < 200) begin
        p.r.vaddr = {BAD_PAGE, 16'h0100}; n_miss++;
      end else begin
        p.r.vaddr = addr;
        addr += 64'(pkt_bytes(16'(p.len), p.prof));
        if ($urandom % 5 == 0) addr += 64'h1_0000 - 64'(addr[15:0]) + 64'h10 * ($urandom % 4);
        p.r.this_done = ($urandom % 3 == 0);
        p.r.this_evt  = '{buf_idx: 16'(n), bytes: 32'(n * 16)};
        p.r.prev_done = ($urandom % 4 == 0);
        p.r.prev_evt  = '{buf_idx: 16'(n + 1000), bytes: 32'(n)};
      end
      resp_q.push_back(p);
      if (!p.r.drop && p.r.vaddr[63:16] != BAD_PAGE) wr_q.push_back(p);
      // a buffer closed for room is announced when the answer arrives
      fork
        send(p);
        if (p.r.prev_done && !p.r.drop) begin
          @(posedge clk iff resp_valid);
          pending = 1; pending_evt = p.r.prev_evt;
          n_evt_exp++;
        end
      join
      if (p.r.this_done && !p.r.drop && p.r.vaddr[63:16] != BAD_PAGE) n_evt_exp++;
      wait (wr_q.size() == 0);
      repeat (3) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    check(pkt_cnt == 32'(n_ok), $sformatf("pkt_cnt %0d exp %0d", pkt_cnt, n_ok));
    check(drop_cnt == 32'(n_drop), "drop_cnt");
    check(miss_cnt == 32'(n_miss), "miss_cnt");
    check(n_evt == n_evt_exp, $sformatf("events %0d exp %0d", n_evt, n_evt_exp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
