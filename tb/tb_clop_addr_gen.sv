// tb_clop_addr_gen - self-checking test of the CLOP address generator.
//
// First the scope measurement of NaNet-1 is replayed: 32 packets of
// 1168 bytes into buffers of 8 x 1168 bytes must close exactly four buffers,
// after packets 8, 16, 24 and 32, each holding 9344 bytes, with every packet
// at base + 1168*k.  Then a ring of buffers of random sizes is filled by random
// packet sizes (some too large for any buffer) and every answer is compared
// with a reference model written here: address, drop, the close of the
// previous buffer and the close after this packet.  An unarmed ring must drop
// everything.  Each answer must come exactly one cycle after its request.
module tb_clop_addr_gen;
  import nanet_pkg::*;

  localparam int MB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             cfg_we;
  logic [1:0]       cfg_sel;
  logic [2:0]       cfg_idx;
  logic [63:0]      cfg_wdata;
  logic             req_valid, req_ready;
  logic [31:0]      req_bytes;
  logic             resp_valid;
  clop_resp_t       resp;
  logic [2:0]       cur_buf;
  logic [31:0]      cur_off;

  clop_addr_gen #(.MAX_BUFS(MB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference model
  logic [63:0] m_base [MB];
  int          m_size [MB];
  int          m_n = 0, m_cur = 0, m_off = 0;

  task automatic cfg(int sel, int idx, logic [63:0] v);
    @(negedge clk);
    cfg_we = 1; cfg_sel = 2'(sel); cfg_idx = 3'(idx); cfg_wdata = v;
    @(negedge clk);
    cfg_we = 0;
    if (sel == 0) m_base[idx] = v;
    if (sel == 1) m_size[idx] = int'(v);
    if (sel == 2) begin m_n = int'(v); m_cur = 0; m_off = 0; end
  endtask

  int n_close = 0;
  task automatic request(int bytes);
    clop_resp_t e;
    int b, o;
    bit sw;
    // model
    e = '0;
    sw = (m_off != 0) && (m_off + bytes > m_size[m_cur]);
    b  = sw ? (m_cur + 1) % m_n : m_cur;
    o  = sw ? 0 : m_off;
    if (m_n == 0 || bytes == 0 || bytes > m_size[b]) e.drop = 1;
    else begin
      e.vaddr = m_base[b] + 64'(o);
      e.prev_done = sw;
      e.prev_evt = '{buf_idx: 16'(m_cur), bytes: 32'(m_off)};
      e.this_done = (o + bytes >= m_size[b]);
      e.this_evt  = '{buf_idx: 16'(b), bytes: 32'(o + bytes)};
      if (e.this_done) begin m_cur = (b + 1) % m_n; m_off = 0; end
      else begin m_cur = b; m_off = o + bytes; end
    end
    // DUT
    @(negedge clk);
    req_valid = 1; req_bytes = 32'(bytes);
    @(negedge clk);
    req_valid = 0;
    check(resp_valid, "answer one cycle after the request");
    check(resp == e, $sformatf("resp %h exp %h (bytes %0d)", resp, e, bytes));
    if (resp.this_done) n_close++;
    @(negedge clk);
    check(!resp_valid, "one answer per request");
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_sel = 0; cfg_idx = 0; cfg_wdata = 0; req_valid = 0; req_bytes = 0;
    foreach (m_size[i]) begin m_size[i] = 0; m_base[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // unarmed ring
    request(64);
    check(resp.drop, "unarmed ring drops");

    // ---- Fig. 6 case: 32 packets of 1168 B, buffers of 8 packets ----
    for (int i = 0; i < 4; i++) begin
      cfg(0, i, 64'h0000_0010_0000_0000 + 64'(i) * 64'h10_0000);
      cfg(1, i, 8 * 1168);
    end
    cfg(2, 0, 4);
    for (int k = 0; k < 32; k++) begin
      request(1168);
      check(resp.vaddr == 64'h0000_0010_0000_0000 + 64'(k / 8) * 64'h10_0000 + 64'((k % 8) * 1168),
            $sformatf("packet %0d address %h", k, resp.vaddr));
      check(resp.this_done == ((k % 8) == 7), $sformatf("packet %0d close flag", k));
      if (resp.this_done) check(resp.this_evt.bytes == 9344 && resp.this_evt.buf_idx == 16'(k / 8), "close event");
    end
    check(n_close == 4, $sformatf("%0d buffers closed, expected 4", n_close));
    check(cur_buf == 0 && cur_off == 0, "ring wrapped to buffer 0");

    // ---- random ring ----
    for (int i = 0; i < MB; i++) begin
      cfg(0, i, {$urandom, $urandom & 32'hFFFF_0000});
      cfg(1, i, 16 * (1 + $urandom % 200));
    end
    cfg(2, 0, MB);
    for (int k = 0; k < 2000; k++)
      request(16 * (($urandom % 20 == 0) ? 1 + $urandom % 300 : 1 + $urandom % 40));
    // re-arm with a smaller ring
    cfg(2, 0, 3);
    for (int k = 0; k < 300; k++) request(16 * (1 + $urandom % 30));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
