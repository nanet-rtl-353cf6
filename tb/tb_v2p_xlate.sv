// tb_v2p_xlate - self-checking test of the address translation table.
//
// Registers a set of random virtual pages (no two on one table index) with
// random physical pages, then looks up random addresses inside registered
// pages (must hit and give physical page + offset), addresses in pages that
// share an index with a registered one but differ in tag (must miss), and
// pages removed again (must miss).  Lookups are issued back to back, one per
// cycle, and every answer must come exactly one cycle after its lookup.
module tb_v2p_xlate;
  import nanet_pkg::*;

  localparam int PB = 16, NE = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            cfg_we, cfg_valid;
  logic [47:0]     cfg_vpn, cfg_ppn;
  logic            lk_valid;
  logic [63:0]     lk_vaddr;
  logic            res_valid, res_hit;
  logic [63:0]     res_paddr;

  v2p_xlate #(.PAGE_BITS(PB), .ENTRIES(NE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [47:0] vpn_of [NE], ppn_of [NE];
  bit          used [NE];

  // expected answers, one per lookup, in order
  typedef struct { bit hit; logic [63:0] pa; } exp_t;
  exp_t exp_q[$];

  always @(posedge clk) begin
    if (res_valid) begin
      exp_t e;
      check(exp_q.size() > 0, "answer without lookup");
      e = exp_q.pop_front();
      check(res_hit == e.hit, $sformatf("hit %0b exp %0b", res_hit, e.hit));
      if (e.hit) check(res_paddr == e.pa, $sformatf("pa %h exp %h", res_paddr, e.pa));
    end
  end
  // lookups issued at the previous edge must be answered now
  logic lk_q;
  always @(posedge clk) begin
    if (rst_n) check(res_valid == lk_q, "answer timing");
    lk_q <= lk_valid;
  end

  task automatic write(logic [47:0] vpn, logic [47:0] ppn, bit v);
    @(negedge clk);
    cfg_we = 1; cfg_vpn = vpn; cfg_ppn = ppn; cfg_valid = v;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic lookup(logic [63:0] va, bit hit, logic [63:0] pa);
    @(negedge clk);
    lk_valid = 1; lk_vaddr = va;
    exp_q.push_back('{hit, pa});
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_valid = 0; cfg_vpn = 0; cfg_ppn = 0; lk_valid = 0; lk_vaddr = 0; lk_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // nothing registered: everything misses
    lookup(64'h1234_5678, 0, 0);
    @(negedge clk); lk_valid = 0;
    for (int i = 0; i < NE; i++) begin
      used[i] = ($urandom % 4 != 0);
      vpn_of[i] = {$urandom, 16'($urandom)};
      vpn_of[i][5:0] = 6'(i);
      ppn_of[i] = {16'($urandom), $urandom};
      if (used[i]) write(vpn_of[i], ppn_of[i], 1);
    end
    for (int k = 0; k < 3000; k++) begin
      int i;
      logic [15:0] off;
      i = $urandom % NE;
      off = 16'($urandom);
      if (used[i]) begin
        if ($urandom % 4 == 0)   // same index, other tag
          lookup({vpn_of[i] ^ 48'h40, off}, 0, 0);
        else
          lookup({vpn_of[i], off}, 1, {ppn_of[i], off});
      end else
        lookup({vpn_of[i], off}, 0, 0);
      if (k % 500 == 499) begin
        // remove one page
        @(negedge clk); lk_valid = 0;
        if (used[i]) begin write(vpn_of[i], ppn_of[i], 0); used[i] = 0; end
      end
    end
    @(negedge clk); lk_valid = 0;
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0, "all lookups answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
