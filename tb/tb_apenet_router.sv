// tb_apenet_router - self-checking test of the channel router.
//
// Four sources send numbered packets of 1..12 words; each word carries its
// source port, packet number and word index.  The test checks that every
// packet arrives whole and uninterleaved, in order per source, with out_port
// naming its source, and that nothing is lost.  In the first phase all four
// sources always have a packet waiting and the output never stalls: the
// grants must then rotate 0,1,2,3,0,... and, once a packet's first word has
// been offered, the router must pass one word per cycle with one idle cycle
// between packets.  In the second phase gaps and back-pressure are random.
module tb_apenet_router;
  import nanet_pkg::*;

  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [NP-1:0] in_valid, in_ready;
  ape_beat_t [NP-1:0] in_beat;
  logic               out_valid, out_ready;
  ape_beat_t          out_beat;
  logic [1:0]         out_port;

  apenet_router #(.N_PORTS(NP)) dut (.*);

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

  localparam int NPKT = 60;         // packets per source
  bit gaps = 0, stalls = 0;
  int sent [NP];

  function automatic logic [127:0] word(int p, int seq, int idx, int len);
    return {8'(p), 16'(seq), 16'(idx), 16'(len), 72'(seq * 7 + idx)};
  endfunction

  for (genvar p = 0; p < NP; p++) begin : src
    initial begin
      in_valid[p] = 0;
      in_beat[p]  = '0;
      wait (rst_n);
      for (int s = 0; s < NPKT; s++) begin
        int len;
        len = 1 + $urandom % 12;
        for (int i = 0; i < len; i++) begin
          @(negedge clk);
          while (gaps && $urandom % 3 == 0) begin
            in_valid[p] = 0;
            @(negedge clk);
          end
          in_valid[p] = 1;
          in_beat[p]  = '{data: word(p, s, i, len), sop: (i == 0), eop: (i == len - 1)};
          while (!in_ready[p]) @(negedge clk);
          @(posedge clk);
        end
        sent[p]++;
        if (s == 20) gaps = 1;   // phase two starts when a source reaches packet 20
      end
      @(negedge clk);
      in_valid[p] = 0;
    end
  end

  // ---- monitor ----
  int exp_seq [NP];
  int cur_p = -1, cur_seq, cur_idx, cur_len, last_p = -1, npk = 0, last_eop_cyc = -10;
  always @(posedge clk) begin
    out_ready <= stalls ? ($urandom % 3 != 0) : 1'b1;
    if (out_valid && out_ready) begin
      int p, s, i, l;
      p = int'(out_beat.data[127:120]); s = int'(out_beat.data[119:104]);
      i = int'(out_beat.data[103:88]);  l = int'(out_beat.data[87:72]);
      check(out_beat.data == word(p, s, i, l), "word content");
      check(out_port == 2'(p), "out_port");
      if (out_beat.sop) begin
        check(cur_p == -1, "sop inside a packet");
        check(s == exp_seq[p], $sformatf("port %0d packet %0d, expected %0d", p, s, exp_seq[p]));
        check(i == 0, "sop on word 0");
        if (!gaps && !stalls && last_p >= 0) begin
          check(p == (last_p + 1) % NP, $sformatf("round robin: %0d after %0d", p, last_p));
          check(cyc == last_eop_cyc + 2, "one idle cycle between packets");
        end
        cur_p = p; cur_seq = s; cur_idx = 0; cur_len = l;
      end else begin
        check(p == cur_p && s == cur_seq && i == cur_idx + 1, "packet interleaved or out of order");
        cur_idx = i;
      end
      if (out_beat.eop) begin
        check(i == l - 1, "eop on last word");
        exp_seq[p]++;
        last_p = p;
        last_eop_cyc = cyc;
        cur_p = -1;
        npk++;
      end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = 1;
    foreach (exp_seq[p]) begin exp_seq[p] = 0; sent[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (gaps);
    stalls = 1;
    wait (npk == NP * NPKT);
    repeat (10) @(posedge clk);
    check(npk == NP * NPKT, "all packets delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
