// tb_eth_pkg - frame builder shared by the testbenches.
//
// Builds Ethernet II / IPv4 / UDP frames byte by byte, independently of the
// RTL, and cuts them into the 32-bit words the MAC delivers (first byte in
// bits [31:24]), without the frame check sequence and padded to the
// 60-byte Ethernet minimum.  Knobs let a test produce frames the offloader
// must drop (other EtherType, other IP protocol, fragments) or truncate.
package tb_eth_pkg;

  typedef byte unsigned bytes_t[$];
  typedef logic [31:0]  words_t[$];

  typedef struct {
    int          ihl;        // IPv4 header length in 32-bit words (5..15)
    logic [15:0] ethertype;
    logic [7:0]  proto;
    bit          more_frag;
    logic [15:0] sport, dport;
    logic [31:0] src_ip;
    int          udp_len_adj; // added to the true UDP length field
  } frame_opt_t;

  function automatic frame_opt_t default_opt();
    frame_opt_t o;
    o.ihl = 5; o.ethertype = 16'h0800; o.proto = 8'd17; o.more_frag = 0;
    o.sport = 16'd5000; o.dport = 16'd58000; o.src_ip = 32'hC0A8_0A02; o.udp_len_adj = 0;
    return o;
  endfunction

  function automatic bytes_t frame_bytes(bytes_t pl, frame_opt_t o);
    bytes_t f;
    int ulen, tlen;
    ulen = pl.size() + 8 + o.udp_len_adj;
    tlen = 4 * o.ihl + pl.size() + 8;
    // Ethernet
    f = '{8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'h01,  8'h02, 8'h00, 8'h00, 8'h00, 8'h00, 8'h02};
    f.push_back(o.ethertype[15:8]); f.push_back(o.ethertype[7:0]);
    // IPv4
    f.push_back(8'(8'h40 | o.ihl)); f.push_back(8'h00);
    f.push_back(8'(tlen >> 8)); f.push_back(8'(tlen));
    f.push_back(8'h12); f.push_back(8'h34);
    f.push_back(o.more_frag ? 8'h20 : 8'h40); f.push_back(8'h00);
    f.push_back(8'd64); f.push_back(o.proto);
    f.push_back(8'h00); f.push_back(8'h00);
    for (int i = 0; i < 4; i++) f.push_back(o.src_ip[31-8*i -: 8]);
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd10); f.push_back(8'd1);
    for (int i = 0; i < 4 * (o.ihl - 5); i++) f.push_back(8'h01);   // options (NOP)
    // UDP
    f.push_back(o.sport[15:8]); f.push_back(o.sport[7:0]);
    f.push_back(o.dport[15:8]); f.push_back(o.dport[7:0]);
    f.push_back(8'(ulen >> 8)); f.push_back(8'(ulen));
    f.push_back(8'h00); f.push_back(8'h00);
    foreach (pl[i]) f.push_back(pl[i]);
    while (f.size() < 60) f.push_back(8'hEE);   // padding, must not show
    return f;
  endfunction

  function automatic words_t to_words(bytes_t f);
    words_t w;
    for (int i = 0; i < f.size(); i += 4) begin
      logic [31:0] x;
      x = '0;
      for (int k = 0; k < 4; k++)
        if (i + k < f.size()) x[31-8*k -: 8] = f[i+k];
      w.push_back(x);
    end
    return w;
  endfunction

  function automatic bytes_t rand_payload(int n);
    bytes_t p;
    for (int i = 0; i < n; i++) p.push_back(8'($urandom));
    return p;
  endfunction

endpackage
