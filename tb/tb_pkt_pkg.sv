// tb_pkt_pkg: byte-level packet builders and checkers for the testbenches.
//
// Packets are built as byte queues straight from the protocol definitions (RFC 791,
// RFC 768, IEEE 802.3), independently of the RTL, and cut into 64-byte flits with the
// first byte in the top bits, the same layout the tiles use.
package tb_pkt_pkg;
  import beehive_pkg::*;

  typedef byte unsigned bytes_t[$];

  function automatic int nflits(int n);
    return (n + 63) / 64;
  endfunction

  function automatic flit_t flit_at(bytes_t b, int idx);
    flit_t f;
    f = '0;
    for (int i = 0; i < 64; i++)
      if (idx * 64 + i < b.size()) f[511 - 8*i -: 8] = b[idx*64 + i];
    return f;
  endfunction

  function automatic logic [15:0] ones_sum(bytes_t b, logic [31:0] init);
    logic [31:0] s;
    s = init;
    for (int i = 0; i < b.size(); i += 2) begin
      s += {16'h0, b[i], (i + 1 < b.size()) ? b[i+1] : 8'h00};
      s = {16'h0, s[31:16]} + {16'h0, s[15:0]};
    end
    s = {16'h0, s[31:16]} + {16'h0, s[15:0]};
    return s[15:0];
  endfunction

  function automatic void put16(ref bytes_t b, input logic [15:0] v);
    b.push_back(v[15:8]); b.push_back(v[7:0]);
  endfunction
  function automatic void put32(ref bytes_t b, input logic [31:0] v);
    put16(b, v[31:16]); put16(b, v[15:0]);
  endfunction
  function automatic void put48(ref bytes_t b, input logic [47:0] v);
    put16(b, v[47:32]); put32(b, v[31:0]);
  endfunction

  function automatic bytes_t rand_bytes(int n);
    bytes_t b;
    for (int i = 0; i < n; i++) b.push_back(8'($urandom));
    return b;
  endfunction

  function automatic bytes_t build_udp(logic [31:0] sip, logic [31:0] dip,
                                       logic [15:0] sp, logic [15:0] dp, bytes_t pay);
    bytes_t b, ph;
    logic [15:0] c;
    put16(b, sp); put16(b, dp); put16(b, 16'(pay.size() + 8)); put16(b, 16'h0);
    foreach (pay[i]) b.push_back(pay[i]);
    put32(ph, sip); put32(ph, dip); put16(ph, 16'd17); put16(ph, 16'(pay.size() + 8));
    c = ~ones_sum(b, 32'(ones_sum(ph, 0)));
    if (c == 16'h0) c = 16'hFFFF;
    b[6] = c[15:8]; b[7] = c[7:0];
    return b;
  endfunction

  // IPv4 header with `opt_words` 32-bit words of options (IHL = 5 + opt_words).
  function automatic bytes_t build_ip(logic [31:0] sip, logic [31:0] dip, logic [7:0] proto,
                                      bytes_t l4, int opt_words, logic [15:0] id);
    bytes_t b;
    logic [15:0] c;
    int hl;
    hl = 20 + 4 * opt_words;
    b.push_back({4'd4, 4'(5 + opt_words)}); b.push_back(8'h00);
    put16(b, 16'(hl + l4.size())); put16(b, id); put16(b, 16'h4000);
    b.push_back(8'd64); b.push_back(proto); put16(b, 16'h0);
    put32(b, sip); put32(b, dip);
    for (int i = 0; i < 4 * opt_words; i++) b.push_back(8'h01);   // NOP options
    c = ~ones_sum(b, 0);
    b[10] = c[15:8]; b[11] = c[7:0];
    foreach (l4[i]) b.push_back(l4[i]);
    return b;
  endfunction

  function automatic bytes_t build_eth(logic [47:0] dmac, logic [47:0] smac, logic [15:0] et,
                                       bytes_t pay, bit vlan);
    bytes_t b;
    put48(b, dmac); put48(b, smac);
    if (vlan) begin put16(b, 16'h8100); put16(b, 16'h0005); end
    put16(b, et);
    foreach (pay[i]) b.push_back(pay[i]);
    return b;
  endfunction

  function automatic bytes_t slice(bytes_t b, int from, int n);
    bytes_t r;
    for (int i = from; i < from + n && i < b.size(); i++) r.push_back(b[i]);
    return r;
  endfunction
  // GF(2^8) product, field polynomial x^8+x^4+x^3+x^2+1, by shift and add
  function automatic logic [7:0] gf_mul(logic [7:0] a, logic [7:0] b);
    logic [7:0] r;
    r = '0;
    for (int i = 7; i >= 0; i--) begin
      r = {r[6:0], 1'b0} ^ (r[7] ? 8'h1d : 8'h00);
      if (b[i]) r = r ^ a;
    end
    return r;
  endfunction

  // two parity shards of an 8+2 systematic Reed-Solomon code over eight equal data shards
  function automatic bytes_t rs_parity(bytes_t d);
    logic [7:0] c [2][8] = '{'{8'h1a, 8'h84, 8'hba, 8'h33, 8'he7, 8'h10, 8'hc6, 8'h27},
                             '{8'h84, 8'h1a, 8'h33, 8'hba, 8'h10, 8'he7, 8'h27, 8'hc6}};
    bytes_t r;
    int s;
    s = d.size() / 8;
    for (int p = 0; p < 2; p++)
      for (int k = 0; k < s; k++) begin
        logic [7:0] acc;
        acc = '0;
        for (int i = 0; i < 8; i++) acc = acc ^ gf_mul(c[p][i], d[i * s + k]);
        r.push_back(acc);
      end
    return r;
  endfunction
endpackage
