// tb_ejfat_util: packet construction and reference models for the EJFAT
// load balancer testbenches.
//
// Packets are byte queues (byte 0 = first byte of the IP header). The
// reference models here work byte by byte, independently of the bit-slicing
// helpers the RTL uses: building a tagged IPv4 or IPv6 packet, the IPv4 and
// UDP checksums computed in full (the RTL updates the UDP one incrementally), the
// expected packet after the load balancer's rewrite and shim removal, and
// conversion between byte queues and 64-byte bus beats.
//
// The shim layout it builds is this design's; the checksum rules are those
// of IPv4, IPv6 and UDP.
package tb_ejfat_util;

  typedef byte unsigned bytes_t[$];

  function automatic logic [15:0] ref_csum(bytes_t p);
    int unsigned s = 0;
    for (int i = 0; i < 20; i += 2)
      if (i != 10) s += {p[i], p[i+1]};
    while (s > 16'hFFFF) s = (s & 16'hFFFF) + (s >> 16);
    return ~s[15:0];
  endfunction

  function automatic void put_be(ref bytes_t p, input int off, input int n,
                                 input logic [63:0] v);
    for (int i = 0; i < n; i++) p[off+i] = v[8*(n-1-i) +: 8];
  endfunction

  // Full UDP checksum of packet `p` (IPv4 or IPv6), pseudo-header included.
  function automatic logic [15:0] ref_udp_csum(bytes_t p);
    bit v6 = (p[0][7:4] == 6);
    int u = v6 ? 40 : 20;
    int len = {p[u+4], p[u+5]};
    longint unsigned s = 0;
    logic [15:0] c;
    if (v6) begin
      for (int i = 8; i < 40; i += 2) s += {p[i], p[i+1]};
    end else begin
      for (int i = 12; i < 20; i += 2) s += {p[i], p[i+1]};
    end
    s += 17 + len;
    for (int i = 0; i < len; i += 2) begin
      if (i == 6) continue;
      s += {p[u+i], (i + 1 < len) ? p[u+i+1] : 8'h00};
    end
    while (s > 64'hFFFF) s = (s & 64'hFFFF) + (s >> 16);
    c = ~s[15:0];
    return (c == 16'h0000) ? 16'hFFFF : c;     // a computed zero is sent as 0xFFFF
  endfunction

  // A well-formed EJFAT packet with `plen` payload bytes after the shim.
  // IPv4 addresses are in bits 31:0. `csum` = 0 sends IPv4 without a UDP
  // checksum.
  function automatic bytes_t make_pkt_x(bit v6, logic [127:0] src, logic [127:0] dst,
                                        logic [15:0] sport, logic [15:0] dport,
                                        logic [15:0] chan, logic [63:0] tag,
                                        int plen, int seed, bit csum = 1);
    bytes_t p;
    int u = v6 ? 40 : 20;
    int total = u + 24 + plen;
    for (int i = 0; i < total; i++) p.push_back(8'(i * 7 + seed * 13 + 1));
    if (v6) begin
      p[0] = 8'h60; p[1] = 8'h00; p[2] = 8'(seed); p[3] = 8'h01;
      put_be(p, 4, 2, 64'(total - 40));
      p[6] = 8'd17; p[7] = 8'd64;
      put_be(p, 8, 8, src[127:64]);  put_be(p, 16, 8, src[63:0]);
      put_be(p, 24, 8, dst[127:64]); put_be(p, 32, 8, dst[63:0]);
    end else begin
      p[0] = 8'h45; p[1] = 8'h00;
      put_be(p, 2, 2, 64'(total));
      put_be(p, 4, 2, 64'(seed));
      p[6] = 8'h40; p[7] = 8'h00;         // DF set, not fragmented
      p[8] = 8'd64; p[9] = 8'd17;
      p[10] = 0; p[11] = 0;
      put_be(p, 12, 4, 64'(src[31:0]));
      put_be(p, 16, 4, 64'(dst[31:0]));
      put_be(p, 10, 2, 64'(ref_csum(p)));
    end
    put_be(p, u, 2, 64'(sport));
    put_be(p, u + 2, 2, 64'(dport));
    put_be(p, u + 4, 2, 64'(total - u));
    p[u+8] = "L"; p[u+9] = "B"; p[u+10] = 8'd1; p[u+11] = 8'd1;
    p[u+12] = 0; p[u+13] = 0;
    put_be(p, u + 14, 2, 64'(chan));
    put_be(p, u + 16, 8, tag);
    put_be(p, u + 6, 2, (v6 || csum) ? 64'(ref_udp_csum(p)) : 64'd0);
    return p;
  endfunction

  function automatic bytes_t make_pkt(logic [31:0] src, logic [31:0] dst,
                                      logic [15:0] sport, logic [15:0] dport,
                                      logic [15:0] chan, logic [63:0] tag,
                                      int plen, int seed);
    return make_pkt_x(0, 128'(src), 128'(dst), sport, dport, chan, tag, plen, seed);
  endfunction

  // What should leave the load balancer for packet `p`: addresses and port
  // replaced, shim removed, lengths and both checksums computed afresh.
  function automatic bytes_t expect_out(bytes_t p, logic [127:0] cn_ip,
                                        logic [127:0] lb_ip, logic [15:0] port);
    bytes_t q;
    bit v6 = (p[0][7:4] == 6);
    int u = v6 ? 40 : 20;
    int total = p.size() - 16;
    bit had_csum = ({p[u+6], p[u+7]} != 0);
    for (int i = 0; i < p.size(); i++)
      if (i < u + 8 || i >= u + 24) q.push_back(p[i]);
    if (v6) begin
      put_be(q, 4, 2, 64'(total - 40));
      put_be(q, 8, 8, lb_ip[127:64]);  put_be(q, 16, 8, lb_ip[63:0]);
      put_be(q, 24, 8, cn_ip[127:64]); put_be(q, 32, 8, cn_ip[63:0]);
    end else begin
      put_be(q, 2, 2, 64'(total));
      put_be(q, 12, 4, 64'(lb_ip[31:0]));
      put_be(q, 16, 4, 64'(cn_ip[31:0]));
      q[10] = 0; q[11] = 0;
      put_be(q, 10, 2, 64'(ref_csum(q)));
    end
    put_be(q, u + 2, 2, 64'(port));
    put_be(q, u + 4, 2, 64'(total - u));
    put_be(q, u + 6, 2, (v6 || had_csum) ? 64'(ref_udp_csum(q)) : 64'd0);
    return q;
  endfunction

  // Beat `j` of packet `p`: data, keep and last.
  function automatic logic [511:0] beat_data(bytes_t p, int j);
    logic [511:0] d = '0;
    for (int b = 0; b < 64; b++)
      if (64 * j + b < p.size()) d[8*b +: 8] = p[64*j+b];
    return d;
  endfunction

  function automatic logic [63:0] beat_keep(bytes_t p, int j);
    logic [63:0] k = '0;
    for (int b = 0; b < 64; b++) k[b] = (64 * j + b < p.size());
    return k;
  endfunction

  function automatic int n_beats(bytes_t p);
    return (p.size() + 63) / 64;
  endfunction

endpackage
