// hdr_rewrite: the NAT step of the load balancer, applied to a packet's
// first beat.
//
// The paper's figure of the packet flow shows the load balancer picking a
// server and rewriting the IP header: the destination becomes the server, the
// source becomes the load balancer, and the EJFAT shim is not delivered. This
// block, for an IPv4 or an IPv6 packet (`v6`), writes the new destination and
// source addresses and the UDP destination port, and shortens the IP length
// (IPv4 total length or IPv6 payload length) and the UDP length by the 16
// shim bytes that shim_strip removes downstream.
//
// Checksums: the IPv4 header checksum is recomputed. The UDP checksum, which
// covers a pseudo-header with both addresses and the length, is updated
// incrementally (RFC 1624: HC' = ~(~HC + ~m + m')) for every changed word and
// for the removed shim words, so the payload never has to be read. An IPv4
// packet sent without a UDP checksum (zero) keeps zero; a computed zero is
// sent as 0xFFFF. Purely combinational; `keep` and `last` pass unchanged in
// the caller. The checksum handling is this design's choice; the paper does
// not discuss it.
module hdr_rewrite
  import ejfat_pkg::*;
(
  input  data_t       data_in,
  input  logic        v6,
  input  ip6_t        new_dst,   // IPv4 address in bits 31:0
  input  ip6_t        new_src,
  input  logic [15:0] new_port,
  output data_t       data_out
);

  data_t       d;
  int unsigned u;
  ip6_t        old_src, old_dst, shim;
  logic [15:0] old_len, new_len, old_port, old_csum, new_csum;
  logic [15:0] sum_old, sum_new, s;

  always_comb begin
    u        = v6 ? IP6_HDR_BYTES : IP4_HDR_BYTES;
    old_src  = v6 ? get128(data_in, 8)  : 128'(get32(data_in, 12));
    old_dst  = v6 ? get128(data_in, 24) : 128'(get32(data_in, 16));
    old_port = get16(data_in, u + 2);
    old_len  = get16(data_in, u + 4);
    old_csum = get16(data_in, u + 6);
    shim     = get128(data_in, u + UDP_HDR_BYTES);
    new_len  = old_len - 16'(SHIM_BYTES);

    // words leaving the UDP checksum, and words entering it
    sum_old = oc_add(oc_add(oc_sum128(old_src), oc_sum128(old_dst)),
                     oc_add(oc_add(old_len, old_len), oc_add(old_port, oc_sum128(shim))));
    sum_new = oc_add(oc_add(oc_sum128(v6 ? new_src : 128'(new_src[31:0])),
                            oc_sum128(v6 ? new_dst : 128'(new_dst[31:0]))),
                     oc_add(oc_add(new_len, new_len), new_port));
    s        = oc_add(~old_csum, oc_add(~sum_old, sum_new));
    new_csum = (!v6 && old_csum == 16'h0000) ? 16'h0000
             : (~s == 16'h0000)              ? 16'hFFFF : ~s;

    d = data_in;
    if (v6) begin
      d = put128(d, 8, new_src);
      d = put128(d, 24, new_dst);
      d = put16(d, 4, get16(data_in, 4) - 16'(SHIM_BYTES));
    end else begin
      d = put32(d, 12, new_src[31:0]);
      d = put32(d, 16, new_dst[31:0]);
      d = put16(d, 2, get16(data_in, 2) - 16'(SHIM_BYTES));
    end
    d = put16(d, u + 2, new_port);
    d = put16(d, u + 4, new_len);
    d = put16(d, u + 6, new_csum);
    if (!v6) d = put16(d, 10, ipv4_csum(d));
    data_out = d;
  end

endmodule
