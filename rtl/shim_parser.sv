// shim_parser: decodes the first beat of a packet into the fields the load
// balancer needs.
//
// A packet starts with an IPv4 header without options (20 bytes) or an IPv6
// header with UDP as the next header (40 bytes), then the UDP header and the
// 16-byte EJFAT shim: magic "LB", version, protocol, reserved, 16-bit channel
// tag, 64-bit aggregation tag. The whole header (44 or 64 bytes) lies in the
// first 64-byte beat. The parser is purely combinational: `hdr` is valid in
// the same cycle as `data`/`keep`. IPv4 addresses are returned in bits 31:0
// of the 128-bit address fields.
//
// `hdr.ok` is set only for a packet the load balancer may forward: IPv4 with a
// 20-byte header, not fragmented, protocol UDP and a UDP length equal to the
// IP total length less 20; or IPv6 with next header UDP and a UDP length equal
// to the payload length; in both cases a UDP length that covers the shim, the
// whole header present in the beat and the expected shim magic, version and
// protocol.
//
// The paper says packets are sent to an IPv4 or IPv6 address and carry an
// aggregation tag and a channel tag in metadata; the byte layout, the version
// numbers and the well-formedness checks are this design's choices.
module shim_parser
  import ejfat_pkg::*;
(
  input  data_t    data,
  input  keep_t    keep,
  output pkt_hdr_t hdr
);

  logic        v4_ok, v6_ok, shim_ok;
  logic [15:0] ip4_len, frag;
  int unsigned u, sh;   // offsets of the UDP header and the shim

  always_comb begin
    hdr.v6  = (data[7:4] == 4'd6);
    u       = hdr.v6 ? IP6_HDR_BYTES : IP4_HDR_BYTES;
    sh      = u + UDP_HDR_BYTES;

    hdr.ip_src   = hdr.v6 ? get128(data, 8)  : 128'(get32(data, 12));
    hdr.ip_dst   = hdr.v6 ? get128(data, 24) : 128'(get32(data, 16));
    hdr.udp_src  = get16(data, u + 0);
    hdr.udp_dst  = get16(data, u + 2);
    hdr.udp_len  = get16(data, u + 4);
    hdr.udp_csum = get16(data, u + 6);
    hdr.channel  = get16(data, sh + 6);
    hdr.tag      = {get32(data, sh + 8), get32(data, sh + 12)};

    ip4_len = get16(data, 2);
    frag    = get16(data, 6);

    v4_ok = (get8(data, 0) == 8'h45)
         && (frag[13:0] == 14'd0)                     // MF clear, offset 0
         && (get8(data, 9) == 8'd17)
         && (hdr.udp_len == ip4_len - 16'(IP4_HDR_BYTES))
         && keep[HDR_BYTES4-1];

    v6_ok = (get8(data, 6) == 8'd17)
         && (hdr.udp_len == get16(data, 4))
         && keep[HDR_BYTES6-1];

    shim_ok = (hdr.udp_len >= 16'(UDP_HDR_BYTES + SHIM_BYTES))
           && (get16(data, sh) == SHIM_MAGIC)
           && (get8(data, sh + 2) == SHIM_VERSION)
           && (get8(data, sh + 3) == SHIM_PROTOCOL);

    hdr.ok = (hdr.v6 ? v6_ok : v4_ok) && shim_ok;
  end

endmodule
