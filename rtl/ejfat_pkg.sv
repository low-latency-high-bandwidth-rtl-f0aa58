// ejfat_pkg: types, sizes and helper functions shared by the EJFAT load
// balancer data plane.
//
// The data plane forwards UDP packets that carry a 16-byte EJFAT shim header
// right after the UDP header. The shim holds the data aggregation tag (the
// "event" number every packet of one aggregation event shares) and a channel
// tag. Packets travel on a 512-bit stream, one 64-byte beat per cycle, with
// byte 0 of the packet (the first byte of the IPv4 or IPv6 header; Ethernet
// framing is handled by the MAC outside this design) in bits 7:0. Multi-byte
// header fields are big-endian (network order) inside that byte order.
//
// Following the paper: up to 8 virtual LB instances, a NAT-like rewrite of the
// destination address chosen from the aggregation tag through lookup tables
// written by the control plane, a weighted round-robin distribution, a channel
// tag that selects a UDP port at the compute node, removal of the shim
// before delivery, and IPv4 or IPv6 addressing. This design's own choices:
// the shim layout, the 512-bit bus, four configuration epochs per instance,
// 512 calendar slots, 256 members per instance and the configuration word
// format.
package ejfat_pkg;

  // ---------------- bus ----------------
  localparam int unsigned DATA_BYTES = 64;
  localparam int unsigned DATA_W     = 8 * DATA_BYTES;

  typedef logic [DATA_W-1:0]     data_t;
  typedef logic [DATA_BYTES-1:0] keep_t;

  // ---------------- packet layout ----------------
  // IPv4 (20-byte header, no options) or IPv6 (40-byte header, UDP as the
  // next header, no extension headers), then UDP, then the shim.
  localparam int unsigned IP4_HDR_BYTES = 20;
  localparam int unsigned IP6_HDR_BYTES = 40;
  localparam int unsigned UDP_HDR_BYTES = 8;
  localparam int unsigned SHIM_BYTES    = 16;
  localparam int unsigned SHIM_OFF4     = IP4_HDR_BYTES + UDP_HDR_BYTES;  // 28
  localparam int unsigned SHIM_OFF6     = IP6_HDR_BYTES + UDP_HDR_BYTES;  // 48
  localparam int unsigned HDR_BYTES4    = SHIM_OFF4 + SHIM_BYTES;         // 44
  localparam int unsigned HDR_BYTES6    = SHIM_OFF6 + SHIM_BYTES;         // 64

  // Shim: magic "LB" (2), version (1), protocol (1), reserved (2),
  //       channel tag (2), aggregation tag (8)
  localparam logic [15:0] SHIM_MAGIC    = 16'h4C42;
  localparam logic [7:0]  SHIM_VERSION  = 8'd1;
  localparam logic [7:0]  SHIM_PROTOCOL = 8'd1;

  typedef logic [63:0] tag_t;
  typedef logic [15:0] chan_t;

  // ---------------- table sizes ----------------
  localparam int unsigned NUM_INST    = 8;    // virtual LB instances (paper)
  localparam int unsigned NUM_EPOCHS  = 4;    // configuration epochs per instance
  localparam int unsigned CAL_SLOTS   = 512;  // calendar slots per epoch
  localparam int unsigned MAX_MEMBERS = 256;  // compute nodes per instance

  localparam int unsigned INST_W   = $clog2(NUM_INST);
  localparam int unsigned EPOCH_W  = $clog2(NUM_EPOCHS);
  localparam int unsigned SLOT_W   = $clog2(CAL_SLOTS);
  localparam int unsigned MEMBER_W = $clog2(MAX_MEMBERS);

  typedef logic [INST_W-1:0]   inst_t;
  typedef logic [EPOCH_W-1:0]  epoch_t;
  typedef logic [MEMBER_W-1:0] member_id_t;

  typedef logic [31:0]  ip4_t;
  typedef logic [127:0] ip6_t;

  // Parsed header of a packet's first beat.
  typedef struct packed {
    logic        ok;        // well-formed IPv4 or IPv6 / UDP / EJFAT packet
    logic        v6;        // IPv6 packet
    ip6_t        ip_src;    // IPv4 addresses in bits 31:0
    ip6_t        ip_dst;
    logic [15:0] udp_src;
    logic [15:0] udp_dst;
    logic [15:0] udp_len;
    logic [15:0] udp_csum;
    chan_t       channel;
    tag_t        tag;
  } pkt_hdr_t;

  // Table entries.
  typedef struct packed {
    logic en4;              // IPv4 address in use
    logic en6;              // IPv6 address in use
    ip4_t ip4;              // well-known addresses of the instance
    ip6_t ip6;
  } inst_entry_t;

  typedef struct packed {
    logic valid;
    tag_t start_tag;        // first aggregation tag governed by this epoch
  } epoch_entry_t;

  typedef struct packed {
    logic        valid;
    ip4_t        ip4;       // compute node addresses, used for IPv4 and
    ip6_t        ip6;       // IPv6 packets respectively
    logic [15:0] base_port; // first UDP port of the node's range
    logic [3:0]  port_bits; // the range holds 2**port_bits ports
  } member_entry_t;

  // ---------------- configuration port ----------------
  typedef enum logic [1:0] {
    CFG_INST   = 2'd0,  // index = instance
    CFG_EPOCH  = 2'd1,  // index = {instance, epoch}
    CFG_CAL    = 2'd2,  // index = {instance, epoch, slot}
    CFG_MEMBER = 2'd3   // index = {instance, member}
  } cfg_region_e;

  typedef struct packed {
    logic        we;
    cfg_region_e region;
    logic [15:0] index;
    logic [191:0] data; // entry of the region's type in the low bits
  } cfg_wr_t;

  // ---------------- helpers ----------------
  function automatic logic [7:0] get8(data_t d, int unsigned off);
    return d[8*off +: 8];
  endfunction

  function automatic logic [15:0] get16(data_t d, int unsigned off);
    return {d[8*off +: 8], d[8*(off+1) +: 8]};
  endfunction

  function automatic logic [31:0] get32(data_t d, int unsigned off);
    return {get16(d, off), get16(d, off + 2)};
  endfunction

  function automatic data_t put16(data_t d, int unsigned off, logic [15:0] v);
    data_t r = d;
    r[8*off +: 8]     = v[15:8];
    r[8*(off+1) +: 8] = v[7:0];
    return r;
  endfunction

  function automatic data_t put32(data_t d, int unsigned off, logic [31:0] v);
    return put16(put16(d, off, v[31:16]), off + 2, v[15:0]);
  endfunction

  function automatic logic [127:0] get128(data_t d, int unsigned off);
    return {get32(d, off), get32(d, off + 4), get32(d, off + 8), get32(d, off + 12)};
  endfunction

  function automatic data_t put128(data_t d, int unsigned off, logic [127:0] v);
    return put32(put32(put32(put32(d, off, v[127:96]), off + 4, v[95:64]),
                       off + 8, v[63:32]), off + 12, v[31:0]);
  endfunction

  // Ones'-complement addition with end-around carry.
  function automatic logic [15:0] oc_add(logic [15:0] a, logic [15:0] b);
    logic [16:0] s = 17'(a) + 17'(b);
    return s[15:0] + 16'(s[16]);
  endfunction

  // Ones'-complement sum of the 16-bit words of a 128-bit value.
  function automatic logic [15:0] oc_sum128(logic [127:0] v);
    logic [15:0] s = '0;
    for (int unsigned i = 0; i < 8; i++) s = oc_add(s, v[16*i +: 16]);
    return s;
  endfunction

  // Ones'-complement checksum of the 20-byte IPv4 header at byte 0, taken
  // with the checksum field (bytes 10-11) as zero.
  function automatic logic [15:0] ipv4_csum(data_t d);
    logic [19:0] s;
    s = '0;
    for (int unsigned i = 0; i < IP4_HDR_BYTES / 2; i++)
      if (i != 5) s += 20'(get16(d, 2 * i));
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return ~s[15:0];
  endfunction

  // Keep mask with the n lowest bytes valid.
  function automatic keep_t keep_of(int unsigned n);
    keep_t k;
    for (int unsigned i = 0; i < DATA_BYTES; i++) k[i] = (i < n);
    return k;
  endfunction

  function automatic int unsigned bytes_of(keep_t k);
    int unsigned n = 0;
    for (int unsigned i = 0; i < DATA_BYTES; i++) n += int'(k[i]);
    return n;
  endfunction

endpackage
