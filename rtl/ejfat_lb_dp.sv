// ejfat_lb_dp: data plane of the EJFAT load balancer.
//
// Data sources send every UDP packet (IPv4 or IPv6) to the well-known address
// of a virtual load-balancer instance. Each packet carries a shim with the
// aggregation tag of the event it belongs to and a channel tag. The data plane sends all
// packets of one event to the same compute node (CN), chosen by a weighted
// round robin over the instance's CNs, rewrites the packet's addresses like a
// NAT (destination = CN, source = load balancer), picks the CN's UDP port from
// the channel tag, removes the shim and forwards the packet. It holds no
// packet buffer beyond its pipeline registers. The tables are written by the
// control plane through `cfg`; configuration changes take effect at a chosen
// future tag through epochs, so events in flight keep their CN.
//
// Pipeline, one 64-byte beat per cycle, all stages advancing together:
//   S0  input beat: shim_parser and lb_addr_match on the first beat
//   S1  epoch_select; calendar read issued
//   S2  calendar member id; member table read issued
//   S3  forward/drop decision, hdr_rewrite of the first beat
//   shim_strip (one held beat, registered output)
// A first beat accepted in cycle t leaves as the first output beat in cycle
// t+5 when the output is never stalled, for single-beat and longer packets
// alike. The input is stalled only when the output is not ready, so at full
// output rate the data plane takes one beat every cycle. A packet is dropped whole, and counted by reason, if it is
// not a well-formed EJFAT packet, is addressed to no enabled instance, has no
// valid epoch for its tag, or maps to an invalid member.
//
// Follows the paper: the tag-to-CN mapping through control-plane LUTs, the
// weighted round robin, channel tag to distinct CN ports, the 8 instances,
// IPv4 and IPv6 addresses, the rewrite of destination and source addresses
// and removal of the shim, the change of configuration at a future tag. This
// design's own choices: the bus, the pipeline, the epoch mechanism's form, all
// table sizes, the configuration word layout and the drop rules.
module ejfat_lb_dp
  import ejfat_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // packets from the sources (after the MAC)
  input  logic        s_valid,
  output logic        s_ready,
  input  data_t       s_data,
  input  keep_t       s_keep,
  input  logic        s_last,
  // packets to the compute nodes (towards the MAC)
  output logic        m_valid,
  input  logic        m_ready,
  output data_t       m_data,
  output keep_t       m_keep,
  output logic        m_last,
  // control plane table writes
  input  cfg_wr_t     cfg,
  // counters
  output logic [31:0] cnt_fwd,
  output logic [31:0] cnt_drop_fmt,
  output logic [31:0] cnt_drop_inst,
  output logic [31:0] cnt_drop_epoch,
  output logic [31:0] cnt_drop_member
);

  typedef struct packed {
    logic  valid;
    logic  first;
    data_t data;
    keep_t keep;
    logic  last;
  } beat_t;

  beat_t    s1, s2, s3;
  pkt_hdr_t h1, h2;
  logic     ok3, v6_3;
  logic     inst_hit1, inst_hit2, inst_hit3;
  inst_t    inst1, inst2;
  logic     epoch_hit2, epoch_hit3;

  logic       in_first;
  pkt_hdr_t   h0;
  logic       inst_hit0;
  inst_t      inst0;
  logic       epoch_hit1;
  epoch_t     epoch1;
  member_id_t member2;
  logic       mem_valid3;
  ip6_t        mem_ip3;
  logic [15:0] mem_port3;
  inst_entry_t lb_ip [NUM_INST];
  ip6_t        lb_ip3;

  logic adv, s3_take, drop_now, drop_pkt, drop_beat;
  logic strip_ready;
  data_t rw_data;

  // ---------------- configuration decode ----------------
  logic wr_inst, wr_epoch, wr_cal, wr_member;
  assign wr_inst   = cfg.we && cfg.region == CFG_INST;
  assign wr_epoch  = cfg.we && cfg.region == CFG_EPOCH;
  assign wr_cal    = cfg.we && cfg.region == CFG_CAL;
  assign wr_member = cfg.we && cfg.region == CFG_MEMBER;

  // instance addresses also needed as the rewritten source address
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_INST; i++) lb_ip[i] <= '0;
    end else if (wr_inst) begin
      lb_ip[cfg.index[INST_W-1:0]] <= inst_entry_t'(cfg.data[$bits(inst_entry_t)-1:0]);
    end
  end

  // ---------------- S0 ----------------
  always_ff @(posedge clk) begin
    if (!rst_n)                      in_first <= 1'b1;
    else if (s_valid && s_ready)     in_first <= s_last;
  end

  shim_parser u_parse (.data(s_data), .keep(s_keep), .hdr(h0));

  lb_addr_match u_match (
    .clk, .rst_n,
    .wr_en(wr_inst), .wr_idx(cfg.index[INST_W-1:0]),
    .wr_entry(inst_entry_t'(cfg.data[$bits(inst_entry_t)-1:0])),
    .v6(h0.v6), .ip(h0.ip_dst), .hit(inst_hit0), .inst(inst0)
  );

  assign s_ready = adv;

  // ---------------- S1 ----------------
  epoch_select u_epoch (
    .clk, .rst_n,
    .wr_en(wr_epoch),
    .wr_inst(cfg.index[EPOCH_W +: INST_W]), .wr_epoch(cfg.index[EPOCH_W-1:0]),
    .wr_entry(epoch_entry_t'(cfg.data[$bits(epoch_entry_t)-1:0])),
    .inst(inst1), .tag(h1.tag), .hit(epoch_hit1), .epoch(epoch1)
  );

  calendar_lut u_cal (
    .clk,
    .wr_en(wr_cal),
    .wr_inst(cfg.index[SLOT_W+EPOCH_W +: INST_W]),
    .wr_epoch(cfg.index[SLOT_W +: EPOCH_W]),
    .wr_slot(cfg.index[SLOT_W-1:0]),
    .wr_member(cfg.data[MEMBER_W-1:0]),
    .rd_en(adv), .rd_inst(inst1), .rd_epoch(epoch1), .rd_tag(h1.tag),
    .rd_member(member2)
  );

  // ---------------- S2 ----------------
  member_table u_mem (
    .clk,
    .wr_en(wr_member),
    .wr_inst(cfg.index[MEMBER_W +: INST_W]),
    .wr_member(cfg.index[MEMBER_W-1:0]),
    .wr_entry(member_entry_t'(cfg.data[$bits(member_entry_t)-1:0])),
    .rd_en(adv), .rd_inst(inst2), .rd_member(member2), .rd_channel(h2.channel), .rd_v6(h2.v6),
    .q_valid(mem_valid3), .q_ip(mem_ip3), .q_port(mem_port3)
  );

  // ---------------- pipeline registers ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; s3 <= '0;
      h1 <= '0; h2 <= '0; ok3 <= 1'b0; v6_3 <= 1'b0;
      inst_hit1 <= 1'b0; inst_hit2 <= 1'b0; inst_hit3 <= 1'b0;
      inst1 <= '0; inst2 <= '0; lb_ip3 <= '0;
      epoch_hit2 <= 1'b0; epoch_hit3 <= 1'b0;
    end else if (adv) begin
      s1 <= '{valid: s_valid, first: in_first, data: s_data, keep: s_keep, last: s_last};
      h1 <= h0; inst_hit1 <= inst_hit0; inst1 <= inst0;
      s2 <= s1; h2 <= h1; inst_hit2 <= inst_hit1; inst2 <= inst1; epoch_hit2 <= epoch_hit1;
      s3 <= s2; ok3 <= h2.ok; v6_3 <= h2.v6; inst_hit3 <= inst_hit2; epoch_hit3 <= epoch_hit2;
      lb_ip3 <= h2.v6 ? lb_ip[inst2].ip6 : 128'(lb_ip[inst2].ip4);
    end
  end

  // ---------------- S3 ----------------
  assign drop_now  = !ok3 || !inst_hit3 || !epoch_hit3 || !mem_valid3;
  assign drop_beat = s3.first ? drop_now : drop_pkt;
  assign s3_take   = s3.valid && (drop_beat || strip_ready);
  assign adv       = !s3.valid || s3_take;

  always_ff @(posedge clk) begin
    if (!rst_n)                      drop_pkt <= 1'b0;
    else if (s3_take && s3.first)    drop_pkt <= drop_now;
  end

  hdr_rewrite u_rw (
    .data_in(s3.data), .v6(v6_3), .new_dst(mem_ip3), .new_src(lb_ip3), .new_port(mem_port3),
    .data_out(rw_data)
  );

  shim_strip u_strip (
    .clk, .rst_n,
    .in_valid(s3.valid && !drop_beat), .in_ready(strip_ready),
    .in_data(s3.first ? rw_data : s3.data), .in_keep(s3.keep), .in_last(s3.last), .in_v6(v6_3),
    .out_valid(m_valid), .out_ready(m_ready),
    .out_data(m_data), .out_keep(m_keep), .out_last(m_last)
  );

  // ---------------- counters ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_fwd <= '0; cnt_drop_fmt <= '0; cnt_drop_inst <= '0;
      cnt_drop_epoch <= '0; cnt_drop_member <= '0;
    end else if (s3_take && s3.first) begin
      if (!ok3)            cnt_drop_fmt    <= cnt_drop_fmt + 1;
      else if (!inst_hit3)   cnt_drop_inst   <= cnt_drop_inst + 1;
      else if (!epoch_hit3)  cnt_drop_epoch  <= cnt_drop_epoch + 1;
      else if (!mem_valid3)  cnt_drop_member <= cnt_drop_member + 1;
      else                   cnt_fwd         <= cnt_fwd + 1;
    end
  end

  // Sources are never back-pressured beyond the handshake: an offered input
  // beat must stay until it is taken.
  a_in_stable: assume property (@(posedge clk) disable iff (!rst_n)
    s_valid && !s_ready |=> s_valid && $stable(s_data) && $stable(s_last));

endmodule
