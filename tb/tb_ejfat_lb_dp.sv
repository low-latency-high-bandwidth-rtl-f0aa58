// tb_ejfat_lb_dp: end-to-end test of the load-balancer data plane at its
// default sizes.
//
// A control-plane model configures all 8 virtual instances, each with an IPv4
// address and the even ones also with an IPv6 address. Instance 0 gets
// 40 compute nodes with a weighted calendar (weights 1:2:3), the others 4
// nodes each; instance 5 gets no epoch, and instance 3's calendar names one
// node that is not registered. Ten sources then send data aggregation events
// (a third of those to a dual-stack instance over IPv6),
// each cut into packets on several channels, with packets of neighbouring
// events interleaved, random gaps and random output back-pressure, plus
// packets that must be dropped (malformed, addressed to no instance). Midway
// the control plane removes node 7 of instance 0: it writes a new calendar
// into epoch 1 and enables it from a tag 60 events ahead; events before that
// tag must still reach node 7, later ones never; after the in-flight events
// have drained, node 7 and epoch 0 are retired. Last, a new node 40 joins
// instance 0 through epoch 2 from a tag 60 events ahead: it must receive no
// event before that tag and some after it.
//
// Every forwarded packet is compared byte for byte with a reference built
// from the testbench's own copy of the tables; the drop counters are compared
// with the reference's counts. A directed phase checks the pipeline latency
// (5 cycles to the first output beat, for a multi-beat and a single-beat
// packet alike). Each mechanism is counted and must occur at least once.
//
// The 8 instances, the 10 senders and 40 nodes, and removing or adding a
// node without disturbing events in flight come from the paper; the table
// contents, packet sizes, traffic mix and drop cases are this test's choices.
module tb_ejfat_lb_dp;
  import ejfat_pkg::*;
  import tb_ejfat_util::*;

  logic  clk = 0, rst_n = 0;
  logic  s_valid = 0, s_ready, s_last = 0;
  data_t s_data = '0;
  keep_t s_keep = '0;
  logic  m_valid, m_ready = 0, m_last;
  data_t m_data;
  keep_t m_keep;
  cfg_wr_t cfg = '0;
  logic [31:0] cnt_fwd, cnt_drop_fmt, cnt_drop_inst, cnt_drop_epoch, cnt_drop_member;

  ejfat_lb_dp dut (.*);

  always #2 clk = ~clk;   // 250 MHz

  int checks = 0, failures = 0;
  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference copy of the tables ----------------
  inst_entry_t   m_inst    [8];
  epoch_entry_t  m_epoch   [8][4];
  member_id_t    m_cal     [8][4][512];
  member_entry_t m_mem     [8][256];

  // ---------------- configuration writes ----------------
  task automatic cfg_write(cfg_region_e r, int index, logic [191:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, region: r, index: 16'(index), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic set_inst(int i, logic en4, logic en6, logic [31:0] ip4, logic [127:0] ip6);
    inst_entry_t e;
    e.en4 = en4; e.en6 = en6; e.ip4 = ip4; e.ip6 = ip6;
    m_inst[i] = e;
    cfg_write(CFG_INST, i, 192'(e));
  endtask

  task automatic set_epoch(int i, int e, logic v, tag_t t);
    m_epoch[i][e] = '{valid: v, start_tag: t};
    cfg_write(CFG_EPOCH, i * 4 + e, 192'(m_epoch[i][e]));
  endtask

  task automatic set_cal(int i, int e, int s, int m);
    m_cal[i][e][s] = member_id_t'(m);
    cfg_write(CFG_CAL, (i * 4 + e) * 512 + s, 192'(m));
  endtask

  task automatic set_member(int i, int m, logic v, logic [31:0] ip, logic [15:0] base, logic [3:0] pb);
    m_mem[i][m] = '{valid: v, ip4: ip, ip6: P6CN + 128'(ip), base_port: base, port_bits: pb};
    cfg_write(CFG_MEMBER, i * 256 + m, 192'(m_mem[i][m]));
  endtask

  localparam logic [127:0] P6LB = 128'h2001_0db8_00ff_0000_0000_0000_0000_0000;
  localparam logic [127:0] P6CN = 128'h2001_0db8_0c00_0000_0000_0000_0000_0000;

  function automatic tag_t pkt_tag(bytes_t p);
    int u = (p[0][7:4] == 6) ? 40 : 20;
    tag_t t = 0;
    for (int k = 0; k < 8; k++) t = {t[55:0], p[u+16+k]};
    return t;
  endfunction

  // ---------------- reference forwarding decision ----------------
  typedef enum int { R_FWD, R_FMT, R_INST, R_EPOCH, R_MEMBER } res_e;

  // returns the decision; for R_FWD also the expected output packet and node
  function automatic res_e decide(bytes_t p, logic fmt_ok, output bytes_t q, output int node);
    bit          v6  = (p[0][7:4] == 6);
    int          u   = v6 ? 40 : 20;
    logic [127:0] dst = 0;
    logic [15:0] ch  = {p[u+14], p[u+15]};
    tag_t        tg  = pkt_tag(p);
    int inst = -1, ep = -1;
    member_entry_t me;
    node = -1;
    if (!fmt_ok) return R_FMT;
    for (int k = 0; k < (v6 ? 16 : 4); k++) dst = {dst[119:0], p[(v6 ? 24 : 16) + k]};
    for (int i = 7; i >= 0; i--)
      if (v6 ? (m_inst[i].en6 && m_inst[i].ip6 == dst) : (m_inst[i].en4 && m_inst[i].ip4 == dst[31:0])) inst = i;
    if (inst < 0) return R_INST;
    for (int e = 0; e < 4; e++)
      if (m_epoch[inst][e].valid && m_epoch[inst][e].start_tag <= tg &&
          (ep < 0 || m_epoch[inst][e].start_tag > m_epoch[inst][ep].start_tag)) ep = e;
    if (ep < 0) return R_EPOCH;
    node = int'(m_cal[inst][ep][tg % 512]);
    me = m_mem[inst][node];
    if (!me.valid) return R_MEMBER;
    q = expect_out(p, v6 ? me.ip6 : 128'(me.ip4), v6 ? m_inst[inst].ip6 : 128'(m_inst[inst].ip4),
                   16'(int'(me.base_port) + int'(ch) % (1 << int'(me.port_bits))));
    node = inst * 256 + node;
    return R_FWD;
  endfunction

  // ---------------- traffic ----------------
  bytes_t exp_q[$];
  int     exp_node[$];
  int     n_res [5];
  int     n_pkts = 0, n_stall_in = 0, n_stall_out = 0, n_single = 0, n_merge = 0, n_tail = 0;
  int     n_v6 = 0;
  int     n_epoch1 = 0, n_inflight_removed = 0, n_after_removed = 0;
  int     inst_used [8];
  int     node_events [256];
  bit     port_seen [int];
  int     gap_pct = 20, bp_pct = 20;
  tag_t   switch_tag = 64'hFFFF_FFFF_FFFF_FFFF;
  tag_t   join_tag   = 64'hFFFF_FFFF_FFFF_FFFF;
  int     n_joined_before = 0, n_joined_after = 0;

  task automatic send(bytes_t p, logic fmt_ok);
    bytes_t q;
    int node, nb, nl;
    res_e r = decide(p, fmt_ok, q, node);
    tag_t tg = pkt_tag(p);
    bit   v6 = (p[0][7:4] == 6);
    n_res[r]++;
    n_pkts++;
    if (r == R_FWD) begin
      exp_q.push_back(q);
      exp_node.push_back(node);
      inst_used[node / 256]++;
      if (v6) n_v6++;
      else port_seen[{q[16], q[17], q[18], q[19], q[22], q[23]}] = 1;
      if (node / 256 == 0 && tg >= switch_tag) n_epoch1++;
      if (node == 7 && tg < switch_tag && switch_tag != 64'hFFFF_FFFF_FFFF_FFFF) n_inflight_removed++;
      if (node == 7 && tg >= switch_tag) n_after_removed++;
      if (node == 40 && tg < join_tag) n_joined_before++;
      if (node == 40 && tg >= join_tag) n_joined_after++;
      nb = n_beats(p); nl = p.size() - 64 * (nb - 1);
      if (nb == 1) n_single++; else if (nl <= 16) n_merge++; else n_tail++;
    end
    nb = n_beats(p);
    for (int j = 0; j < nb; j++) begin
      while ($urandom_range(0, 99) < gap_pct) begin s_valid = 0; @(negedge clk); end
      s_valid = 1; s_data = beat_data(p, j); s_keep = beat_keep(p, j); s_last = (j == nb - 1);
      @(posedge clk);
      while (!s_ready) begin n_stall_in++; @(posedge clk); end
      @(negedge clk);
    end
    s_valid = 0;
  endtask

  logic [31:0] lb_ip_of [8];
  logic [31:0] src_ip   [10];

  // one data aggregation event: `nch` channels, 1..2 packets each
  task automatic make_event(tag_t tag, int inst, ref bytes_t pk[$]);
    int nch = $urandom_range(1, 4);
    int sender = $urandom_range(0, 9);
    bit v6 = (inst % 2 == 0) && ($urandom_range(0, 2) == 0);
    for (int c = 0; c < nch; c++)
      for (int k = 0; k < $urandom_range(1, 2); k++)
        pk.push_back(make_pkt_x(v6, v6 ? 128'h2001_0db8_5000_0000_0000_0000_0000_0000 + 128'(sender) : 128'(src_ip[sender]),
                                v6 ? P6LB + 128'(inst) : 128'(lb_ip_of[inst]), 16'(40000 + sender), 16'(19522),
                                16'(c), tag, $urandom_range(0, 330), int'(tag) + c * 7 + k));
  endtask

  // send events [t0, t1) interleaving packets of up to three neighbouring events
  task automatic stream(tag_t t0, tag_t t1, bit all_inst);
    bytes_t win[$];
    int inst;
    tag_t t = t0;
    while (t < t1 || win.size() > 0) begin
      while (t < t1 && win.size() < 8) begin
        inst = all_inst ? ((int'(t) % 3 == 0) ? $urandom_range(0, 7) : 0) : 0;
        make_event(t, inst, win);
        t++;
      end
      begin
        int k = $urandom_range(0, win.size() > 3 ? 3 : win.size() - 1);
        bytes_t p = win[k];
        win.delete(k);
        send(p, 1'b1);
      end
      // now and then a packet to be dropped
      if ($urandom_range(0, 99) < 3) begin
        bytes_t b = make_pkt(src_ip[0], 32'h0A00_00F0, 1, 2, 0, t, 20, 1);  // no such instance
        send(b, 1'b1);
      end
      if ($urandom_range(0, 99) < 3) begin
        bytes_t b = make_pkt(src_ip[1], lb_ip_of[0], 1, 2, 0, t, 20, 2);
        b[29] = "X";                                                      // bad magic
        send(b, 1'b0);
      end
    end
  endtask

  // ---------------- output side ----------------
  bytes_t got;
  int     n_out = 0;
  int     cyc = 0;
  logic   rec = 0;
  int     in_first_t[$], out_first_t[$];
  logic   in_sop = 1, out_sop = 1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (s_valid && s_ready) begin
      if (rec && in_sop) in_first_t.push_back(cyc);
      in_sop <= s_last;
    end
    if (m_valid && !m_ready) n_stall_out++;
    if (m_valid && m_ready) begin
      if (rec && out_sop) out_first_t.push_back(cyc);
      out_sop <= m_last;
      for (int b = 0; b < 64; b++) if (m_keep[b]) got.push_back(m_data[8*b +: 8]);
      if (m_last) begin
        bytes_t e;
        int nd;
        n_out++;
        chk(exp_q.size() > 0, "unexpected output packet");
        if (exp_q.size() > 0) begin
          e = exp_q.pop_front();
          nd = exp_node.pop_front();
          chk(got == e, $sformatf("output packet %0d (%0d bytes, expected %0d)", n_out, got.size(), e.size()));
          if (nd < 256) node_events[nd]++;
        end
        got = {};
      end
    end
  end
  always @(negedge clk) m_ready <= ($urandom_range(0, 99) >= bp_pct);

  // ---------------- scenario ----------------
  initial begin
    int w, s;
    for (int i = 0; i < 8; i++) begin
      lb_ip_of[i] = 32'h0A00_0001 + 32'(i);       // 10.0.0.1 .. 10.0.0.8
      m_inst[i] = '0; inst_used[i] = 0;
      for (int e = 0; e < 4; e++) m_epoch[i][e] = '0;
    end
    for (int i = 0; i < 10; i++) src_ip[i] = 32'h8155_0A00 + 32'(i);
    for (int r = 0; r < 5; r++) n_res[r] = 0;
    for (int m = 0; m < 256; m++) node_events[m] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // control plane: nodes, calendars, epochs, then the instance addresses
    for (int m = 0; m < 40; m++)
      set_member(0, m, 1, 32'h0A01_0000 + 32'(m), 16'(17750 + 16 * m), 4'd2);
    // weights 1,2,3 by m mod 3, written round after round into 512 slots
    s = 0;
    while (s < 512)
      for (int m = 0; m < 40 && s < 512; m++)
        for (w = 0; w <= m % 3 && s < 512; w++) begin set_cal(0, 0, s, m); s++; end
    set_epoch(0, 0, 1, 64'd0);
    for (int i = 1; i < 8; i++) begin
      for (int m = 0; m < 4; m++)
        if (!(i == 3 && m == 3))
          set_member(i, m, 1, 32'h0A10_0000 + 32'(i * 256 + m), 16'(20000 + 100 * m), 4'(m));
      if (i == 3) set_member(3, 3, 0, 0, 0, 0);
      for (s = 0; s < 512; s++) set_cal(i, 0, s, s % 4);
      if (i != 5) set_epoch(i, 0, 1, 64'd0);
    end
    for (int i = 0; i < 8; i++) set_inst(i, 1, i % 2 == 0, lb_ip_of[i], P6LB + 128'(i));

    // directed latency check: no gaps, no back-pressure, idle pipeline
    gap_pct = 0; bp_pct = 0;
    repeat (4) @(negedge clk);
    rec = 1;
    send(make_pkt(src_ip[0], lb_ip_of[0], 1, 2, 0, 64'd100, 100, 5), 1'b1);  // 2 beats
    wait (exp_q.size() == 0);
    repeat (3) @(negedge clk);
    send(make_pkt(src_ip[0], lb_ip_of[0], 1, 2, 0, 64'd101, 4, 6), 1'b1);    // 1 beat
    wait (exp_q.size() == 0);
    repeat (3) @(negedge clk);
    rec = 0;
    chk(in_first_t.size() == 2 && out_first_t.size() == 2, "latency samples");
    if (out_first_t.size() == 2) begin
      chk(out_first_t[0] - in_first_t[0] == 5, $sformatf("multi-beat latency %0d", out_first_t[0] - in_first_t[0]));
      chk(out_first_t[1] - in_first_t[1] == 5, $sformatf("single-beat latency %0d", out_first_t[1] - in_first_t[1]));
      // the paper's microsecond-level latency: 250 cycles at 250 MHz
      chk(out_first_t[0] - in_first_t[0] < 250, "latency under 1 us");
    end

    // phase 1: all instances, events 1000..1299
    gap_pct = 20; bp_pct = 20;
    stream(64'd1000, 64'd1300, 1'b1);

    // phase 2: remove node 7 of instance 0 from new events only
    s = 0;
    while (s < 512)
      for (int m = 0; m < 40 && s < 512; m++)
        if (m != 7)
          for (w = 0; w <= m % 3 && s < 512; w++) begin set_cal(0, 1, s, m); s++; end
    switch_tag = 64'd1360;                      // 60 events ahead of the sources
    set_epoch(0, 1, 1, switch_tag);
    stream(64'd1300, 64'd1700, 1'b0);

    // phase 3: in-flight events are done; retire node 7 and epoch 0
    wait (exp_q.size() == 0);
    set_epoch(0, 0, 0, 64'd0);
    set_member(0, 7, 0, 0, 0, 0);
    stream(64'd1700, 64'd1900, 1'b1);
    // a stale event below every remaining epoch start tag
    send(make_pkt(src_ip[2], lb_ip_of[0], 1, 2, 0, 64'd1310, 50, 9), 1'b1);

    // phase 4: node 40 joins instance 0 with weight 3 from a future tag
    set_member(0, 40, 1, 32'h0A01_0028, 16'(17750 + 16 * 40), 4'd2);
    s = 0;
    while (s < 512)
      for (int m = 0; m <= 40 && s < 512; m++)
        if (m != 7)
          for (w = 0; w <= (m == 40 ? 2 : m % 3) && s < 512; w++) begin set_cal(0, 2, s, m); s++; end
    join_tag = 64'd1960;
    set_epoch(0, 2, 1, join_tag);
    stream(64'd1900, 64'd2100, 1'b0);

    wait (exp_q.size() == 0);
    repeat (10) @(negedge clk);

    chk(cnt_fwd == 32'(n_res[R_FWD]) + 0, $sformatf("forwarded %0d vs %0d", cnt_fwd, n_res[R_FWD]));
    chk(cnt_drop_fmt == 32'(n_res[R_FMT]), "format drops");
    chk(cnt_drop_inst == 32'(n_res[R_INST]), "instance drops");
    chk(cnt_drop_epoch == 32'(n_res[R_EPOCH]), "epoch drops");
    chk(cnt_drop_member == 32'(n_res[R_MEMBER]), "member drops");
    chk(n_out == n_res[R_FWD], "all forwarded packets seen");

    // every mechanism happened
    for (int r = 0; r < 5; r++) chk(n_res[r] > 0, $sformatf("decision %0d occurred", r));
    for (int i = 0; i < 8; i++) if (i != 5) chk(inst_used[i] > 0, $sformatf("instance %0d used", i));
    chk(n_epoch1 > 0, "events under the new epoch");
    chk(n_inflight_removed > 0, "in-flight events still reach the removed node");
    chk(n_after_removed == 0, "no new events reach the removed node");
    chk(n_joined_before == 0, "no event before its tag reaches the joining node");
    chk(n_joined_after > 0, "the joining node receives events from its tag on");
    chk(n_stall_in > 0 && n_stall_out > 0, "stalls");
    chk(n_single > 0 && n_merge > 0 && n_tail > 0, "end-of-packet cases");
    chk(port_seen.num() > 60, "channels spread over several ports per node");
    chk(n_v6 > 0, "IPv6 packets forwarded");
    // weights 1:2:3: nodes with m mod 3 == 2 get more packets than m mod 3 == 0
    begin
      automatic int lo = 0, hi = 0;
      for (int m = 0; m < 40; m++) begin
        if (m % 3 == 0) lo += node_events[m];
        if (m % 3 == 2) hi += node_events[m];
      end
      chk(hi > 2 * lo, $sformatf("weighted shares lo=%0d hi=%0d", lo, hi));
    end
    $display("packets=%0d fwd=%0d fmt=%0d inst=%0d epoch=%0d member=%0d epoch1=%0d inflight_to_removed=%0d",
             n_pkts, n_res[R_FWD], n_res[R_FMT], n_res[R_INST], n_res[R_EPOCH], n_res[R_MEMBER],
             n_epoch1, n_inflight_removed);
    $display("joined_node_packets=%0d", n_joined_after);
    $display("stall_in=%0d stall_out=%0d single=%0d merged=%0d tail=%0d ports=%0d ipv6=%0d",
             n_stall_in, n_stall_out, n_single, n_merge, n_tail, port_seen.num(), n_v6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
