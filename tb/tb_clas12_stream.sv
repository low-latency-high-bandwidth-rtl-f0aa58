// tb_clas12_stream: the streaming demonstration the load balancer was shown
// with, run through one data-plane port at its default sizes: ten senders
// stream data aggregation events to one instance, whose events are spread
// over forty compute nodes, at full line rate.
//
// The control-plane model registers 40 compute nodes with equal weight (the
// calendar names node s mod 40 in slot s) and one instance address. Each
// event is one packet of 1400..1460 payload bytes from each of the ten
// senders, one channel per sender; packets of two neighbouring events are
// interleaved. The input is driven with no gaps and the output never
// back-pressures. Checked: every forwarded packet byte for byte, that all
// packets of an event reach one node, that all forty nodes receive events,
// an input rate above 100 Gb/s at 250 MHz (50 bytes per cycle) with no input
// stall, and a first-beat latency under one microsecond (250 cycles).
//
// The sender and node counts and the 100 Gb/s come from the published
// demonstration; the packet sizes, the equal weights and the 250 MHz clock
// are this testbench's choices.
module tb_clas12_stream;
  import ejfat_pkg::*;
  import tb_ejfat_util::*;

  localparam int N_SEND   = 10;
  localparam int N_CN     = 40;
  localparam int N_EVENTS = 120;
  localparam logic [31:0] LB_IP = 32'h0A00_0001;

  logic  clk = 0, rst_n = 0;
  logic  s_valid = 0, s_ready, s_last = 0;
  data_t s_data = '0;
  keep_t s_keep = '0;
  logic  m_valid, m_ready = 1, m_last;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- configuration ----------------
  task automatic cfg_write(cfg_region_e r, int index, logic [191:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, region: r, index: 16'(index), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic logic [31:0] cn_ip(int m);
    return 32'h0A01_0000 + 32'(m);
  endfunction

  function automatic int node_of(tag_t t);
    return int'(t % 512) % N_CN;
  endfunction

  // ---------------- traffic ----------------
  bytes_t exp_q[$];
  int     exp_node[$], exp_tag[$];
  int     n_sent = 0, n_out = 0, n_stall = 0;
  int     cyc = 0, t_in0 = -1, t_in1 = 0;
  longint in_bytes = 0;
  int     in_first_t[$];
  int     max_lat = 0;
  int     node_pkts [N_CN];
  int     event_node [int];

  task automatic send(bytes_t p);
    int nb = n_beats(p);
    int u = 20;
    tag_t tg = 0;
    int m;
    for (int k = 0; k < 8; k++) tg = {tg[55:0], p[u+16+k]};
    m = node_of(tg);
    exp_q.push_back(expect_out(p, 128'(cn_ip(m)), 128'(LB_IP),
                               16'(17750 + 16 * m + int'({p[u+14], p[u+15]}) % 16)));
    exp_node.push_back(m);
    exp_tag.push_back(int'(tg));
    n_sent++;
    for (int j = 0; j < nb; j++) begin
      s_valid = 1; s_data = beat_data(p, j); s_keep = beat_keep(p, j); s_last = (j == nb - 1);
      @(posedge clk);
      while (!s_ready) begin n_stall++; @(posedge clk); end
      @(negedge clk);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && s_valid && s_ready) begin
      if (t_in0 < 0) t_in0 = cyc;
      t_in1 = cyc;
      in_bytes += longint'(bytes_of(s_keep));
    end
  end

  // first-beat times, for the latency
  logic in_sop = 1, out_sop = 1;
  always @(posedge clk) begin
    if (rst_n && s_valid && s_ready) begin
      if (in_sop) in_first_t.push_back(cyc);
      in_sop <= s_last;
    end
  end

  bytes_t got;
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      if (out_sop && in_first_t.size() > 0) begin
        automatic int lat = cyc - in_first_t.pop_front();
        if (lat > max_lat) max_lat = lat;
      end
      out_sop <= m_last;
      for (int b = 0; b < 64; b++) if (m_keep[b]) got.push_back(m_data[8*b +: 8]);
      if (m_last) begin
        n_out++;
        chk(exp_q.size() > 0, "unexpected output packet");
        if (exp_q.size() > 0) begin
          automatic int m = exp_node.pop_front();
          automatic int t = exp_tag.pop_front();
          chk(got == exp_q.pop_front(), $sformatf("output packet %0d", n_out));
          node_pkts[m]++;
          if (event_node.exists(t)) chk(event_node[t] == m, $sformatf("event %0d on one node", t));
          else event_node[t] = m;
        end
        got = {};
      end
    end
  end

  bytes_t win[$];   // packets of the events being interleaved

  initial begin
    int s;
    for (int m = 0; m < N_CN; m++) node_pkts[m] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // control plane: 40 nodes with 16 ports each, equal weights, one epoch
    for (int m = 0; m < N_CN; m++) begin
      member_entry_t e;
      e.valid = 1'b1; e.ip4 = cn_ip(m); e.ip6 = '0;
      e.base_port = 16'(17750 + 16 * m); e.port_bits = 4'd4;
      cfg_write(CFG_MEMBER, m, 192'(e));
    end
    for (s = 0; s < 512; s++) cfg_write(CFG_CAL, s, 192'(s % N_CN));
    begin
      epoch_entry_t ee;
      inst_entry_t  ie;
      ee.valid = 1'b1; ee.start_tag = 64'd0;
      cfg_write(CFG_EPOCH, 0, 192'(ee));
      ie.en4 = 1'b1; ie.en6 = 1'b0; ie.ip4 = LB_IP; ie.ip6 = '0;
      cfg_write(CFG_INST, 0, 192'(ie));
    end
    repeat (4) @(negedge clk);

    // ten senders, one packet each per event, two events interleaved
    for (int t = 10000; t < 10000 + N_EVENTS || win.size() > 0; ) begin
      while (t < 10000 + N_EVENTS && win.size() < 2 * N_SEND) begin
        for (int k = 0; k < N_SEND; k++) begin
          automatic bytes_t pk = make_pkt(32'h8155_0A00 + 32'(k), LB_IP, 16'(40000 + k), 16'd19522,
                                          16'(k), 64'(t), $urandom_range(1400, 1460), t + 31 * k);
          win.push_back(pk);
        end
        t++;
      end
      begin
        automatic int k = $urandom_range(0, win.size() - 1);
        automatic bytes_t pk = win[k];
        win.delete(k);
        send(pk);
      end
    end
    s_valid = 0;
    wait (exp_q.size() == 0);
    repeat (10) @(negedge clk);

    begin
      automatic real rate = real'(in_bytes) / real'(t_in1 - t_in0 + 1);
      automatic int used = 0;
      for (int m = 0; m < N_CN; m++) if (node_pkts[m] > 0) used++;
      chk(n_out == n_sent && cnt_fwd == 32'(n_sent), $sformatf("forwarded %0d of %0d", n_out, n_sent));
      chk(cnt_drop_fmt == 0 && cnt_drop_inst == 0 && cnt_drop_epoch == 0 && cnt_drop_member == 0, "no drops");
      chk(used == N_CN, $sformatf("%0d of %0d nodes received events", used, N_CN));
      chk(event_node.num() == N_EVENTS, "every event delivered");
      chk(n_stall == 0, $sformatf("%0d input stalls", n_stall));
      chk(rate > 50.0, $sformatf("input %0.1f bytes per cycle", rate));
      chk(max_lat < 250, $sformatf("latency %0d cycles", max_lat));
      $display("events=%0d packets=%0d nodes=%0d input %0.1f B/cycle = %0.0f Gb/s at 250 MHz, max latency %0d cycles",
               event_node.num(), n_out, used, rate, rate * 8.0 * 0.25, max_lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
