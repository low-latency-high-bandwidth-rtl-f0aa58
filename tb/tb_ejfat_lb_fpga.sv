// tb_ejfat_lb_fpga: runs both ports of the two-port load balancer at once,
// at its default sizes.
//
// The control plane model gives every instance an IPv4 and an IPv6 address,
// 8 compute nodes and one calendar. Each port then receives its own stream of
// tagged IPv4 and IPv6 packets, first with random gaps and back-pressure, then
// at full rate. Every forwarded packet is compared with the byte-level
// reference on the port it entered, and each port's counters with the
// reference counts. The full-rate phase measures the two ports together: they
// must take an input beat on every cycle (no input stall) and deliver more
// than 100 bytes of packet data per cycle, the 200 Gb/s of one load-balancer
// FPGA at 250 MHz; the same event tag must pick the same node on both ports.
//
// The 200 Gb/s per FPGA is the paper's figure; the port count, the 250 MHz
// clock and the traffic are this design's choices.
module tb_ejfat_lb_fpga;
  import ejfat_pkg::*;
  import tb_ejfat_util::*;

  localparam int NP = 2;

  logic  clk = 0, rst_n = 0;
  logic  s_valid [NP], s_ready [NP], s_last [NP];
  data_t s_data  [NP];
  keep_t s_keep  [NP];
  logic  m_valid [NP], m_ready [NP], m_last [NP];
  data_t m_data  [NP];
  keep_t m_keep  [NP];
  cfg_wr_t cfg = '0;
  logic [31:0] cnt_fwd [NP], cnt_drop_fmt [NP], cnt_drop_inst [NP], cnt_drop_epoch [NP], cnt_drop_member [NP];

  ejfat_lb_fpga dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [127:0] P6LB = 128'h2001_0db8_00ff_0000_0000_0000_0000_0000;
  localparam logic [127:0] P6CN = 128'h2001_0db8_0c00_0000_0000_0000_0000_0000;

  function automatic logic [31:0]  lb4(int i);         return 32'h0A00_0001 + 32'(i); endfunction
  function automatic logic [127:0] lb6(int i);         return P6LB + 128'(i); endfunction
  function automatic logic [31:0]  cn4(int i, int m);  return 32'h0A20_0000 + 32'(i * 256 + m); endfunction
  function automatic logic [127:0] cn6(int i, int m);  return P6CN + 128'(i * 256 + m); endfunction
  // calendar of instance i: slot s names member (s + i) mod 8
  function automatic int node_of(int i, tag_t t);      return (int'(t % 512) + i) % 8; endfunction

  task automatic cfg_write(cfg_region_e r, int index, logic [191:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, region: r, index: 16'(index), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  bytes_t exp_q [NP][$];
  int     n_fwd [NP], n_drop [NP], n_out [NP];
  int     gap_pct = 20, bp_pct = 20;
  logic   meas = 0;
  longint bytes_meas = 0;
  int     cyc_meas = 0;
  int     stall_meas = 0;
  int     node_seen [NP][int];

  // input driver of one port
  task automatic send(int p, bytes_t pk, bit good);
    int nb = n_beats(pk);
    bit v6 = (pk[0][7:4] == 6);
    int u = v6 ? 40 : 20;
    tag_t t = 0;
    int inst;
    for (int k = 0; k < 8; k++) t = {t[55:0], pk[u+16+k]};
    inst = v6 ? int'(pk[39]) - 0 : int'(pk[19]) - 1;
    if (good) begin
      int m = node_of(inst, t);
      exp_q[p].push_back(expect_out(pk, v6 ? cn6(inst, m) : 128'(cn4(inst, m)),
                                    v6 ? lb6(inst) : 128'(lb4(inst)),
                                    16'(30000 + 16 * m + int'({pk[u+14], pk[u+15]}) % 4)));
      node_seen[p][int'(t)] = inst * 256 + m;
      n_fwd[p]++;
    end else n_drop[p]++;
    for (int j = 0; j < nb; j++) begin
      while ($urandom_range(0, 99) < gap_pct) begin s_valid[p] = 0; @(negedge clk); end
      s_valid[p] = 1; s_data[p] = beat_data(pk, j); s_keep[p] = beat_keep(pk, j); s_last[p] = (j == nb - 1);
      @(posedge clk);
      while (!s_ready[p]) @(posedge clk);
      @(negedge clk);
    end
    s_valid[p] = 0;
  endtask

  task automatic traffic(int p, int n, int t0, int minlen);
    for (int k = 0; k < n; k++) begin
      int inst = $urandom_range(0, 7);
      bit v6 = $urandom_range(0, 1);
      bytes_t pk = make_pkt_x(v6, v6 ? 128'h2001_0db8_5000_0000_0000_0000_0000_0001 : 128'h8155_0A01,
                              v6 ? lb6(inst) : 128'(lb4(inst)), 16'(40000 + p), 16'd19522,
                              16'($urandom_range(0, 3)), 64'(t0 + k), $urandom_range(minlen, 1400), k + 100 * p);
      bit good = ($urandom_range(0, 19) != 0);
      if (!good) pk[(v6 ? 40 : 20) + 9] = "Z";                 // bad magic: dropped
      send(p, pk, good);
    end
  endtask

  // output monitors
  bytes_t got [NP];
  always @(posedge clk) begin
    if (meas) cyc_meas++;
    for (int p = 0; p < NP; p++) if (meas && s_valid[p] && !s_ready[p]) stall_meas++;
    for (int p = 0; p < NP; p++)
      if (m_valid[p] && m_ready[p]) begin
        if (meas) bytes_meas += bytes_of(m_keep[p]);
        for (int b = 0; b < 64; b++) if (m_keep[p][b]) got[p].push_back(m_data[p][8*b +: 8]);
        if (m_last[p]) begin
          n_out[p]++;
          chk(exp_q[p].size() > 0, $sformatf("unexpected packet on port %0d", p));
          if (exp_q[p].size() > 0) chk(got[p] == exp_q[p].pop_front(), $sformatf("packet %0d on port %0d", n_out[p], p));
          got[p] = {};
        end
      end
  end
  always @(negedge clk) for (int p = 0; p < NP; p++) m_ready[p] <= ($urandom_range(0, 99) >= bp_pct);

  initial begin
    for (int p = 0; p < NP; p++) begin
      s_valid[p] = 0; s_last[p] = 0; s_data[p] = '0; s_keep[p] = '0;
      n_fwd[p] = 0; n_drop[p] = 0; n_out[p] = 0;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      member_entry_t me;
      epoch_entry_t  ee;
      inst_entry_t   ie;
      for (int m = 0; m < 8; m++) begin
        me.valid = 1'b1; me.ip4 = cn4(i, m); me.ip6 = cn6(i, m);
        me.base_port = 16'(30000 + 16 * m); me.port_bits = 4'd2;
        cfg_write(CFG_MEMBER, i * 256 + m, 192'(me));
      end
      for (int s = 0; s < 512; s++) cfg_write(CFG_CAL, (i * 4) * 512 + s, 192'((s + i) % 8));
      ee.valid = 1'b1; ee.start_tag = 64'd0;
      cfg_write(CFG_EPOCH, i * 4, 192'(ee));
      ie.en4 = 1'b1; ie.en6 = 1'b1; ie.ip4 = lb4(i); ie.ip6 = lb6(i);
      cfg_write(CFG_INST, i, 192'(ie));
    end

    // phase 1: gaps and back-pressure, both ports at once, overlapping tags
    fork
      traffic(0, 300, 5000, 0);
      traffic(1, 300, 5100, 0);
    join
    wait (exp_q[0].size() == 0 && exp_q[1].size() == 0);

    // phase 2: full rate on both ports, long packets
    gap_pct = 0; bp_pct = 0;
    repeat (4) @(negedge clk);
    meas = 1;
    fork
      traffic(0, 100, 7000, 1000);
      traffic(1, 100, 7000, 1000);
    join
    wait (exp_q[0].size() == 0 && exp_q[1].size() == 0);
    meas = 0;
    repeat (10) @(negedge clk);

    for (int p = 0; p < NP; p++) begin
      chk(cnt_fwd[p] == 32'(n_fwd[p]) && n_out[p] == n_fwd[p], $sformatf("port %0d forwarded %0d", p, cnt_fwd[p]));
      chk(cnt_drop_fmt[p] == 32'(n_drop[p]) && n_drop[p] > 0, $sformatf("port %0d drops %0d", p, cnt_drop_fmt[p]));
    end
    // same tag, same node on both ports (tags 5100..5299 went to both)
    begin
      automatic int same = 0;
      foreach (node_seen[0][t]) if (node_seen[1].exists(t)) begin
        same++;
        // node depends on instance too, so compare only where the instance matched
        if (node_seen[0][t] / 256 == node_seen[1][t] / 256)
          chk(node_seen[0][t] == node_seen[1][t], $sformatf("tag %0d same node", t));
      end
      chk(same > 0, "tags seen on both ports");
    end
    chk(stall_meas == 0, $sformatf("%0d input stalls at full rate", stall_meas));
    chk(real'(bytes_meas) / real'(cyc_meas) > 100.0,
        $sformatf("two ports moved %0.1f bytes per cycle", real'(bytes_meas) / real'(cyc_meas)));
    $display("port0 fwd=%0d drop=%0d port1 fwd=%0d drop=%0d, full rate %0.1f B/cycle = %0.0f Gb/s at 250 MHz",
             n_fwd[0], n_drop[0], n_fwd[1], n_drop[1], real'(bytes_meas) / real'(cyc_meas),
             real'(bytes_meas) / real'(cyc_meas) * 8.0 * 0.25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
