// tb_shim_strip: streams IPv4 and IPv6 packets of random length (44..420
// bytes) through shim_strip with random input gaps and random output
// back-pressure, and compares every output packet with the input less its 16
// shim bytes (28..43 for IPv4, 48..63 for IPv6). Counts the
// three end-of-packet cases (single beat, last beat merged, extra tail beat)
// and back-pressure stalls, failing if any never happened. A directed phase
// checks the one-beat delay, the tail beat, the single-beat delay and that
// the input is never stalled.
//
// Removing the shim before delivery is the paper's; the realignment and its
// timing are this design's.
module tb_shim_strip;
  import ejfat_pkg::*;
  import tb_ejfat_util::*;

  logic  clk = 0, rst_n = 0;
  logic  in_valid = 0, in_ready, in_last = 0, in_v6 = 0;
  data_t in_data = '0;
  keep_t in_keep = '0;
  logic  out_valid, out_ready = 0, out_last;
  data_t out_data;
  keep_t out_keep;
  int checks = 0, failures = 0;
  int n_single = 0, n_merge = 0, n_tail = 0, n_stall = 0;
  int bp_pct = 30, gap_pct = 20;
  int cyc = 0;

  bytes_t exp_q[$];
  bytes_t got;

  shim_strip dut (.*);

  always #5 clk = ~clk;
  logic rec = 0;
  int in_t[$], out_t[$];

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor and back-pressure
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rec && in_valid && in_ready) in_t.push_back(cyc);
    if (rec && out_valid && out_ready) out_t.push_back(cyc);
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      for (int b = 0; b < 64; b++) if (out_keep[b]) got.push_back(out_data[8*b +: 8]);
      if (out_last) begin
        bytes_t e;
        chk(exp_q.size() > 0, "unexpected packet");
        if (exp_q.size() > 0) begin
          e = exp_q.pop_front();
          chk(got == e, $sformatf("packet of %0d bytes (got %0d)", e.size(), got.size()));
        end
        got = {};
      end
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 99) >= bp_pct);

  task automatic send(bytes_t p);
    bytes_t e;
    int nb = n_beats(p), nl;
    bit v6 = (p[0][7:4] == 6);
    int u = v6 ? 40 : 20;
    for (int i = 0; i < p.size(); i++) if (i < u + 8 || i >= u + 24) e.push_back(p[i]);
    exp_q.push_back(e);
    nl = p.size() - 64 * (nb - 1);
    if (nb == 1) n_single++; else if (nl <= 16) n_merge++; else n_tail++;
    for (int j = 0; j < nb; j++) begin
      while ($urandom_range(0, 99) < gap_pct) begin
        in_valid = 0; @(negedge clk);
      end
      in_valid = 1; in_data = beat_data(p, j); in_keep = beat_keep(p, j); in_last = (j == nb - 1);
      in_v6 = (j == 0) ? v6 : 1'($urandom);   // sampled with the first beat only
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 600; n++)
      send(make_pkt_x(n % 3 == 0, {$urandom, $urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom, $urandom},
                      1, 2, 3, 64'(n), $urandom_range(0, 356), n));
    // directed: no back-pressure, no gaps, three 2-beat packets then three
    // single-beat packets back to back
    wait (exp_q.size() == 0);
    bp_pct = 0; gap_pct = 0;
    repeat (3) @(negedge clk);
    rec = 1;
    for (int n = 0; n < 3; n++) send(make_pkt(1, 2, 3, 4, 5, 64'(n), 60, n));
    for (int n = 3; n < 6; n++) send(make_pkt(1, 2, 3, 4, 5, 64'(n), 4, n));
    wait (exp_q.size() == 0);
    rec = 0;
    // 3 packets of 104 bytes: 6 input beats, 6 output beats of 88 bytes
    // each (64 + a 24-byte tail beat), with no input stall; then 3 packets of
    // 48 bytes, one beat each, two cycles through the block
    chk(in_t.size() == 9 && out_t.size() == 9, $sformatf("beat counts %0d %0d", in_t.size(), out_t.size()));
    if (in_t.size() == 9 && out_t.size() == 9) begin
      chk(out_t[0] == in_t[1] + 1, "first output one cycle after second input beat");
      chk(out_t[1] == out_t[0] + 1, "tail beat right after");
      chk(out_t[5] - out_t[0] == 5, $sformatf("6 output beats in %0d cycles", out_t[5] - out_t[0] + 1));
      chk(in_t[8] - in_t[0] == 8, $sformatf("9 input beats in %0d cycles", in_t[8] - in_t[0] + 1));
      for (int k = 6; k < 9; k++)
        chk(out_t[k] == in_t[k] + 2, $sformatf("single-beat packet %0d: %0d cycles", k, out_t[k] - in_t[k]));
    end
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    chk(n_single > 0, "single-beat packet seen");
    chk(n_merge > 0, "merged last beat seen");
    chk(n_tail > 0, "extra tail beat seen");
    chk(n_stall > 0, "back-pressure seen");
    $display("single=%0d merged=%0d tail=%0d stalls=%0d", n_single, n_merge, n_tail, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
