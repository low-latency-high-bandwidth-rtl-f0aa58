// tb_hdr_rewrite: compares the rewritten first beat with the byte-level
// reference (new addresses and port, lengths less 16, IPv4 header checksum and
// UDP checksum recomputed in full over the shortened packet, a zero IPv4 UDP
// checksum kept zero) for random IPv4 and IPv6 packets; bytes of the shim and
// the payload in the beat must pass unchanged. A directed phase picks the new
// port so that the new UDP checksum computes to zero, which must be sent as
// 0xFFFF.
//
// The NAT-like address rewrite is the paper's; the length and checksum
// handling checked here are this design's.
module tb_hdr_rewrite;
  import ejfat_pkg::*;
  import tb_ejfat_util::*;

  data_t data_in, data_out;
  logic        v6;
  logic [127:0] new_dst, new_src;
  logic [15:0] new_port;
  int checks = 0, failures = 0;

  hdr_rewrite dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t p, q;
    int plen, u;
    bit f6, cs;
    for (int n = 0; n < 600; n++) begin
      f6 = (n % 3 == 0);
      cs = (n % 3 != 2);                      // every third IPv4 packet without UDP checksum
      u = f6 ? 40 : 20;
      plen = $urandom_range(0, 200);
      p = make_pkt_x(f6, {$urandom, $urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom, $urandom},
                     16'($urandom), 16'($urandom), 16'($urandom), {$urandom, $urandom}, plen, n, cs);
      v6 = f6;
      new_dst = {$urandom, $urandom, $urandom, $urandom}; new_src = {$urandom, $urandom, $urandom, $urandom};
      if (!f6) begin new_dst[127:32] = $urandom; new_src[127:32] = $urandom; end  // must be ignored
      new_port = 16'($urandom);
      data_in = beat_data(p, 0);
      #1;
      q = expect_out(p, new_dst, new_src, new_port);
      // IP and UDP headers as in the reference (UDP checksum computed over the
      // whole shortened packet), shim and payload bytes unchanged
      for (int b = 0; b < 64; b++) begin
        if (b < u + 8) chk(data_out[8*b +: 8] == q[b], $sformatf("pkt %0d (v6=%0d) byte %0d", n, f6, b));
        else           chk(data_out[8*b +: 8] == data_in[8*b +: 8], $sformatf("pkt %0d byte %0d kept", n, b));
      end
    end
    // directed: the port equal to the checksum the packet has with port 0
    // makes the ones'-complement sum 0xFFFF, a computed checksum of zero
    for (int n = 0; n < 40; n++) begin
      logic [15:0] c0;
      f6 = n[0];
      u = f6 ? 40 : 20;
      p = make_pkt_x(f6, {$urandom, $urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom, $urandom},
                     16'($urandom), 16'($urandom), 16'($urandom), {$urandom, $urandom}, $urandom_range(0, 40), n, 1);
      v6 = f6;
      new_dst = {$urandom, $urandom, $urandom, $urandom}; new_src = {$urandom, $urandom, $urandom, $urandom};
      q = expect_out(p, new_dst, new_src, 16'h0000);
      c0 = {q[u+6], q[u+7]};
      new_port = c0;
      data_in = beat_data(p, 0);
      #1;
      chk(data_out[8*(u+6) +: 16] == 16'hFFFF, $sformatf("zero checksum sent as 0xFFFF (v6=%0d)", f6));
      q = expect_out(p, new_dst, new_src, new_port);
      chk({q[u+6], q[u+7]} == 16'hFFFF, "reference agrees");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
