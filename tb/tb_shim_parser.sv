// tb_shim_parser: checks field extraction and the well-formedness rules of
// shim_parser on random IPv4 and IPv6 EJFAT packets, and that each single
// corruption (IP version, header length, fragment, next protocol, lengths,
// magic, shim version, shim protocol, truncated beat) clears `ok`.
//
// That the shim carries an aggregation tag and a channel tag is the paper's;
// its layout and the well-formedness checks are this design's.
module tb_shim_parser;
  import ejfat_pkg::*;
  import tb_ejfat_util::*;

  data_t    data;
  keep_t    keep;
  pkt_hdr_t hdr;
  int checks = 0, failures = 0;

  shim_parser dut (.data, .keep, .hdr);

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
    logic [127:0] src, dst;
    logic [15:0] sp, dp, ch;
    logic [63:0] tag;
    int plen, u;
    bit v6;
    for (int n = 0; n < 300; n++) begin
      v6 = n % 2;
      u = v6 ? 40 : 20;
      src = {$urandom, $urandom, $urandom, $urandom}; dst = {$urandom, $urandom, $urandom, $urandom};
      if (!v6) begin src[127:32] = '0; dst[127:32] = '0; end
      sp = 16'($urandom); dp = 16'($urandom);
      ch = 16'($urandom); tag = {$urandom, $urandom}; plen = $urandom_range(0, 100);
      p = make_pkt_x(v6, src, dst, sp, dp, ch, tag, plen, n);
      data = beat_data(p, 0); keep = beat_keep(p, 0);
      #1;
      chk(hdr.ok, "ok on good packet");
      chk(hdr.v6 == v6, "family");
      chk(hdr.ip_src == src && hdr.ip_dst == dst, "addresses");
      chk(hdr.udp_src == sp && hdr.udp_dst == dp, "ports");
      chk(hdr.udp_len == 16'(24 + plen), "UDP length");
      chk(hdr.udp_csum == {p[u+6], p[u+7]}, "UDP checksum field");
      chk(hdr.channel == ch && hdr.tag == tag, "shim tags");
      // one corruption at a time
      for (int c = 0; c < 10; c++) begin
        q = p;
        case (c)
          0: if (v6) q[6] = 8'd6; else q[0] = 8'h46;        // next header TCP / IHL 6
          1: if (v6) q[5] = q[5] ^ 8'h01; else q[6] = 8'h20; // payload length / MF
          2: if (v6) q[0] = 8'h70; else q[9] = 8'd6;         // version 7 / TCP
          3: q[u+5] = q[u+5] ^ 8'h01;                         // UDP length mismatch
          4: q[u+9] = "C";                                    // magic
          5: q[u+10] = 8'd2;                                  // shim version
          6: q[u+11] = 8'd9;                                  // shim protocol
          7: begin                                            // too short for the shim
               if (v6) begin q[4] = 0; q[5] = 20; end else begin q[2] = 0; q[3] = 40; end
               q[u+4] = 0; q[u+5] = 20;
             end
          9: q[0] = 8'h55;                                    // IP version 5
          default: ;
        endcase
        data = beat_data(q, 0);
        keep = (c == 8) ? keep_t'((65'd1 << (u + 23)) - 1) : beat_keep(q, 0);
        #1;
        chk(!hdr.ok, $sformatf("corruption %0d rejected (v6=%0d)", c, v6));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
