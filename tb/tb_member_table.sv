// tb_member_table: writes member entries, then checks the returned address
// of the requested family, the valid bit and the destination port
// base_port + (channel mod 2**port_bits), with a one-cycle read latency.
//
// Sending channels to distinct ports of a node is the paper's; the
// base-plus-channel port rule is this design's.
module tb_member_table;
  import ejfat_pkg::*;

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [2:0] wr_inst = 0, rd_inst = 0;
  member_id_t wr_member = 0, rd_member = 0;
  member_entry_t wr_entry = '0;
  chan_t rd_channel = 0;
  logic rd_v6 = 0;
  logic q_valid;
  logic [127:0] q_ip;
  logic [15:0] q_port;
  int checks = 0, failures = 0;
  member_entry_t model [8][256];

  member_table dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int i, m, pb;
    logic f6;
    chan_t c;
    member_entry_t e;
    for (int a = 0; a < 2048; a++) begin
      e.valid = 1'($urandom); e.ip4 = $urandom; e.ip6 = {$urandom, $urandom, $urandom, $urandom}; e.base_port = 16'($urandom_range(1024, 40000));
      e.port_bits = 4'($urandom_range(0, 6));
      model[a >> 8][a & 255] = e;
      @(negedge clk); wr_en = 1; wr_inst = 3'(a >> 8); wr_member = member_id_t'(a); wr_entry = e;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      i = $urandom_range(0, 7); m = $urandom_range(0, 255); c = 16'($urandom); f6 = 1'($urandom);
      @(negedge clk); rd_en = 1; rd_inst = 3'(i); rd_member = member_id_t'(m); rd_channel = c; rd_v6 = f6;
      @(negedge clk); rd_en = 0; rd_channel = ~c; rd_v6 = ~f6;
      e = model[i][m];
      pb = int'(e.port_bits);
      chk(q_valid == e.valid && q_ip == (f6 ? e.ip6 : 128'(e.ip4)), "entry");
      chk(int'(q_port) == (int'(e.base_port) + (int'(c) % (1 << pb))) % 65536, "port");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
