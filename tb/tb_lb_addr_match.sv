// tb_lb_addr_match: writes IPv4 and IPv6 instance addresses, then checks
// hits and misses per family, lowest-index priority on duplicates, disabling
// an entry and reset.
//
// Eight instances with IPv4 and IPv6 addresses are the paper's; the enable
// bits and the priority rule are this design's.
module tb_lb_addr_match;
  import ejfat_pkg::*;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [2:0] wr_idx = 0;
  inst_entry_t wr_entry = '0;
  logic        v6 = 0;
  logic [127:0] ip = 0;
  logic hit;
  logic [2:0] inst;
  int checks = 0, failures = 0;
  logic [31:0]  a4  [8];
  logic [127:0] a6  [8];
  logic         e4  [8];
  logic         e6  [8];
  localparam logic [127:0] P6 = 128'h2001_0db8_0000_0000_0000_0000_0000_0000;

  lb_addr_match dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(int i, logic en4, logic en6, logic [31:0] x4, logic [127:0] x6);
    @(negedge clk); wr_en = 1; wr_idx = 3'(i); wr_entry = '{en4: en4, en6: en6, ip4: x4, ip6: x6};
    @(negedge clk); wr_en = 0;
    e4[i] = en4; e6[i] = en6; a4[i] = x4; a6[i] = x6;
  endtask

  // reference: lowest enabled index with a matching address of the family
  task automatic look(logic fam6, logic [127:0] a);
    int exp_i = -1;
    v6 = fam6; ip = a; #1;
    for (int i = 7; i >= 0; i--)
      if (fam6 ? (e6[i] && a6[i] == a) : (e4[i] && a[127:32] == 0 && a4[i] == a[31:0])) exp_i = i;
    chk(hit == (exp_i >= 0), $sformatf("hit for %0d %h", fam6, a));
    if (exp_i >= 0) chk(inst == 3'(exp_i), $sformatf("inst for %h", a));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin e4[i] = 0; e6[i] = 0; a4[i] = 0; a6[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    look(0, 128'h0); look(1, 128'h0);            // nothing enabled after reset
    for (int i = 0; i < 8; i++) wr(i, 1, i != 4, 32'hC0A80000 + 32'(i), P6 + 128'(i));
    for (int i = 0; i < 10; i++) begin
      look(0, 128'(32'hC0A80000 + 32'(i)));
      look(1, P6 + 128'(i));
      look(1, 128'(32'hC0A80000 + 32'(i)));   // IPv4 value asked as IPv6
    end
    look(0, {96'h1, 32'hC0A80001});              // not an IPv4 value
    wr(5, 1, 1, 32'hC0A80002, P6 + 128'd2);      // duplicate of entry 2
    look(0, 128'(32'hC0A80002)); look(1, P6 + 128'd2);
    wr(2, 0, 0, 32'hC0A80002, P6 + 128'd2);      // disable 2: 5 answers
    look(0, 128'(32'hC0A80002)); look(1, P6 + 128'd2);
    for (int n = 0; n < 400; n++) begin
      if ($urandom_range(0, 3) == 0)
        wr($urandom_range(0, 7), 1'($urandom), 1'($urandom), 32'hC0A80000 + 32'($urandom_range(0, 15)),
           P6 + 128'($urandom_range(0, 15)));
      if ($urandom_range(0, 1) == 0) look(0, 128'(32'hC0A80000 + 32'($urandom_range(0, 15))));
      else                           look(1, P6 + 128'($urandom_range(0, 15)));
    end
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) begin e4[i] = 0; e6[i] = 0; end
    for (int i = 0; i < 16; i++) begin look(0, 128'(32'hC0A80000 + 32'(i))); look(1, P6 + 128'(i)); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
