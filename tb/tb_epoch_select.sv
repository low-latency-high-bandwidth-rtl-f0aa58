// tb_epoch_select: random epoch tables against a reference that picks the
// valid epoch with the largest start tag not above the packet tag; also
// checks misses below every start tag and a scripted epoch hand-over.
//
// Changing the distribution only from a future tag is the paper's; the epoch
// table and its selection rule are this design's.
module tb_epoch_select;
  import ejfat_pkg::*;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [2:0] wr_inst = 0, inst = 0;
  logic [1:0] wr_epoch = 0, epoch;
  epoch_entry_t wr_entry = '0;
  tag_t tag = 0;
  logic hit;
  int checks = 0, failures = 0;
  logic v  [8][4];
  tag_t st [8][4];

  epoch_select dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(int i, int e, logic valid, tag_t s);
    @(negedge clk); wr_en = 1; wr_inst = 3'(i); wr_epoch = 2'(e); wr_entry = '{valid: valid, start_tag: s};
    @(negedge clk); wr_en = 0;
    v[i][e] = valid; st[i][e] = s;
  endtask

  task automatic look(int i, tag_t t);
    int be = -1;
    inst = 3'(i); tag = t; #1;
    for (int e = 0; e < 4; e++)
      if (v[i][e] && st[i][e] <= t && (be < 0 || st[i][e] > st[i][be])) be = e;
    chk(hit == (be >= 0), $sformatf("hit inst %0d tag %0d", i, t));
    if (be >= 0) chk(epoch == 2'(be), $sformatf("epoch inst %0d tag %0d", i, t));
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) for (int e = 0; e < 4; e++) begin v[i][e] = 0; st[i][e] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    look(0, 64'd5);
    // hand-over: epoch 0 from tag 0, epoch 1 from tag 1000
    wr(3, 0, 1, 64'd0);
    wr(3, 1, 1, 64'd1000);
    look(3, 64'd999); chk(epoch == 2'd0, "old epoch before boundary");
    look(3, 64'd1000); chk(epoch == 2'd1, "new epoch at boundary");
    look(3, 64'd5000);
    wr(3, 0, 0, 64'd0);                       // retire old epoch
    look(3, 64'd500); chk(!hit, "tag below retired epoch misses");
    for (int n = 0; n < 2000; n++) begin
      if ($urandom_range(0, 2) == 0)
        wr($urandom_range(0, 7), $urandom_range(0, 3), 1'($urandom_range(0, 3) != 0), 64'($urandom_range(0, 400)));
      look($urandom_range(0, 7), 64'($urandom_range(0, 450)));
    end
    look(1, 64'hFFFF_FFFF_FFFF_FFFF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
