// tb_calendar_lut: fills the whole calendar memory with a known pattern and
// reads it back with random tags, checking the slot = tag mod 512 indexing,
// the one-cycle read latency, the hold of the output while rd_en is low, and
// that a weighted calendar hands out events in proportion to its slots.
//
// The weighted round robin is the paper's; the calendar form, its 512 slots
// and the read timing checked here are this design's.
module tb_calendar_lut;
  import ejfat_pkg::*;

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [2:0] wr_inst = 0, rd_inst = 0;
  logic [1:0] wr_epoch = 0, rd_epoch = 0;
  logic [8:0] wr_slot = 0;
  member_id_t wr_member = 0, rd_member;
  tag_t rd_tag = 0;
  int checks = 0, failures = 0;
  int count [4];

  calendar_lut dut (.*);

  always #5 clk = ~clk;

  function automatic member_id_t pat(int i, int e, int s);
    return member_id_t'(i * 37 + e * 11 + s * 5 + (s >> 3));
  endfunction

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
    int i, e;
    tag_t t;
    for (int a = 0; a < 8 * 4 * 512; a++) begin
      @(negedge clk);
      wr_en = 1; wr_inst = 3'(a >> 11); wr_epoch = 2'(a >> 9); wr_slot = 9'(a);
      wr_member = pat(a >> 11, (a >> 9) & 3, a & 511);
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      i = $urandom_range(0, 7); e = $urandom_range(0, 3); t = {$urandom, $urandom};
      @(negedge clk); rd_en = 1; rd_inst = 3'(i); rd_epoch = 2'(e); rd_tag = t;
      @(negedge clk); rd_en = 0; rd_tag = ~t;
      chk(rd_member == pat(i, e, int'(t[8:0])), "lookup");
      @(negedge clk);
      chk(rd_member == pat(i, e, int'(t[8:0])), "hold while rd_en low");
    end
    // weighted calendar for instance 6 epoch 2: members 0..3 weights 1:2:3:2
    for (int s = 0; s < 512; s++) begin
      @(negedge clk);
      wr_en = 1; wr_inst = 3'd6; wr_epoch = 2'd2; wr_slot = 9'(s);
      wr_member = (s % 8 < 1) ? 0 : (s % 8 < 3) ? 1 : (s % 8 < 6) ? 2 : 3;
    end
    @(negedge clk); wr_en = 0;
    for (int m = 0; m < 4; m++) count[m] = 0;
    for (int ev = 1000; ev < 1000 + 4096; ev++) begin
      @(negedge clk); rd_en = 1; rd_inst = 3'd6; rd_epoch = 2'd2; rd_tag = 64'(ev);
      @(negedge clk); rd_en = 0;
      if (rd_member < 4) count[rd_member]++;
    end
    chk(count[0] == 512 && count[1] == 1024 && count[2] == 1536 && count[3] == 1024,
        $sformatf("weighted shares %0d %0d %0d %0d", count[0], count[1], count[2], count[3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
