// lb_addr_match: finds which virtual load-balancer instance a packet is
// addressed to.
//
// Each of the N instances (8, the number the paper gives) owns a well-known
// IPv4 address, an IPv6 address, or both, that data sources send to. The
// control plane writes an entry {en4, en6, ip4, ip6} through the write port
// (one entry per cycle, effective the next cycle). The lookup is
// combinational: `hit` is set when the packet's destination equals the
// enabled address of the packet's family (`v6`) of some instance, and `inst`
// is that instance, the lowest index if two share an address. Reset clears
// every enable bit.
//
// One address per family and instance, and the write port format, are this
// design's choices.
module lb_addr_match
  import ejfat_pkg::*;
#(
  parameter int unsigned N = NUM_INST
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_idx,
  input  inst_entry_t          wr_entry,
  // lookup
  input  logic                 v6,
  input  ip6_t                 ip,       // IPv4 address in bits 31:0
  output logic                 hit,
  output logic [$clog2(N)-1:0] inst
);

  inst_entry_t tbl [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) tbl[i] <= '0;
    end else if (wr_en) begin
      tbl[wr_idx] <= wr_entry;
    end
  end

  always_comb begin
    hit  = 1'b0;
    inst = '0;
    for (int i = N - 1; i >= 0; i--)
      if (v6 ? (tbl[i].en6 && tbl[i].ip6 == ip)
             : (tbl[i].en4 && ip[127:32] == '0 && tbl[i].ip4 == ip[31:0])) begin
        hit  = 1'b1;
        inst = ($clog2(N))'(i);
      end
  end

endmodule
