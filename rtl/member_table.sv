// member_table: network coordinates of the compute nodes and the UDP port
// chosen by the channel tag.
//
// Compute nodes register with the control plane by giving an address and a
// range of UDP ports; the paper sends packets of different channels
// (sub-detectors) of one event to distinct ports of the same node so they can
// be processed in parallel. Each {instance, member} entry holds {valid, ip4,
// ip6, base_port, port_bits}. A lookup returns the valid bit, the node's
// address of the packet's family (`rd_v6`; IPv4 in bits 31:0) and the
// destination port base_port + (channel mod 2**port_bits).
//
// Memory with one write port and one synchronous read port: the outputs are
// valid the cycle after `rd_en` and hold while rd_en is low. Contents are not
// reset; the control plane writes a member before any calendar names it. The
// entry format and the modulo mapping of channel to port are this design's
// choices.
module member_table
  import ejfat_pkg::*;
#(
  parameter int unsigned N_INST    = NUM_INST,
  parameter int unsigned N_MEMBERS = MAX_MEMBERS
) (
  input  logic                      clk,
  // configuration
  input  logic                      wr_en,
  input  logic [$clog2(N_INST)-1:0] wr_inst,
  input  member_id_t                wr_member,
  input  member_entry_t             wr_entry,
  // lookup
  input  logic                      rd_en,
  input  logic [$clog2(N_INST)-1:0] rd_inst,
  input  member_id_t                rd_member,
  input  chan_t                     rd_channel,
  input  logic                      rd_v6,
  output logic                      q_valid,
  output ip6_t                      q_ip,
  output logic [15:0]               q_port
);

  localparam int unsigned MW = $clog2(N_MEMBERS);
  localparam int unsigned AW = $clog2(N_INST) + MW;

  member_entry_t mem [2**AW];
  member_entry_t q;
  chan_t         q_chan;
  logic          q_v6;
  logic [15:0]   mask;

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_inst, wr_member[MW-1:0]}] <= wr_entry;
    if (rd_en) begin
      q      <= mem[{rd_inst, rd_member[MW-1:0]}];
      q_chan <= rd_channel;
      q_v6   <= rd_v6;
    end
  end

  always_comb begin
    mask    = 16'((17'd1 << q.port_bits) - 17'd1);
    q_valid = q.valid;
    q_ip    = q_v6 ? q.ip6 : 128'(q.ip4);
    q_port  = q.base_port + (q_chan & mask);
  end

endmodule
