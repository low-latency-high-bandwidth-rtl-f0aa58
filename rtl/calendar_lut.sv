// calendar_lut: weighted round-robin table that maps an aggregation tag to a
// compute node.
//
// The paper distributes data aggregation events over the compute nodes (CNs)
// of an instance with a weighted round robin whose weights the control plane
// recomputes about once a second. Here every {instance, epoch} owns a calendar
// of N_SLOTS entries, each naming one member (CN). An event with tag T goes to
// the member in slot T mod N_SLOTS, so consecutive events walk round the
// calendar, and a member given k of the slots receives k/N_SLOTS of the
// events: the weights are the slot counts the control plane writes. All packets
// of one event share T and therefore the member, whatever their order.
//
// Memory of N_INST*N_EPOCHS*N_SLOTS words, one write and one synchronous read
// port: `rd_member` is valid the cycle after `rd_en`, and holds while rd_en is
// low. Contents are not reset; the control plane writes a calendar before it
// enables the epoch that uses it. Slot count and the modulo indexing are this
// design's choices.
module calendar_lut
  import ejfat_pkg::*;
#(
  parameter int unsigned N_INST   = NUM_INST,
  parameter int unsigned N_EPOCHS = NUM_EPOCHS,
  parameter int unsigned N_SLOTS  = CAL_SLOTS
) (
  input  logic                        clk,
  // configuration
  input  logic                        wr_en,
  input  logic [$clog2(N_INST)-1:0]   wr_inst,
  input  logic [$clog2(N_EPOCHS)-1:0] wr_epoch,
  input  logic [$clog2(N_SLOTS)-1:0]  wr_slot,
  input  member_id_t                  wr_member,
  // lookup
  input  logic                        rd_en,
  input  logic [$clog2(N_INST)-1:0]   rd_inst,
  input  logic [$clog2(N_EPOCHS)-1:0] rd_epoch,
  input  tag_t                        rd_tag,
  output member_id_t                  rd_member
);

  localparam int unsigned AW = $clog2(N_INST) + $clog2(N_EPOCHS) + $clog2(N_SLOTS);

  member_id_t mem [2**AW];

  logic [AW-1:0] wa, ra;
  assign wa = {wr_inst, wr_epoch, wr_slot};
  assign ra = {rd_inst, rd_epoch, rd_tag[$clog2(N_SLOTS)-1:0]};

  always_ff @(posedge clk) begin
    if (wr_en) mem[wa] <= wr_member;
    if (rd_en) rd_member <= mem[ra];
  end

endmodule
