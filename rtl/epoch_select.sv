// epoch_select: chooses the configuration epoch that governs a packet.
//
// The paper's control plane changes the distribution of events only at an
// aggregation tag it predicts lies in the future, so that events already in
// flight keep their compute node, and a node being removed keeps receiving
// the events in progress until it is retired. This block holds that in
// hardware: each instance has NUM_EPOCHS entries {valid, start_tag}; each
// epoch owns its own calendar in calendar_lut. A packet with tag T is governed
// by the valid epoch of its instance with the largest start_tag <= T. The
// control plane fills an unused epoch's calendar, then writes that epoch with
// a future start tag, and later clears the old epoch.
//
// Lookup is combinational; writes take effect the next cycle; reset clears
// every valid bit. `hit` is 0 when no valid epoch starts at or below T. Tags
// are compared as unsigned 64-bit numbers (no wrap-around handling). The epoch
// count and the comparison rule are this design's choices.
module epoch_select
  import ejfat_pkg::*;
#(
  parameter int unsigned N_INST   = NUM_INST,
  parameter int unsigned N_EPOCHS = NUM_EPOCHS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration
  input  logic                        wr_en,
  input  logic [$clog2(N_INST)-1:0]   wr_inst,
  input  logic [$clog2(N_EPOCHS)-1:0] wr_epoch,
  input  epoch_entry_t                wr_entry,
  // lookup
  input  logic [$clog2(N_INST)-1:0]   inst,
  input  tag_t                        tag,
  output logic                        hit,
  output logic [$clog2(N_EPOCHS)-1:0] epoch
);

  epoch_entry_t tbl [N_INST][N_EPOCHS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_INST; i++)
        for (int e = 0; e < N_EPOCHS; e++) tbl[i][e] <= '0;
    end else if (wr_en) begin
      tbl[wr_inst][wr_epoch] <= wr_entry;
    end
  end

  tag_t best;

  always_comb begin
    hit   = 1'b0;
    epoch = '0;
    best  = '0;
    for (int e = 0; e < N_EPOCHS; e++) begin
      if (tbl[inst][e].valid && tbl[inst][e].start_tag <= tag &&
          (!hit || tbl[inst][e].start_tag > best)) begin
        hit   = 1'b1;
        epoch = ($clog2(N_EPOCHS))'(e);
        best  = tbl[inst][e].start_tag;
      end
    end
  end

endmodule
