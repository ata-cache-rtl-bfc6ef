// ata_tag_selector: the tag selector of one way of one tag array.
//
// Because every set of a decoupled tag array sits in a bank of its own, all
// SETS entries of this way are read every cycle.  Each of the N_REQ requests
// (one per core of the cluster) carries its own set index; the selector hands
// request r the entry of set req_set[r], so that different cores can compare
// against different sets of the same tag array in the same cycle without a
// bank conflict.  An entry is {line valid, sector valid bits, tag}.
// Purely combinational.  Structure as drawn in the aggregated tag array
// figure (one selector per way, set index as select); entry packing is this
// design's choice.
module ata_tag_selector #(
  parameter int unsigned N_REQ   = 10,
  parameter int unsigned SETS    = 8,
  parameter int unsigned ENTRY_W = 27,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1
) (
  input  logic [SETS-1:0][ENTRY_W-1:0]  set_entry,  // this way, every set
  input  logic [N_REQ-1:0][SET_W-1:0]   req_set,    // set index per request
  output logic [N_REQ-1:0][ENTRY_W-1:0] sel_entry   // entry per request
);
  always_comb begin
    for (int r = 0; r < N_REQ; r++) begin
      sel_entry[r] = set_entry[req_set[r]];
    end
  end
endmodule
