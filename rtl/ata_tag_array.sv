// ata_tag_array: the decoupled tag array of one core's L1 cache.
//
// The tag array is taken out of the L1 and placed in the cluster's aggregated
// tag array.  Every set is a bank of its own (here: its own registers), so
// all SETS x WAYS entries are presented on set_entry every cycle and any
// number of cores can look up different sets at once through the tag
// selectors.  An entry is {line valid, SECTORS sector-valid bits, tag}.
//
// Replacement is true LRU (Table II of the evaluated GPU: LRU) kept as a
// per-set permutation of ages; the victim of a set is its lowest invalid way,
// otherwise the way of age WAYS-1.  Only the owning core's L1 updates the
// array, through one port: upd_valid touches (set, way) in the LRU order; with
// upd_fill it also writes the tag and sets the sector's valid bit; with
// upd_new_line the other sector bits are cleared (a new line is allocated).
// Updates take effect at the clock edge; all read ports are combinational.
// The probe port lets the owner re-check one (set, way) when it serves a
// remote read.  LRU aging and the update/probe ports are this design's
// choices; the set-per-bank layout is the paper's.
module ata_tag_array
  import ata_pkg::*;
#(
  parameter int unsigned WAYS    = WAYS_DEF,
  parameter int unsigned SETS    = SETS_DEF,
  parameter int unsigned SECTORS = SECTORS_DEF,
  parameter int unsigned TAG_W   = 22,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned SEC_W  = (SECTORS > 1) ? $clog2(SECTORS) : 1,
  localparam int unsigned ENTRY_W = 1 + SECTORS + TAG_W
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // all entries, every cycle (one bank per set)
  output logic [SETS-1:0][WAYS-1:0][ENTRY_W-1:0] set_entry,
  // owner update port
  input  logic                                 upd_valid,
  input  logic                                 upd_fill,
  input  logic                                 upd_new_line,
  input  logic [SET_W-1:0]                     upd_set,
  input  logic [WAY_W-1:0]                     upd_way,
  input  logic [TAG_W-1:0]                     upd_tag,
  input  logic [SEC_W-1:0]                     upd_sector,
  // victim of a set
  input  logic [SET_W-1:0]                     vict_set,
  output logic [WAY_W-1:0]                     vict_way,
  // probe of one entry
  input  logic [SET_W-1:0]                     probe_set,
  input  logic [WAY_W-1:0]                     probe_way,
  output logic [ENTRY_W-1:0]                   probe_entry
);
  logic [SETS-1:0][WAYS-1:0]              valid_q;
  logic [SETS-1:0][WAYS-1:0][SECTORS-1:0] sect_q;
  logic [SETS-1:0][WAYS-1:0][TAG_W-1:0]   tag_q;
  logic [SETS-1:0][WAYS-1:0][WAY_W-1:0]   age_q;

  always_comb begin
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++)
        set_entry[s][w] = {valid_q[s][w], sect_q[s][w], tag_q[s][w]};
  end

  assign probe_entry = set_entry[probe_set][probe_way];

  always_comb begin
    logic found;
    found    = 1'b0;
    vict_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!found && !valid_q[vict_set][w]) begin
        vict_way = WAY_W'(w);
        found    = 1'b1;
      end
    end
    for (int w = 0; w < WAYS; w++) begin
      if (!found && age_q[vict_set][w] == WAY_W'(WAYS - 1)) begin
        vict_way = WAY_W'(w);
        found    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      sect_q  <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          tag_q[s][w] <= '0;
          age_q[s][w] <= WAY_W'(w);
        end
    end else if (upd_valid) begin
      for (int w = 0; w < WAYS; w++) begin
        if (age_q[upd_set][w] < age_q[upd_set][upd_way])
          age_q[upd_set][w] <= age_q[upd_set][w] + 1'b1;
      end
      age_q[upd_set][upd_way] <= '0;
      if (upd_fill) begin
        valid_q[upd_set][upd_way] <= 1'b1;
        tag_q[upd_set][upd_way]   <= upd_tag;
        if (upd_new_line) sect_q[upd_set][upd_way] <= '0;
        sect_q[upd_set][upd_way][upd_sector] <= 1'b1;
      end
    end
  end
endmodule
