// ata_aggregated_tag_array: the aggregated tag array of one cluster.
//
// Holds the N_CORES decoupled tag arrays of the cluster side by side.  Each
// core presents the set index, tag and sector of its request; every tag array
// exposes all its sets at once, a tag selector per way of every array routes
// the right set to each request, a comparator group per (request, array)
// compares the tags, and a result processing unit per request folds the
// comparisons into the aggregated hit vector and the hit way per array.  So
// each request learns in the same cycle where in the whole cluster the data
// lives, with no probe messages sent to other caches.
//
// The compare path is combinational from req_* to hit_*/line_*; the caller
// registers the results.  The update, victim and probe ports of each tag
// array are passed through for the owning L1.  Structure as in the paper's
// aggregated tag array figure.
module ata_aggregated_tag_array
  import ata_pkg::*;
#(
  parameter int unsigned N_CORES = N_CORES_DEF,
  parameter int unsigned WAYS    = WAYS_DEF,
  parameter int unsigned SETS    = SETS_DEF,
  parameter int unsigned SECTORS = SECTORS_DEF,
  parameter int unsigned TAG_W   = 22,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned SEC_W  = (SECTORS > 1) ? $clog2(SECTORS) : 1,
  localparam int unsigned ENTRY_W = 1 + SECTORS + TAG_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // lookups, one per core
  input  logic [N_CORES-1:0][SET_W-1:0]          req_set,
  input  logic [N_CORES-1:0][TAG_W-1:0]          req_tag,
  input  logic [N_CORES-1:0][SEC_W-1:0]          req_sector,
  output logic [N_CORES-1:0][N_CORES-1:0]        hit_vec,   // [req][array]
  output logic [N_CORES-1:0][N_CORES-1:0][WAY_W-1:0] hit_way,
  output logic [N_CORES-1:0][N_CORES-1:0]        line_vec,
  output logic [N_CORES-1:0][N_CORES-1:0][WAY_W-1:0] line_way,
  // per tag array: owner update, victim and probe ports
  input  logic [N_CORES-1:0]                     upd_valid,
  input  logic [N_CORES-1:0]                     upd_fill,
  input  logic [N_CORES-1:0]                     upd_new_line,
  input  logic [N_CORES-1:0][SET_W-1:0]          upd_set,
  input  logic [N_CORES-1:0][WAY_W-1:0]          upd_way,
  input  logic [N_CORES-1:0][TAG_W-1:0]          upd_tag,
  input  logic [N_CORES-1:0][SEC_W-1:0]          upd_sector,
  input  logic [N_CORES-1:0][SET_W-1:0]          vict_set,
  output logic [N_CORES-1:0][WAY_W-1:0]          vict_way,
  input  logic [N_CORES-1:0][SET_W-1:0]          probe_set,
  input  logic [N_CORES-1:0][WAY_W-1:0]          probe_way,
  output logic [N_CORES-1:0][ENTRY_W-1:0]        probe_entry
);
  // selected entry: [array][way][request]
  logic [N_CORES-1:0][WAYS-1:0][N_CORES-1:0][ENTRY_W-1:0] sel;
  // comparator outputs: [request][array][way]
  logic [N_CORES-1:0][N_CORES-1:0][WAYS-1:0] lmatch, shit;

  for (genvar a = 0; a < N_CORES; a++) begin : g_arr
    logic [SETS-1:0][WAYS-1:0][ENTRY_W-1:0] ent;

    ata_tag_array #(.WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS), .TAG_W(TAG_W)) u_tags (
      .clk, .rst_n,
      .set_entry    (ent),
      .upd_valid    (upd_valid[a]),
      .upd_fill     (upd_fill[a]),
      .upd_new_line (upd_new_line[a]),
      .upd_set      (upd_set[a]),
      .upd_way      (upd_way[a]),
      .upd_tag      (upd_tag[a]),
      .upd_sector   (upd_sector[a]),
      .vict_set     (vict_set[a]),
      .vict_way     (vict_way[a]),
      .probe_set    (probe_set[a]),
      .probe_way    (probe_way[a]),
      .probe_entry  (probe_entry[a])
    );

    for (genvar w = 0; w < WAYS; w++) begin : g_way
      logic [SETS-1:0][ENTRY_W-1:0] way_col;
      always_comb begin
        for (int s = 0; s < SETS; s++) way_col[s] = ent[s][w];
      end
      ata_tag_selector #(.N_REQ(N_CORES), .SETS(SETS), .ENTRY_W(ENTRY_W)) u_sel (
        .set_entry (way_col),
        .req_set   (req_set),
        .sel_entry (sel[a][w])
      );
    end

    for (genvar r = 0; r < N_CORES; r++) begin : g_cmp
      logic [WAYS-1:0]              v;
      logic [WAYS-1:0][SECTORS-1:0] sv;
      logic [WAYS-1:0][TAG_W-1:0]   t;
      always_comb begin
        for (int w = 0; w < WAYS; w++)
          {v[w], sv[w], t[w]} = sel[a][w][r];
      end
      ata_comparator_group #(.WAYS(WAYS), .TAG_W(TAG_W), .SECTORS(SECTORS)) u_cmp (
        .way_valid      (v),
        .way_sect_valid (sv),
        .way_tag        (t),
        .req_tag        (req_tag[r]),
        .req_sector     (req_sector[r]),
        .line_match     (lmatch[r][a]),
        .sector_hit     (shit[r][a])
      );
    end
  end

  for (genvar r = 0; r < N_CORES; r++) begin : g_rpu
    ata_result_proc #(.N_ARR(N_CORES), .WAYS(WAYS)) u_rpu (
      .line_match (lmatch[r]),
      .sector_hit (shit[r]),
      .hit_vec    (hit_vec[r]),
      .hit_way    (hit_way[r]),
      .line_vec   (line_vec[r]),
      .line_way   (line_way[r])
    );
  end
endmodule
