// ata_cluster: one ATA-Cache cluster.
//
// N_CORES cores share: one aggregated tag array holding all N_CORES tag
// arrays, N_CORES decoupled L1 caches (distributor + data array + controller)
// and the L1-to-L1 crossbar.  Core i talks only to L1 i (its local cache);
// L1 i reaches L1 j only through the crossbar and only after the aggregated
// tag array has shown that L1 j holds the sector, so caches without a copy
// see no traffic from other cores.  Each L1 has its own port to the L2 side
// (the L1-L2 network and L2 are outside this design).
//
// All ports are arrays indexed by the core number inside the cluster.  The
// ev_* outputs are per-core one-cycle event pulses for statistics;
// xbar_stall counts crossbar requests that lost arbitration this cycle.
//
// Timing: the lookup is combinational and registered by each L1 when it
// accepts a request; a local hit answers after 32 cycles.  Ten cores per
// cluster and the three routes follow the paper; the L1 controller's
// one-request-at-a-time operation and the crossbar's arbitration are this
// design's choices.  Lint note: rst_n is reported as used both
// synchronously and asynchronously; the synchronous use is the
// "disable iff" of the crossbar's assertion, which makes no hardware.
module ata_cluster
  import ata_pkg::*;
#(
  parameter int unsigned N_CORES = N_CORES_DEF,
  parameter int unsigned WAYS    = WAYS_DEF,
  parameter int unsigned SETS    = SETS_DEF,
  parameter int unsigned SECTORS = SECTORS_DEF,
  parameter int unsigned ADDR_W  = ADDR_W_DEF,
  parameter int unsigned HIT_LAT = HIT_LAT_DEF,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned SEC_W  = (SECTORS > 1) ? $clog2(SECTORS) : 1,
  localparam int unsigned ID_W   = (N_CORES > 1) ? $clog2(N_CORES) : 1,
  localparam int unsigned OFF_W  = $clog2(SECTOR_BYTES),
  localparam int unsigned TAG_W  = ADDR_W - OFF_W - SEC_W - SET_W,
  localparam int unsigned ENTRY_W = 1 + SECTORS + TAG_W,
  localparam int unsigned XREQ_W = SET_W + WAY_W + SEC_W + TAG_W,
  localparam int unsigned XRSP_W = 1 + SECTOR_W
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // cores
  input  logic [N_CORES-1:0]               core_req_valid,
  output logic [N_CORES-1:0]               core_req_ready,
  input  logic [N_CORES-1:0]               core_req_write,
  input  logic [N_CORES-1:0][ADDR_W-1:0]   core_req_addr,
  input  logic [N_CORES-1:0][SECTOR_W-1:0] core_req_wdata,
  output logic [N_CORES-1:0]               core_resp_valid,
  output logic [N_CORES-1:0]               core_resp_write,
  output logic [N_CORES-1:0][SECTOR_W-1:0] core_resp_rdata,
  // L2 side
  output logic [N_CORES-1:0]               l2_req_valid,
  input  logic [N_CORES-1:0]               l2_req_ready,
  output logic [N_CORES-1:0]               l2_req_write,
  output logic [N_CORES-1:0][ADDR_W-1:0]   l2_req_addr,
  output logic [N_CORES-1:0][SECTOR_W-1:0] l2_req_wdata,
  input  logic [N_CORES-1:0]               l2_resp_valid,
  input  logic [N_CORES-1:0][SECTOR_W-1:0] l2_resp_rdata,
  // statistics
  output logic [N_CORES-1:0]               ev_local_hit,
  output logic [N_CORES-1:0]               ev_remote_hit,
  output logic [N_CORES-1:0]               ev_l2_read,
  output logic [N_CORES-1:0]               ev_redirect,
  output logic [N_CORES-1:0]               ev_write,
  output logic [N_CORES-1:0]               ev_bank_conflict,
  output logic [ID_W:0]                    xbar_stall
);
  // aggregated tag array wiring
  logic [N_CORES-1:0][SET_W-1:0]             lk_set;
  logic [N_CORES-1:0][TAG_W-1:0]             lk_tag;
  logic [N_CORES-1:0][SEC_W-1:0]             lk_sector;
  logic [N_CORES-1:0][N_CORES-1:0]           hit_vec, line_vec;
  logic [N_CORES-1:0][N_CORES-1:0][WAY_W-1:0] hit_way, line_way;
  logic [N_CORES-1:0]                        upd_valid, upd_fill, upd_new_line;
  logic [N_CORES-1:0][SET_W-1:0]             upd_set, vict_set, probe_set;
  logic [N_CORES-1:0][WAY_W-1:0]             upd_way, vict_way, probe_way;
  logic [N_CORES-1:0][TAG_W-1:0]             upd_tag;
  logic [N_CORES-1:0][SEC_W-1:0]             upd_sector;
  logic [N_CORES-1:0][ENTRY_W-1:0]           probe_entry;

  ata_aggregated_tag_array #(
    .N_CORES(N_CORES), .WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS), .TAG_W(TAG_W)
  ) u_ata (
    .clk, .rst_n,
    .req_set (lk_set), .req_tag (lk_tag), .req_sector (lk_sector),
    .hit_vec, .hit_way, .line_vec, .line_way,
    .upd_valid, .upd_fill, .upd_new_line, .upd_set, .upd_way, .upd_tag, .upd_sector,
    .vict_set, .vict_way, .probe_set, .probe_way, .probe_entry
  );

  // crossbar wiring
  logic [N_CORES-1:0]              xq_valid, xq_ready, xi_valid, xr_valid, xr_ready, xs_valid;
  logic [N_CORES-1:0][ID_W-1:0]    xq_dest, xr_src, xs_dest;
  logic [N_CORES-1:0][XREQ_W-1:0]  xq_data, xr_data;
  logic [N_CORES-1:0][XRSP_W-1:0]  xi_data, xs_data;

  ata_l1_crossbar #(.N_PORTS(N_CORES), .REQ_W(XREQ_W), .RSP_W(XRSP_W)) u_xbar (
    .clk, .rst_n,
    .rq_valid (xq_valid), .rq_dest (xq_dest), .rq_data (xq_data), .rq_ready (xq_ready),
    .ro_valid (xr_valid), .ro_src  (xr_src),  .ro_data (xr_data), .ro_ready (xr_ready),
    .rs_valid (xs_valid), .rs_dest (xs_dest), .rs_data (xs_data),
    .so_valid (xi_valid), .so_data (xi_data),
    .stall_cnt (xbar_stall)
  );

  for (genvar c = 0; c < N_CORES; c++) begin : g_l1
    logic [N_CORES-1:0][WAY_W-1:0] hw_c;
    assign hw_c = hit_way[c];
    ata_l1_cache #(
      .N_CORES(N_CORES), .SELF(c), .WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS),
      .ADDR_W(ADDR_W), .HIT_LAT(HIT_LAT)
    ) u_l1 (
      .clk, .rst_n,
      .core_req_valid  (core_req_valid[c]),
      .core_req_ready  (core_req_ready[c]),
      .core_req_write  (core_req_write[c]),
      .core_req_addr   (core_req_addr[c]),
      .core_req_wdata  (core_req_wdata[c]),
      .core_resp_valid (core_resp_valid[c]),
      .core_resp_write (core_resp_write[c]),
      .core_resp_rdata (core_resp_rdata[c]),
      .lk_set          (lk_set[c]),
      .lk_tag          (lk_tag[c]),
      .lk_sector       (lk_sector[c]),
      .lk_hit_vec      (hit_vec[c]),
      .lk_hit_way      (hw_c),
      .lk_line_hit     (line_vec[c][c]),
      .lk_line_way     (line_way[c][c]),
      .upd_valid       (upd_valid[c]),
      .upd_fill        (upd_fill[c]),
      .upd_new_line    (upd_new_line[c]),
      .upd_set         (upd_set[c]),
      .upd_way         (upd_way[c]),
      .upd_tag         (upd_tag[c]),
      .upd_sector      (upd_sector[c]),
      .vict_set        (vict_set[c]),
      .vict_way        (vict_way[c]),
      .probe_set       (probe_set[c]),
      .probe_way       (probe_way[c]),
      .probe_entry     (probe_entry[c]),
      .xq_valid        (xq_valid[c]),
      .xq_dest         (xq_dest[c]),
      .xq_data         (xq_data[c]),
      .xq_ready        (xq_ready[c]),
      .xi_valid        (xi_valid[c]),
      .xi_data         (xi_data[c]),
      .xr_valid        (xr_valid[c]),
      .xr_src          (xr_src[c]),
      .xr_data         (xr_data[c]),
      .xr_ready        (xr_ready[c]),
      .xs_valid        (xs_valid[c]),
      .xs_dest         (xs_dest[c]),
      .xs_data         (xs_data[c]),
      .l2_req_valid    (l2_req_valid[c]),
      .l2_req_ready    (l2_req_ready[c]),
      .l2_req_write    (l2_req_write[c]),
      .l2_req_addr     (l2_req_addr[c]),
      .l2_req_wdata    (l2_req_wdata[c]),
      .l2_resp_valid   (l2_resp_valid[c]),
      .l2_resp_rdata   (l2_resp_rdata[c]),
      .ev_local_hit    (ev_local_hit[c]),
      .ev_remote_hit   (ev_remote_hit[c]),
      .ev_l2_read      (ev_l2_read[c]),
      .ev_redirect     (ev_redirect[c]),
      .ev_write        (ev_write[c]),
      .ev_bank_conflict(ev_bank_conflict[c])
    );
  end
endmodule
