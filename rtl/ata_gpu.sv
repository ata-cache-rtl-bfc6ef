// ata_gpu: the L1 side of a GPU built from ATA-Cache clusters.
//
// N_CLUSTERS independent clusters of N_CORES cores each (3 x 10 = 30 cores in
// the evaluated GPU).  Sharing happens only inside a cluster; across clusters
// nothing is shared.  Core ports and L2 ports are flat arrays indexed by the
// global core number g = cluster * N_CORES + core; the SIMT cores, the
// L1-L2 network and the L2 itself are outside this design and connect here.
// The ev_* outputs are per-core event pulses, xbar_stall one count per
// cluster.
//
// Timing is that of the clusters: a local hit answers 32 cycles after the
// request is accepted, remote hits and L2 reads later.  Reset is
// asynchronous, active low.  Thirty cores in three clusters of ten follow
// the evaluated GPU; keeping the clusters fully separate (no sharing
// between them) is this design's reading of the cluster organisation.
// Lint note: rst_n is reported as used both synchronously and
// asynchronously; the synchronous use is the "disable iff" of the crossbar's
// assertion, which makes no hardware (see ata_l1_crossbar).
module ata_gpu
  import ata_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = N_CLUSTERS_DEF,
  parameter int unsigned N_CORES    = N_CORES_DEF,
  parameter int unsigned WAYS       = WAYS_DEF,
  parameter int unsigned SETS       = SETS_DEF,
  parameter int unsigned SECTORS    = SECTORS_DEF,
  parameter int unsigned ADDR_W     = ADDR_W_DEF,
  parameter int unsigned HIT_LAT    = HIT_LAT_DEF,
  localparam int unsigned NG        = N_CLUSTERS * N_CORES,
  localparam int unsigned ID_W      = (N_CORES > 1) ? $clog2(N_CORES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NG-1:0]               core_req_valid,
  output logic [NG-1:0]               core_req_ready,
  input  logic [NG-1:0]               core_req_write,
  input  logic [NG-1:0][ADDR_W-1:0]   core_req_addr,
  input  logic [NG-1:0][SECTOR_W-1:0] core_req_wdata,
  output logic [NG-1:0]               core_resp_valid,
  output logic [NG-1:0]               core_resp_write,
  output logic [NG-1:0][SECTOR_W-1:0] core_resp_rdata,
  output logic [NG-1:0]               l2_req_valid,
  input  logic [NG-1:0]               l2_req_ready,
  output logic [NG-1:0]               l2_req_write,
  output logic [NG-1:0][ADDR_W-1:0]   l2_req_addr,
  output logic [NG-1:0][SECTOR_W-1:0] l2_req_wdata,
  input  logic [NG-1:0]               l2_resp_valid,
  input  logic [NG-1:0][SECTOR_W-1:0] l2_resp_rdata,
  output logic [NG-1:0]               ev_local_hit,
  output logic [NG-1:0]               ev_remote_hit,
  output logic [NG-1:0]               ev_l2_read,
  output logic [NG-1:0]               ev_redirect,
  output logic [NG-1:0]               ev_write,
  output logic [NG-1:0]               ev_bank_conflict,
  output logic [N_CLUSTERS-1:0][ID_W:0] xbar_stall
);
  for (genvar k = 0; k < N_CLUSTERS; k++) begin : g_cl
    localparam int unsigned B = k * N_CORES;
    ata_cluster #(
      .N_CORES(N_CORES), .WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS),
      .ADDR_W(ADDR_W), .HIT_LAT(HIT_LAT)
    ) u_cl (
      .clk, .rst_n,
      .core_req_valid  (core_req_valid [B +: N_CORES]),
      .core_req_ready  (core_req_ready [B +: N_CORES]),
      .core_req_write  (core_req_write [B +: N_CORES]),
      .core_req_addr   (core_req_addr  [B +: N_CORES]),
      .core_req_wdata  (core_req_wdata [B +: N_CORES]),
      .core_resp_valid (core_resp_valid[B +: N_CORES]),
      .core_resp_write (core_resp_write[B +: N_CORES]),
      .core_resp_rdata (core_resp_rdata[B +: N_CORES]),
      .l2_req_valid    (l2_req_valid   [B +: N_CORES]),
      .l2_req_ready    (l2_req_ready   [B +: N_CORES]),
      .l2_req_write    (l2_req_write   [B +: N_CORES]),
      .l2_req_addr     (l2_req_addr    [B +: N_CORES]),
      .l2_req_wdata    (l2_req_wdata   [B +: N_CORES]),
      .l2_resp_valid   (l2_resp_valid  [B +: N_CORES]),
      .l2_resp_rdata   (l2_resp_rdata  [B +: N_CORES]),
      .ev_local_hit    (ev_local_hit   [B +: N_CORES]),
      .ev_remote_hit   (ev_remote_hit  [B +: N_CORES]),
      .ev_l2_read      (ev_l2_read     [B +: N_CORES]),
      .ev_redirect     (ev_redirect    [B +: N_CORES]),
      .ev_write        (ev_write       [B +: N_CORES]),
      .ev_bank_conflict(ev_bank_conflict[B +: N_CORES]),
      .xbar_stall      (xbar_stall[k])
    );
  end
endmodule
