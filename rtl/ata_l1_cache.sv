// ata_l1_cache: the decoupled L1 cache of one core (everything but its tag
// array, which lives in the cluster's aggregated tag array).
//
// Contents: the request distributor, the data array, and a controller that
// carries one request of its core at a time:
//   1. The core's request is looked up in the aggregated tag array in the
//      cycle it is accepted; the hit vector and ways are registered.
//   2. The distributor picks the target.  Local read hit: read the local data
//      array.  Remote hit only: send (set, way, sector, tag) through the
//      crossbar to the cache holding the sector; its data comes back, is
//      filled into the local cache and returned.  Miss everywhere: read the
//      L2, fill locally and return.  If the remote cache reports the line as
//      changed (its dirty bit) or no longer there, the read goes to the L2.
//      A write updates the local data array on a local hit (setting the
//      dirty bit) and is always written through to the L2.
//   3. The response goes to the core no earlier than HIT_LAT cycles after the
//      request was accepted (the 32-cycle L1 latency of the evaluated GPU),
//      so a local hit takes exactly HIT_LAT cycles and everything else longer.
// Fills allocate the line's LRU victim unless the tag is already present
// (sector miss), in which case only the sector is added.
//
// Independently of its own request, the cache serves remote reads coming
// from the crossbar on the data array's remote port: it re-checks its own tag
// entry at (set, way) and answers with the sector and an "unavailable" flag
// (line replaced, sector invalid or line dirty) one cycle after the bank
// grant.
//
// The three routing cases, local priority, write-local-only and the dirty-bit
// fall-back are the paper's.  One outstanding request per core, write-through
// with no write allocation, the full-sector write, the re-check of the tag on
// a remote read and all handshakes are this design's choices.
module ata_l1_cache
  import ata_pkg::*;
#(
  parameter int unsigned N_CORES = N_CORES_DEF,
  parameter int unsigned SELF    = 0,
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
  input  logic                           clk,
  input  logic                           rst_n,
  // core side
  input  logic                           core_req_valid,
  output logic                           core_req_ready,
  input  logic                           core_req_write,
  input  logic [ADDR_W-1:0]              core_req_addr,
  input  logic [SECTOR_W-1:0]            core_req_wdata,
  output logic                           core_resp_valid,
  output logic                           core_resp_write,
  output logic [SECTOR_W-1:0]            core_resp_rdata,
  // lookup in the aggregated tag array (combinational both ways)
  output logic [SET_W-1:0]               lk_set,
  output logic [TAG_W-1:0]               lk_tag,
  output logic [SEC_W-1:0]               lk_sector,
  input  logic [N_CORES-1:0]             lk_hit_vec,
  input  logic [N_CORES-1:0][WAY_W-1:0]  lk_hit_way,
  input  logic                           lk_line_hit,   // own array
  input  logic [WAY_W-1:0]               lk_line_way,   // own array
  // own tag array: update, victim, probe
  output logic                           upd_valid,
  output logic                           upd_fill,
  output logic                           upd_new_line,
  output logic [SET_W-1:0]               upd_set,
  output logic [WAY_W-1:0]               upd_way,
  output logic [TAG_W-1:0]               upd_tag,
  output logic [SEC_W-1:0]               upd_sector,
  output logic [SET_W-1:0]               vict_set,
  input  logic [WAY_W-1:0]               vict_way,
  output logic [SET_W-1:0]               probe_set,
  output logic [WAY_W-1:0]               probe_way,
  input  logic [ENTRY_W-1:0]             probe_entry,
  // crossbar: own remote read out
  output logic                           xq_valid,
  output logic [ID_W-1:0]                xq_dest,
  output logic [XREQ_W-1:0]              xq_data,
  input  logic                           xq_ready,
  input  logic                           xi_valid,      // its answer
  input  logic [XRSP_W-1:0]              xi_data,
  // crossbar: remote reads served here
  input  logic                           xr_valid,
  input  logic [ID_W-1:0]                xr_src,
  input  logic [XREQ_W-1:0]              xr_data,
  output logic                           xr_ready,
  output logic                           xs_valid,
  output logic [ID_W-1:0]                xs_dest,
  output logic [XRSP_W-1:0]              xs_data,
  // L2 side (one request in flight; a write is done once accepted)
  output logic                           l2_req_valid,
  input  logic                           l2_req_ready,
  output logic                           l2_req_write,
  output logic [ADDR_W-1:0]              l2_req_addr,
  output logic [SECTOR_W-1:0]            l2_req_wdata,
  input  logic                           l2_resp_valid,
  input  logic [SECTOR_W-1:0]            l2_resp_rdata,
  // one-cycle event pulses (statistics)
  output logic                           ev_local_hit,
  output logic                           ev_remote_hit,
  output logic                           ev_l2_read,
  output logic                           ev_redirect,
  output logic                           ev_write,
  output logic                           ev_bank_conflict
);
  typedef enum logic [3:0] {
    S_IDLE, S_DIST, S_LREAD, S_LRWAIT, S_LWRITE, S_XREQ, S_XWAIT,
    S_L2REQ, S_L2WAIT, S_FILL, S_RESP
  } state_e;

  state_e state_q;

  // latched request and lookup result
  logic                          wr_q;
  logic [ADDR_W-1:0]             addr_q;
  logic [SECTOR_W-1:0]           wdata_q;
  logic [N_CORES-1:0]            hv_q;
  logic [N_CORES-1:0][WAY_W-1:0] hw_q;
  logic                          lhit_q;
  logic [WAY_W-1:0]              lway_q;
  logic [SECTOR_W-1:0]           data_q;
  logic [15:0]                   cnt_q;

  logic [SEC_W-1:0] sec_q;
  logic [SET_W-1:0] set_q;
  logic [TAG_W-1:0] tag_q;
  assign sec_q = addr_q[OFF_W +: SEC_W];
  assign set_q = addr_q[OFF_W + SEC_W +: SET_W];
  assign tag_q = addr_q[ADDR_W-1 -: TAG_W];

  assign lk_sector = core_req_addr[OFF_W +: SEC_W];
  assign lk_set    = core_req_addr[OFF_W + SEC_W +: SET_W];
  assign lk_tag    = core_req_addr[ADDR_W-1 -: TAG_W];

  // request distributor
  route_e          route;
  logic [ID_W-1:0] remote_id;
  logic            local_write;
  ata_request_distributor #(.N_CORES(N_CORES), .SELF(SELF)) u_dist (
    .is_write    (wr_q),
    .hit_vec     (hv_q),
    .route       (route),
    .remote_id   (remote_id),
    .local_write (local_write)
  );
  logic [ID_W-1:0] rid_q;

  // data array
  logic                o_valid, o_write, o_fill, o_new_line, o_gnt;
  logic [WAY_W-1:0]    o_way;
  logic [SECTOR_W-1:0] o_wdata, o_rdata;
  logic                r_gnt, r_dirty;
  logic [SECTOR_W-1:0] r_rdata;

  logic [SET_W-1:0] xr_set;
  logic [WAY_W-1:0] xr_way;
  logic [SEC_W-1:0] xr_sec;
  logic [TAG_W-1:0] xr_tag;
  assign {xr_set, xr_way, xr_sec, xr_tag} = xr_data;

  logic [WAY_W-1:0] fill_way;
  assign fill_way = lhit_q ? lway_q : vict_way;

  always_comb begin
    o_valid    = 1'b0;
    o_write    = 1'b0;
    o_fill     = 1'b0;
    o_new_line = 1'b0;
    o_way      = hw_q[SELF];
    o_wdata    = wdata_q;
    unique case (state_q)
      S_LREAD:  o_valid = 1'b1;
      S_LWRITE: begin o_valid = 1'b1; o_write = 1'b1; end
      S_FILL: begin
        o_valid    = 1'b1;
        o_write    = 1'b1;
        o_fill     = 1'b1;
        o_new_line = !lhit_q;
        o_way      = fill_way;
        o_wdata    = data_q;
      end
      default: ;
    endcase
  end

  ata_data_array #(.WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS), .DATA_W(SECTOR_W)) u_data (
    .clk, .rst_n,
    .o_valid, .o_write, .o_fill, .o_new_line,
    .o_set    (set_q),
    .o_way,
    .o_sector (sec_q),
    .o_wdata, .o_gnt, .o_rdata,
    .r_valid  (xr_valid),
    .r_set    (xr_set),
    .r_way    (xr_way),
    .r_sector (xr_sec),
    .r_gnt, .r_rdata, .r_dirty,
    .conflict (ev_bank_conflict)
  );

  // own tag array updates (LRU touch on local hits, fill on allocation)
  always_comb begin
    upd_valid    = o_gnt;
    upd_fill     = o_gnt && o_fill;
    upd_new_line = o_new_line;
    upd_set      = set_q;
    upd_way      = o_way;
    upd_tag      = tag_q;
    upd_sector   = sec_q;
  end
  assign vict_set = set_q;

  // serving remote reads
  logic srv_q, srv_ok_q;
  logic [ID_W-1:0] srv_src_q;
  logic            p_valid;
  logic [SECTORS-1:0] p_sect;
  logic [TAG_W-1:0]   p_tag;
  assign probe_set = xr_set;
  assign probe_way = xr_way;
  assign {p_valid, p_sect, p_tag} = probe_entry;
  assign xr_ready = r_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      srv_q     <= 1'b0;
      srv_ok_q  <= 1'b0;
      srv_src_q <= '0;
    end else begin
      srv_q <= r_gnt;
      if (r_gnt) begin
        srv_src_q <= xr_src;
        srv_ok_q  <= p_valid && (p_tag == xr_tag) && p_sect[xr_sec];
      end
    end
  end
  assign xs_valid = srv_q;
  assign xs_dest  = srv_src_q;
  assign xs_data  = {!srv_ok_q || r_dirty, r_rdata};

  // own remote read
  assign xq_valid = (state_q == S_XREQ);
  assign xq_dest  = rid_q;
  assign xq_data  = {set_q, hw_q[rid_q], sec_q, tag_q};

  // L2
  assign l2_req_valid = (state_q == S_L2REQ);
  assign l2_req_write = wr_q;
  assign l2_req_addr  = addr_q;
  assign l2_req_wdata = wdata_q;

  // core
  assign core_req_ready  = (state_q == S_IDLE);
  assign core_resp_valid = (state_q == S_RESP) && (cnt_q >= 16'(HIT_LAT));
  assign core_resp_write = wr_q;
  assign core_resp_rdata = data_q;

  always_comb begin
    ev_local_hit  = 1'b0;
    ev_remote_hit = 1'b0;
    ev_l2_read    = 1'b0;
    ev_write      = 1'b0;
    if (state_q == S_DIST) begin
      ev_write      = wr_q;
      ev_local_hit  = !wr_q && route == ROUTE_LOCAL;
      ev_remote_hit = !wr_q && route == ROUTE_REMOTE;
      ev_l2_read    = !wr_q && route == ROUTE_L2;
    end
    ev_redirect = (state_q == S_XWAIT) && xi_valid && xi_data[XRSP_W-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      wr_q    <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      hv_q    <= '0;
      hw_q    <= '0;
      lhit_q  <= 1'b0;
      lway_q  <= '0;
      data_q  <= '0;
      cnt_q   <= '0;
      rid_q   <= '0;
    end else begin
      if (cnt_q != '1) cnt_q <= cnt_q + 1'b1;
      unique case (state_q)
        S_IDLE: if (core_req_valid) begin
          wr_q    <= core_req_write;
          addr_q  <= core_req_addr;
          wdata_q <= core_req_wdata;
          hv_q    <= lk_hit_vec;
          hw_q    <= lk_hit_way;
          lhit_q  <= lk_line_hit;
          lway_q  <= lk_line_way;
          cnt_q   <= 16'd1;
          state_q <= S_DIST;
        end
        S_DIST: begin
          rid_q <= remote_id;
          if (wr_q)                     state_q <= local_write ? S_LWRITE : S_L2REQ;
          else if (route == ROUTE_LOCAL)  state_q <= S_LREAD;
          else if (route == ROUTE_REMOTE) state_q <= S_XREQ;
          else                            state_q <= S_L2REQ;
        end
        S_LREAD:  if (o_gnt) state_q <= S_LRWAIT;
        S_LRWAIT: begin
          data_q  <= o_rdata;
          state_q <= S_RESP;
        end
        S_LWRITE: if (o_gnt) state_q <= S_L2REQ;
        S_XREQ:   if (xq_ready) state_q <= S_XWAIT;
        S_XWAIT:  if (xi_valid) begin
          if (xi_data[XRSP_W-1]) state_q <= S_L2REQ;   // changed: go to L2
          else begin
            data_q  <= xi_data[SECTOR_W-1:0];
            state_q <= S_FILL;
          end
        end
        S_L2REQ:  if (l2_req_ready) state_q <= wr_q ? S_RESP : S_L2WAIT;
        S_L2WAIT: if (l2_resp_valid) begin
          data_q  <= l2_resp_rdata;
          state_q <= S_FILL;
        end
        S_FILL:   if (o_gnt) state_q <= S_RESP;
        S_RESP:   if (core_resp_valid) state_q <= S_IDLE;
        default:  state_q <= S_IDLE;
      endcase
    end
  end
endmodule
