// ata_request_distributor: the request distributor of one L1 cache.
//
// From the aggregated hit vector of a request (bit a: tag array a holds the
// requested sector) it picks the target:
//   * a write is handled only by the source core's own cache: the local data
//     array is updated when the local tag array hits, and the write goes on
//     to the L2 in every case (write-through, no allocation on a miss);
//   * a read that hits locally goes to the local data array, even when remote
//     copies exist (local has priority);
//   * a read that misses locally but hits in some remote tag array goes to
//     one remote cache through the crossbar;
//   * a read that misses everywhere goes to the L2.
// Local priority, write-local-only and the L2 fall-back follow the paper.
// Which remote copy is used when several exist is this design's choice: the
// first one after the local core in cyclic order, which spreads the load of
// a popular line over its holders instead of always hitting the lowest
// numbered cache.  Purely combinational.
module ata_request_distributor
  import ata_pkg::*;
#(
  parameter int unsigned N_CORES = N_CORES_DEF,
  parameter int unsigned SELF    = 0,
  localparam int unsigned ID_W   = (N_CORES > 1) ? $clog2(N_CORES) : 1
) (
  input  logic               is_write,
  input  logic [N_CORES-1:0] hit_vec,
  output route_e             route,
  output logic [ID_W-1:0]    remote_id,
  output logic               local_write   // write updates the local data
);
  always_comb begin
    logic found;
    found     = 1'b0;
    remote_id = '0;
    for (int k = 1; k < N_CORES; k++) begin
      if (!found && hit_vec[(SELF + k) % N_CORES]) begin
        remote_id = ID_W'((SELF + k) % N_CORES);
        found     = 1'b1;
      end
    end
    local_write = is_write && hit_vec[SELF];
    if (is_write)           route = ROUTE_L2;
    else if (hit_vec[SELF]) route = ROUTE_LOCAL;
    else if (found)         route = ROUTE_REMOTE;
    else                    route = ROUTE_L2;
  end
endmodule
