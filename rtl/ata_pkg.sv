// ata_pkg: shared constants and types of the ATA-Cache (aggregated tag array)
// GPU shared L1 cache.
//
// The cache geometry defaults follow the evaluated GPU configuration: 64 KB
// per core, 64 ways, 128-byte lines split into four 32-byte sectors, which
// gives 8 sets; 10 cores share one aggregated tag array (30 cores in three
// clusters); local L1 hit latency 32 cycles.  The 188-cycle L2 lies outside the
// design and appears only in the testbenches' L2 model.  The
// 32-bit byte address and the one-sector (256-bit) access width are choices
// of this design.
package ata_pkg;

  localparam int unsigned N_CORES_DEF   = 10;   // cores per cluster
  localparam int unsigned N_CLUSTERS_DEF = 3;   // clusters in the GPU
  localparam int unsigned L1_BYTES      = 65536; // 64 KB per core
  localparam int unsigned LINE_BYTES    = 128;
  localparam int unsigned SECTOR_BYTES  = 32;
  localparam int unsigned WAYS_DEF      = 64;
  localparam int unsigned SETS_DEF      = L1_BYTES / (WAYS_DEF * LINE_BYTES); // 8
  localparam int unsigned SECTORS_DEF   = LINE_BYTES / SECTOR_BYTES;          // 4
  localparam int unsigned SECTOR_W      = SECTOR_BYTES * 8;  // 256-bit access
  localparam int unsigned ADDR_W_DEF    = 32;
  localparam int unsigned HIT_LAT_DEF   = 32;   // L1 hit latency (cycles)

  // Where the request distributor sends a request.
  typedef enum logic [1:0] {
    ROUTE_LOCAL  = 2'd0,   // data array of the core's own L1
    ROUTE_REMOTE = 2'd1,   // data array of another L1 in the cluster
    ROUTE_L2     = 2'd2    // L2 through the L1-L2 network
  } route_e;

endpackage
