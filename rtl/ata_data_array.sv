// ata_data_array: data array of one decoupled L1 cache (no tags inside).
//
// Storage is SETS x WAYS lines of SECTORS 32-byte sectors, split into SECTORS
// single-ported banks with sector s of every line in bank s (4 banks in the
// evaluated configuration; sector interleaving is this design's choice).
// Each line also has the one-bit dirty flag the paper places in the data
// array: a local write sets it, and a remote read reports it so that the
// requester can fall back to the L2 when the line was changed under it.  A
// fill of a newly allocated line clears it.
//
// Two ports compete for the banks:
//   owner port  - the owning core's reads, write hits and fills;
//   remote port - reads from other cores arriving over the crossbar.
// When both want the same bank in the same cycle one is granted and the other
// waits (a bank conflict); the winner alternates per bank after each
// conflict.  A request is taken in the cycle its *_gnt is high; read data
// (and, for the remote port, the dirty flag) appears in the next cycle.
module ata_data_array
  import ata_pkg::*;
#(
  parameter int unsigned WAYS    = WAYS_DEF,
  parameter int unsigned SETS    = SETS_DEF,
  parameter int unsigned SECTORS = SECTORS_DEF,
  parameter int unsigned DATA_W  = SECTOR_W,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned SEC_W  = (SECTORS > 1) ? $clog2(SECTORS) : 1,
  localparam int unsigned LINES  = SETS * WAYS
) (
  input  logic              clk,
  input  logic              rst_n,
  // owner port
  input  logic              o_valid,
  input  logic              o_write,     // write or fill
  input  logic              o_fill,      // with o_write: fill from L2/remote
  input  logic              o_new_line,  // with o_fill: line newly allocated
  input  logic [SET_W-1:0]  o_set,
  input  logic [WAY_W-1:0]  o_way,
  input  logic [SEC_W-1:0]  o_sector,
  input  logic [DATA_W-1:0] o_wdata,
  output logic              o_gnt,
  output logic [DATA_W-1:0] o_rdata,
  // remote read port
  input  logic              r_valid,
  input  logic [SET_W-1:0]  r_set,
  input  logic [WAY_W-1:0]  r_way,
  input  logic [SEC_W-1:0]  r_sector,
  output logic              r_gnt,
  output logic [DATA_W-1:0] r_rdata,
  output logic              r_dirty,
  // bank conflict seen this cycle (for statistics)
  output logic              conflict
);
  logic [SECTORS-1:0]    prio_remote_q;  // per bank: remote wins next conflict
  logic [LINES-1:0]      dirty_q;
  logic [SECTORS-1:0][DATA_W-1:0] bank_o_q, bank_r_q;
  logic [SEC_W-1:0]      o_sec_q, r_sec_q;

  logic [$clog2(LINES)-1:0] o_line, r_line;
  assign o_line = {o_set, o_way};
  assign r_line = {r_set, r_way};

  always_comb begin
    conflict = o_valid && r_valid && (o_sector == r_sector);
    o_gnt    = o_valid && !(conflict &&  prio_remote_q[o_sector]);
    r_gnt    = r_valid && !(conflict && !prio_remote_q[r_sector]);
  end

  for (genvar b = 0; b < SECTORS; b++) begin : g_bank
    logic [DATA_W-1:0] mem [LINES];
    always_ff @(posedge clk) begin
      if (o_gnt && o_sector == SEC_W'(b)) begin
        if (o_write) mem[o_line] <= o_wdata;
        else         bank_o_q[b] <= mem[o_line];
      end
      if (r_gnt && r_sector == SEC_W'(b)) bank_r_q[b] <= mem[r_line];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio_remote_q <= '0;
      dirty_q       <= '0;
      o_sec_q       <= '0;
      r_sec_q       <= '0;
      r_dirty       <= 1'b0;
    end else begin
      if (conflict) prio_remote_q[o_sector] <= ~prio_remote_q[o_sector];
      if (o_gnt) begin
        o_sec_q <= o_sector;
        if (o_write && !o_fill)              dirty_q[o_line] <= 1'b1;
        else if (o_write && o_new_line)      dirty_q[o_line] <= 1'b0;
      end
      if (r_gnt) begin
        r_sec_q <= r_sector;
        // a write granted in the same cycle to the same line counts as a change
        r_dirty <= dirty_q[r_line] ||
                   (o_gnt && o_write && !o_fill && o_line == r_line);
      end
    end
  end

  assign o_rdata = bank_o_q[o_sec_q];
  assign r_rdata = bank_r_q[r_sec_q];
endmodule
