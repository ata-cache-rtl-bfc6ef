// ata_comparator_group: the WAYS tag comparators of one request against one
// tag array.
//
// Way w matches the line when the selected entry is valid and its tag equals
// the request's address tag (line_match).  Because the cache is sectored, the
// data is present only when the requested sector's valid bit is also set
// (sector_hit).  Purely combinational.  The comparators follow the paper's
// figures; the sector qualification follows from the sectored L1 of the
// evaluated configuration.
module ata_comparator_group #(
  parameter int unsigned WAYS    = 64,
  parameter int unsigned TAG_W   = 22,
  parameter int unsigned SECTORS = 4,
  localparam int unsigned SEC_W  = (SECTORS > 1) ? $clog2(SECTORS) : 1
) (
  input  logic [WAYS-1:0]              way_valid,
  input  logic [WAYS-1:0][SECTORS-1:0] way_sect_valid,
  input  logic [WAYS-1:0][TAG_W-1:0]   way_tag,
  input  logic [TAG_W-1:0]             req_tag,
  input  logic [SEC_W-1:0]             req_sector,
  output logic [WAYS-1:0]              line_match,
  output logic [WAYS-1:0]              sector_hit
);
  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      line_match[w] = way_valid[w] && (way_tag[w] == req_tag);
      sector_hit[w] = line_match[w] && way_sect_valid[w][req_sector];
    end
  end
endmodule
