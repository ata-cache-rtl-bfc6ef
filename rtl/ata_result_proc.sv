// ata_result_proc: comparator result processing unit of one request.
//
// Takes the per-way comparator outputs of one request against all N_ARR tag
// arrays of the cluster and reduces them to what the request distributor
// needs: the aggregated hit vector (bit a set when tag array a holds the
// requested sector, e.g. [1,0] or [1,1] in the paper's example), the hit way
// in each array, and the same pair for a line (tag) match without the sector,
// used when a fill lands in a line already allocated.  A tag array holds a
// line at most once, so the way encoding is a plain OR of the matching
// indices.  Purely combinational; the encoding is this design's choice, the
// paper gives only the unit's name and its hit-vector output.
module ata_result_proc #(
  parameter int unsigned N_ARR = 10,
  parameter int unsigned WAYS  = 64,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [N_ARR-1:0][WAYS-1:0]  line_match,
  input  logic [N_ARR-1:0][WAYS-1:0]  sector_hit,
  output logic [N_ARR-1:0]            hit_vec,     // sector hit per array
  output logic [N_ARR-1:0][WAY_W-1:0] hit_way,
  output logic [N_ARR-1:0]            line_vec,    // line (tag) hit per array
  output logic [N_ARR-1:0][WAY_W-1:0] line_way
);
  always_comb begin
    for (int a = 0; a < N_ARR; a++) begin
      hit_vec[a]  = |sector_hit[a];
      line_vec[a] = |line_match[a];
      hit_way[a]  = '0;
      line_way[a] = '0;
      for (int w = 0; w < WAYS; w++) begin
        if (sector_hit[a][w]) hit_way[a]  = hit_way[a]  | WAY_W'(w);
        if (line_match[a][w]) line_way[a] = line_way[a] | WAY_W'(w);
      end
    end
  end
endmodule
