// tb_ata_comparator_group: random self-check of the comparators.  Tags are
// drawn from a small range so that matches are frequent; the expected line
// match and sector hit are computed in the testbench for every way.
module tb_ata_comparator_group;
  localparam int WAYS = 16, TAG_W = 10, SECTORS = 4;
  logic [WAYS-1:0]              way_valid;
  logic [WAYS-1:0][SECTORS-1:0] way_sect_valid;
  logic [WAYS-1:0][TAG_W-1:0]   way_tag;
  logic [TAG_W-1:0]             req_tag;
  logic [1:0]                   req_sector;
  logic [WAYS-1:0]              line_match, sector_hit;
  int checks = 0, failures = 0;

  ata_comparator_group #(.WAYS(WAYS), .TAG_W(TAG_W), .SECTORS(SECTORS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      logic el, es;
      req_tag    = TAG_W'($urandom_range(0, 3));
      req_sector = 2'($urandom);
      for (int w = 0; w < WAYS; w++) begin
        way_valid[w]      = 1'($urandom);
        way_sect_valid[w] = 4'($urandom);
        way_tag[w]        = TAG_W'($urandom_range(0, 3));
      end
      #1;
      for (int w = 0; w < WAYS; w++) begin
        el = way_valid[w] && (way_tag[w] == req_tag);
        es = el && way_sect_valid[w][req_sector];
        checks++;
        if (line_match[w] !== el || sector_hit[w] !== es) begin
          failures++;
          $display("FAIL it=%0d w=%0d lm=%b/%b sh=%b/%b", it, w, line_match[w], el, sector_hit[w], es);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
