// tb_ata_result_proc: self-check of the comparator result processing unit.
// It first replays the paper's two-array example (request 1 hits only array 1
// giving [1,0], request 2 hits both giving [1,1]), then random cases with at
// most one hit way per array, checking hit vector and hit way.
module tb_ata_result_proc;
  localparam int N_ARR = 3, WAYS = 8;
  logic [N_ARR-1:0][WAYS-1:0]  line_match, sector_hit;
  logic [N_ARR-1:0]            hit_vec, line_vec;
  logic [N_ARR-1:0][2:0]       hit_way, line_way;
  int checks = 0, failures = 0;

  ata_result_proc #(.N_ARR(N_ARR), .WAYS(WAYS)) dut (.*);

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // example: request 1 (tagA in array 1 way 0), request 2 (tagB in array 1 way 1 and array 2 way 0)
    line_match = '0; sector_hit = '0;
    sector_hit[0][0] = 1'b1; line_match[0][0] = 1'b1;
    #1;
    chk("ex req1 vec", 32'(hit_vec[1:0]), 32'b01);   // [1,0]: array1 = bit 0
    chk("ex req1 way", 32'(hit_way[0]), 0);
    line_match = '0; sector_hit = '0;
    sector_hit[0][1] = 1'b1; line_match[0][1] = 1'b1;
    sector_hit[1][0] = 1'b1; line_match[1][0] = 1'b1;
    #1;
    chk("ex req2 vec", 32'(hit_vec[1:0]), 32'b11);   // [1,1]
    chk("ex req2 way0", 32'(hit_way[0]), 1);
    chk("ex req2 way1", 32'(hit_way[1]), 0);
    for (int it = 0; it < 300; it++) begin
      int lw [N_ARR];
      bit lh [N_ARR], sh [N_ARR];
      line_match = '0; sector_hit = '0;
      for (int a = 0; a < N_ARR; a++) begin
        lh[a] = 1'($urandom);
        sh[a] = lh[a] && 1'($urandom);
        lw[a] = $urandom_range(0, WAYS-1);
        if (lh[a]) line_match[a][lw[a]] = 1'b1;
        if (sh[a]) sector_hit[a][lw[a]] = 1'b1;
      end
      #1;
      for (int a = 0; a < N_ARR; a++) begin
        chk("line_vec", 32'(line_vec[a]), 32'(lh[a]));
        chk("hit_vec",  32'(hit_vec[a]),  32'(sh[a]));
        if (lh[a]) chk("line_way", 32'(line_way[a]), lw[a]);
        if (sh[a]) chk("hit_way",  32'(hit_way[a]),  lw[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
