// tb_ata_aggregated_tag_array: checks the parallel lookup of every core's
// request against every tag array.  First the paper's worked example (two
// 4-way tag arrays, Req-1 = set 0/tagA hits only array 1 -> [1,0], Req-2 =
// set 1/tagB hits both -> [1,1]), then random fills through the owner ports
// and random simultaneous lookups from all cores, compared with a reference
// model of the stored tags.
module tb_ata_aggregated_tag_array;
  localparam int N = 3, WAYS = 4, SETS = 2, SECTORS = 4, TAG_W = 6;
  localparam int ENTRY_W = 1 + SECTORS + TAG_W;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][0:0] req_set, upd_set, vict_set, probe_set;
  logic [N-1:0][TAG_W-1:0] req_tag, upd_tag;
  logic [N-1:0][1:0] req_sector, upd_sector, upd_way, vict_way, probe_way;
  logic [N-1:0][N-1:0] hit_vec, line_vec;
  logic [N-1:0][N-1:0][1:0] hit_way, line_way;
  logic [N-1:0] upd_valid, upd_fill, upd_new_line;
  logic [N-1:0][ENTRY_W-1:0] probe_entry;
  int checks = 0, failures = 0;

  bit               m_v [N][SETS][WAYS];
  bit [SECTORS-1:0] m_s [N][SETS][WAYS];
  bit [TAG_W-1:0]   m_t [N][SETS][WAYS];

  ata_aggregated_tag_array #(.N_CORES(N), .WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  task automatic fill(int a, int s, int w, int t, int sec, bit nl);
    @(negedge clk);
    upd_valid[a] = 1; upd_fill[a] = 1; upd_new_line[a] = nl;
    upd_set[a] = 1'(s); upd_way[a] = 2'(w); upd_tag[a] = TAG_W'(t); upd_sector[a] = 2'(sec);
    @(posedge clk);
    m_v[a][s][w] = 1; m_t[a][s][w] = TAG_W'(t);
    if (nl) m_s[a][s][w] = 0;
    m_s[a][s][w][sec] = 1;
    @(negedge clk);
    upd_valid[a] = 0;
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int TAGA = 6'h0A, TAGB = 6'h0B;
  initial begin
    upd_valid = 0; upd_fill = 0; upd_new_line = 0; upd_set = 0; upd_way = 0; upd_tag = 0;
    upd_sector = 0; vict_set = 0; probe_set = 0; probe_way = 0;
    req_set = 0; req_tag = 0; req_sector = 0;
    for (int a = 0; a < N; a++) for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) begin
      m_v[a][s][w] = 0; m_s[a][s][w] = 0; m_t[a][s][w] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // worked example: array 1 = index 0, array 2 = index 1
    fill(0, 0, 0, TAGA, 0, 1);
    fill(0, 1, 1, TAGB, 0, 1);
    fill(1, 1, 0, TAGB, 0, 1);
    fill(1, 0, 0, 6'h0E, 0, 1);
    req_set[0] = 0; req_tag[0] = TAGA; req_sector[0] = 0;   // Req-1 from core 1
    req_set[1] = 1; req_tag[1] = TAGB; req_sector[1] = 0;   // Req-2 from core 2
    #1;
    chk("Req-1 vector [1,0]", int'(hit_vec[0][1:0]), 2'b01);
    chk("Req-1 way in array 1", int'(hit_way[0][0]), 0);
    chk("Req-2 vector [1,1]", int'(hit_vec[1][1:0]), 2'b11);
    chk("Req-2 way in array 1", int'(hit_way[1][0]), 1);
    chk("Req-2 way in array 2", int'(hit_way[1][1]), 0);
    // random
    for (int it = 0; it < 300; it++) begin
      fill($urandom_range(0, N-1), $urandom_range(0, SETS-1), $urandom_range(0, WAYS-1),
           $urandom_range(0, 7), $urandom_range(0, 3), 1'($urandom));
      for (int r = 0; r < N; r++) begin
        req_set[r] = 1'($urandom); req_tag[r] = TAG_W'($urandom_range(0, 7)); req_sector[r] = 2'($urandom);
        probe_set[r] = 1'($urandom); probe_way[r] = 2'($urandom);
      end
      #1;
      for (int r = 0; r < N; r++)
        for (int a = 0; a < N; a++) begin
          int hw, lw;
          bit h, l;
          h = 0; l = 0; hw = 0; lw = 0;
          for (int w = 0; w < WAYS; w++) begin
            if (m_v[a][req_set[r]][w] && m_t[a][req_set[r]][w] == req_tag[r]) begin
              l = 1; lw = w;
              if (m_s[a][req_set[r]][w][req_sector[r]]) begin h = 1; hw = w; end
            end
          end
          // the random fills may place one tag in two ways; compare vectors only then
          chk("hit_vec", int'(hit_vec[r][a]), h);
          chk("line_vec", int'(line_vec[r][a]), l);
        end
      for (int a = 0; a < N; a++)
        chk("probe", int'(probe_entry[a]), int'({m_v[a][probe_set[a]][probe_way[a]],
            m_s[a][probe_set[a]][probe_way[a]], m_t[a][probe_set[a]][probe_way[a]]}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
