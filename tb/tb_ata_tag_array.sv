// tb_ata_tag_array: random self-check of one decoupled tag array against a
// reference model kept in the testbench (valid/tag/sector bits and an LRU
// recency list per set).  After every update it compares all entries of all
// sets, the victim way of a random set and the probe port.
module tb_ata_tag_array;
  localparam int WAYS = 4, SETS = 2, SECTORS = 4, TAG_W = 6;
  localparam int ENTRY_W = 1 + SECTORS + TAG_W;
  logic clk = 0, rst_n = 0;
  logic [SETS-1:0][WAYS-1:0][ENTRY_W-1:0] set_entry;
  logic upd_valid, upd_fill, upd_new_line;
  logic [0:0] upd_set, vict_set, probe_set;
  logic [1:0] upd_way, vict_way, probe_way, upd_sector;
  logic [TAG_W-1:0] upd_tag;
  logic [ENTRY_W-1:0] probe_entry;
  int checks = 0, failures = 0;

  bit              m_v [SETS][WAYS];
  bit [SECTORS-1:0] m_s [SETS][WAYS];
  bit [TAG_W-1:0]  m_t [SETS][WAYS];
  int              order [SETS][$];   // most recent first

  ata_tag_array #(.WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  function automatic int ref_victim(int s);
    for (int w = 0; w < WAYS; w++) if (!m_v[s][w]) return w;
    return order[s][$];
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    upd_valid = 0; upd_fill = 0; upd_new_line = 0; upd_set = 0; upd_way = 0;
    upd_tag = 0; upd_sector = 0; vict_set = 0; probe_set = 0; probe_way = 0;
    for (int s = 0; s < SETS; s++) begin
      order[s] = {};
      for (int w = 0; w < WAYS; w++) begin
        m_v[s][w] = 0; m_s[s][w] = 0; m_t[s][w] = 0; order[s].push_back(w);
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int s, w, idx[$];
      @(negedge clk);
      s = $urandom_range(0, SETS-1);
      w = $urandom_range(0, WAYS-1);
      upd_valid    = 1'($urandom_range(0, 3) != 0);
      upd_fill     = 1'($urandom);
      upd_new_line = 1'($urandom);
      upd_set      = 1'(s);
      upd_way      = 2'(w);
      upd_tag      = TAG_W'($urandom);
      upd_sector   = 2'($urandom);
      @(posedge clk);
      if (upd_valid) begin
        idx = order[s].find_first_index(x) with (x == w);
        order[s].delete(idx[0]);
        order[s].push_front(w);
        if (upd_fill) begin
          m_v[s][w] = 1;
          m_t[s][w] = upd_tag;
          if (upd_new_line) m_s[s][w] = 0;
          m_s[s][w][upd_sector] = 1;
        end
      end
      @(negedge clk);
      upd_valid = 0;
      vict_set  = 1'($urandom);
      probe_set = 1'($urandom);
      probe_way = 2'($urandom);
      #1;
      for (int ss = 0; ss < SETS; ss++)
        for (int ww = 0; ww < WAYS; ww++)
          chk($sformatf("entry s%0d w%0d", ss, ww), int'(set_entry[ss][ww]),
              int'({m_v[ss][ww], m_s[ss][ww], m_t[ss][ww]}));
      chk("victim", int'(vict_way), ref_victim(int'(vict_set)));
      chk("probe", int'(probe_entry),
          int'({m_v[probe_set][probe_way], m_s[probe_set][probe_way], m_t[probe_set][probe_way]}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
