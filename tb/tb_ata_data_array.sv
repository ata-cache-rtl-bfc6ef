// tb_ata_data_array: random two-port traffic against a reference memory.
// Checks: bank-conflict grants (one winner, alternating per bank), read data
// on both ports one cycle after the grant, and the dirty bit seen by the
// remote port (set by owner writes, cleared by a new-line fill).
module tb_ata_data_array;
  localparam int WAYS = 4, SETS = 2, SECTORS = 4, DATA_W = 32, LINES = SETS * WAYS;
  logic clk = 0, rst_n = 0;
  logic o_valid, o_write, o_fill, o_new_line, o_gnt;
  logic [0:0] o_set, r_set;
  logic [1:0] o_way, r_way, o_sector, r_sector;
  logic [DATA_W-1:0] o_wdata, o_rdata, r_rdata;
  logic r_valid, r_gnt, r_dirty, conflict;
  int checks = 0, failures = 0, n_conflicts = 0;

  logic [DATA_W-1:0] m_mem [LINES][SECTORS];
  bit               m_dirty [LINES];
  bit               m_init [LINES][SECTORS];
  bit               m_prio [SECTORS];

  ata_data_array #(.WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS), .DATA_W(DATA_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h @%0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_o_rd, exp_r_rd, exp_r_ok;
    logic [DATA_W-1:0] exp_o_data, exp_r_data;
    bit exp_r_dirty;
    o_valid = 0; o_write = 0; o_fill = 0; o_new_line = 0; o_set = 0; o_way = 0;
    o_sector = 0; o_wdata = 0; r_valid = 0; r_set = 0; r_way = 0; r_sector = 0;
    for (int l = 0; l < LINES; l++) begin
      m_dirty[l] = 0;
      for (int s = 0; s < SECTORS; s++) m_init[l][s] = 0;
    end
    for (int s = 0; s < SECTORS; s++) m_prio[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise all sectors with fills so every read is defined
    for (int l = 0; l < LINES; l++)
      for (int s = 0; s < SECTORS; s++) begin
        @(negedge clk);
        o_valid = 1; o_write = 1; o_fill = 1; o_new_line = 1;
        {o_set, o_way} = 3'(l); o_sector = 2'(s); o_wdata = $urandom;
        m_mem[l][s] = o_wdata; m_init[l][s] = 1;
        @(posedge clk);
      end
    @(negedge clk);
    o_valid = 0;
    exp_o_rd = 0; exp_r_rd = 0;
    for (int it = 0; it < 2000; it++) begin
      bit cf, og, rg;
      int ol, rl;
      @(negedge clk);
      // check results of the previous cycle's grants
      if (exp_o_rd) chk("o_rdata", o_rdata, exp_o_data);
      if (exp_r_rd) begin
        chk("r_rdata", r_rdata, exp_r_data);
        chk("r_dirty", r_dirty, exp_r_dirty);
      end
      o_valid    = 1'($urandom);
      o_write    = 1'($urandom);
      o_fill     = 1'($urandom);
      o_new_line = 1'($urandom);
      {o_set, o_way} = 3'($urandom);
      o_sector   = 2'($urandom);
      o_wdata    = $urandom;
      r_valid    = 1'($urandom);
      {r_set, r_way} = 3'($urandom);
      r_sector   = 2'($urandom);
      #1;
      ol = int'({o_set, o_way});
      rl = int'({r_set, r_way});
      cf = o_valid && r_valid && o_sector == r_sector;
      og = o_valid && !(cf && m_prio[o_sector]);
      rg = r_valid && !(cf && !m_prio[r_sector]);
      chk("o_gnt", o_gnt, og);
      chk("r_gnt", r_gnt, rg);
      chk("conflict", conflict, cf);
      if (cf) begin
        n_conflicts++;
        m_prio[o_sector] = !m_prio[o_sector];
      end
      exp_o_rd = og && !o_write;
      exp_o_data = m_mem[ol][o_sector];
      exp_r_rd = rg;
      exp_r_data = m_mem[rl][r_sector];
      exp_r_dirty = m_dirty[rl] || (og && o_write && !o_fill && ol == rl);
      if (og && o_write) begin
        m_mem[ol][o_sector] = o_wdata;
        if (!o_fill) m_dirty[ol] = 1;
        else if (o_new_line) m_dirty[ol] = 0;
      end
      @(posedge clk);
    end
    checks++;
    if (n_conflicts == 0) begin failures++; $display("FAIL no bank conflict exercised"); end
    $display("conflicts=%0d", n_conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
