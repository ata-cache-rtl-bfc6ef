// tb_ata_cluster: end-to-end test of one ATA-Cache cluster, reduced to 4 cores.
//
// Every core is driven by its own process and has its own L2 port model
// (fixed 188-cycle latency, the L2 latency of the evaluated GPU) backed by one
// shared memory image, which is also the reference for every read.
// Phase 1 (cores 0..2 of cluster 0) walks through the paper's cases in
// order: miss everywhere -> L2; local hit; a hit only in another core's cache
// served over the crossbar; a write hit that marks the line dirty; a read of
// that dirty remote copy, which must fall back to the L2 and return the new
// data.  Then, four times, the other cores of cluster 0 read a sector held
// only by core 0 while core 0 reads it too, so that the crossbar arbitrates
// and the data-array bank is contended.  Phase 2 runs all cores at once on a mix of reads of a small shared
// read-only region (high inter-core locality), reads and writes of a private
// region per core.  Each mechanism (local hit, remote hit, L2 read, dirty
// fall-back, write, data-array bank conflict, crossbar contention) is counted
// and must occur; local hits must take exactly HIT_LAT cycles when
// uncontended and never less, L2 reads at least the L2 latency.
module tb_ata_cluster;
  import ata_pkg::*;
  localparam int NCL = 1, NC = 4, NG = NCL * NC;
  localparam int HIT_LAT = 32, L2_LAT = 188, ADDR_W = 32;
  localparam int OPS = 60;
  localparam int ID_W = (NC > 1) ? $clog2(NC) : 1;

  logic clk = 0, rst_n = 0;
  logic [NG-1:0] core_req_valid, core_req_ready, core_req_write, core_resp_valid, core_resp_write;
  logic [NG-1:0][ADDR_W-1:0] core_req_addr, l2_req_addr;
  logic [NG-1:0][SECTOR_W-1:0] core_req_wdata, core_resp_rdata, l2_req_wdata, l2_resp_rdata;
  logic [NG-1:0] l2_req_valid, l2_req_ready, l2_req_write, l2_resp_valid;
  logic [NG-1:0] ev_local_hit, ev_remote_hit, ev_l2_read, ev_redirect, ev_write, ev_bank_conflict;
  logic [NCL-1:0][ID_W:0] xbar_stall;

  ata_cluster #(.N_CORES(NC)) dut (
    .clk, .rst_n,
    .core_req_valid, .core_req_ready, .core_req_write, .core_req_addr, .core_req_wdata,
    .core_resp_valid, .core_resp_write, .core_resp_rdata,
    .l2_req_valid, .l2_req_ready, .l2_req_write, .l2_req_addr, .l2_req_wdata,
    .l2_resp_valid, .l2_resp_rdata,
    .ev_local_hit, .ev_remote_hit, .ev_l2_read, .ev_redirect, .ev_write, .ev_bank_conflict,
    .xbar_stall(xbar_stall[0])
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_local = 0, n_remote = 0, n_l2 = 0, n_redirect = 0, n_write = 0, n_conflict = 0, n_stall = 0;
  int min_local_lat = 1 << 30;

  logic [SECTOR_W-1:0] mem [logic [ADDR_W-1:0]];

  function automatic logic [SECTOR_W-1:0] init_pattern(logic [ADDR_W-1:0] a);
    return {8{a ^ 32'hA5A5_0000}};
  endfunction

  function automatic logic [SECTOR_W-1:0] mem_rd(logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : init_pattern(a);
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s @%0t", msg, $time);
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      n_local    += $countones(ev_local_hit);
      n_remote   += $countones(ev_remote_hit);
      n_l2       += $countones(ev_l2_read);
      n_redirect += $countones(ev_redirect);
      n_write    += $countones(ev_write);
      n_conflict += $countones(ev_bank_conflict);
      for (int k = 0; k < NCL; k++) n_stall += int'(xbar_stall[k]);
    end
  end

  // one L2 port model per core (requests are one at a time per core)
  for (genvar g = 0; g < NG; g++) begin : g_l2
    assign l2_req_ready[g] = 1'b1;
    initial begin
      l2_resp_valid[g] = 0;
      l2_resp_rdata[g] = '0;
      forever begin
        @(posedge clk);
        if (rst_n && l2_req_valid[g]) begin
          if (l2_req_write[g]) begin
            mem[l2_req_addr[g]] = l2_req_wdata[g];
          end else begin
            logic [ADDR_W-1:0] a;
            a = l2_req_addr[g];
            repeat (L2_LAT - 1) @(posedge clk);
            #1;
            l2_resp_valid[g] = 1;
            l2_resp_rdata[g] = mem_rd(a);
            @(posedge clk);
            #1;
            l2_resp_valid[g] = 0;
          end
        end
      end
    end
  end

  // core access: returns data, latency and which path served it
  task automatic access(int g, bit wr, logic [ADDR_W-1:0] a, logic [SECTOR_W-1:0] wd,
                        output logic [SECTOR_W-1:0] rd, output int lat, output int path);
    @(negedge clk);
    core_req_valid[g] = 1; core_req_write[g] = wr; core_req_addr[g] = a; core_req_wdata[g] = wd;
    @(posedge clk);
    while (!core_req_ready[g]) @(posedge clk);
    #1;
    core_req_valid[g] = 0;
    lat = 0;
    path = 0;
    do begin
      @(posedge clk);
      lat++;
      if (ev_local_hit[g])  path = 1;
      if (ev_remote_hit[g]) path = 2;
      if (ev_l2_read[g])    path = 3;
      if (ev_redirect[g])   path = 4;
    end while (!core_resp_valid[g]);
    rd = core_resp_rdata[g];
  endtask

  task automatic read_check(int g, logic [ADDR_W-1:0] a, int exp_path, string what);
    logic [SECTOR_W-1:0] rd, exp;
    int lat, path;
    exp = mem_rd(a);
    access(g, 0, a, '0, rd, lat, path);
    checks++;
    if (rd !== exp) fail($sformatf("%s: core %0d addr %h data mismatch", what, g, a));
    if (exp_path != 0) begin
      checks++;
      if (path != exp_path) fail($sformatf("%s: core %0d path %0d expected %0d", what, g, path, exp_path));
    end
    checks++;
    if (path == 1) begin
      if (lat < HIT_LAT) fail($sformatf("local hit in %0d cycles", lat));
      if (lat < min_local_lat) min_local_lat = lat;
    end else if (path == 3 || path == 4) begin
      if (lat < L2_LAT) fail($sformatf("L2 read in %0d cycles", lat));
    end else if (lat < HIT_LAT) fail($sformatf("remote read in %0d cycles", lat));
  endtask

  task automatic write_op(int g, logic [ADDR_W-1:0] a, logic [SECTOR_W-1:0] wd);
    logic [SECTOR_W-1:0] rd;
    int lat, path;
    mem[a] = wd;       // reference: the L2 image holds every write
    access(g, 1, a, wd, rd, lat, path);
    checks++;
    if (!core_resp_write[g] && 0) fail("write response");
  endtask

  function automatic logic [ADDR_W-1:0] shared_addr(int i);
    // 8 lines x 4 sectors spread over 4 sets, tag 0x3C0..
    return {22'(32'h3C0 + i / 16), 3'(i % 4), 2'((i / 4) % 4), 5'd0};
  endfunction

  function automatic logic [ADDR_W-1:0] private_addr(int g, int i);
    return {22'(32'h10000 + g * 64 + i / 32), 3'(i % 8), 2'((i / 8) % 4), 5'd0};
  endfunction

  initial begin
    #(64'd20000000);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ADDR_W-1:0] P;
    core_req_valid = '0; core_req_write = '0; core_req_addr = '0; core_req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- phase 1: the three distribution cases and the dirty fall-back ----
    P = {22'h2AB, 3'd2, 2'd1, 5'd0};
    read_check(0, P, 3, "miss everywhere -> L2");
    read_check(0, P, 1, "local hit");
    checks++;
    if (min_local_lat != HIT_LAT) fail($sformatf("uncontended local hit took %0d", min_local_lat));
    read_check(1, P, 2, "remote hit over the crossbar");
    read_check(1, P, 1, "filled after remote hit");
    write_op(0, P, {8{32'hFEED0001}});
    read_check(0, P, 1, "read own write");
    // core 2 sees copies in cache 0 (dirty) and cache 1; cyclic choice from 2 -> 0
    read_check(2, P, 4, "dirty remote copy -> L2");
    // ---- phase 1b: several cores read a line only core 0 holds, while core
    //      0 reads the same sector itself: crossbar and bank contention ----
    for (int round = 0; round < 4; round++) begin
      logic [ADDR_W-1:0] Q;
      Q = {22'(32'h2C0 + round), 3'(round + 1), 2'd0, 5'd0};
      read_check(0, Q, 3, "line for contention");
      for (int g = 0; g < NC; g++) begin
        automatic int gg = g;
        automatic int rr = round;
        fork
          begin
            if (gg == 0) begin
              repeat (rr) @(negedge clk);
              read_check(0, Q, 1, "owner read under contention");
            end else begin
              read_check(gg, Q, 2, "remote read under contention");
            end
          end
        join_none
      end
      wait fork;
    end
    // ---- phase 2: all cores at once ----
    for (int g = 0; g < NG; g++) begin
      automatic int gg = g;
      fork
        begin
          for (int k = 0; k < OPS; k++) begin
            int r;
            r = $urandom_range(0, 99);
            if (r < 60)      read_check(gg, shared_addr($urandom_range(0, 31)), 0, "shared read");
            else if (r < 82) read_check(gg, private_addr(gg, $urandom_range(0, 63)), 0, "private read");
            else             write_op(gg, private_addr(gg, $urandom_range(0, 63)), {8{$urandom}});
          end
        end
      join_none
    end
    wait fork;
    $display("cycles=%0d local=%0d remote=%0d l2=%0d redirect=%0d write=%0d bank_conflict=%0d xbar_stall=%0d",
             cyc, n_local, n_remote, n_l2, n_redirect, n_write, n_conflict, n_stall);
    checks += 7;
    if (n_local == 0)    fail("no local hit");
    if (n_remote == 0)   fail("no remote hit");
    if (n_l2 == 0)       fail("no L2 read");
    if (n_redirect == 0) fail("no dirty fall-back");
    if (n_write == 0)    fail("no write");
    if (n_conflict == 0) fail("no bank conflict");
    if (n_stall == 0)    fail("no crossbar contention");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
