// tb_ata_l1_cache: directed test of one decoupled L1 cache (core 0 of a
// two-core cluster).  The real aggregated tag array is used for lookups; the
// testbench plays core 1's cache (it writes core 1's tag array directly and
// answers remote reads sent over the crossbar port) and the L2 (fixed
// latency, remembers written data).  Cases: miss everywhere -> L2 and fill;
// local hit in exactly HIT_LAT cycles; hit only in the remote cache -> data
// over the crossbar, filled locally; remote copy changed -> fall back to L2;
// local write hit -> dirty line, written through to L2; write miss -> L2
// only; remote reads served by this cache, clean and dirty.
module tb_ata_l1_cache;
  import ata_pkg::*;
  localparam int N = 2, WAYS = 64, SETS = 8, SECTORS = 4, ADDR_W = 32;
  localparam int HIT_LAT = 32, L2_LAT = 40;
  localparam int TAG_W = 22, ENTRY_W = 1 + SECTORS + TAG_W;
  localparam int XREQ_W = 3 + 6 + 2 + TAG_W, XRSP_W = 1 + SECTOR_W;
  logic clk = 0, rst_n = 0;

  // core
  logic core_req_valid, core_req_ready, core_req_write, core_resp_valid, core_resp_write;
  logic [ADDR_W-1:0] core_req_addr;
  logic [SECTOR_W-1:0] core_req_wdata, core_resp_rdata;
  // lookups
  logic [N-1:0][2:0] lk_set_a, upd_set_a, vict_set_a, probe_set_a;
  logic [N-1:0][TAG_W-1:0] lk_tag_a, upd_tag_a;
  logic [N-1:0][1:0] lk_sec_a, upd_sector_a;
  logic [N-1:0][5:0] upd_way_a, vict_way_a, probe_way_a;
  logic [N-1:0] upd_valid_a, upd_fill_a, upd_new_line_a;
  logic [N-1:0][N-1:0] hit_vec, line_vec;
  logic [N-1:0][N-1:0][5:0] hit_way, line_way;
  logic [N-1:0][ENTRY_W-1:0] probe_entry_a;
  // crossbar side
  logic xq_valid, xq_ready, xi_valid, xr_valid, xr_ready, xs_valid;
  logic [0:0] xq_dest, xr_src, xs_dest;
  logic [XREQ_W-1:0] xq_data, xr_data;
  logic [XRSP_W-1:0] xi_data, xs_data;
  // L2
  logic l2_req_valid, l2_req_ready, l2_req_write, l2_resp_valid;
  logic [ADDR_W-1:0] l2_req_addr;
  logic [SECTOR_W-1:0] l2_req_wdata, l2_resp_rdata;
  logic ev_local_hit, ev_remote_hit, ev_l2_read, ev_redirect, ev_write, ev_bank_conflict;

  int checks = 0, failures = 0;
  int n_l2_reads = 0, n_l2_writes = 0, n_xq = 0;

  ata_aggregated_tag_array #(.N_CORES(N), .WAYS(WAYS), .SETS(SETS), .SECTORS(SECTORS), .TAG_W(TAG_W)) u_ata (
    .clk, .rst_n, .req_set(lk_set_a), .req_tag(lk_tag_a), .req_sector(lk_sec_a),
    .hit_vec, .hit_way, .line_vec, .line_way,
    .upd_valid(upd_valid_a), .upd_fill(upd_fill_a), .upd_new_line(upd_new_line_a),
    .upd_set(upd_set_a), .upd_way(upd_way_a), .upd_tag(upd_tag_a), .upd_sector(upd_sector_a),
    .vict_set(vict_set_a), .vict_way(vict_way_a), .probe_set(probe_set_a), .probe_way(probe_way_a),
    .probe_entry(probe_entry_a));

  ata_l1_cache #(.N_CORES(N), .SELF(0)) dut (
    .clk, .rst_n,
    .core_req_valid, .core_req_ready, .core_req_write, .core_req_addr, .core_req_wdata,
    .core_resp_valid, .core_resp_write, .core_resp_rdata,
    .lk_set(lk_set_a[0]), .lk_tag(lk_tag_a[0]), .lk_sector(lk_sec_a[0]),
    .lk_hit_vec(hit_vec[0]), .lk_hit_way(hit_way[0]),
    .lk_line_hit(line_vec[0][0]), .lk_line_way(line_way[0][0]),
    .upd_valid(upd_valid_a[0]), .upd_fill(upd_fill_a[0]), .upd_new_line(upd_new_line_a[0]),
    .upd_set(upd_set_a[0]), .upd_way(upd_way_a[0]), .upd_tag(upd_tag_a[0]), .upd_sector(upd_sector_a[0]),
    .vict_set(vict_set_a[0]), .vict_way(vict_way_a[0]),
    .probe_set(probe_set_a[0]), .probe_way(probe_way_a[0]), .probe_entry(probe_entry_a[0]),
    .xq_valid, .xq_dest, .xq_data, .xq_ready, .xi_valid, .xi_data,
    .xr_valid, .xr_src, .xr_data, .xr_ready, .xs_valid, .xs_dest, .xs_data,
    .l2_req_valid, .l2_req_ready, .l2_req_write, .l2_req_addr, .l2_req_wdata,
    .l2_resp_valid, .l2_resp_rdata,
    .ev_local_hit, .ev_remote_hit, .ev_l2_read, .ev_redirect, .ev_write, .ev_bank_conflict);

  always #5 clk = ~clk;

  // core 1 lookup port unused
  assign lk_set_a[1] = '0;
  assign lk_tag_a[1] = '0;
  assign lk_sec_a[1] = '0;
  assign vict_set_a[1] = '0;
  assign probe_set_a[1] = '0;
  assign probe_way_a[1] = '0;

  function automatic logic [SECTOR_W-1:0] l2_pattern(logic [ADDR_W-1:0] a);
    return {8{a ^ 32'h5A5A_0000}};
  endfunction

  // ---------------- L2 model ----------------
  logic [SECTOR_W-1:0] l2_mem [logic [ADDR_W-1:0]];
  assign l2_req_ready = 1'b1;
  initial begin
    l2_resp_valid = 0;
    l2_resp_rdata = '0;
    forever begin
      @(posedge clk);
      if (rst_n && l2_req_valid) begin
        logic [ADDR_W-1:0] a;
        a = {l2_req_addr[ADDR_W-1:5], 5'd0};
        if (l2_req_write) begin
          n_l2_writes++;
          l2_mem[a] = l2_req_wdata;
        end else begin
          n_l2_reads++;
          repeat (L2_LAT - 1) @(posedge clk);
          #1;
          l2_resp_valid = 1;
          l2_resp_rdata = l2_mem.exists(a) ? l2_mem[a] : l2_pattern(a);
          @(posedge clk);
          #1;
          l2_resp_valid = 0;
        end
      end
    end
  end

  // ---------------- remote cache 1 model ----------------
  bit                  rem_unavail = 0;
  logic [SECTOR_W-1:0] rem_data = '0;
  logic [XREQ_W-1:0]   last_xq;
  assign xq_ready = 1'b1;
  initial begin
    xi_valid = 0;
    xi_data  = '0;
    forever begin
      @(posedge clk);
      if (rst_n && xq_valid) begin
        n_xq++;
        last_xq = xq_data;
        checks++;
        if (xq_dest != 1'b1) begin failures++; $display("FAIL xq_dest"); end
        repeat (3) @(posedge clk);
        #1;
        xi_valid = 1;
        xi_data  = {rem_unavail, rem_data};
        @(posedge clk);
        #1;
        xi_valid = 0;
      end
    end
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h @%0t", what, got, exp, $time);
    end
  endtask

  task automatic core_access(input bit wr, input logic [ADDR_W-1:0] a, input logic [SECTOR_W-1:0] wd,
                             output logic [SECTOR_W-1:0] rd, output int lat);
    @(negedge clk);
    core_req_valid = 1; core_req_write = wr; core_req_addr = a; core_req_wdata = wd;
    @(posedge clk);
    while (!core_req_ready) @(posedge clk);
    #1;
    core_req_valid = 0;
    lat = 0;
    do begin
      @(posedge clk);
      lat++;
    end while (!core_resp_valid);
    rd = core_resp_rdata;
  endtask

  task automatic fill_core1(int s, int w, logic [TAG_W-1:0] t, int sec);
    @(negedge clk);
    upd_valid_a[1] = 1; upd_fill_a[1] = 1; upd_new_line_a[1] = 1;
    upd_set_a[1] = 3'(s); upd_way_a[1] = 6'(w); upd_tag_a[1] = t; upd_sector_a[1] = 2'(sec);
    @(negedge clk);
    upd_valid_a[1] = 0;
  endtask

  function automatic logic [ADDR_W-1:0] mk(logic [TAG_W-1:0] t, int s, int sec);
    return {t, 3'(s), 2'(sec), 5'd0};
  endfunction

  int cnt_local = 0, cnt_remote = 0, cnt_l2 = 0, cnt_redirect = 0, cnt_write = 0;
  // Counted only out of reset: before the first clock edge the registers
  // still hold their power-up values.
  always @(posedge clk) if (rst_n) begin
    cnt_local    += int'(ev_local_hit);
    cnt_remote   += int'(ev_remote_hit);
    cnt_l2       += int'(ev_l2_read);
    cnt_redirect += int'(ev_redirect);
    cnt_write    += int'(ev_write);
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [SECTOR_W-1:0] rd, d1;
    int lat;
    logic [ADDR_W-1:0] A, X, Y, Z;
    core_req_valid = 0; core_req_write = 0; core_req_addr = 0; core_req_wdata = 0;
    upd_valid_a[1] = 0; upd_fill_a[1] = 0; upd_new_line_a[1] = 0; upd_set_a[1] = 0;
    upd_way_a[1] = 0; upd_tag_a[1] = 0; upd_sector_a[1] = 0;
    xr_valid = 0; xr_src = 0; xr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. miss everywhere -> L2
    A = mk(22'h1234, 3, 1);
    core_access(0, A, '0, rd, lat);
    chk("L2 read data", rd, l2_pattern(A));
    chk("one L2 read", n_l2_reads, 1);
    checks++;
    if (lat < L2_LAT) begin failures++; $display("FAIL miss latency %0d", lat); end
    // 2. now a local hit, exactly HIT_LAT cycles, no L2 traffic
    core_access(0, A, '0, rd, lat);
    chk("local hit data", rd, l2_pattern(A));
    chk("local hit latency", lat, HIT_LAT);
    chk("no new L2 read", n_l2_reads, 1);

    // 3. hit only in remote cache 1 -> crossbar, then filled locally
    X = mk(22'h0777, 5, 2);
    fill_core1(5, 9, 22'h0777, 2);
    rem_unavail = 0; rem_data = {8{32'hC0FFEE01}};
    core_access(0, X, '0, rd, lat);
    chk("remote data", rd, {8{32'hC0FFEE01}});
    chk("one crossbar request", n_xq, 1);
    chk("remote request set/way/sector/tag", last_xq, {3'd5, 6'd9, 2'd2, 22'h0777});
    chk("no L2 for remote hit", n_l2_reads, 1);
    core_access(0, X, '0, rd, lat);
    chk("filled from remote, local hit", rd, {8{32'hC0FFEE01}});
    chk("local hit latency 2", lat, HIT_LAT);
    chk("local first (no 2nd xbar)", n_xq, 1);

    // 4. remote copy changed -> L2
    Y = mk(22'h0888, 6, 0);
    fill_core1(6, 3, 22'h0888, 0);
    rem_unavail = 1;
    core_access(0, Y, '0, rd, lat);
    chk("redirected data from L2", rd, l2_pattern(Y));
    chk("crossbar tried", n_xq, 2);
    chk("then L2", n_l2_reads, 2);

    // 5. local write hit: dirty, write-through
    core_access(1, A, {8{32'hDEAD0005}}, rd, lat);
    chk("write-through to L2", n_l2_writes, 1);
    core_access(0, A, '0, rd, lat);
    chk("read own write", rd, {8{32'hDEAD0005}});
    chk("read own write is local", lat, HIT_LAT);

    // 6. serve remote reads: line A (set 3, way 0, sector 1) is dirty,
    //    line X (set 5, way 0, sector 2) is clean
    @(negedge clk);
    xr_valid = 1; xr_src = 1; xr_data = {3'd3, 6'd0, 2'd1, 22'h1234};
    @(posedge clk);
    while (!xr_ready) @(posedge clk);
    #1 xr_valid = 0;
    chk("serve dirty: valid", xs_valid, 1);
    chk("serve dirty: dest", xs_dest, 1);
    chk("serve dirty: unavailable", xs_data[XRSP_W-1], 1);
    @(negedge clk);
    xr_valid = 1; xr_src = 1; xr_data = {3'd5, 6'd0, 2'd2, 22'h0777};
    @(posedge clk);
    while (!xr_ready) @(posedge clk);
    #1 xr_valid = 0;
    chk("serve clean: valid", xs_valid, 1);
    chk("serve clean: available", xs_data[XRSP_W-1], 0);
    chk("serve clean: data", xs_data[SECTOR_W-1:0], {8{32'hC0FFEE01}});
    // stale tag (line holds another tag) -> unavailable
    @(negedge clk);
    xr_valid = 1; xr_src = 1; xr_data = {3'd5, 6'd0, 2'd2, 22'h0778};
    @(posedge clk);
    while (!xr_ready) @(posedge clk);
    #1 xr_valid = 0;
    chk("serve stale tag: unavailable", xs_data[XRSP_W-1], 1);

    // 7. write miss: L2 only, no allocation
    Z = mk(22'h0999, 1, 3);
    core_access(1, Z, {8{32'h0BADF00D}}, rd, lat);
    chk("write miss to L2", n_l2_writes, 2);
    core_access(0, Z, '0, rd, lat);
    chk("write miss not allocated: read from L2", n_l2_reads, 3);
    chk("L2 holds written data", rd, {8{32'h0BADF00D}});

    chk("events local", cnt_local, 3);
    chk("events remote", cnt_remote, 2);
    chk("events l2", cnt_l2, 2);
    chk("events redirect", cnt_redirect, 1);
    chk("events write", cnt_write, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
