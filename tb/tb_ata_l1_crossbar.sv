// tb_ata_l1_crossbar: random traffic through a 4-port L1-L1 crossbar.
// Requesters keep a request up until it is taken; destinations accept at
// random.  Checks: the round-robin winner per destination (reference
// arbiter), the delivered source and payload, that every request is delivered
// exactly once, and the response path (one cycle, to the right port).
module tb_ata_l1_crossbar;
  localparam int N = 4, REQ_W = 12, RSP_W = 10;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] rq_valid, rq_ready, ro_valid, ro_ready, rs_valid, so_valid;
  logic [N-1:0][1:0] rq_dest, ro_src, rs_dest;
  logic [N-1:0][REQ_W-1:0] rq_data, ro_data;
  logic [N-1:0][RSP_W-1:0] rs_data, so_data;
  logic [2:0] stall_cnt;
  int checks = 0, failures = 0, sent = 0, delivered = 0, stalls = 0;
  int last_win [N];
  bit exp_rv [N];
  logic [RSP_W-1:0] exp_rd [N];

  ata_l1_crossbar #(.N_PORTS(N), .REQ_W(REQ_W), .RSP_W(RSP_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h @%0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq [N];
    logic [N-1:0] taken;
    taken = '0;
    rq_valid = 0; rq_dest = 0; rq_data = 0; ro_ready = 0; rs_valid = 0; rs_dest = 0; rs_data = 0;
    for (int i = 0; i < N; i++) begin last_win[i] = 0; seq[i] = 0; exp_rv[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int perm [N];
      @(negedge clk);
      for (int i = 0; i < N; i++) if (taken[i]) rq_valid[i] = 0;
      // responses of the previous cycle
      for (int i = 0; i < N; i++) begin
        chk("so_valid", so_valid[i], exp_rv[i]);
        if (exp_rv[i]) chk("so_data", so_data[i], exp_rd[i]);
      end
      // new requests where the previous one was taken
      for (int i = 0; i < N; i++) begin
        if (!rq_valid[i] && $urandom_range(0, 2) != 0) begin
          rq_valid[i] = 1;
          rq_dest[i]  = 2'($urandom_range(0, 1));    // two hot destinations
          rq_data[i]  = REQ_W'({i[1:0], 10'(seq[i])});
          seq[i]++;
          sent++;
        end
      end
      ro_ready = N'($urandom);
      // responses: a random permutation so no two go to the same port
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      for (int j = 0; j < N; j++) begin
        rs_valid[j] = 1'($urandom);
        rs_dest[j]  = 2'(perm[j]);
        rs_data[j]  = RSP_W'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) exp_rv[i] = 0;
      for (int j = 0; j < N; j++)
        if (rs_valid[j]) begin exp_rv[perm[j]] = 1; exp_rd[perm[j]] = rs_data[j]; end
      // reference arbitration
      for (int j = 0; j < N; j++) begin
        int win;
        bit take;
        win = -1;
        take = !ro_valid[j] || ro_ready[j];
        for (int k = 1; k <= N; k++) begin
          int i;
          i = (last_win[j] + k) % N;
          if (win < 0 && rq_valid[i] && rq_dest[i] == 2'(j)) win = i;
        end
        for (int i = 0; i < N; i++)
          if (rq_valid[i] && rq_dest[i] == 2'(j))
            chk($sformatf("rq_ready %0d->%0d", i, j), rq_ready[i], take && i == win);
        if (take && win >= 0) last_win[j] = win;
        if (ro_valid[j] && ro_ready[j]) begin
          delivered++;
          chk("ro_src matches payload", ro_src[j], ro_data[j][REQ_W-1 -: 2]);
        end
      end
      for (int i = 0; i < N; i++) if (rq_valid[i] && !rq_ready[i]) stalls++;
      taken = rq_ready;
      @(posedge clk);
    end
    // drain
    @(negedge clk);
    ro_ready = '1;
    rs_valid = '0;
    repeat (3 * N) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) if (taken[i]) rq_valid[i] = 0;
      for (int j = 0; j < N; j++) if (ro_valid[j]) delivered++;
      taken = rq_ready;
      @(posedge clk);
    end
    chk("all requests delivered once", delivered, sent);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no contention seen"); end
    $display("sent=%0d delivered=%0d stalls=%0d", sent, delivered, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
