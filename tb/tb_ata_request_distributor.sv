// tb_ata_request_distributor: exhaustive check of the routing rule for a
// 4-core cluster, seen from core 2: every hit vector, read and write.
// Expected: write -> L2 (local data updated only on a local hit); local read
// hit -> local; otherwise the first remote holder after core 2 in cyclic
// order; no holder -> L2.  Also replays the paper's three cases for two cores.
module tb_ata_request_distributor;
  import ata_pkg::*;
  localparam int N = 4, SELF = 2;
  logic         is_write;
  logic [N-1:0] hit_vec;
  route_e       route;
  logic [1:0]   remote_id;
  logic         local_write;
  // two-core instance for the paper's cases (core 1 = index 0)
  logic [1:0]   hv2;
  route_e       route2;
  logic [0:0]   rid2;
  logic         lw2;
  int checks = 0, failures = 0;

  ata_request_distributor #(.N_CORES(N), .SELF(SELF)) dut (.*);
  ata_request_distributor #(.N_CORES(2), .SELF(0)) dut2 (
    .is_write(1'b0), .hit_vec(hv2), .route(route2), .remote_id(rid2), .local_write(lw2));

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d (hv=%b wr=%b)", what, got, exp, hit_vec, is_write);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int wr = 0; wr < 2; wr++) begin
      for (int v = 0; v < (1 << N); v++) begin
        int exp_r, exp_id;
        is_write = 1'(wr);
        hit_vec  = N'(v);
        #1;
        exp_id = -1;
        for (int k = 1; k < N; k++)
          if (exp_id < 0 && v[(SELF + k) % N]) exp_id = (SELF + k) % N;
        if (wr)             exp_r = ROUTE_L2;
        else if (v[SELF])   exp_r = ROUTE_LOCAL;
        else if (exp_id >= 0) exp_r = ROUTE_REMOTE;
        else                exp_r = ROUTE_L2;
        chk("route", int'(route), exp_r);
        chk("local_write", int'(local_write), wr && v[SELF]);
        if (exp_r == ROUTE_REMOTE) chk("remote_id", int'(remote_id), exp_id);
      end
    end
    // paper cases: [0,1] -> cache 2, [1,1] -> local, [0,0] -> L2 (bit 0 = cache 1)
    hv2 = 2'b10; #1; chk("case a route", int'(route2), ROUTE_REMOTE); chk("case a id", int'(rid2), 1);
    hv2 = 2'b11; #1; chk("case b route", int'(route2), ROUTE_LOCAL);
    hv2 = 2'b00; #1; chk("case c route", int'(route2), ROUTE_L2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
