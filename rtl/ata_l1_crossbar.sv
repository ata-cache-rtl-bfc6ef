// ata_l1_crossbar: the L1-to-L1 network of a cluster (N_PORTS x N_PORTS).
//
// Request side: every L1 may present one remote read (rq_*) addressed to
// another L1 (rq_dest).  Each destination has a one-entry output register;
// when it is free, or being emptied this cycle, a round-robin arbiter picks
// one of the L1s addressing it and rq_ready tells the winner.  The others
// wait: this is where several cores reading the same remote cache contend.
// The destination takes the request with ro_ready (its data-array grant).
//
// Response side: the serving L1 returns data to the source of the request.
// Every L1 has at most one remote read in flight, so no two responses can go
// to the same L1 in one cycle and the response side needs no arbitration; an
// assertion checks this.  Responses are registered once.
//
// Latency: one cycle through each direction when there is no contention.
// The paper names only a crossbar; the handshake, registers and round-robin
// arbitration are this design's choices.
//
// Lint note: rst_n is the asynchronous reset of every register, and the
// assertion also uses it, sampled on clk, in its "disable iff".  A linter
// reports this as a net used both synchronously and asynchronously.  The
// sampled use is only in the checker, which generates no hardware, so the
// warning is expected and stands.
module ata_l1_crossbar #(
  parameter int unsigned N_PORTS = 10,
  parameter int unsigned REQ_W   = 32,
  parameter int unsigned RSP_W   = 257,
  localparam int unsigned ID_W   = (N_PORTS > 1) ? $clog2(N_PORTS) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // requests from the L1s
  input  logic [N_PORTS-1:0]               rq_valid,
  input  logic [N_PORTS-1:0][ID_W-1:0]     rq_dest,
  input  logic [N_PORTS-1:0][REQ_W-1:0]    rq_data,
  output logic [N_PORTS-1:0]               rq_ready,
  // requests delivered to the serving L1s
  output logic [N_PORTS-1:0]               ro_valid,
  output logic [N_PORTS-1:0][ID_W-1:0]     ro_src,
  output logic [N_PORTS-1:0][REQ_W-1:0]    ro_data,
  input  logic [N_PORTS-1:0]               ro_ready,
  // responses from the serving L1s
  input  logic [N_PORTS-1:0]               rs_valid,
  input  logic [N_PORTS-1:0][ID_W-1:0]     rs_dest,
  input  logic [N_PORTS-1:0][RSP_W-1:0]    rs_data,
  // responses delivered to the requesting L1s
  output logic [N_PORTS-1:0]               so_valid,
  output logic [N_PORTS-1:0][RSP_W-1:0]    so_data,
  // number of requests that lost arbitration this cycle (statistics)
  output logic [ID_W:0]                    stall_cnt
);
  logic [N_PORTS-1:0][ID_W-1:0] rr_q;       // per destination: last winner
  logic [N_PORTS-1:0]           win_v;
  logic [N_PORTS-1:0][ID_W-1:0] win_id;
  logic [N_PORTS-1:0]           take;

  always_comb begin
    rq_ready = '0;
    for (int j = 0; j < N_PORTS; j++) begin
      win_v[j]  = 1'b0;
      win_id[j] = '0;
      take[j]   = !ro_valid[j] || ro_ready[j];
      for (int k = 1; k <= N_PORTS; k++) begin
        int unsigned i;
        i = (int'(rr_q[j]) + k) % N_PORTS;
        if (!win_v[j] && rq_valid[i] && rq_dest[i] == ID_W'(j)) begin
          win_v[j]  = 1'b1;
          win_id[j] = ID_W'(i);
        end
      end
      if (win_v[j] && take[j]) rq_ready[win_id[j]] = 1'b1;
    end
    stall_cnt = '0;
    for (int i = 0; i < N_PORTS; i++)
      if (rq_valid[i] && !rq_ready[i]) stall_cnt = stall_cnt + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ro_valid <= '0;
      ro_src   <= '0;
      ro_data  <= '0;
      rr_q     <= '0;
      so_valid <= '0;
      so_data  <= '0;
    end else begin
      for (int j = 0; j < N_PORTS; j++) begin
        if (take[j]) begin
          ro_valid[j] <= win_v[j];
          if (win_v[j]) begin
            ro_src[j]  <= win_id[j];
            ro_data[j] <= rq_data[win_id[j]];
            rr_q[j]    <= win_id[j];
          end
        end
      end
      for (int i = 0; i < N_PORTS; i++) begin
        so_valid[i] <= 1'b0;
        for (int j = 0; j < N_PORTS; j++) begin
          if (rs_valid[j] && rs_dest[j] == ID_W'(i)) begin
            so_valid[i] <= 1'b1;
            so_data[i]  <= rs_data[j];
          end
        end
      end
    end
  end

  // at most one response per requester per cycle
  for (genvar i = 0; i < N_PORTS; i++) begin : g_chk
    logic [N_PORTS-1:0] to_i;
    always_comb
      for (int j = 0; j < N_PORTS; j++) to_i[j] = rs_valid[j] && rs_dest[j] == ID_W'(i);
    a_one_rsp: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(to_i));
  end
endmodule
