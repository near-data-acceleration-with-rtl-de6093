// nda_controller: host-side NDA controller of one memory channel.
//
// Sits beside the host memory controller. Software hands it acceleration requests
// (a launch packet and a target rank); each rank has a small launch queue, so
// software can post several operations without waiting (asynchronous launch,
// "macro" operations). When a rank's NDAs are idle, its next packet is offered on
// launch_*; ranks with work are served round-robin. A launch goes out when the host
// memory controller grants it the channel's C/A slot (launch_grant: the multiplexer
// between host commands and NDA-controller traffic), and reaches the rank's NDAs
// and the local replica in the same cycle.
//
// For every rank the controller keeps a replica of the NDAs' state machine
// (nda_sched). It sees every host command and launch, and the inhibit pin, exactly
// as the logic dies do, so it reproduces every NDA command without any signalling
// from the memory side; its rank table is the host memory controller's view of the
// rank (rank_st), and replica_cmd is the NDA command it expects this cycle. The
// next-rank predictor drives the per-rank inhibit pins. done/err pulse when a
// rank's operation ends (software notification).
// Queue depth and the launch handshake are this design's choices; the two roles
// (launching round-robin, keeping replicated FSMs) follow the paper.
module nda_controller
  import chopim_pkg::*;
#(
  parameter int NRANKS = 2,
  parameter int QDEPTH = 4,
  localparam int QW    = (QDEPTH > 1) ? $clog2(QDEPTH) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // acceleration requests from software
  input  logic                   req_valid,
  input  logic [1:0]             req_rank,
  input  nda_pkt_t               req_pkt,
  output logic                   req_ready,
  // launches to the NDAs
  output logic                   launch_valid,
  input  logic                   launch_grant,
  output logic [1:0]             launch_rank,
  output nda_pkt_t               launch_pkt,
  // host memory controller interface
  input  host_cmd_t              host_cmd,
  input  logic                   oldest_valid,
  input  logic                   oldest_is_read,
  input  logic [1:0]             oldest_rank,
  input  thr_mode_e              mode,
  input  logic [2:0]             log2_inv_p,
  output logic [NRANKS-1:0]      inhibit,
  output rank_view_t [NRANKS-1:0] rank_st,
  output ddr_cmd_t [NRANKS-1:0]  replica_cmd,
  output logic [NRANKS-1:0]      busy,
  output logic [NRANKS-1:0]      done,
  output logic [NRANKS-1:0]      err,
  output logic [NRANKS-1:0]      yield,
  output logic [NRANKS-1:0]      throttled,
  output logic [NRANKS-1:0]      in_write
);
  nda_pkt_t          q     [NRANKS][QDEPTH];
  logic [QW-1:0]     wp    [NRANKS];
  logic [QW-1:0]     rp    [NRANKS];
  logic [QW:0]       cnt   [NRANKS];
  logic [NRANKS-1:0] held;          // launched last cycle, busy not yet visible
  logic [1:0]        rr, sel;
  logic              fire;
  logic [NRANKS-1:0] elig, push, pop;

  always_comb begin
    req_ready = 1'b0;
    for (int r = 0; r < NRANKS; r++)
      if (req_rank == 2'(r)) req_ready = (cnt[r] < (QW+1)'(QDEPTH));
    for (int r = 0; r < NRANKS; r++)
      elig[r] = (cnt[r] != '0) && !busy[r] && !held[r];
    sel = rr;
    launch_valid = 1'b0;
    for (int k = NRANKS - 1; k >= 0; k--) begin
      if (elig[(int'(rr) + k) % NRANKS]) begin
        sel = 2'((int'(rr) + k) % NRANKS);
        launch_valid = 1'b1;
      end
    end
    launch_rank = sel;
    launch_pkt  = q[int'(sel) % NRANKS][rp[int'(sel) % NRANKS]];
    fire = launch_valid && launch_grant;
    for (int r = 0; r < NRANKS; r++) begin
      push[r] = req_valid && req_ready && (req_rank == 2'(r));
      pop[r]  = fire && (sel == 2'(r));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NRANKS; r++) begin
        wp[r] <= '0; rp[r] <= '0; cnt[r] <= '0;
        for (int i = 0; i < QDEPTH; i++) q[r][i] <= '0;
      end
      held <= '0;
      rr   <= '0;
    end else begin
      for (int r = 0; r < NRANKS; r++) begin
        if (push[r]) begin
          q[r][wp[r]] <= req_pkt;
          wp[r] <= (int'(wp[r]) == QDEPTH - 1) ? '0 : wp[r] + 1'b1;
        end
        if (pop[r]) rp[r] <= (int'(rp[r]) == QDEPTH - 1) ? '0 : rp[r] + 1'b1;
        cnt[r] <= cnt[r] + (QW+1)'(push[r]) - (QW+1)'(pop[r]);
        held[r] <= pop[r];
      end
      if (fire) rr <= 2'((int'(sel) + 1) % NRANKS);
    end
  end

  next_rank_predictor #(.NRANKS(NRANKS)) u_nrp (
    .clk, .rst_n, .oldest_valid, .oldest_is_read,
    .oldest_rank(oldest_rank[((NRANKS > 1) ? $clog2(NRANKS) : 1)-1:0]), .inhibit
  );

  for (genvar r = 0; r < NRANKS; r++) begin : g_rank
    ddr_cmd_t hc;
    nda_req_t rq;
    logic     ci, sf;
    always_comb begin
      hc = host_cmd.c;
      if (host_cmd.rank != 2'(r)) hc.cmd = CMD_NOP;
    end
    nda_sched u_replica (
      .clk, .rst_n, .host_cmd(hc), .launch(fire && (sel == 2'(r))), .pkt(launch_pkt),
      .wr_inhibit(inhibit[r]), .mode, .log2_inv_p,
      .nda_cmd(replica_cmd[r]), .req(rq), .col_issue(ci), .spm_fire(sf),
      .st(rank_st[r]), .busy(busy[r]), .in_write(in_write[r]), .done(done[r]),
      .err(err[r]), .yield(yield[r]), .throttled(throttled[r])
    );
  end

  // a launch is only granted when offered
  assert property (@(posedge clk) disable iff (!rst_n) launch_grant |-> launch_valid);
endmodule
