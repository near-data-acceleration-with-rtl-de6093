// chopim_system: NDA-enabled DDR4 main memory with concurrent host access.
//
// NCH independent channels, each with NRANKS ranks of NCHIPS x8 chips. Every chip
// carries a logic die (nda_chip) with a processing element and an NDA memory
// controller. On the host side, each channel has an NDA controller (launch queues,
// round-robin launch, next-rank predictor, one replicated NDA state machine per
// rank) beside the host memory controller; one address mapper (host_addr_map)
// serves all channels and implements the bank partitioning.
//
// Not part of this RTL and connected through ports: the host memory scheduler
// (drives host_cmd, grants launches, reports its oldest queued request, and reads
// rank_st for its own timing decisions) and the DRAM dice of every chip (receive
// nda_dram_cmd / nda_dram_wdata, return read data tCL later on nda_dram_rvalid /
// nda_dram_rdata). Host data transfers go straight between the host and the dice.
//
// Per channel, host command and NDA launch share the C/A bus: at most one of
// host_cmd and a granted launch per cycle. replica_cmd shows, for each rank, the NDA
// command the host side expects in the cycle; it equals what every chip of the rank
// issues on nda_dram_cmd. The sizes default to the evaluated system (2 channels x 2
// ranks, x8 chips, one reserved NDA bank per rank).
module chopim_system
  import chopim_pkg::*;
#(
  parameter int NCH       = 2,
  parameter int NRANKS    = 2,
  parameter int NCHIPS    = 8,
  parameter int QDEPTH    = 4,
  parameter int NDA_BANKS = 1
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  // configuration
  input  thr_mode_e                                   mode,
  input  logic [2:0]                                  log2_inv_p,
  input  logic                                        bp_en,
  // host address mapping
  input  logic [34:0]                                 map_pa,
  output logic                                        map_ch,
  output logic                                        map_rank,
  output logic [BANK_W-1:0]                           map_bank,
  output logic [ROW_W-1:0]                            map_row,
  output logic [COL_W-1:0]                            map_col,
  output logic                                        map_shared,
  // software requests to the NDA controllers
  input  logic     [NCH-1:0]                          req_valid,
  input  logic     [NCH-1:0][1:0]                     req_rank,
  input  nda_pkt_t [NCH-1:0]                          req_pkt,
  output logic     [NCH-1:0]                          req_ready,
  // host memory controller side
  input  host_cmd_t [NCH-1:0]                         host_cmd,
  output logic      [NCH-1:0]                         launch_valid,
  input  logic      [NCH-1:0]                         launch_grant,
  input  logic      [NCH-1:0]                         oldest_valid,
  input  logic      [NCH-1:0]                         oldest_is_read,
  input  logic      [NCH-1:0][1:0]                    oldest_rank,
  output rank_view_t [NCH-1:0][NRANKS-1:0]            rank_st,
  output ddr_cmd_t   [NCH-1:0][NRANKS-1:0]            replica_cmd,
  output logic       [NCH-1:0][NRANKS-1:0]            nda_busy,
  output logic       [NCH-1:0][NRANKS-1:0]            nda_done,
  output logic       [NCH-1:0][NRANKS-1:0]            nda_err,
  output logic       [NCH-1:0][NRANKS-1:0]            nda_yield,
  output logic       [NCH-1:0][NRANKS-1:0]            nda_throttled,
  output logic       [NCH-1:0][NRANKS-1:0]            nda_in_write,
  output logic       [NCH-1:0][NRANKS-1:0]            wr_inhibit,
  // DRAM dice of every chip
  output ddr_cmd_t   [NCH-1:0][NRANKS-1:0][NCHIPS-1:0]             nda_dram_cmd,
  output logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0][BEAT_W-1:0] nda_dram_wdata,
  input  logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0]             nda_dram_rvalid,
  input  logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0][BEAT_W-1:0] nda_dram_rdata,
  // PE accumulators (DOT / NRM2 partial sums) and chip status
  output logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0][1:0][31:0]  pe_acc,
  output logic       [NCH-1:0][NRANKS-1:0][NCHIPS-1:0]             chip_busy
);

  host_addr_map #(.NDA_BANKS(NDA_BANKS)) u_map (
    .pa(map_pa), .bp_en, .ch(map_ch), .rank(map_rank), .bank(map_bank),
    .row(map_row), .col(map_col), .shared(map_shared)
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic       lv, fire;
    logic [1:0] lrank;
    nda_pkt_t   lpkt;

    nda_controller #(.NRANKS(NRANKS), .QDEPTH(QDEPTH)) u_ctrl (
      .clk, .rst_n,
      .req_valid(req_valid[c]), .req_rank(req_rank[c]), .req_pkt(req_pkt[c]),
      .req_ready(req_ready[c]),
      .launch_valid(lv), .launch_grant(launch_grant[c]), .launch_rank(lrank),
      .launch_pkt(lpkt),
      .host_cmd(host_cmd[c]), .oldest_valid(oldest_valid[c]),
      .oldest_is_read(oldest_is_read[c]), .oldest_rank(oldest_rank[c]),
      .mode, .log2_inv_p,
      .inhibit(wr_inhibit[c]), .rank_st(rank_st[c]), .replica_cmd(replica_cmd[c]),
      .busy(nda_busy[c]), .done(nda_done[c]), .err(nda_err[c]),
      .yield(nda_yield[c]), .throttled(nda_throttled[c]), .in_write(nda_in_write[c])
    );
    assign launch_valid[c] = lv;
    assign fire = lv && launch_grant[c];

    for (genvar r = 0; r < NRANKS; r++) begin : g_rank
      ddr_cmd_t hc;
      always_comb begin
        hc = host_cmd[c].c;
        if (host_cmd[c].rank != 2'(r)) hc.cmd = CMD_NOP;
      end
      for (genvar k = 0; k < NCHIPS; k++) begin : g_chip
        logic cdone, cerr;
        nda_chip u_chip (
          .clk, .rst_n, .host_cmd(hc), .launch(fire && (lrank == 2'(r))), .pkt(lpkt),
          .wr_inhibit(wr_inhibit[c][r]), .mode, .log2_inv_p,
          .dram_cmd(nda_dram_cmd[c][r][k]), .dram_wdata(nda_dram_wdata[c][r][k]),
          .dram_rvalid(nda_dram_rvalid[c][r][k]), .dram_rdata(nda_dram_rdata[c][r][k]),
          .busy(chip_busy[c][r][k]), .done(cdone), .err(cerr), .acc(pe_acc[c][r][k])
        );
        // the replica on the host side and the logic die stay in step
        assert property (@(posedge clk) disable iff (!rst_n)
          (nda_dram_cmd[c][r][k] == replica_cmd[c][r]) && (cdone == nda_done[c][r]));
      end
    end
  end
endmodule
