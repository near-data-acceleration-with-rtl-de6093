// dram_chip_model: behavioural model of the DRAM dice of one x8 chip (not
// synthesizable). Tracks the open row of each bank from ACT/PRE, returns the 8B
// beat of a RD exactly RL cycles later, and stores WR data given with the command.
// `nda` marks a command issued by the chip's own NDA; rvalid is raised only for the
// data of NDA reads (host read data goes to the host and is not modelled).
// Storage is sparse (associative array). Testbenches preload and inspect it
// through poke/peek.
module dram_chip_model
  import chopim_pkg::*;
#(
  parameter int RL = T_CL
) (
  input  logic              clk,
  input  ddr_cmd_t          cmd,
  input  logic              nda,
  input  logic [BEAT_W-1:0] wdata,
  output logic              rvalid,
  output logic [BEAT_W-1:0] rdata
);
  logic [BEAT_W-1:0] mem [bit [26:0]];
  logic [ROW_W-1:0]  open_row [NBANKS];
  logic              vpipe [RL];
  logic [BEAT_W-1:0] dpipe [RL];
  int                errors = 0;

  function automatic bit [26:0] key(logic [BANK_W-1:0] b, logic [ROW_W-1:0] r, logic [COL_W-1:0] c);
    return {b, r, c};
  endfunction

  function automatic void poke(logic [BANK_W-1:0] b, logic [ROW_W-1:0] r, logic [COL_W-1:0] c,
                               logic [BEAT_W-1:0] v);
    mem[key(b, r, c)] = v;
  endfunction

  function automatic logic [BEAT_W-1:0] peek(logic [BANK_W-1:0] b, logic [ROW_W-1:0] r,
                                             logic [COL_W-1:0] c);
    if (mem.exists(key(b, r, c))) return mem[key(b, r, c)];
    return '0;
  endfunction

  initial begin
    for (int i = 0; i < RL; i++) begin vpipe[i] = 1'b0; dpipe[i] = '0; end
    for (int b = 0; b < NBANKS; b++) open_row[b] = '0;
  end

  always_ff @(posedge clk) begin
    vpipe[0] <= (cmd.cmd == CMD_RD) && nda;
    dpipe[0] <= (cmd.cmd == CMD_RD) ? peek(cmd.bank, open_row[cmd.bank], cmd.col) : '0;
    for (int i = 1; i < RL; i++) begin
      vpipe[i] <= vpipe[i-1];
      dpipe[i] <= dpipe[i-1];
    end
    if (cmd.cmd == CMD_ACT) open_row[cmd.bank] <= cmd.row;
    if ((cmd.cmd == CMD_RD || cmd.cmd == CMD_WR) && open_row[cmd.bank] != cmd.row) errors++;
  end

  always @(posedge clk)
    if (cmd.cmd == CMD_WR) mem[key(cmd.bank, open_row[cmd.bank], cmd.col)] = wdata;

  // data of a RD issued RL cycles ago
  assign rvalid = vpipe[RL-1];
  assign rdata  = dpipe[RL-1];
endmodule
