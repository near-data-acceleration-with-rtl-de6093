// host_addr_map: host physical-to-DRAM address mapping with bank partitioning.
//
// Base mapping (Skylake-like, 2 channels x 2 ranks x 16 banks, 8KB rank rows,
// 64B lines): offset pa[5:0], column bits pa[8:6], bank-group bit 0 pa[9], channel
// pa[10], column bits pa[14:11], bank-group bit 1 pa[15], bank pa[17:16], rank
// pa[18], row pa[34:19]. Channel, rank, bank-group and bank bits are XOR-hashed with
// low row bits: rank ^= row[0], bank ^= row[2:1], bg1 ^= row[3], ch ^= row[4],
// bg0 ^= row[5]. The field order follows the paper's figure of the Skylake map; the
// bit positions and XOR pairs are this design's (the figure prints none).
//
// Bank partitioning (bp_en): the top NDA_BANKS bank IDs of every rank are reserved
// for data shared with the NDAs, and the OS places shared data at the top of the
// physical space, so the 4 most significant address bits (MSB, the top row bits)
// of a host-only address never name a reserved bank. If the hashed bank ID
// {bg1,bg0,bank} of a host-only address is reserved, the MSBs and the bank ID are
// swapped, which moves the line into a host bank, in rows that no unswapped host
// address reaches. For shared addresses (MSBs naming a reserved bank) the swap is
// applied when the hashed bank is a host bank, so shared data always lands in a
// reserved bank. In short: swap when exactly one of {hashed bank, MSBs} is
// reserved; the map stays one-to-one. The host-only rule is the paper's; the rule
// for shared addresses is this design's completion of it.
module host_addr_map
  import chopim_pkg::*;
#(
  parameter int NDA_BANKS = 1,
  parameter int PA_BITS   = 35
) (
  input  logic [PA_BITS-1:0] pa,
  input  logic               bp_en,
  output logic               ch,
  output logic               rank,
  output logic [BANK_W-1:0]  bank,
  output logic [ROW_W-1:0]   row,
  output logic [COL_W-1:0]   col,
  output logic               shared   // address lies in the shared region
);
  logic [ROW_W-1:0]  r;
  logic [BANK_W-1:0] h, m;
  logic              h_res, m_res;

  always_comb begin
    r    = pa[34:19];
    col  = {pa[14:11], pa[8:6]};
    ch   = pa[10] ^ r[4];
    rank = pa[18] ^ r[0];
    h    = {pa[15] ^ r[3], pa[9] ^ r[5], pa[17:16] ^ r[2:1]};
    m    = r[ROW_W-1 -: BANK_W];
    h_res  = (int'(h) >= NBANKS - NDA_BANKS);
    m_res  = (int'(m) >= NBANKS - NDA_BANKS);
    shared = m_res;
    bank = h;
    row  = r;
    if (bp_en && (h_res != m_res)) begin
      bank = m;
      row  = {h, r[ROW_W-BANK_W-1:0]};
    end
  end
endmodule
