// tb_host_addr_map: address mapping with bank partitioning, for one and for two
// reserved banks per rank. For random physical addresses it checks that the map is
// one-to-one (an independent inverse recovers the address), that host-only data
// never lands in a reserved bank and shared data always does, and that without
// partitioning the bank is the plain XOR hash. Counts the remapped addresses.
module tb_host_addr_map;
  import chopim_pkg::*;
  logic [34:0] pa;
  logic bp_en;
  logic ch1, rank1, sh1, ch2, rank2, sh2;
  logic [BANK_W-1:0] bank1, bank2;
  logic [ROW_W-1:0] row1, row2;
  logic [COL_W-1:0] col1, col2;
  int checks = 0, failures = 0, n_swap = 0;

  host_addr_map #(.NDA_BANKS(1)) dut1 (.pa, .bp_en, .ch(ch1), .rank(rank1), .bank(bank1),
                                       .row(row1), .col(col1), .shared(sh1));
  host_addr_map #(.NDA_BANKS(2)) dut2 (.pa, .bp_en, .ch(ch2), .rank(rank2), .bank(bank2),
                                       .row(row2), .col(col2), .shared(sh2));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [34:0] inverse(int nres, logic bp, logic ch, logic rank,
                                          logic [3:0] bank, logic [15:0] row, logic [6:0] col);
    logic [15:0] r;
    logic [3:0] h;
    logic [34:0] a;
    bit rb, rr;
    rb = int'(bank) >= 16 - nres;
    rr = int'(row[15:12]) >= 16 - nres;
    if (bp && rb != rr) begin r = {bank, row[11:0]}; h = row[15:12]; end
    else begin r = row; h = bank; end
    a = '0;
    a[34:19] = r;
    a[14:11] = col[6:3];
    a[8:6]   = col[2:0];
    a[10]    = ch ^ r[4];
    a[18]    = rank ^ r[0];
    a[15]    = h[3] ^ r[3];
    a[9]     = h[2] ^ r[5];
    a[17:16] = h[1:0] ^ r[2:1];
    return a;
  endfunction

  function automatic logic [3:0] hash(logic [34:0] a);
    return {a[15] ^ a[22], a[9] ^ a[24], a[17:16] ^ a[21:20]};
  endfunction

  initial begin
    for (int it = 0; it < 200000; it++) begin
      pa = {3'($urandom), $urandom};
      pa[5:0] = '0;
      bp_en = $urandom % 4 != 0;
      #1;
      checks += 2;
      if (inverse(1, bp_en, ch1, rank1, bank1, row1, col1) !== pa) failures++;
      if (inverse(2, bp_en, ch2, rank2, bank2, row2, col2) !== pa) failures++;
      if (bp_en) begin
        checks += 2;
        if ((int'(bank1) >= 15) !== (int'(pa[34:31]) >= 15) || sh1 !== (int'(pa[34:31]) >= 15)) failures++;
        if ((int'(bank2) >= 14) !== (int'(pa[34:31]) >= 14) || sh2 !== (int'(pa[34:31]) >= 14)) failures++;
        if (bank1 != hash(pa)) n_swap++;
      end else begin
        checks++;
        if (bank1 !== hash(pa) || row1 !== pa[34:19] || bank2 !== hash(pa)) failures++;
      end
    end
    checks++;
    if (n_swap == 0) failures++;
    $display("remapped %0d", n_swap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
