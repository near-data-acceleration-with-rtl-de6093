// tb_fp32_fma: checks the binary32 FMA against double-precision references.
// Random operands are drawn so that the exact a*b+c is representable in a double
// (short multiplicand mantissas, or a zero addend); the reference then needs only
// one rounding to binary32, so results must match bit for bit. Directed cases cover
// exact cancellation, infinities, NaN, overflow and flush-to-zero.
module tb_fp32_fma;
  import fp_ref_pkg::*;
  logic [31:0] a, b, c, d;
  int checks = 0, failures = 0;

  fp32_fma dut (.a, .b, .c, .d);

  task automatic chk(logic [31:0] exp_v, string what);
    #1;
    checks++;
    if (d !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: a=%h b=%h c=%h got %h exp %h", what, a, b, c, d, exp_v);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed
    a = 32'h3F800000; b = 32'h3F800000; c = 32'h0;        chk(32'h3F800000, "1*1+0");
    a = 32'h40000000; b = 32'h40400000; c = 32'hC0C00000; chk(32'h00000000, "2*3-6");
    a = 32'h40000000; b = 32'h40400000; c = 32'h3F800000; chk(32'h40E00000, "2*3+1");
    a = 32'h7F800000; b = 32'h3F800000; c = 32'h0;        chk(32'h7F800000, "inf");
    a = 32'h7F800000; b = 32'h0;        c = 32'h0;        chk(32'h7FC00000, "inf*0");
    a = 32'h7FC00001; b = 32'h3F800000; c = 32'h0;        chk(32'h7FC00000, "nan");
    a = 32'h7F000000; b = 32'h7F000000; c = 32'h0;        chk(32'h7F800000, "overflow");
    a = 32'h00800000; b = 32'h00800000; c = 32'h0;        chk(32'h00000000, "ftz");
    // 1 + 2^-24 + 2^-48 style: (1+2^-12)^2 = 1 + 2^-11 + 2^-24 -> rounds up (sticky)
    a = 32'h3F800800; b = 32'h3F800800; c = 32'h0;        chk(to_f32(to_real(a)*to_real(b)), "sticky");
    // random: short mantissas, exact in double
    repeat (3000) begin
      a = rand_f32(118, 136, 11);
      b = rand_f32(118, 136, 11);
      c = rand_f32(110, 145, 23);
      chk(to_f32(to_real(a) * to_real(b) + to_real(c)), "rand-short");
    end
    // random: full mantissas, zero addend (single rounding of the exact product)
    repeat (2000) begin
      a = rand_f32(100, 150, 23);
      b = rand_f32(100, 150, 23);
      c = 32'h0;
      chk(to_f32(to_real(a) * to_real(b)), "rand-mul");
    end
    // random: full mantissas, addend close to -product (cancellation), exact in double
    repeat (2000) begin
      a = rand_f32(126, 128, 23);
      b = rand_f32(126, 128, 23);
      c = to_f32(-(to_real(a) * to_real(b)));
      chk(to_f32(to_real(a) * to_real(b) + to_real(c)), "cancel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
