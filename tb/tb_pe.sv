// tb_pe: processing element. Random sequences of beats with every action (LOAD,
// SCALE, FMA, MUL, DOT, SQ), from DRAM data or from the scratchpad, and scratchpad
// copies from the buffer, and accumulator flushes into the scratchpad (GEMV row
// ends). A reference copy of the buffer, scratchpad, scalars and
// accumulators is kept in the testbench; after every beat the touched buffer entry
// (read back through out_idx / wr_data) or the accumulators are compared. Results
// must be visible one cycle after the beat.
module tb_pe;
  import chopim_pkg::*;
  import fp_ref_pkg::*;
  import nda_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, beat_valid = 0, beat_spm = 0, out_spm_we = 0, acc_flush = 0;
  logic [2:0][31:0] scalar_in;
  pe_act_e beat_act;
  logic [1:0] beat_ssel;
  logic [6:0] beat_idx, out_idx;
  logic [BEAT_W-1:0] beat_data, wr_data;
  logic [1:0][31:0] acc;
  int checks = 0, failures = 0;
  int n_act [6];

  logic [63:0] rbuf [128], rspm [128];
  logic [2:0][31:0] rs;
  logic [1:0][31:0] racc;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rb();
    return {rand_f32(125, 129, 6), rand_f32(125, 129, 6)};
  endfunction

  initial begin
    scalar_in = '0; beat_act = PA_LOAD; beat_ssel = '0; beat_idx = '0; out_idx = '0;
    beat_data = '0;
    for (int i = 0; i < 6; i++) n_act[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // fill buffer and scratchpad
    for (int i = 0; i < 128; i++) begin
      beat_valid = 1; beat_act = PA_LOAD; beat_spm = 0; beat_idx = 7'(i); beat_data = rb();
      rbuf[i] = beat_data;
      @(negedge clk);
    end
    beat_valid = 0;
    for (int i = 0; i < 128; i++) begin
      out_idx = 7'(i); out_spm_we = 1; rspm[i] = rbuf[i];
      @(negedge clk);
    end
    out_spm_we = 0;
    for (int it = 0; it < 20; it++) begin
      // launch: new scalars, accumulators cleared
      for (int s = 0; s < 3; s++) scalar_in[s] = rand_f32(125, 129, 6);
      rs = scalar_in; racc = '0;
      start = 1; @(negedge clk); start = 0;
      for (int b = 0; b < 200; b++) begin
        logic [63:0] d, e;
        int i;
        i = int'($urandom % 128);
        if ($urandom % 16 == 0) begin
          // accumulators -> scratchpad entry, accumulators cleared
          out_idx = 7'(i); acc_flush = 1;
          rspm[i] = racc; racc = '0;
          @(negedge clk);
          acc_flush = 0;
          #1;
          checks++;
          if (acc !== '0 || dut.u_spm.mem[i] !== rspm[i]) begin failures++; $display("flush failed"); end
          continue;
        end
        if ($urandom % 8 == 0) begin
          // scratchpad copy of a buffer entry
          out_idx = 7'(i); out_spm_we = 1;
          rspm[i] = rbuf[i];
          @(negedge clk);
          out_spm_we = 0;
          continue;
        end
        beat_valid = 1; beat_idx = 7'(i);
        beat_act = pe_act_e'($urandom % 6);
        beat_ssel = 2'($urandom % 3);
        beat_spm = ($urandom % 4 == 0);
        beat_data = rb();
        d = beat_spm ? rspm[i] : beat_data;
        n_act[int'(beat_act)]++;
        for (int h = 0; h < 2; h++) begin
          logic [31:0] dl, bl;
          dl = d[32*h +: 32]; bl = rbuf[i][32*h +: 32];
          case (beat_act)
            PA_LOAD:  e[32*h +: 32] = dl;
            PA_SCALE: e[32*h +: 32] = fma32(rs[beat_ssel], dl, 0);
            PA_FMA:   e[32*h +: 32] = fma32(rs[beat_ssel], dl, bl);
            PA_MUL:   e[32*h +: 32] = fma32(bl, dl, 0);
            PA_DOT:   racc[h] = fma32(bl, dl, racc[h]);
            default:  racc[h] = fma32(dl, dl, racc[h]);
          endcase
        end
        if (beat_act inside {PA_LOAD, PA_SCALE, PA_FMA, PA_MUL}) rbuf[i] = e;
        @(negedge clk);
        beat_valid = 0;
        out_idx = 7'(i);
        #1;
        checks++;
        if (wr_data !== rbuf[i] || acc !== racc) begin
          failures++;
          if (failures < 10) $display("act %s idx %0d: buf %h exp %h acc %h exp %h",
            beat_act.name(), i, wr_data, rbuf[i], acc, racc);
        end
      end
    end
    for (int a = 0; a < 6; a++) begin checks++; if (n_act[a] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
