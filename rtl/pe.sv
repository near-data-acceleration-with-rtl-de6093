// pe: near-data processing element of one DRAM chip.
//
// Two binary32 FMA lanes work on an 8B beat (lane 0 = bits 31:0, lane 1 = bits
// 63:32), matching the 8B-per-chip access granularity. The PE holds five scalar
// registers: three operand scalars (alpha, beta, gamma) loaded at launch and two
// accumulators, one per lane, for DOT and NRM2 (the final reduction of the two lanes,
// and the square root of NRM2, are left to host software). A 1KB buffer holds the
// current batch; a 1KB scratchpad keeps a short vector across operations.
//
// Each beat arriving from DRAM or from the scratchpad carries the microcode action
// chosen by the sequencer:
//   LOAD  buf = d        SCALE buf = s*d       FMA buf = s*d + buf
//   MUL   buf = buf*d    DOT   acc = buf*d + acc   SQ acc = d*d + acc
// where s is the scalar register named by the microcode. Results are written one
// cycle after the beat (registered buffer write, registered accumulators).
// For a write phase the sequencer names a buffer entry on out_idx: its contents
// appear combinationally on wr_data (DRAM write data) and, with out_spm_we, are
// copied into the scratchpad. With acc_flush (GEMV row end) the scratchpad entry
// out_idx receives the two accumulators instead, and the accumulators clear.
// The structure (two FMAs, 5 scalar registers, buffer + scratchpad) follows the
// paper; the action set and this port list are this design's.
module pe
  import chopim_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // launch: load scalars, clear accumulators
  input  logic              start,
  input  logic [2:0][31:0]  scalar_in,
  // beat to process
  input  logic              beat_valid,
  input  pe_act_e           beat_act,
  input  logic [1:0]        beat_ssel,
  input  logic [6:0]        beat_idx,
  input  logic              beat_spm,    // data comes from scratchpad[beat_idx]
  input  logic [BEAT_W-1:0] beat_data,   // data from DRAM
  // write-phase read-out
  input  logic [6:0]        out_idx,
  input  logic              out_spm_we,
  input  logic              acc_flush,
  output logic [BEAT_W-1:0] wr_data,
  // reduction results
  output logic [1:0][31:0]  acc
);
  logic [2:0][31:0]  sreg;
  logic [BEAT_W-1:0] buf_q, spm_q, d;
  logic [1:0][31:0]  fa, fb, fc, fd;
  logic              buf_we;
  logic [BEAT_W-1:0] buf_wdata;
  logic [31:0]       s;

  pe_sram u_buf (
    .clk, .we(buf_we), .waddr(beat_idx), .wdata(buf_wdata),
    .raddr(beat_valid ? beat_idx : out_idx), .rdata(buf_q)
  );

  pe_sram u_spm (
    .clk, .we(out_spm_we || acc_flush), .waddr(out_idx), .wdata(acc_flush ? acc : buf_q),
    .raddr(beat_idx), .rdata(spm_q)
  );

  assign wr_data = buf_q;
  assign d       = beat_spm ? spm_q : beat_data;
  assign s       = (beat_ssel == 2'd0) ? sreg[0] : (beat_ssel == 2'd1) ? sreg[1] : sreg[2];

  for (genvar l = 0; l < 2; l++) begin : g_lane
    always_comb begin
      unique case (beat_act)
        PA_SCALE: begin fa[l] = s;               fb[l] = d[32*l +: 32]; fc[l] = 32'd0; end
        PA_FMA:   begin fa[l] = s;               fb[l] = d[32*l +: 32]; fc[l] = buf_q[32*l +: 32]; end
        PA_MUL:   begin fa[l] = buf_q[32*l +: 32]; fb[l] = d[32*l +: 32]; fc[l] = 32'd0; end
        PA_DOT:   begin fa[l] = buf_q[32*l +: 32]; fb[l] = d[32*l +: 32]; fc[l] = acc[l]; end
        PA_SQ:    begin fa[l] = d[32*l +: 32];   fb[l] = d[32*l +: 32]; fc[l] = acc[l]; end
        default:  begin fa[l] = 32'd0;           fb[l] = 32'd0;         fc[l] = 32'd0; end
      endcase
    end
    fp32_fma u_fma (.a(fa[l]), .b(fb[l]), .c(fc[l]), .d(fd[l]));
  end

  always_comb begin
    buf_we    = beat_valid && (beat_act inside {PA_LOAD, PA_SCALE, PA_FMA, PA_MUL});
    buf_wdata = (beat_act == PA_LOAD) ? d : {fd[1], fd[0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg <= '0;
      acc  <= '0;
    end else if (start) begin
      sreg <= scalar_in;
      acc  <= '0;
    end else if (acc_flush) begin
      acc  <= '0;
    end else if (beat_valid && (beat_act inside {PA_DOT, PA_SQ})) begin
      acc  <= fd;
    end
  end

  // A beat and a scratchpad copy never share a cycle (write phases read no data).
  assert property (@(posedge clk) disable iff (!rst_n) !(beat_valid && (out_spm_we || acc_flush)));
endmodule
