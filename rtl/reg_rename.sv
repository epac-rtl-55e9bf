// reg_rename: register renaming with a free list and a ready scoreboard.
//
// Maps N_LOG architectural registers onto N_PHYS physical ones. A map table
// holds the current physical register of each architectural one (identity
// after reset); a circular free list holds the N_PHYS - N_LOG spare ones.
// Renaming an instruction (ren_valid) reads the mappings of its two sources
// and, if it writes a register (ren_wr), takes the oldest free register as
// the new destination and reports the one it replaces (ren_pold). The old
// register must be handed back on rel_* when the instruction retires, since
// only then can no older instruction still read it. When the free list is
// empty a writing instruction waits (ren_ready low); the software must then
// spill, as the architecture has no more names to give.
// The scoreboard keeps one ready bit per physical register: cleared when the
// register is given out as a destination, set again when its result is
// written (wb_*). ren_rdy1/2 tell whether the sources can be read now, so
// independent instructions may overlap long-latency ones.
// Timing: all ren_* outputs are combinational in the cycle of ren_valid; the
// map, the free list and the scoreboard change at the next clock edge. A
// release and a write-back in the same cycle as a renaming are seen by the
// next one. Sources are looked up before the destination is remapped.
// Defaults N_LOG = 32, N_PHYS = 40 are the vector unit's 32 RISC-V vector
// registers on 40 physical ones; the variable-precision unit uses
// N_PHYS = 64. The free-list order, the release-at-retire rule and the
// interface are this design's choices.
module reg_rename #(
  parameter int unsigned N_LOG  = 32,
  parameter int unsigned N_PHYS = 40,
  localparam int unsigned LW = $clog2(N_LOG),
  localparam int unsigned PW = $clog2(N_PHYS),
  localparam int unsigned CW = $clog2(N_PHYS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // rename
  input  logic          ren_valid,
  output logic          ren_ready,
  input  logic          ren_wr,         // the instruction writes ren_dst
  input  logic [LW-1:0] ren_src1,
  input  logic [LW-1:0] ren_src2,
  input  logic [LW-1:0] ren_dst,
  output logic [PW-1:0] ren_psrc1,
  output logic [PW-1:0] ren_psrc2,
  output logic          ren_rdy1,       // source value already written
  output logic          ren_rdy2,
  output logic [PW-1:0] ren_pdst,       // new physical destination
  output logic [PW-1:0] ren_pold,       // physical register it replaces
  // retire: give back a replaced register
  input  logic          rel_valid,
  input  logic [PW-1:0] rel_preg,
  // result written
  input  logic          wb_valid,
  input  logic [PW-1:0] wb_preg,
  output logic [CW-1:0] free_count
);
  localparam int unsigned NF = N_PHYS - N_LOG;

  logic [PW-1:0]     map_q  [N_LOG];
  logic [PW-1:0]     free_q [N_PHYS];
  logic [PW-1:0]     rp, wp;
  logic [CW-1:0]     cnt;
  logic [N_PHYS-1:0] rdy_q;

  logic alloc;
  assign ren_ready  = !ren_wr || cnt != 0;
  assign alloc      = ren_valid && ren_wr && cnt != 0;
  assign ren_psrc1  = map_q[ren_src1];
  assign ren_psrc2  = map_q[ren_src2];
  assign ren_rdy1   = rdy_q[ren_psrc1];
  assign ren_rdy2   = rdy_q[ren_psrc2];
  assign ren_pdst   = free_q[rp];
  assign ren_pold   = map_q[ren_dst];
  assign free_count = cnt;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (int'(p) == N_PHYS - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_LOG; i++) map_q[i] <= PW'(i);
      for (int i = 0; i < N_PHYS; i++) free_q[i] <= (i < NF) ? PW'(N_LOG + i) : '0;
      rp    <= '0;
      wp    <= PW'(NF % N_PHYS);
      cnt   <= CW'(NF);
      rdy_q <= '1;
    end else begin
      if (alloc) begin
        map_q[ren_dst] <= ren_pdst;
        rp             <= inc(rp);
      end
      if (rel_valid) begin
        free_q[wp] <= rel_preg;
        wp         <= inc(wp);
      end
      cnt <= cnt + CW'(rel_valid) - CW'(alloc);
      if (wb_valid) rdy_q[wb_preg] <= 1'b1;
      if (alloc)    rdy_q[ren_pdst] <= 1'b0;
    end
  end

  // a register can only come back if one was taken
  assert property (@(posedge clk) disable iff (!rst_n) rel_valid |-> (int'(cnt) < N_PHYS));
endmodule
