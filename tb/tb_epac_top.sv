// tb_epac_top: end-to-end test of the EPAC uncore at its full size (four
// 256 kB L2/HN slices, no parameter overridden).
// Four request nodes (RNs) with private caches are played on the ports of
// AVS/VPU 0, AVS/VPU 1, VRP and STX 0. Behind the C2C lanes sits the FPGA
// end: a second c2c_link and a memory. The lanes add a 4-cycle delay each
// way and flip a bit in about one beat in 400, so CRC errors and replays
// happen. Phase A: the RNs run at the same time, each on ten lines of its
// own that share one L2 set (more than its 8 ways, so refills evict lines an
// RN still holds: back-invalidation). Phase B: the RNs take turns on eight
// shared lines, so that homes snoop one RN for another. Requests are shared
// and unique reads, atomic adds, write-backs and clean evictions. Phase C:
// each RN sends 16 clean evictions at once, more than its 4 request credits.
// Before that, each of the three renaming units is run out of spare
// registers, must stall, and must resume when a register is retired.
// Checked: every read returns the latest value of its line, atomics return
// the old word, unique reads leave no other copy; and each mechanism - L2
// miss, memory access over C2C, snoop, dirty snoop data, back-invalidation,
// write-back, far atomic, credit stall, CRC error and replay - happened.
module tb_epac_top;
  import epac_pkg::*;
  localparam int NR = 4;
  localparam int NL = 10;     // private lines per RN
  localparam int NS = 8;      // shared lines
  localparam int DLY = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ------------------------------------------------------------ DUT
  logic  [N_CH-1:0][6:0] rtv, rtc, rrv, rrc;
  flit_t [N_CH-1:0][6:0] rtf, rrf;
  logic  [7:0][31:0] c_tl, c_rl;
  logic  c_ts, c_rs, c_crc, c_rep;
  logic  [3:0][15:0] l2_misses, hn_snoops, hn_backinv;
  epac_top dut (
    .clk, .rst_n, .interleave_mode(2'd0),
    .rn_tx_valid(rtv), .rn_tx_flit(rtf), .rn_tx_credit(rtc),
    .rn_rx_valid(rrv), .rn_rx_flit(rrf), .rn_rx_credit(rrc),
    .c2c_tx_lanes(c_tl), .c2c_tx_sof(c_ts), .c2c_rx_lanes(c_rl), .c2c_rx_sof(c_rs),
    .c2c_crc_err(c_crc), .c2c_replay(c_rep),
    .l2_misses, .hn_snoops, .hn_backinv,
    .ren_valid, .ren_ready, .ren_wr, .ren_src1, .ren_src2, .ren_dst, .ren_psrc1, .ren_psrc2,
    .ren_rdy1, .ren_rdy2, .ren_pdst, .ren_pold, .rel_valid, .rel_preg, .wb_valid, .wb_preg, .ren_free
  );
  logic [2:0] ren_valid, ren_ready, ren_wr, ren_rdy1, ren_rdy2, rel_valid, wb_valid;
  logic [2:0][4:0] ren_src1, ren_src2, ren_dst;
  logic [2:0][5:0] ren_psrc1, ren_psrc2, ren_pdst, ren_pold, rel_preg, wb_preg;
  logic [2:0][6:0] ren_free;

  // Renaming units: from reset, rename writes with nothing retiring until
  // the spare registers (8 in a vector unit, 32 in VRP) run out and the unit
  // stalls; then retire one and see renaming resume with that register.
  int n_ren_stall = 0;
  task automatic rename_run(int u, int spare);
    for (int i = 0; i <= spare; i++) begin
      @(negedge clk);
      ren_valid[u] = 1; ren_wr[u] = 1; ren_dst[u] = 5'(i); ren_src1[u] = 5'(i); ren_src2[u] = 5'(i + 1);
      #1;
      checks++;
      if (i < spare) begin
        if (!ren_ready[u] || int'(ren_pdst[u]) != 32 + i || int'(ren_pold[u]) != i || !ren_rdy1[u]) begin
          failures++; $display("rename unit %0d: step %0d wrong", u, i);
        end
      end else if (ren_ready[u]) begin
        failures++; $display("rename unit %0d did not stall", u);
      end else n_ren_stall++;
    end
    @(negedge clk);
    ren_valid[u] = 0; rel_valid[u] = 1; rel_preg[u] = 6'(0);    // retire: register 0 comes back
    @(negedge clk);
    rel_valid[u] = 0; ren_valid[u] = 1; ren_dst[u] = 5'(31); ren_src1[u] = 5'(0);
    #1;
    checks++;
    if (!ren_ready[u] || ren_pdst[u] != 6'(0) || ren_rdy1[u] || int'(ren_psrc1[u]) != 32) begin
      failures++; $display("rename unit %0d: no resume after retire", u);
    end
    @(negedge clk);
    ren_valid[u] = 0;
  endtask


  // RN k of this test uses top RN port PORT[k]
  localparam int PORT [NR] = '{3, 6, 4, 0};
  localparam logic [3:0] RN_NODE [7] = '{4'd0, 4'd1, 4'd3, 4'd4, 4'd8, 4'd11, 4'd12};

  logic  [NR-1:0][N_CH-1:0] sv, sr, kv, kr;
  flit_t [NR-1:0][N_CH-1:0] sf, kf;
  for (genvar r = 0; r < NR; r++) begin : g_rn
    for (genvar c = 0; c < N_CH; c++) begin : g_c
      noc_ep_tx u_tx (.clk, .rst_n, .in_valid(sv[r][c]), .in_ready(sr[r][c]), .in_flit(sf[r][c]),
                      .link_valid(rtv[c][PORT[r]]), .link_flit(rtf[c][PORT[r]]), .link_credit(rtc[c][PORT[r]]));
      noc_ep_rx u_rx (.clk, .rst_n, .link_valid(rrv[c][PORT[r]]), .link_flit(rrf[c][PORT[r]]),
                      .link_credit(rrc[c][PORT[r]]), .out_valid(kv[r][c]), .out_ready(kr[r][c]), .out_flit(kf[r][c]));
    end
  end
  // unused RN ports: nothing sent, everything taken
  for (genvar p = 0; p < 7; p++) begin : g_idle
    if (p != 3 && p != 6 && p != 4 && p != 0) begin : g_i
      for (genvar c = 0; c < N_CH; c++) begin : g_c
        assign rtv[c][p] = 1'b0;
        assign rtf[c][p] = '0;
        always_ff @(posedge clk) rrc[c][p] <= rrv[c][p];
      end
    end
  end

  // ------------------------------------------------------------ FPGA end
  logic  [N_CH-1:0] fv, fr, gv, gr;
  flit_t [N_CH-1:0] ff, gf;
  logic  [7:0][31:0] f_tl, f_rl;
  logic  f_ts, f_rs, f_crc, f_rep;
  c2c_link u_fpga (.clk, .rst_n, .tx_valid(fv), .tx_ready(fr), .tx_flit(ff),
                   .rx_valid(gv), .rx_ready(gr), .rx_flit(gf),
                   .tx_lanes(f_tl), .tx_sof(f_ts), .rx_lanes(f_rl), .rx_sof(f_rs),
                   .stat_crc_err(f_crc), .stat_replay(f_rep));
  logic [DLY-1:0][7:0][31:0] d_up, d_dn;
  logic [DLY-1:0]            s_up, s_dn;
  int flips = 0, err_on = 0;
  initial begin d_up = '0; d_dn = '0; s_up = '0; s_dn = '0; end
  always @(posedge clk) begin
    logic [7:0][31:0] a, b;
    a = c_tl; b = f_tl;
    if (err_on && $urandom_range(0, 399) == 0) begin a[$urandom_range(0, 7)][$urandom_range(0, 31)] ^= 1'b1; flips++; end
    if (err_on && $urandom_range(0, 399) == 0) begin b[$urandom_range(0, 7)][$urandom_range(0, 31)] ^= 1'b1; flips++; end
    d_up <= {d_up[DLY-2:0], a}; s_up <= {s_up[DLY-2:0], c_ts};
    d_dn <= {d_dn[DLY-2:0], b}; s_dn <= {s_dn[DLY-2:0], f_ts};
  end
  assign f_rl = d_up[DLY-1]; assign f_rs = s_up[DLY-1];
  assign c_rl = d_dn[DLY-1]; assign c_rs = s_dn[DLY-1];

  function automatic logic [LINE_BITS-1:0] init_line(logic [ADDR_W-1:0] a);
    logic [LINE_BITS-1:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = 32'(a) * 32'(i + 5) ^ 32'(i);
    return v;
  endfunction
  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];
  // A flit leaves at the rising edge when valid and ready are both high;
  // ready is sampled once inputs have settled, before that edge.
  flit_t fq [N_CH][$];
  logic [N_CH-1:0] ffire = '0;
  int mem_reads = 0, mem_writes = 0;
  always @(negedge clk) begin
    gr = '1;
    for (int c = 0; c < N_CH; c++) if (ffire[c]) void'(fq[c].pop_front());
    if (rst_n) for (int c = 0; c < N_CH; c++) if (gv[c]) begin
      flit_t f, r;
      f = gf[c];
      r = '0; r.tgt = f.src; r.src = f.tgt; r.addr = f.addr; r.txn = f.txn;
      if (f.op == OP_READ_NOSNP) begin
        r.op = OP_MEM_DATA; r.data = mem.exists(f.addr) ? mem[f.addr] : init_line(f.addr);
        fq[CH_DAT].push_back(r); mem_reads++;
      end else if (f.op == OP_WRITE_NOSNP) begin
        mem[f.addr] = f.data; r.op = OP_COMP; fq[CH_RSP].push_back(r); mem_writes++;
      end else begin
        failures++; $display("memory got op %0d", f.op);
      end
    end
    #1;
    for (int c = 0; c < N_CH; c++) begin
      fv[c] = (fq[c].size() != 0) && rst_n;
      ff[c] = (fq[c].size() != 0) ? fq[c][0] : '0;
    end
    #1;
    ffire = fv & fr;
  end

  // ------------------------------------------------------------ RN agents
  function automatic logic [ADDR_W-1:0] pline(int r, int l);   // private: one L2 set per RN
    return ADDR_W'(64'h4000_0000 + r * 64'h40 + l * 64'h8000);
  endfunction
  function automatic logic [ADDR_W-1:0] sline(int l);
    return ADDR_W'(64'h8000_0000 + l * 64'h40);
  endfunction
  // line table: private lines 0..NR*NL-1, shared after
  localparam int NT = NR * NL + NS;
  function automatic logic [ADDR_W-1:0] taddr(int t);
    return (t < NR * NL) ? pline(t / NL, t % NL) : sline(t - NR * NL);
  endfunction
  function automatic int tline(logic [ADDR_W-1:0] a);
    for (int t = 0; t < NT; t++) if (taddr(t) == {a[ADDR_W-1:6], 6'd0}) return t;
    return -1;
  endfunction
  function automatic int rn_of(node_id_t n);
    for (int r = 0; r < NR; r++) if (node_id_t'(RN_NODE[PORT[r]]) == n) return r;
    return -1;
  endfunction

  logic [LINE_BITS-1:0] latest [NT];
  int                   cst [NR][NT];       // 0 I, 1 S, 2 E clean, 3 E dirty, 4 write-back pending
  logic [LINE_BITS-1:0] cdata [NR][NT];

  flit_t txq [NR][N_CH][$];
  logic [NR-1:0][N_CH-1:0] sfire = '0;
  flit_t got_dat [NR][$];
  flit_t got_rsp [NR][$];
  int n_snp = 0, n_dirty = 0, n_wb = 0, n_atom = 0, n_stall = 0, n_crc = 0, n_rep = 0;
  int dbg_up_in = 0, dbg_up_out = 0, dbg_dn_in = 0, dbg_dn_out = 0;
  always @(negedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      if (dut.c_txv[c] && dut.c_txr[c]) dbg_up_in++;
      if (gv[c] && gr[c]) dbg_up_out++;
      if (fv[c] && fr[c]) dbg_dn_in++;
      if (dut.c_rxv[c] && dut.c_rxr[c]) dbg_dn_out++;
    end
    if (c_crc || f_crc) n_crc++;
    if (c_rep || f_rep) n_rep++;
  end

  always @(negedge clk) begin
    for (int r = 0; r < NR; r++) for (int c = 0; c < N_CH; c++) begin
      if (sfire[r][c]) void'(txq[r][c].pop_front());
      if (sv[r][c] && !sfire[r][c]) n_stall++;
    end
    kr = '1;
    if (rst_n) for (int r = 0; r < NR; r++) begin
      if (kv[r][CH_SNP]) begin
        flit_t f, s; int t;
        f = kf[r][CH_SNP]; t = tline(f.addr);
        n_snp++;
        s = '0; s.tgt = f.src; s.src = f.tgt; s.txn = f.txn; s.addr = f.addr;
        if (t < 0) begin failures++; $display("snoop for unknown line"); end
        else begin
          if (cst[r][t] == 3 || cst[r][t] == 4) begin
            s.op = OP_SNP_RESP_DATA; s.data = cdata[r][t]; txq[r][CH_DAT].push_back(s); n_dirty++;
          end else begin
            s.op = OP_SNP_RESP; txq[r][CH_RSP].push_back(s);
          end
          if (cst[r][t] != 4) begin
            if (f.op == OP_SNP_UNIQUE) cst[r][t] = 0;
            else if (cst[r][t] != 0) cst[r][t] = 1;
          end
        end
      end
      if (kv[r][CH_DAT]) got_dat[r].push_back(kf[r][CH_DAT]);
      if (kv[r][CH_RSP]) got_rsp[r].push_back(kf[r][CH_RSP]);
      if (kv[r][CH_REQ]) begin failures++; $display("RN received a request"); end
    end
    #1;
    for (int r = 0; r < NR; r++) for (int c = 0; c < N_CH; c++) begin
      sv[r][c] = (txq[r][c].size() != 0) && rst_n;
      sf[r][c] = (txq[r][c].size() != 0) ? txq[r][c][0] : '0;
    end
    #1;
    sfire = sv & sr;
  end

  int n_e = 0, n_s = 0, n_ops = 0;
  task automatic transact(int r, int t, int kind);   // 0 RS, 1 RU, 2 atomic, 3 wb, 4 evict
    flit_t f, g; logic [63:0] add;
    f = '0; f.src = node_id_t'(RN_NODE[PORT[r]]); f.txn = TXN_W'($urandom); f.addr = taddr(t);
    case (kind)
      0: f.op = OP_READ_SHARED;
      1: f.op = OP_READ_UNIQUE;
      2: begin f.op = OP_ATOMIC; f.resp = 4'(AMO_ADD); add = {$urandom, $urandom}; f.data[63:0] = add;
               f.addr = taddr(t) + ADDR_W'(8 * $urandom_range(0, 7)); end
      3: begin f.op = OP_WRITEBACK; f.data = cdata[r][t]; end
      default: f.op = OP_EVICT;
    endcase
    n_ops++;
    if (kind == 3) begin txq[r][CH_DAT].push_back(f); cst[r][t] = 4; n_wb++; end
    else begin
      if (kind == 4) cst[r][t] = 0;
      txq[r][CH_REQ].push_back(f);
    end
    if (kind >= 3) begin
      wait (got_rsp[r].size() != 0);
      g = got_rsp[r].pop_front();
      checks++;
      if (g.op != OP_COMP || g.txn != f.txn) begin failures++; $display("bad completion"); end
      if (kind == 3 && cst[r][t] == 4) cst[r][t] = 0;
      return;
    end
    wait (got_dat[r].size() != 0);
    g = got_dat[r].pop_front();
    checks++;
    if (g.op != OP_COMP_DATA || g.txn != f.txn) begin failures++; $display("bad reply header"); return; end
    if (kind == 2) begin
      logic [63:0] old;
      old = latest[t][f.addr[5:3]*64 +: 64];
      checks++;
      if (g.data[63:0] != old) begin failures++; $display("rn%0d line%0d: atomic old value wrong", r, t); end
      latest[t][f.addr[5:3]*64 +: 64] = old + add;
      n_atom++;
      return;
    end
    checks++;
    if (g.data != latest[t]) begin failures++; $display("rn%0d line%0d: stale data", r, t); end
    if (kind == 1) begin
      for (int q = 0; q < NR; q++) if (q != r && (cst[q][t] == 1 || cst[q][t] == 2 || cst[q][t] == 3)) begin
        failures++; $display("copy left after unique read");
      end
      checks++;
    end
    if (g.resp == RESP_E) n_e++; else n_s++;
    cdata[r][t] = g.data;
    cst[r][t] = (g.resp == RESP_E) ? 2 : 1;
    if (cst[r][t] == 2 && $urandom_range(0, 1)) begin
      cdata[r][t][$urandom_range(0, 15)*32 +: 32] = $urandom;
      latest[t] = cdata[r][t];
      cst[r][t] = 3;
    end
  endtask

  task automatic step(int r, int t);
    int k;
    k = $urandom_range(0, 9);
    if (cst[r][t] == 3 && k < 5) transact(r, t, 3);
    else if (cst[r][t] == 3) transact(r, t, 2);
    else if (cst[r][t] == 4) transact(r, t, 0);   // (not reached: write-backs complete first)
    else if ((cst[r][t] == 1 || cst[r][t] == 2) && k < 3) transact(r, t, 4);
    else if (k < 5) transact(r, t, 0);
    else if (k < 8) transact(r, t, 1);
    else transact(r, t, 2);
  endtask

  localparam int NA = 150;   // phase A operations per RN
  localparam int NB = 200;   // phase B operations in all
  int doneA = 0;
  logic goA = 0;
  for (genvar r = 0; r < NR; r++) begin : g_agent
    initial begin
      wait (goA);
      for (int n = 0; n < NA; n++) step(r, r * NL + $urandom_range(0, NL - 1));
      doneA++;
    end
  end

  initial begin
    sv = '0; sf = '0; fv = '0; ff = '0;
    ren_valid = '0; ren_wr = '0; ren_src1 = '0; ren_src2 = '0; ren_dst = '0;
    rel_valid = '0; rel_preg = '0; wb_valid = '0; wb_preg = '0;
    for (int t = 0; t < NT; t++) latest[t] = init_line(taddr(t));
    for (int r = 0; r < NR; r++) for (int t = 0; t < NT; t++) cst[r][t] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    rename_run(0, 8); rename_run(1, 8); rename_run(2, 32);
    err_on = 1;
    goA = 1;
    wait (doneA == NR);
    for (int n = 0; n < NB; n++) step($urandom_range(0, NR - 1), NR * NL + $urandom_range(0, NS - 1));
    // phase C: every RN sends a burst of 16 clean evictions of lines it
    // does not hold, more than its request credits, and collects the
    // completions
    for (int r = 0; r < NR; r++) for (int i = 0; i < 16; i++) begin
      flit_t f;
      f = '0; f.src = node_id_t'(RN_NODE[PORT[r]]); f.op = OP_EVICT; f.txn = TXN_W'(i);
      f.addr = ADDR_W'(64'hC000_0000 + (r * 16 + i) * 64'h40);
      txq[r][CH_REQ].push_back(f);
    end
    for (int r = 0; r < NR; r++) for (int i = 0; i < 16; i++) begin
      flit_t g;
      wait (got_rsp[r].size() != 0);
      g = got_rsp[r].pop_front();
      checks++;
      if (g.op != OP_COMP) begin failures++; $display("bad eviction completion"); end
    end
    begin
      int miss, snp, bi;
      miss = 0; snp = 0; bi = 0;
      for (int h = 0; h < 4; h++) begin miss += l2_misses[h]; snp += hn_snoops[h]; bi += hn_backinv[h]; end
      checks++; if (miss == 0)       begin failures++; $display("never: L2 miss"); end
      checks++; if (mem_reads == 0)  begin failures++; $display("never: memory read over C2C"); end
      checks++; if (mem_writes == 0) begin failures++; $display("never: memory write over C2C"); end
      checks++; if (snp == 0)        begin failures++; $display("never: snoop"); end
      checks++; if (n_dirty == 0)    begin failures++; $display("never: dirty snoop data"); end
      checks++; if (bi == 0)         begin failures++; $display("never: back-invalidation"); end
      checks++; if (n_wb == 0)       begin failures++; $display("never: write-back"); end
      checks++; if (n_atom == 0)     begin failures++; $display("never: far atomic"); end
      checks++; if (n_stall == 0)    begin failures++; $display("never: credit stall"); end
      checks++; if (n_crc == 0)      begin failures++; $display("never: CRC error"); end
      checks++; if (n_rep == 0)      begin failures++; $display("never: C2C replay"); end
      checks++; if (n_ren_stall != 3) begin failures++; $display("rename stalls: %0d of 3", n_ren_stall); end
      checks++; if (n_e == 0 || n_s == 0) begin failures++; $display("never: E or S grant"); end
      $display("ops %0d: L2 misses %0d, memory reads %0d writes %0d, snoops %0d (dirty %0d), back-inv %0d,",
               n_ops, miss, mem_reads, mem_writes, snp, n_dirty, bi);
      $display("  write-backs %0d, atomics %0d, E %0d S %0d, credit stalls %0d, bit flips %0d, CRC errors %0d, replays %0d",
               n_wb, n_atom, n_e, n_s, n_stall, flips, n_crc, n_rep);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d operations done, phase A done %0d", n_ops, doneA);
    for (int r = 0; r < NR; r++) $display("rn%0d txq %0d %0d %0d %0d dat %0d rsp %0d", r, txq[r][0].size(), txq[r][1].size(),
      txq[r][2].size(), txq[r][3].size(), got_dat[r].size(), got_rsp[r].size());
    $display("c2c up %0d->%0d down %0d->%0d, mem rd %0d wr %0d, fq %0d %0d", dbg_up_in, dbg_up_out, dbg_dn_in, dbg_dn_out, mem_reads, mem_writes, fq[1].size(), fq[3].size());
    $display("dut c2c q %h rxr %b base %0d nxt %0d sptr %0d exp %0d | fpga base %0d nxt %0d sptr %0d exp %0d", dut.u_c2c.q_cnt, dut.c_rxr,
      dut.u_c2c.base, dut.u_c2c.nxt, dut.u_c2c.sptr, dut.u_c2c.rx_exp, u_fpga.base, u_fpga.nxt, u_fpga.sptr, u_fpga.rx_exp);
    $display("hn state %0d %0d %0d %0d", dut.g_hn[0].u_node.ts, dut.g_hn[1].u_node.ts, dut.g_hn[2].u_node.ts, dut.g_hn[3].u_node.ts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
