// tb_l2hn_node: self-checking test of an L2 + home-node device on its own.
// The testbench plays six request nodes (RNs) with private caches and the
// memory behind the C2C link, all on the node's NoC port. The L2 is shrunk to
// 1 kB, 2-way (8 sets) and six lines of one set are used, so that refills
// evict lines that RNs still hold and back-invalidation happens. RNs issue
// random shared and unique reads, far atomics (add), write-backs of lines
// they dirtied and evictions of clean lines, one transaction at a time, and
// answer snoops at any time, returning dirty data. Checked: every COMP_DATA
// carries the latest value of the line (the reference here follows every
// RN write and atomic), atomics return the old word, no other RN keeps a copy
// after a unique read, exclusive/shared grants agree with what the other RNs
// hold, and misses, snoops with dirty data and back-invalidations happened.
module tb_l2hn_node;
  import epac_pkg::*;
  localparam logic [3:0] ME = 4'd2, MEM = 4'd9;
  localparam int NR = 6;
  localparam int NL = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [N_CH-1:0] iv, ic, ov, oc, sv, sr, kv, kr;
  flit_t [N_CH-1:0] ifl, ofl, sf, kf;
  logic [15:0] cnt_miss, cnt_snoop, cnt_backinv;
  l2hn_node #(.SIZE_KB(1), .WAYS(2), .MY_NODE(ME), .MEM_NODE(MEM)) dut (
    .clk, .rst_n, .in_valid(iv), .in_flit(ifl), .in_credit(ic),
    .out_valid(ov), .out_flit(ofl), .out_credit(oc), .cnt_miss, .cnt_snoop, .cnt_backinv);
  for (genvar c = 0; c < N_CH; c++) begin : g_c
    noc_ep_tx u_tx (.clk, .rst_n, .in_valid(sv[c]), .in_ready(sr[c]), .in_flit(sf[c]),
                    .link_valid(iv[c]), .link_flit(ifl[c]), .link_credit(ic[c]));
    noc_ep_rx u_rx (.clk, .rst_n, .link_valid(ov[c]), .link_flit(ofl[c]), .link_credit(oc[c]),
                    .out_valid(kv[c]), .out_ready(kr[c]), .out_flit(kf[c]));
  end

  function automatic node_id_t rn_id(int r);
    logic [3:0] ids [NR] = '{4'd0, 4'd1, 4'd4, 4'd5, 4'd12, 4'd13};
    return node_id_t'(ids[r]);
  endfunction
  function automatic int rn_of(node_id_t n);
    for (int r = 0; r < NR; r++) if (rn_id(r) == n) return r;
    return -1;
  endfunction
  function automatic logic [ADDR_W-1:0] line_addr(int l); return ADDR_W'(32'h0010_0000 + l * 512); endfunction
  function automatic int line_of(logic [ADDR_W-1:0] a);
    for (int l = 0; l < NL; l++) if (line_addr(l) == {a[ADDR_W-1:6], 6'd0}) return l;
    return -1;
  endfunction
  function automatic logic [LINE_BITS-1:0] init_line(logic [ADDR_W-1:0] a);
    logic [LINE_BITS-1:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = 32'(a) * 32'(i + 3);
    return v;
  endfunction

  // state of the system
  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];
  logic [LINE_BITS-1:0] latest [NL];          // the coherent value of each line
  int                   cst [NR][NL];         // 0 I, 1 S, 2 E clean, 3 E dirty
  logic [LINE_BITS-1:0] cdata [NR][NL];

  // outgoing queues per channel
  // A flit leaves at the rising edge when valid and ready are both high;
  // ready is sampled once inputs have settled, before that edge.
  flit_t txq [N_CH][$];
  logic [N_CH-1:0] fire = '0;
  always @(negedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      if (fire[c]) void'(txq[c].pop_front());
    end
  end
  always @(negedge clk) begin
    #1;
    for (int c = 0; c < N_CH; c++) begin
      sv[c] = (txq[c].size() != 0) && rst_n;
      sf[c] = (txq[c].size() != 0) ? txq[c][0] : '0;
    end
    #1;
    fire = sv & sr;
  end

  // responder: snoops, memory, completions
  flit_t got_dat [$];
  flit_t got_rsp [$];
  int n_dirty_snp = 0, n_snp = 0;
  always @(negedge clk) begin
    kr = '1;
    if (rst_n) begin
      if (kv[CH_SNP]) begin
        flit_t f, r; int rn, l;
        f = kf[CH_SNP]; rn = rn_of(f.tgt); l = line_of(f.addr);
        n_snp++;
        r = '0; r.tgt = f.src; r.src = f.tgt; r.txn = f.txn; r.addr = f.addr;
        if (rn < 0 || l < 0) begin failures++; $display("snoop to unknown rn/line"); end
        else begin
          if (cst[rn][l] == 3) begin
            r.op = OP_SNP_RESP_DATA; r.data = cdata[rn][l]; txq[CH_DAT].push_back(r); n_dirty_snp++;
          end else begin
            r.op = OP_SNP_RESP; txq[CH_RSP].push_back(r);
          end
          if (f.op == OP_SNP_UNIQUE) cst[rn][l] = 0;
          else if (cst[rn][l] != 0) cst[rn][l] = 1;
        end
      end
      if (kv[CH_REQ]) begin
        flit_t f, r;
        f = kf[CH_REQ];
        checks++;
        if (f.op != OP_READ_NOSNP || f.tgt != node_id_t'(MEM)) begin failures++; $display("bad request to memory"); end
        r = '0; r.tgt = f.src; r.src = node_id_t'(MEM); r.op = OP_MEM_DATA; r.addr = f.addr;
        r.data = mem.exists(f.addr) ? mem[f.addr] : init_line(f.addr);
        txq[CH_DAT].push_back(r);
      end
      if (kv[CH_DAT]) begin
        flit_t f, r;
        f = kf[CH_DAT];
        if (f.op == OP_WRITE_NOSNP) begin
          mem[f.addr] = f.data;
          r = '0; r.tgt = f.src; r.src = node_id_t'(MEM); r.op = OP_COMP; r.addr = f.addr;
          txq[CH_RSP].push_back(r);
        end else got_dat.push_back(f);
      end
      if (kv[CH_RSP]) got_rsp.push_back(kf[CH_RSP]);
    end
  end

  int n_e = 0, n_s = 0, n_wb = 0, n_atom = 0;
  task automatic transact(int r, int l, int kind);   // 0 RS, 1 RU, 2 atomic, 3 wb, 4 evict
    flit_t f, g; logic [63:0] add;
    f = '0; f.tgt = node_id_t'(ME); f.src = rn_id(r); f.txn = TXN_W'($urandom);
    f.addr = line_addr(l);
    case (kind)
      0: f.op = OP_READ_SHARED;
      1: f.op = OP_READ_UNIQUE;
      2: begin f.op = OP_ATOMIC; f.resp = 4'(AMO_ADD); add = {$urandom, $urandom}; f.data[63:0] = add;
               f.addr = line_addr(l) + ADDR_W'(8 * $urandom_range(0, 7)); end
      3: begin f.op = OP_WRITEBACK; f.data = cdata[r][l]; end
      default: f.op = OP_EVICT;
    endcase
    if (kind == 3) begin txq[CH_DAT].push_back(f); cst[r][l] = 0; n_wb++; end
    else begin
      if (kind == 4) cst[r][l] = 0;
      txq[CH_REQ].push_back(f);
    end
    if (kind >= 3) begin
      wait (got_rsp.size() != 0);
      g = got_rsp.pop_front();
      checks++;
      if (g.op != OP_COMP || g.tgt != rn_id(r) || g.txn != f.txn) begin failures++; $display("bad completion"); end
      return;
    end
    wait (got_dat.size() != 0);
    g = got_dat.pop_front();
    checks++;
    if (g.op != OP_COMP_DATA || g.tgt != rn_id(r) || g.txn != f.txn) begin failures++; $display("bad reply header"); return; end
    if (kind == 2) begin
      logic [63:0] old;
      old = latest[l][f.addr[5:3]*64 +: 64];
      checks++;
      if (g.data[63:0] != old) begin failures++; $display("atomic old value wrong"); end
      latest[l][f.addr[5:3]*64 +: 64] = old + add;
      n_atom++;
      for (int q = 0; q < NR; q++) begin
        checks++;
        if (cst[q][l] != 0) begin failures++; $display("copy left after atomic"); end
      end
      return;
    end
    checks++;
    if (g.data != latest[l]) begin failures++; $display("rn%0d line%0d: stale data", r, l); end
    // grant must agree with the other holders
    begin
      int others;
      others = 0;
      for (int q = 0; q < NR; q++) if (q != r && cst[q][l] != 0) others++;
      checks++;
      if (kind == 1 && others != 0) begin failures++; $display("copies left after unique read"); end
      if (kind == 0 && others != 0 && g.resp != RESP_S) begin failures++; $display("E granted while shared"); end
      if (g.resp == RESP_E) n_e++; else n_s++;
    end
    cdata[r][l] = g.data;
    cst[r][l] = (g.resp == RESP_E) ? 2 : 1;
    // an RN holding E may write the line
    if (cst[r][l] == 2 && $urandom_range(0, 1)) begin
      cdata[r][l][$urandom_range(0, 15)*32 +: 32] = $urandom;
      latest[l] = cdata[r][l];
      cst[r][l] = 3;
    end
  endtask

  initial begin
    kr = '1; sv = '0; sf = '0;
    for (int l = 0; l < NL; l++) latest[l] = init_line(line_addr(l));
    for (int r = 0; r < NR; r++) for (int l = 0; l < NL; l++) cst[r][l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      int r, l, k;
      r = $urandom_range(0, NR-1); l = $urandom_range(0, NL-1);
      k = $urandom_range(0, 9);
      // an RN never asks again for a line it holds dirty
      if (cst[r][l] == 3 && k < 5) transact(r, l, 3);
      else if (cst[r][l] == 3) transact(r, l, 2);
      else if ((cst[r][l] == 1 || cst[r][l] == 2) && k < 3) transact(r, l, 4);
      else if (k < 5) transact(r, l, 0);
      else if (k < 8) transact(r, l, 1);
      else transact(r, l, 2);
    end
    checks++; if (cnt_miss == 0)    begin failures++; $display("no L2 miss"); end
    checks++; if (n_dirty_snp == 0) begin failures++; $display("no dirty snoop"); end
    checks++; if (cnt_backinv == 0) begin failures++; $display("no back-invalidation"); end
    checks++; if (n_e == 0 || n_s == 0 || n_wb == 0 || n_atom == 0) begin failures++; $display("a request kind never ran"); end
    $display("misses %0d snoops %0d (dirty %0d) back-inv %0d E %0d S %0d wb %0d atomics %0d",
             cnt_miss, n_snp, n_dirty_snp, cnt_backinv, n_e, n_s, n_wb, n_atom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
