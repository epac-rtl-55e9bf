// l2hn_node: an L2 cache slice and its home node (HN), as one NoC device.
//
// The node owns a share of the coherent address space (chosen by
// l2_interleave in the requesters). It serves requests from request nodes
// (RNs, the tiles' private caches) arriving over the CHI mesh:
//   READ_SHARED / READ_UNIQUE  read the line in the L2 (fetching it from
//       memory on a miss), ask the directory which RNs must be snooped, snoop
//       them one flit each (SnpShared or SnpUnique), wait for every snoop
//       response, keep any dirty data a snooped RN returns, and send the line
//       to the requester with the granted state (S or E) in COMP_DATA.
//   ATOMIC  as a unique read, but all copies are invalidated, then the L2's
//       atomic ALU updates the word; COMP_DATA returns the old word.
//   WRITEBACK (data channel)  the RN's dirty line is written into the L2, the
//       RN's presence bit is cleared, and COMP acknowledges it.
//   EVICT  the RN dropped a clean copy: its presence bit is cleared; COMP.
// The L2 is inclusive: when a refill evicts a line, the node first snoops
// that line's holders to invalid (back-invalidation) and writes any dirty
// data they return to memory, before the directory entry is reused.
// L2 misses and dirty victims go to memory as READ_NOSNP (request channel)
// and WRITE_NOSNP (data channel) flits addressed to MEM_NODE, the C2C link.
//
// One RN transaction is handled at a time. The directory tracks every node
// id (16 presence bits). Write-backs may arrive at any time and are queued
// (WBQ entries) so that they never block memory data behind them on the data
// channel; every RN is assumed to have at most one write-back in flight.
// The roles (inclusive L2 + full-map directory HN at one mesh node, misses
// to external memory through the C2C link) follow the chip; the message set
// and the sequential handling are this design's simplification of CHI.
module l2hn_node
  import epac_pkg::*;
#(
  parameter int unsigned SIZE_KB  = 256,
  parameter int unsigned WAYS     = 8,
  parameter logic [3:0]  MY_NODE  = 4'd2,
  parameter logic [3:0]  MEM_NODE = 4'd9,
  parameter int unsigned WBQ      = 12,
  parameter int unsigned DEPTH    = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic  [N_CH-1:0]      in_valid,
  input  flit_t [N_CH-1:0]      in_flit,
  output logic  [N_CH-1:0]      in_credit,
  output logic  [N_CH-1:0]      out_valid,
  output flit_t [N_CH-1:0]      out_flit,
  input  logic  [N_CH-1:0]      out_credit,
  // counters of the mechanisms exercised (for observation)
  output logic  [15:0]          cnt_miss,
  output logic  [15:0]          cnt_snoop,
  output logic  [15:0]          cnt_backinv
);
  localparam int unsigned SETS = SIZE_KB * 1024 / LINE_BYTES / WAYS;
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned WW   = $clog2(WAYS);
  localparam int unsigned NRN  = 16;

  // ------------------------------------------------------------ NoC ports
  logic  [N_CH-1:0] iv, ir, ov, or_;
  flit_t [N_CH-1:0] ifl, ofl;
  for (genvar c = 0; c < N_CH; c++) begin : g_port
    noc_ep_rx #(.DEPTH(DEPTH)) u_rx (.clk, .rst_n, .link_valid(in_valid[c]), .link_flit(in_flit[c]),
      .link_credit(in_credit[c]), .out_valid(iv[c]), .out_ready(ir[c]), .out_flit(ifl[c]));
    noc_ep_tx #(.DEPTH(DEPTH)) u_tx (.clk, .rst_n, .in_valid(ov[c]), .in_ready(or_[c]), .in_flit(ofl[c]),
      .link_valid(out_valid[c]), .link_flit(out_flit[c]), .link_credit(out_credit[c]));
  end

  // ------------------------------------------------------------ L2 and HN
  logic                 l2_req_valid, l2_req_ready, l2_rsp_valid, l2_rsp_hit, l2_evict_valid;
  logic [1:0]           l2_req_op;
  logic [ADDR_W-1:0]    l2_req_addr, l2_evict_addr;
  logic [LINE_BITS-1:0] l2_req_wdata, l2_rsp_rdata;
  amo_op_e              l2_req_amo;
  logic [63:0]          l2_req_opnd, l2_req_cmp, l2_rsp_old;
  logic [SW-1:0]        l2_rsp_set, l2_evict_set;
  logic [WW-1:0]        l2_rsp_way, l2_evict_way;
  logic                 mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  logic [ADDR_W-1:0]    mem_req_addr;
  logic [LINE_BITS-1:0] mem_req_wdata, mem_rsp_rdata;

  l2_slice #(.SIZE_KB(SIZE_KB), .WAYS(WAYS)) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req_op(l2_req_op), .req_addr(l2_req_addr),
    .req_wdata(l2_req_wdata), .req_amo(l2_req_amo), .req_amo_operand(l2_req_opnd),
    .req_amo_compare(l2_req_cmp),
    .rsp_valid(l2_rsp_valid), .rsp_rdata(l2_rsp_rdata), .rsp_hit(l2_rsp_hit), .rsp_amo_old(l2_rsp_old),
    .rsp_set(l2_rsp_set), .rsp_way(l2_rsp_way),
    .evict_valid(l2_evict_valid), .evict_addr(l2_evict_addr), .evict_set(l2_evict_set),
    .evict_way(l2_evict_way),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata
  );

  logic             dir_req_valid, dir_rsp_valid, dir_out_valid, dir_out_unique;
  logic [1:0]       dir_req_kind;
  logic [3:0]       dir_req_rn, dir_rsp_rn;
  logic [SW-1:0]    dir_req_set, dir_rsp_set;
  logic [WW-1:0]    dir_req_way, dir_rsp_way;
  logic [NRN-1:0]   dir_out_mask;
  logic [3:0]       dir_out_grant;

  logic dir_ready;                     // directory cleared after reset
  hn_directory #(.SETS(SETS), .WAYS(WAYS), .N_RN(NRN)) u_dir (
    .clk, .rst_n, .ready(dir_ready),
    .req_valid(dir_req_valid), .req_kind(dir_req_kind), .req_rn(dir_req_rn),
    .req_set(dir_req_set), .req_way(dir_req_way),
    .rsp_valid(dir_rsp_valid), .rsp_rn(dir_rsp_rn), .rsp_set(dir_rsp_set), .rsp_way(dir_rsp_way),
    .out_valid(dir_out_valid), .out_snp_mask(dir_out_mask), .out_snp_unique(dir_out_unique),
    .out_grant(dir_out_grant)
  );

  // ------------------------------------------------------------ write-back queue
  flit_t                 wbq [WBQ];
  logic [$clog2(WBQ)-1:0] wq_wp, wq_rp;
  logic [$clog2(WBQ+1)-1:0] wq_cnt;
  logic                  wq_push, wq_pop;
  flit_t                 wq_head;
  assign wq_head = wbq[wq_rp];

  // ------------------------------------------------------------ transaction FSM
  typedef enum logic [3:0] {
    T_IDLE, T_L2, T_L2_WAIT, T_BI_DIR, T_BI_RES, T_DIR, T_DIR_RES, T_SNP_SEND, T_SNP_WAIT,
    T_FIX, T_FIX_WAIT, T_MEMWR, T_REPLY
  } tstate_e;
  tstate_e ts;

  flit_t                 cur;          // transaction being served
  logic                  cur_wb;       // it is a write-back
  logic [SW-1:0]         cur_set;
  logic [WW-1:0]         cur_way;
  logic [LINE_BITS-1:0]  line;         // data to return
  logic [63:0]           old_word;
  logic [3:0]            grant;
  logic                  snp_unique;
  logic [NRN-1:0]        snp_todo;     // snoops still to send
  logic [4:0]            snp_wait;     // responses outstanding
  logic                  dirty_back;   // a snooped RN returned dirty data
  logic                  bi_active;    // the snoops are a back-invalidation
  logic                  ev_pend;
  logic [ADDR_W-1:0]     ev_addr;
  logic [SW-1:0]         ev_set;
  logic [WW-1:0]         ev_way;
  logic [1:0]            fix_phase;    // 0: write dirty line into L2, 1: atomic

  logic [3:0] snp_tgt;
  always_comb begin
    snp_tgt = '0;
    for (int i = NRN-1; i >= 0; i--) if (snp_todo[i]) snp_tgt = 4'(i);
  end

  // incoming channel heads
  logic rsp_is_snp, dat_is_mem, dat_is_snp, dat_is_wb;
  assign rsp_is_snp = ifl[CH_RSP].op == OP_SNP_RESP;
  assign dat_is_mem = ifl[CH_DAT].op == OP_MEM_DATA;
  assign dat_is_snp = ifl[CH_DAT].op == OP_SNP_RESP_DATA;
  assign dat_is_wb  = ifl[CH_DAT].op == OP_WRITEBACK;

  assign mem_rsp_valid = iv[CH_DAT] && dat_is_mem;
  assign mem_rsp_rdata = ifl[CH_DAT].data;
  assign wq_push       = iv[CH_DAT] && dat_is_wb && (int'(wq_cnt) < WBQ);

  logic snp_rsp_in, snp_dat_in;
  assign snp_rsp_in = iv[CH_RSP] && rsp_is_snp && ts == T_SNP_WAIT;
  assign snp_dat_in = iv[CH_DAT] && dat_is_snp && ts == T_SNP_WAIT;

  always_comb begin
    ir = '0;
    // responses: memory write completions are simply consumed
    ir[CH_RSP] = !rsp_is_snp || ts == T_SNP_WAIT;
    ir[CH_DAT] = dat_is_mem || wq_push || (dat_is_snp && ts == T_SNP_WAIT);
    ir[CH_REQ] = (ts == T_IDLE) && dir_ready && !(wq_cnt != 0);
    ir[CH_SNP] = 1'b1;    // a home node receives no snoops
  end

  // outgoing
  always_comb begin
    ov = '0;
    ofl = '0;
    // memory traffic of the L2
    mem_req_ready = 1'b0;
    if (mem_req_valid && !mem_req_write) begin
      ov[CH_REQ] = 1'b1;
      ofl[CH_REQ].tgt = node_id_t'(MEM_NODE); ofl[CH_REQ].src = node_id_t'(MY_NODE);
      ofl[CH_REQ].op = OP_READ_NOSNP; ofl[CH_REQ].addr = mem_req_addr;
      mem_req_ready = or_[CH_REQ];
    end
    if (mem_req_valid && mem_req_write) begin
      ov[CH_DAT] = 1'b1;
      ofl[CH_DAT].tgt = node_id_t'(MEM_NODE); ofl[CH_DAT].src = node_id_t'(MY_NODE);
      ofl[CH_DAT].op = OP_WRITE_NOSNP; ofl[CH_DAT].addr = mem_req_addr; ofl[CH_DAT].data = mem_req_wdata;
      mem_req_ready = or_[CH_DAT];
    end
    if (ts == T_MEMWR) begin
      ov[CH_DAT] = 1'b1;
      ofl[CH_DAT].tgt = node_id_t'(MEM_NODE); ofl[CH_DAT].src = node_id_t'(MY_NODE);
      ofl[CH_DAT].op = OP_WRITE_NOSNP; ofl[CH_DAT].addr = ev_addr; ofl[CH_DAT].data = line;
    end
    if (ts == T_SNP_SEND) begin
      ov[CH_SNP] = 1'b1;
      ofl[CH_SNP].tgt = node_id_t'(snp_tgt); ofl[CH_SNP].src = node_id_t'(MY_NODE);
      ofl[CH_SNP].txn = cur.txn;
      ofl[CH_SNP].op = snp_unique ? OP_SNP_UNIQUE : OP_SNP_SHARED;
      ofl[CH_SNP].addr = bi_active ? ev_addr : {cur.addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
    end
    if (ts == T_REPLY) begin
      if (cur_wb || cur.op == OP_EVICT) begin
        ov[CH_RSP] = 1'b1;
        ofl[CH_RSP].tgt = cur.src; ofl[CH_RSP].src = node_id_t'(MY_NODE); ofl[CH_RSP].txn = cur.txn;
        ofl[CH_RSP].op = OP_COMP; ofl[CH_RSP].addr = cur.addr;
      end else begin
        ov[CH_DAT] = 1'b1;
        ofl[CH_DAT].tgt = cur.src; ofl[CH_DAT].src = node_id_t'(MY_NODE); ofl[CH_DAT].txn = cur.txn;
        ofl[CH_DAT].op = OP_COMP_DATA; ofl[CH_DAT].addr = cur.addr; ofl[CH_DAT].resp = grant;
        ofl[CH_DAT].data = (cur.op == OP_ATOMIC) ? LINE_BITS'(old_word) : line;
      end
    end
  end

  // L2 request
  always_comb begin
    l2_req_valid = 1'b0;
    l2_req_op    = 2'd0;
    l2_req_addr  = {cur.addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
    l2_req_wdata = cur_wb ? cur.data : line;
    l2_req_amo   = amo_op_e'(cur.resp);
    l2_req_opnd  = cur.data[63:0];
    l2_req_cmp   = cur.data[127:64];
    if (ts == T_L2) begin
      l2_req_valid = 1'b1;
      l2_req_op    = cur_wb ? 2'd1 : 2'd0;
    end else if (ts == T_FIX) begin
      l2_req_valid = 1'b1;
      l2_req_op    = (fix_phase == 2'd0) ? 2'd1 : 2'd2;
      if (fix_phase != 2'd0) l2_req_addr = cur.addr;
    end
  end

  // directory requests
  always_comb begin
    dir_req_valid = 1'b0;
    dir_req_kind  = 2'd0;
    dir_req_rn    = cur.src;
    dir_req_set   = cur_set;
    dir_req_way   = cur_way;
    dir_rsp_valid = 1'b0;
    dir_rsp_rn    = cur.src;
    dir_rsp_set   = cur_set;
    dir_rsp_way   = cur_way;
    if (ts == T_BI_DIR) begin
      dir_req_valid = 1'b1; dir_req_kind = 2'd3; dir_req_set = ev_set; dir_req_way = ev_way;
    end else if (ts == T_DIR) begin
      if (cur_wb || cur.op == OP_EVICT) dir_rsp_valid = 1'b1;
      else begin
        dir_req_valid = 1'b1;
        dir_req_kind  = (cur.op == OP_READ_SHARED) ? 2'd0 : (cur.op == OP_READ_UNIQUE) ? 2'd1 : 2'd2;
      end
    end
  end

  always_ff @(posedge clk) if (wq_push) wbq[wq_wp] <= ifl[CH_DAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts <= T_IDLE; cur <= '0; cur_wb <= 1'b0; cur_set <= '0; cur_way <= '0; line <= '0;
      old_word <= '0; grant <= '0; snp_unique <= 1'b0; snp_todo <= '0; snp_wait <= '0;
      dirty_back <= 1'b0; bi_active <= 1'b0; ev_pend <= 1'b0; ev_addr <= '0; ev_set <= '0;
      ev_way <= '0; fix_phase <= '0;
      wq_wp <= '0; wq_rp <= '0; wq_cnt <= '0;
      cnt_miss <= '0; cnt_snoop <= '0; cnt_backinv <= '0;
    end else begin
      if (wq_push) wq_wp <= (int'(wq_wp) == WBQ-1) ? '0 : wq_wp + 1'b1;
      if (wq_pop)  wq_rp <= (int'(wq_rp) == WBQ-1) ? '0 : wq_rp + 1'b1;
      wq_cnt <= wq_cnt + ($clog2(WBQ+1))'(wq_push) - ($clog2(WBQ+1))'(wq_pop);
      if (l2_evict_valid) begin
        ev_pend <= 1'b1; ev_addr <= l2_evict_addr; ev_set <= l2_evict_set; ev_way <= l2_evict_way;
      end
      unique case (ts)
        T_IDLE: if (dir_ready) begin
          if (wq_cnt != 0) begin
            cur <= wq_head; cur_wb <= 1'b1; ts <= T_L2;
          end else if (iv[CH_REQ]) begin
            cur <= ifl[CH_REQ]; cur_wb <= 1'b0; ts <= T_L2;
          end
        end
        T_L2: if (l2_req_ready) ts <= T_L2_WAIT;
        T_L2_WAIT: if (l2_rsp_valid) begin
          cur_set <= l2_rsp_set; cur_way <= l2_rsp_way; line <= l2_rsp_rdata;
          if (!l2_rsp_hit) cnt_miss <= cnt_miss + 1'b1;
          ts <= (ev_pend || l2_evict_valid) ? T_BI_DIR : T_DIR;
        end
        // back-invalidation of the line the refill evicted
        T_BI_DIR: begin ev_pend <= 1'b0; bi_active <= 1'b1; ts <= T_BI_RES; end
        T_BI_RES: begin
          snp_todo <= dir_out_mask; snp_unique <= 1'b1; snp_wait <= '0; dirty_back <= 1'b0;
          if (dir_out_mask != '0) begin cnt_backinv <= cnt_backinv + 1'b1; ts <= T_SNP_SEND; end
          else begin bi_active <= 1'b0; ts <= T_DIR; end
        end
        T_DIR: ts <= (cur_wb || cur.op == OP_EVICT) ? T_REPLY : T_DIR_RES;
        T_DIR_RES: begin
          grant <= dir_out_grant; snp_todo <= dir_out_mask; snp_unique <= dir_out_unique;
          snp_wait <= '0; dirty_back <= 1'b0;
          if (dir_out_mask != '0) ts <= T_SNP_SEND;
          else if (cur.op == OP_ATOMIC) begin fix_phase <= 2'd1; ts <= T_FIX; end
          else ts <= T_REPLY;
        end
        T_SNP_SEND: if (or_[CH_SNP]) begin
          snp_todo[snp_tgt] <= 1'b0;
          snp_wait <= snp_wait + 1'b1;
          cnt_snoop <= cnt_snoop + 1'b1;
          if ((snp_todo & ~(NRN'(1) << snp_tgt)) == '0) ts <= T_SNP_WAIT;
        end
        T_SNP_WAIT: begin
          if (snp_dat_in) begin line <= ifl[CH_DAT].data; dirty_back <= 1'b1; end
          if (5'(snp_rsp_in) + 5'(snp_dat_in) == snp_wait) begin
            snp_wait <= '0;
            if (bi_active) begin
              bi_active <= 1'b0;
              ts <= (dirty_back || snp_dat_in) ? T_MEMWR : T_DIR;
            end else if (dirty_back || snp_dat_in) begin
              fix_phase <= 2'd0; ts <= T_FIX;
            end else if (cur.op == OP_ATOMIC) begin
              fix_phase <= 2'd1; ts <= T_FIX;
            end else ts <= T_REPLY;
          end else snp_wait <= snp_wait - 5'(snp_rsp_in) - 5'(snp_dat_in);
        end
        T_MEMWR: if (or_[CH_DAT] && !(mem_req_valid && mem_req_write)) begin
          ts <= T_L2;             // redo the L2 access: a hit now, giving set and way
        end
        T_FIX: if (l2_req_ready) ts <= T_FIX_WAIT;
        T_FIX_WAIT: if (l2_rsp_valid) begin
          old_word <= l2_rsp_old;
          if (fix_phase == 2'd0 && cur.op == OP_ATOMIC) begin fix_phase <= 2'd1; ts <= T_FIX; end
          else ts <= T_REPLY;
        end
        T_REPLY: begin
          if (cur_wb || cur.op == OP_EVICT) begin
            if (or_[CH_RSP]) ts <= T_IDLE;
          end else if (or_[CH_DAT] && !(mem_req_valid && mem_req_write)) ts <= T_IDLE;
        end
        default: ts <= T_IDLE;
      endcase
    end
  end
  assign wq_pop = (ts == T_IDLE) && (wq_cnt != 0);
endmodule
