// l2_slice: one slice of the distributed shared L2 cache.
//
// A SIZE_KB kB, WAYS-way set-associative, write-back, write-allocate cache of
// 64-byte lines with tree pseudo-LRU replacement (l2_plru) and a 512-bit data
// path, so a whole line is read or written in one cycle. Requests are a line
// read, a full-line write, or a far atomic on one 64-bit word, executed by
// l2_atomic_alu inside the cache, which returns the old word.
//
// Timing: a request is taken in IDLE (req_ready), looked up in the next cycle
// and, on a hit, answered on rsp_valid the cycle after: a hit costs 3 cycles
// from request to response, and the slice takes a new request every 3
// cycles. On a miss an invalid way is used if there is one, else the
// pseudo-LRU victim; the victim's address is reported on evict_* (so the home
// node can back-invalidate its sharers, the L2 being inclusive), a dirty
// victim is written to memory, and the line is fetched (a full-line write
// needs no fetch). rsp_set/rsp_way name the tag entry the line sits in, which
// the home node uses to index its directory.
// Tags, valid and dirty bits and the pseudo-LRU state of a set share one
// memory word; after reset the slice spends one cycle per set clearing them
// (req_ready stays low meanwhile), so no array needs a reset.
//
// Size, associativity, write-back, pseudo-LRU, the 512-bit data path and the
// atomic ALU follow the chip. The chip's slice is non-blocking and fully
// pipelined with 128 outstanding transactions (64 misses, 64 evictions); this
// slice handles one request at a time. Cache-maintenance operations,
// non-temporal hints and direct memory transfer are not implemented.
module l2_slice
  import epac_pkg::*;
#(
  parameter int unsigned SIZE_KB = 256,
  parameter int unsigned WAYS    = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // request
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic [1:0]            req_op,        // 0 read, 1 write line, 2 atomic
  input  logic [ADDR_W-1:0]     req_addr,
  input  logic [LINE_BITS-1:0]  req_wdata,
  input  amo_op_e               req_amo,
  input  logic [63:0]           req_amo_operand,
  input  logic [63:0]           req_amo_compare,
  // response
  output logic                  rsp_valid,
  output logic [LINE_BITS-1:0]  rsp_rdata,
  output logic                  rsp_hit,
  output logic [63:0]           rsp_amo_old,
  output logic [$clog2(SIZE_KB*1024/LINE_BYTES/WAYS)-1:0] rsp_set,
  output logic [$clog2(WAYS)-1:0] rsp_way,
  // victim report
  output logic                  evict_valid,
  output logic [ADDR_W-1:0]     evict_addr,
  output logic [$clog2(SIZE_KB*1024/LINE_BYTES/WAYS)-1:0] evict_set,
  output logic [$clog2(WAYS)-1:0] evict_way,
  // memory side
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_write,
  output logic [ADDR_W-1:0]     mem_req_addr,
  output logic [LINE_BITS-1:0]  mem_req_wdata,
  input  logic                  mem_rsp_valid,
  input  logic [LINE_BITS-1:0]  mem_rsp_rdata
);
  localparam int unsigned LINES = SIZE_KB * 1024 / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SW    = $clog2(SETS);
  localparam int unsigned WW    = $clog2(WAYS);
  localparam int unsigned TW    = ADDR_W - SW - OFFS_W;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOKUP, S_WB, S_FILL_REQ, S_FILL_WAIT, S_RESP} state_e;
  state_e st;

  // per-set metadata, one memory word per set; no reset: after reset the
  // S_INIT sweep clears one set per cycle
  typedef struct packed {
    logic [WAYS-1:0]         v;
    logic [WAYS-1:0]         d;
    logic [WAYS-2:0]         plru;
    logic [WAYS-1:0][TW-1:0] tag;
  } meta_t;
  meta_t                meta_q  [SETS];
  logic [LINE_BITS-1:0] data_q  [LINES];
  logic [SW-1:0]        init_set;
  meta_t                m, mw;
  logic                 meta_we;
  logic [SW-1:0]        meta_wa;

  // latched request
  logic [1:0]           op;
  logic [ADDR_W-1:0]    addr;
  logic [LINE_BITS-1:0] wdata;
  amo_op_e              amo;
  logic [63:0]          amo_operand, amo_compare;
  logic                 missed;

  logic [SW-1:0] set;
  logic [TW-1:0] tag;
  assign set = addr[OFFS_W +: SW];
  assign tag = addr[ADDR_W-1 -: TW];
  assign m   = meta_q[set];

  // lookup
  logic [WAYS-1:0] hit_vec;
  logic            hit;
  logic [WW-1:0]   hit_way, vic_way, plru_vic, free_way, touch_way;
  logic            has_free;
  logic [WAYS-2:0] plru_nxt;

  always_comb begin
    hit_vec  = '0;
    hit_way  = '0;
    has_free = 1'b0;
    free_way = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (m.v[w] && m.tag[w] == tag) begin
        hit_vec[w] = 1'b1;
        hit_way    = WW'(w);
      end
      if (!m.v[w]) begin
        has_free = 1'b1;
        free_way = WW'(w);
      end
    end
  end
  assign hit = |hit_vec;

  l2_plru #(.WAYS(WAYS)) u_plru (
    .state(m.plru), .touch_way(touch_way), .victim(plru_vic), .plru_next(plru_nxt)
  );
  assign touch_way = hit_way;

  logic [WW-1:0]   vway_q;              // way chosen for the refill
  logic [$clog2(LINES)-1:0] hidx, vidx;
  assign vic_way = has_free ? free_way : plru_vic;
  assign hidx    = set * WAYS + hit_way;
  assign vidx    = set * WAYS + vway_q;

  // atomic on the hit line
  logic [LINE_BITS-1:0] hline, aline;
  logic [63:0]          old_word, new_word;
  assign hline    = data_q[hidx];
  assign old_word = hline[addr[OFFS_W-1:3]*64 +: 64];
  l2_atomic_alu u_alu (.op(amo), .old_val(old_word), .operand(amo_operand),
                       .compare_val(amo_compare), .new_val(new_word));
  always_comb begin
    aline = hline;
    aline[addr[OFFS_W-1:3]*64 +: 64] = new_word;
  end

  assign req_ready = (st == S_IDLE);

  // data array: written on a hit (line write, atomic) and by a refill
  always_ff @(posedge clk) begin
    if (st == S_LOOKUP && hit) begin
      if (op == 2'd1)      data_q[hidx] <= wdata;
      else if (op == 2'd2) data_q[hidx] <= aline;
    end
    if (st == S_FILL_WAIT && mem_rsp_valid) data_q[vidx] <= mem_rsp_rdata;
  end

  // metadata: at most one write per cycle, always to the current set
  always_comb begin
    mw      = m;
    meta_we = 1'b0;
    meta_wa = set;
    if (st == S_INIT) begin
      meta_we = 1'b1; meta_wa = init_set; mw = '0;
    end else if (st == S_LOOKUP && hit) begin
      meta_we = 1'b1;
      mw.plru = plru_nxt;
      if (op != 2'd0) mw.d[hit_way] = 1'b1;
    end else if (st == S_LOOKUP && op == 2'd1 && !(m.v[vic_way] && m.d[vic_way])) begin
      // full-line write: allocate without fetching
      meta_we = 1'b1;
      mw.tag[vic_way] = tag; mw.v[vic_way] = 1'b1; mw.d[vic_way] = 1'b0;
    end else if ((st == S_WB && mem_req_ready && op == 2'd1) || (st == S_FILL_WAIT && mem_rsp_valid)) begin
      meta_we = 1'b1;
      mw.tag[vway_q] = tag; mw.v[vway_q] = 1'b1; mw.d[vway_q] = 1'b0;
    end
  end
  always_ff @(posedge clk) if (meta_we) meta_q[meta_wa] <= mw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_INIT;
      init_set      <= '0;
      op            <= '0;
      addr          <= '0;
      wdata         <= '0;
      amo           <= AMO_ADD;
      amo_operand   <= '0;
      amo_compare   <= '0;
      missed        <= 1'b0;
      vway_q        <= '0;
      rsp_valid     <= 1'b0;
      rsp_rdata     <= '0;
      rsp_hit       <= 1'b0;
      rsp_amo_old   <= '0;
      rsp_set       <= '0;
      rsp_way       <= '0;
      evict_valid   <= 1'b0;
      evict_addr    <= '0;
      evict_set     <= '0;
      evict_way     <= '0;
      mem_req_valid <= 1'b0;
      mem_req_write <= 1'b0;
      mem_req_addr  <= '0;
      mem_req_wdata <= '0;
    end else begin
      rsp_valid   <= 1'b0;
      evict_valid <= 1'b0;
      unique case (st)
        S_INIT: begin
          init_set <= init_set + 1'b1;
          if (int'(init_set) == SETS - 1) st <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          op <= req_op; addr <= req_addr; wdata <= req_wdata; amo <= req_amo;
          amo_operand <= req_amo_operand; amo_compare <= req_amo_compare;
          missed <= 1'b0;
          st <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit) begin
            rsp_rdata   <= hline;
            rsp_amo_old <= old_word;
            rsp_hit     <= !missed;
            rsp_set     <= set;
            rsp_way     <= hit_way;
            st          <= S_RESP;
          end else begin
            vway_q <= vic_way;
            missed <= 1'b1;
            if (m.v[vic_way]) begin
              evict_valid <= 1'b1;
              evict_addr  <= {m.tag[vic_way], set, OFFS_W'(0)};
              evict_set   <= set;
              evict_way   <= vic_way;
            end
            if (m.v[vic_way] && m.d[vic_way]) begin
              mem_req_valid <= 1'b1;
              mem_req_write <= 1'b1;
              mem_req_addr  <= {m.tag[vic_way], set, OFFS_W'(0)};
              mem_req_wdata <= data_q[set*WAYS + vic_way];
              st            <= S_WB;
            end else if (op == 2'd1) begin
              st <= S_LOOKUP;
            end else begin
              mem_req_valid <= 1'b1;
              mem_req_write <= 1'b0;
              mem_req_addr  <= {addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
              st            <= S_FILL_REQ;
            end
          end
        end
        S_WB: if (mem_req_ready) begin
          if (op == 2'd1) begin
            mem_req_valid <= 1'b0;
            st <= S_LOOKUP;
          end else begin
            mem_req_write <= 1'b0;
            mem_req_addr  <= {addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
            st            <= S_FILL_REQ;
          end
        end
        S_FILL_REQ: if (mem_req_ready) begin
          mem_req_valid <= 1'b0;
          st            <= S_FILL_WAIT;
        end
        S_FILL_WAIT: if (mem_rsp_valid) begin
          st            <= S_LOOKUP;
        end
        S_RESP: begin
          rsp_valid <= 1'b1;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
