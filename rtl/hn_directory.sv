// hn_directory: full-map coherence directory of one home node (HN).
//
// The home node keeps, beside every tag entry (set, way) of its inclusive L2
// slice, a presence bit per request node (RN, a private L1 cache) and a
// MESI-like state: I (no copy), S (read-only copies in the RNs whose bits are
// set) or U (one RN holds the line exclusive, clean or dirty).
//
// Request path (req_*), one per cycle:
//   RD_SHARED  U held by another RN: snoop it to shared (SnpShared); grant S.
//              S: grant S. I: grant E (exclusive clean), state U.
//   RD_UNIQUE  snoop every other holder to invalid (SnpUnique); grant E, U.
//   ATOMIC     snoop every holder, requester included, to invalid; state I,
//              since the far atomic then runs in the L2.
//   BACK_INV   the L2 evicts the line: snoop every holder to invalid; state I.
// Response path (rsp_*), in the same cycle as a request: an RN reports that it
// dropped the line (clean evict or write-back); its bit is cleared and the
// entry becomes I when no bit is left. When both paths touch one entry in a
// cycle the response is applied first.
// The result of a request (snoop mask, snoop kind, granted state) is
// registered: it appears on out_* one cycle after req_valid.
// The entries live in a memory without reset: after reset the directory
// clears one entry per cycle (SETS*WAYS cycles) and raises ready when done;
// no request or response may be given before that.
// Full-map presence bits, MESI-like states, the use of the L2's tags and the
// separate request and response paths taking one each per cycle follow the
// chip; the state encoding, the request kinds and N_RN are this design's.
module hn_directory
  import epac_pkg::*;
#(
  parameter int unsigned SETS = 512,
  parameter int unsigned WAYS = 8,
  parameter int unsigned N_RN = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      req_valid,
  input  logic [1:0]                req_kind,   // 0 RD_SHARED, 1 RD_UNIQUE, 2 ATOMIC, 3 BACK_INV
  input  logic [$clog2(N_RN)-1:0]   req_rn,
  input  logic [$clog2(SETS)-1:0]   req_set,
  input  logic [$clog2(WAYS)-1:0]   req_way,
  input  logic                      rsp_valid,
  input  logic [$clog2(N_RN)-1:0]   rsp_rn,
  input  logic [$clog2(SETS)-1:0]   rsp_set,
  input  logic [$clog2(WAYS)-1:0]   rsp_way,
  output logic                      ready,      // initial clearing done
  output logic                      out_valid,
  output logic [N_RN-1:0]           out_snp_mask,
  output logic                      out_snp_unique,  // 1: SnpUnique, 0: SnpShared
  output logic [3:0]                out_grant        // RESP_S / RESP_E, 0 for none
);
  localparam int unsigned E = SETS * WAYS;
  typedef enum logic [1:0] {D_I = 2'd0, D_S = 2'd1, D_U = 2'd2} dstate_e;

  typedef struct packed {
    dstate_e         st;
    logic [N_RN-1:0] pres;
  } dent_t;
  dent_t           ent_q  [E];
  logic [$clog2(E)-1:0] init_e;
  logic            init_q;
  assign ready = !init_q;

  logic [$clog2(E)-1:0] ri, pi;
  assign ri = req_set * WAYS + req_way;
  assign pi = rsp_set * WAYS + rsp_way;

  // entry after the response path
  dstate_e         p_st;
  logic [N_RN-1:0] p_pres;
  always_comb begin
    p_pres = ent_q[pi].pres & ~(N_RN'(1) << rsp_rn);
    p_st   = (p_pres == '0) ? D_I : ent_q[pi].st;
  end

  // entry seen by the request path
  dstate_e         r_st, n_st;
  logic [N_RN-1:0] r_pres, n_pres, me, snp;
  logic            snp_u;
  logic [3:0]      grant;
  always_comb begin
    if (rsp_valid && pi == ri) begin r_st = p_st; r_pres = p_pres; end
    else                       begin r_st = ent_q[ri].st; r_pres = ent_q[ri].pres; end
    me     = N_RN'(1) << req_rn;
    n_st   = r_st;
    n_pres = r_pres;
    snp    = '0;
    snp_u  = 1'b0;
    grant  = 4'd0;
    unique case (req_kind)
      2'd0: begin
        if (r_st == D_U && r_pres != me) begin
          snp = r_pres; snp_u = 1'b0;
          n_st = D_S; n_pres = r_pres | me; grant = RESP_S;
        end else if (r_st == D_U) begin
          grant = RESP_E;
        end else if (r_st == D_S) begin
          n_pres = r_pres | me; grant = RESP_S;
        end else begin
          n_st = D_U; n_pres = me; grant = RESP_E;
        end
      end
      2'd1: begin
        snp = r_pres & ~me; snp_u = 1'b1;
        n_st = D_U; n_pres = me; grant = RESP_E;
      end
      default: begin
        snp = r_pres; snp_u = 1'b1;
        n_st = D_I; n_pres = '0;
      end
    endcase
  end

  // entry writes; a request on the entry a response also touches carries
  // both effects and, written last, wins
  always_ff @(posedge clk) begin
    if (init_q) ent_q[init_e] <= '{st: D_I, pres: '0};
    else begin
      if (rsp_valid) ent_q[pi] <= '{st: p_st, pres: p_pres};
      if (req_valid) ent_q[ri] <= '{st: n_st, pres: n_pres};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q         <= 1'b1;
      init_e         <= '0;
      out_valid      <= 1'b0;
      out_snp_mask   <= '0;
      out_snp_unique <= 1'b0;
      out_grant      <= '0;
    end else begin
      if (init_q) begin
        init_e <= init_e + 1'b1;
        if (int'(init_e) == E - 1) init_q <= 1'b0;
      end
      out_valid      <= req_valid;
      out_snp_mask   <= req_valid ? snp : '0;
      out_snp_unique <= snp_u;
      out_grant      <= req_valid ? grant : 4'd0;
    end
  end
endmodule
