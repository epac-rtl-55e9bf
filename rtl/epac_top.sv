// epac_top: the EPAC uncore - CHI mesh, four L2/home-node slices and the
// chip-to-chip link - with the compute tiles' mesh ports brought out.
//
// The mesh is 3 columns x 2 rows of crosspoints, as placed on the chip:
//        x=0            x=1           x=2
//   y=0  STX tile       NOC tile      VEC tile 0
//        p0 STX0        p0 L2/HN 0    p0 AVS/VPU 0
//        p1 STX1        p1 (free)     p1 L2/HN 1
//   y=1  VRP tile       NOC tile      VEC tile 1
//        p0 VRP         p0 L2/HN 2    p0 AVS/VPU 1
//        p1 C2C link    p1 (free)     p1 L2/HN 3
// A node id is {y, x, port}. The seven ports that are not L2/HN or C2C are
// request-node (RN) ports: the tiles' cores and caches attach there, and they
// are brought out as rn_* (index k names node id RN_NODE[k]). On those ports
// the top adds the system address map: the target of every request and
// write-back an RN sends is replaced by the home slice that l2_interleave
// picks for its address, under interleave_mode. Everything an RN receives
// (read data, completions, snoops) and everything else it sends (snoop
// responses, addressed to the snooping home) passes unchanged.
// L2 misses leave the chip through the C2C link, whose lanes are the
// c2c_* ports; the FPGA at the far end holds the memory.
// All RN links use the crosspoint protocol: valid + flit, one credit pulse
// back per flit taken; an RN starts with 4 credits per channel and must give
// a credit back for each flit it receives.
// Beside the uncore, the top holds the register-renaming units of the two
// vector units and of the VRP unit, with their ports brought out where the
// tiles' pipelines would drive them.
// After reset every home node first clears its directory, one entry per
// cycle (4096 cycles at full size); requests wait in the mesh until then.
module epac_top
  import epac_pkg::*;
#(
  parameter int unsigned L2_SIZE_KB = 256,
  parameter int unsigned L2_WAYS    = 8,
  parameter int unsigned N_RNP      = 7,
  parameter int unsigned VPU_PREGS  = 40,
  parameter int unsigned VRP_PREGS  = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [1:0]                   interleave_mode,
  // request-node ports
  input  logic  [N_CH-1:0][N_RNP-1:0]  rn_tx_valid,
  input  flit_t [N_CH-1:0][N_RNP-1:0]  rn_tx_flit,
  output logic  [N_CH-1:0][N_RNP-1:0]  rn_tx_credit,
  output logic  [N_CH-1:0][N_RNP-1:0]  rn_rx_valid,
  output flit_t [N_CH-1:0][N_RNP-1:0]  rn_rx_flit,
  input  logic  [N_CH-1:0][N_RNP-1:0]  rn_rx_credit,
  // chip-to-chip link
  output logic  [7:0][31:0]            c2c_tx_lanes,
  output logic                         c2c_tx_sof,
  input  logic  [7:0][31:0]            c2c_rx_lanes,
  input  logic                         c2c_rx_sof,
  output logic                         c2c_crc_err,
  output logic                         c2c_replay,
  // activity counters of the L2/HN slices
  output logic  [3:0][15:0]            l2_misses,
  output logic  [3:0][15:0]            hn_snoops,
  output logic  [3:0][15:0]            hn_backinv,
  // register renaming of the tiles' register files: index 0 and 1 the
  // vector units of VEC tiles 0 and 1 (32 on VPU_PREGS), 2 the VRP unit's
  // P-registers (32 on VRP_PREGS); see reg_rename for the protocol
  input  logic  [2:0]                  ren_valid,
  output logic  [2:0]                  ren_ready,
  input  logic  [2:0]                  ren_wr,
  input  logic  [2:0][4:0]             ren_src1,
  input  logic  [2:0][4:0]             ren_src2,
  input  logic  [2:0][4:0]             ren_dst,
  output logic  [2:0][5:0]             ren_psrc1,
  output logic  [2:0][5:0]             ren_psrc2,
  output logic  [2:0]                  ren_rdy1,
  output logic  [2:0]                  ren_rdy2,
  output logic  [2:0][5:0]             ren_pdst,
  output logic  [2:0][5:0]             ren_pold,
  input  logic  [2:0]                  rel_valid,
  input  logic  [2:0][5:0]             rel_preg,
  input  logic  [2:0]                  wb_valid,
  input  logic  [2:0][5:0]             wb_preg,
  output logic  [2:0][6:0]             ren_free
);
  localparam int unsigned D = MESH_X * MESH_Y * 2;
  localparam logic [3:0] HN_NODE [4] = '{4'd2, 4'd5, 4'd10, 4'd13};
  localparam logic [3:0] C2C_NODE = 4'd9;
  localparam logic [3:0] RN_NODE [7] = '{4'd0, 4'd1, 4'd3, 4'd4, 4'd8, 4'd11, 4'd12};

  function automatic int dev_of(logic [3:0] id);   // node id -> mesh device index
    node_id_t n;
    n = node_id_t'(id);
    return (int'(n.y) * MESH_X + int'(n.x)) * 2 + int'(n.p);
  endfunction

  logic  [N_CH-1:0][D-1:0] div, dic, dov, doc;
  flit_t [N_CH-1:0][D-1:0] dif, dof;

  noc_mesh u_mesh (
    .clk, .rst_n,
    .dev_in_valid(div), .dev_in_flit(dif), .dev_in_credit(dic),
    .dev_out_valid(dov), .dev_out_flit(dof), .dev_out_credit(doc)
  );

  // ---------------------------------------------------------------- L2 / HN
  for (genvar h = 0; h < 4; h++) begin : g_hn
    localparam int unsigned DV = dev_of(HN_NODE[h]);
    logic  [N_CH-1:0] iv, ic, ov, oc;
    flit_t [N_CH-1:0] ifl, ofl;
    for (genvar c = 0; c < N_CH; c++) begin : g_c
      assign iv[c]      = dov[c][DV];
      assign ifl[c]     = dof[c][DV];
      assign doc[c][DV] = ic[c];
      assign div[c][DV] = ov[c];
      assign dif[c][DV] = ofl[c];
      assign oc[c]      = dic[c][DV];
    end
    l2hn_node #(.SIZE_KB(L2_SIZE_KB), .WAYS(L2_WAYS), .MY_NODE(HN_NODE[h]), .MEM_NODE(C2C_NODE)) u_node (
      .clk, .rst_n, .in_valid(iv), .in_flit(ifl), .in_credit(ic),
      .out_valid(ov), .out_flit(ofl), .out_credit(oc),
      .cnt_miss(l2_misses[h]), .cnt_snoop(hn_snoops[h]), .cnt_backinv(hn_backinv[h])
    );
  end

  // ---------------------------------------------------------------- C2C
  localparam int unsigned DC = dev_of(C2C_NODE);
  logic  [N_CH-1:0] c_txv, c_txr, c_rxv, c_rxr;
  flit_t [N_CH-1:0] c_txf, c_rxf;
  for (genvar c = 0; c < N_CH; c++) begin : g_c2c
    noc_ep_rx u_rx (.clk, .rst_n, .link_valid(dov[c][DC]), .link_flit(dof[c][DC]), .link_credit(doc[c][DC]),
                    .out_valid(c_txv[c]), .out_ready(c_txr[c]), .out_flit(c_txf[c]));
    noc_ep_tx u_tx (.clk, .rst_n, .in_valid(c_rxv[c]), .in_ready(c_rxr[c]), .in_flit(c_rxf[c]),
                    .link_valid(div[c][DC]), .link_flit(dif[c][DC]), .link_credit(dic[c][DC]));
  end
  c2c_link u_c2c (
    .clk, .rst_n,
    .tx_valid(c_txv), .tx_ready(c_txr), .tx_flit(c_txf),
    .rx_valid(c_rxv), .rx_ready(c_rxr), .rx_flit(c_rxf),
    .tx_lanes(c2c_tx_lanes), .tx_sof(c2c_tx_sof), .rx_lanes(c2c_rx_lanes), .rx_sof(c2c_rx_sof),
    .stat_crc_err(c2c_crc_err), .stat_replay(c2c_replay)
  );

  // ---------------------------------------------------------------- RN ports
  for (genvar k = 0; k < N_RNP; k++) begin : g_rn
    localparam int unsigned DV = dev_of(RN_NODE[k]);
    logic [1:0] sl_req, sl_dat;
    l2_interleave #(.N_SLICES(4)) u_sam_req (.mode(interleave_mode), .addr(rn_tx_flit[CH_REQ][k].addr), .slice(sl_req));
    l2_interleave #(.N_SLICES(4)) u_sam_dat (.mode(interleave_mode), .addr(rn_tx_flit[CH_DAT][k].addr), .slice(sl_dat));
    for (genvar c = 0; c < N_CH; c++) begin : g_c
      always_comb begin
        dif[c][DV] = rn_tx_flit[c][k];
        if (c == int'(CH_REQ))
          dif[c][DV].tgt = node_id_t'(HN_NODE[sl_req]);
        else if (c == int'(CH_DAT) && rn_tx_flit[c][k].op == OP_WRITEBACK)
          dif[c][DV].tgt = node_id_t'(HN_NODE[sl_dat]);
      end
      assign div[c][DV]      = rn_tx_valid[c][k];
      assign rn_tx_credit[c][k] = dic[c][DV];
      assign rn_rx_valid[c][k]  = dov[c][DV];
      assign rn_rx_flit[c][k]   = dof[c][DV];
      assign doc[c][DV]      = rn_rx_credit[c][k];
    end
  end

  // ---------------------------------------------------------------- renaming
  for (genvar u = 0; u < 3; u++) begin : g_ren
    localparam int unsigned NP = (u == 2) ? VRP_PREGS : VPU_PREGS;
    localparam int unsigned PW = $clog2(NP);
    localparam int unsigned CW = $clog2(NP + 1);
    logic [PW-1:0] ps1, ps2, pd, po;
    logic [CW-1:0] fc;
    reg_rename #(.N_LOG(32), .N_PHYS(NP)) u_ren (
      .clk, .rst_n,
      .ren_valid(ren_valid[u]), .ren_ready(ren_ready[u]), .ren_wr(ren_wr[u]),
      .ren_src1(ren_src1[u]), .ren_src2(ren_src2[u]), .ren_dst(ren_dst[u]),
      .ren_psrc1(ps1), .ren_psrc2(ps2), .ren_rdy1(ren_rdy1[u]), .ren_rdy2(ren_rdy2[u]),
      .ren_pdst(pd), .ren_pold(po),
      .rel_valid(rel_valid[u]), .rel_preg(PW'(rel_preg[u])),
      .wb_valid(wb_valid[u]), .wb_preg(PW'(wb_preg[u])),
      .free_count(fc)
    );
    assign ren_psrc1[u] = 6'(ps1);
    assign ren_psrc2[u] = 6'(ps2);
    assign ren_pdst[u]  = 6'(pd);
    assign ren_pold[u]  = 6'(po);
    assign ren_free[u]  = 7'(fc);
  end
endmodule
