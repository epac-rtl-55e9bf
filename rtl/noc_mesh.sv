// noc_mesh: the EPAC network-on-chip, a MESH_X x MESH_Y mesh of crosspoints.
//
// Crosspoint (x, y) is joined to its east and south neighbours by links in
// both directions, on each of the four CHI channels. Its two device ports are
// brought out as device d = (y * MESH_X + x) * 2 + port, the same numbering as
// the node id {y, x, port}. Device links use the crosspoint protocol: a flit
// is sent with valid and needs a credit; a credit pulse is returned for every
// flit taken. Links at the mesh edge are tied off; dimension-order routing
// never uses them. The 3 x 2 shape and the placement of tiles on it follow
// the chip's block diagram; that diagram draws vertical links only in the
// outer columns, while this mesh also links the middle column, as a 2D mesh
// with dimension-order routing needs.
module noc_mesh
  import epac_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic  [N_CH-1:0][MESH_X*MESH_Y*2-1:0]     dev_in_valid,
  input  flit_t [N_CH-1:0][MESH_X*MESH_Y*2-1:0]     dev_in_flit,
  output logic  [N_CH-1:0][MESH_X*MESH_Y*2-1:0]     dev_in_credit,
  output logic  [N_CH-1:0][MESH_X*MESH_Y*2-1:0]     dev_out_valid,
  output flit_t [N_CH-1:0][MESH_X*MESH_Y*2-1:0]     dev_out_flit,
  input  logic  [N_CH-1:0][MESH_X*MESH_Y*2-1:0]     dev_out_credit
);
  localparam int unsigned NXP = MESH_X * MESH_Y;

  logic  [NXP-1:0][N_CH-1:0][XP_PORTS-1:0] iv, ic, ov, oc;
  flit_t [NXP-1:0][N_CH-1:0][XP_PORTS-1:0] ifl, ofl;

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned K = y * MESH_X + x;
      noc_xp #(.X(x), .Y(y), .DEPTH(DEPTH)) u_xp (
        .clk, .rst_n,
        .in_valid(iv[K]), .in_flit(ifl[K]), .in_credit(ic[K]),
        .out_valid(ov[K]), .out_flit(ofl[K]), .out_credit(oc[K])
      );
      for (genvar c = 0; c < N_CH; c++) begin : g_c
        // device ports
        for (genvar p = 0; p < 2; p++) begin : g_p
          assign iv [K][c][XP_D0+p]       = dev_in_valid[c][2*K+p];
          assign ifl[K][c][XP_D0+p]       = dev_in_flit [c][2*K+p];
          assign dev_in_credit[c][2*K+p]  = ic[K][c][XP_D0+p];
          assign dev_out_valid[c][2*K+p]  = ov [K][c][XP_D0+p];
          assign dev_out_flit [c][2*K+p]  = ofl[K][c][XP_D0+p];
          assign oc [K][c][XP_D0+p]       = dev_out_credit[c][2*K+p];
        end
        // west input / east output pairing with the neighbour
        if (x > 0) begin : g_w
          assign iv [K][c][XP_W] = ov [K-1][c][XP_E];
          assign ifl[K][c][XP_W] = ofl[K-1][c][XP_E];
          assign oc [K][c][XP_W] = ic [K-1][c][XP_E];
        end else begin : g_wt
          assign iv [K][c][XP_W] = 1'b0;
          assign ifl[K][c][XP_W] = '0;
          assign oc [K][c][XP_W] = 1'b0;
        end
        if (x < MESH_X-1) begin : g_e
          assign iv [K][c][XP_E] = ov [K+1][c][XP_W];
          assign ifl[K][c][XP_E] = ofl[K+1][c][XP_W];
          assign oc [K][c][XP_E] = ic [K+1][c][XP_W];
        end else begin : g_et
          assign iv [K][c][XP_E] = 1'b0;
          assign ifl[K][c][XP_E] = '0;
          assign oc [K][c][XP_E] = 1'b0;
        end
        if (y > 0) begin : g_n
          assign iv [K][c][XP_N] = ov [K-MESH_X][c][XP_S];
          assign ifl[K][c][XP_N] = ofl[K-MESH_X][c][XP_S];
          assign oc [K][c][XP_N] = ic [K-MESH_X][c][XP_S];
        end else begin : g_nt
          assign iv [K][c][XP_N] = 1'b0;
          assign ifl[K][c][XP_N] = '0;
          assign oc [K][c][XP_N] = 1'b0;
        end
        if (y < MESH_Y-1) begin : g_s
          assign iv [K][c][XP_S] = ov [K+MESH_X][c][XP_N];
          assign ifl[K][c][XP_S] = ofl[K+MESH_X][c][XP_N];
          assign oc [K][c][XP_S] = ic [K+MESH_X][c][XP_N];
        end else begin : g_st
          assign iv [K][c][XP_S] = 1'b0;
          assign ifl[K][c][XP_S] = '0;
          assign oc [K][c][XP_S] = 1'b0;
        end
      end
    end
  end
endmodule
