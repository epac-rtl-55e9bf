// noc_xp: crosspoint (XP) of the CHI network-on-chip.
//
// An XP has four mesh links (N, E, S, W) and two device ports (D0, D1), and
// four independent channels (REQ, RSP, SNP, DAT), each a separate 6x6 switch.
// Every input of every channel has a credit-managed FIFO (noc_ep_rx); every
// output keeps a credit count of the buffer downstream. Routing is dimension
// order, X first: a flit whose target column differs from this XP's goes E or
// W, else one whose target row differs goes S (row number grows southward) or
// N, else it leaves on the device port named in the target id. Each output
// picks among the inputs that want it with a round-robin pointer, and sends
// when it holds a credit. A flit moves one hop per cycle plus one cycle in
// the input FIFO when the path is free: it is registered on the way out.
// Channels, the 4+2 ports, credit flow control and dimension-order routing
// follow the chip; X-first order, FIFO depth and round-robin arbitration are
// this design's choices. Snoop multicast is not implemented: a home node
// sends one snoop flit per sharer instead.
module noc_xp
  import epac_pkg::*;
#(
  parameter int unsigned X     = 0,
  parameter int unsigned Y     = 0,
  parameter int unsigned DEPTH = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic  [N_CH-1:0][XP_PORTS-1:0]   in_valid,
  input  flit_t [N_CH-1:0][XP_PORTS-1:0]   in_flit,
  output logic  [N_CH-1:0][XP_PORTS-1:0]   in_credit,
  output logic  [N_CH-1:0][XP_PORTS-1:0]   out_valid,
  output flit_t [N_CH-1:0][XP_PORTS-1:0]   out_flit,
  input  logic  [N_CH-1:0][XP_PORTS-1:0]   out_credit
);
  localparam int unsigned P = XP_PORTS;

  function automatic logic [2:0] route(input node_id_t t);
    if (int'(t.x) != int'(X))      return (int'(t.x) > int'(X)) ? 3'(XP_E) : 3'(XP_W);
    else if (int'(t.y) != int'(Y)) return (int'(t.y) > int'(Y)) ? 3'(XP_S) : 3'(XP_N);
    else                           return t.p ? 3'(XP_D1) : 3'(XP_D0);
  endfunction

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic  [P-1:0] hv, hpop;
    flit_t [P-1:0] hf;
    logic  [P-1:0][2:0] hdst;
    logic  [P-1:0][P-1:0] want;    // [out][in]
    logic  [P-1:0][P-1:0] grant;   // [out][in]
    logic  [P-1:0][2:0] rr;        // round-robin pointer per output
    logic  [P-1:0][$clog2(DEPTH+1)-1:0] cred;

    for (genvar i = 0; i < P; i++) begin : g_in
      noc_ep_rx #(.DEPTH(DEPTH)) u_buf (
        .clk, .rst_n,
        .link_valid (in_valid[c][i]), .link_flit(in_flit[c][i]), .link_credit(in_credit[c][i]),
        .out_valid  (hv[i]), .out_ready(hpop[i]), .out_flit(hf[i])
      );
      assign hdst[i] = route(hf[i].tgt);
    end

    always_comb begin
      for (int o = 0; o < P; o++)
        for (int i = 0; i < P; i++)
          want[o][i] = hv[i] && (hdst[i] == 3'(o));
    end

    always_comb begin
      grant = '0;
      for (int o = 0; o < P; o++) begin
        if (cred[o] != 0) begin
          for (int k = 0; k < P; k++) begin
            if (want[o][(int'(rr[o]) + k) % P] && grant[o] == '0)
              grant[o][(int'(rr[o]) + k) % P] = 1'b1;
          end
        end
      end
    end

    always_comb begin
      hpop = '0;
      for (int o = 0; o < P; o++) hpop |= grant[o];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int o = 0; o < P; o++) begin
          rr[o]   <= '0;
          cred[o] <= ($clog2(DEPTH+1))'(DEPTH);
        end
        out_valid[c] <= '0;
        out_flit[c]  <= '0;
      end else begin
        for (int o = 0; o < P; o++) begin
          out_valid[c][o] <= 1'b0;
          for (int i = 0; i < P; i++) begin
            if (grant[o][i]) begin
              out_valid[c][o] <= 1'b1;
              out_flit[c][o]  <= hf[i];
              rr[o]           <= (i == P-1) ? 3'd0 : 3'(i + 1);
            end
          end
          cred[o] <= cred[o] - ($clog2(DEPTH+1))'(grant[o] != '0)
                             + ($clog2(DEPTH+1))'(out_credit[c][o]);
        end
      end
    end
  end
endmodule
