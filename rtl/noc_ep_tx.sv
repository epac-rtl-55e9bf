// noc_ep_tx: send side of one credit-flow-controlled NoC channel.
//
// Holds one credit per free slot of the receiver's buffer (DEPTH, which must
// match the receiver's noc_ep_rx). A flit offered on in_valid/in_flit is
// accepted (in_ready) only while a credit is held; it then appears on the
// link one cycle later, registered. Credits come back as single-cycle pulses
// on link_credit. Used by every device that injects flits into the mesh.
module noc_ep_tx
  import epac_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  flit_t in_flit,
  output logic  link_valid,
  output flit_t link_flit,
  input  logic  link_credit
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [CW-1:0] credits;
  logic          send;

  assign in_ready = (credits != 0);
  assign send     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credits    <= CW'(DEPTH);
      link_valid <= 1'b0;
      link_flit  <= '0;
    end else begin
      credits    <= credits - CW'(send) + CW'(link_credit);
      link_valid <= send;
      if (send) link_flit <= in_flit;
    end
  end
endmodule
