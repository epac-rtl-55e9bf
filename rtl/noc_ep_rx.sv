// noc_ep_rx: receive side of one credit-flow-controlled NoC channel.
//
// A link carries at most one flit per cycle (link_valid + link_flit). The
// sender may only send while it holds a credit; each credit stands for one
// free slot of this DEPTH-entry FIFO. The FIFO hands flits on with a
// valid/ready handshake and returns one credit (link_credit, registered, one
// pulse per freed slot) whenever a flit leaves. Used for every crosspoint
// input and for every device that sinks flits from the mesh.
// Credit-based flow control is the chip's; the depth is this design's choice.
module noc_ep_rx
  import epac_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  link_valid,
  input  flit_t link_flit,
  output logic  link_credit,
  output logic  out_valid,
  input  logic  out_ready,
  output flit_t out_flit
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t            mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;
  logic             push, pop;

  assign push      = link_valid;
  assign pop       = out_valid && out_ready;
  assign out_valid = (cnt != 0);
  assign out_flit  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; link_credit <= 1'b0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
      link_credit <= pop;
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= link_flit;

  // A sender that respects credits never overflows the buffer.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (cnt < (AW+1)'(DEPTH) || pop))
    else $error("noc_ep_rx: flit received without a credit");
endmodule
