// l2_interleave: programmable address interleaving across the L2/HN slices.
//
// Every coherent address has one home: the L2 slice and home node that own
// it. This block picks the home slice of an address, under a mode held in a
// configuration register: 0 interleaves consecutive 64-byte lines over the
// slices, 1 interleaves 4 kB pages, 2 XOR-folds three address fields so that
// power-of-two strides still spread, and 3 sends everything to slice 0.
// Combinational. N_SLICES must be a power of two; four slices are placed on
// the chip. That the L2 has programmable interleaving modes is the chip's;
// the modes themselves are this design's choice.
module l2_interleave
  import epac_pkg::*;
#(
  parameter int unsigned N_SLICES = 4
) (
  input  logic [1:0]                    mode,
  input  logic [ADDR_W-1:0]             addr,
  output logic [$clog2(N_SLICES)-1:0]   slice
);
  localparam int unsigned SB = $clog2(N_SLICES);
  always_comb begin
    unique case (mode)
      2'd0: slice = addr[OFFS_W +: SB];
      2'd1: slice = addr[12 +: SB];
      2'd2: slice = addr[OFFS_W +: SB] ^ addr[12 +: SB] ^ addr[20 +: SB];
      default: slice = '0;
    endcase
  end
endmodule
