// l2_plru: tree pseudo-LRU replacement for one set of a WAYS-way cache.
//
// The set keeps WAYS-1 bits arranged as a binary tree (node n has children
// 2n+1 and 2n+2). A bit of 0 means "the older half is on the left". The
// victim is found by walking from the root along the bits; on every access
// the nodes on the path to the used way are set to point away from it.
// Purely combinational: plru_next is the state after touching touch_way.
// The L2 uses pseudo-LRU replacement; the tree form is this design's choice.
module l2_plru #(
  parameter int unsigned WAYS = 8
) (
  input  logic [WAYS-2:0]         state,
  input  logic [$clog2(WAYS)-1:0] touch_way,
  output logic [$clog2(WAYS)-1:0] victim,
  output logic [WAYS-2:0]         plru_next
);
  localparam int unsigned L = $clog2(WAYS);

  always_comb begin
    int unsigned n;
    n = 0;
    victim = '0;
    for (int l = 0; l < L; l++) begin
      victim[L-1-l] = state[n];
      n = 2 * n + 1 + (state[n] ? 1 : 0);
    end
  end

  always_comb begin
    int unsigned m;
    logic b;
    m = 0;
    plru_next = state;
    for (int l = 0; l < L; l++) begin
      b = touch_way[L-1-l];
      plru_next[m] = ~b;          // point to the other half
      m = 2 * m + 1 + (b ? 1 : 0);
    end
  end
endmodule
