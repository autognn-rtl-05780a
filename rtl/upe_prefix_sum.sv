// upe_prefix_sum: prefix-sum logic of a Unified Processing Element (UPE).
//
// Given N condition bits, it produces the displacement array: element i holds
// the number of set condition bits at positions 0..i (an inclusive running
// count), so that for the condition array 0,1,0,1 the output is 0,1,1,2.
//
// The adder network is hierarchical, as the UPE design prescribes: layer l
// works on blocks of 2^(l+1) elements and adds the running total at the end of
// the lower half of each block to every element of its upper half. After
// log2(N) adder layers every element holds its full prefix count. Because the
// inputs are single bits, every adder is only clog2(N)+1 bits wide.
//
// The block is purely combinational: the displacement array is valid in the
// same cycle as the condition array. N must be a power of two.
//
// From the paper: the hierarchical adder network and the inclusive count
// (its worked example 0101 -> 0112). This design's own: the adder widths.
//
// Low entries of disp_o cannot reach the full counter width (entry i is at
// most i+1) and entry 0 equals cond_i[0], so synthesis finds those upper bits
// constant; the uniform width keeps the interface regular.
module upe_prefix_sum #(
  parameter int unsigned N  = 64,
  parameter int unsigned CW = $clog2(N) + 1
) (
  input  logic [N-1:0]          cond_i,
  output logic [N-1:0][CW-1:0]  disp_o
);

  localparam int unsigned LAYERS = $clog2(N);

  logic [LAYERS:0][N-1:0][CW-1:0] lvl;

  always_comb begin
    for (int i = 0; i < N; i++) lvl[0][i] = CW'(cond_i[i]);
  end

  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    localparam int unsigned HALF = 1 << l;
    for (genvar i = 0; i < N; i++) begin : g_elem
      // Position of the last element of the lower half of this block.
      localparam int unsigned LAST = (i / (2 * HALF)) * (2 * HALF) + HALF - 1;
      if ((i % (2 * HALF)) >= HALF) begin : g_add
        assign lvl[l+1][i] = lvl[l][i] + lvl[l][LAST];
      end else begin : g_keep
        assign lvl[l+1][i] = lvl[l][i];
      end
    end
  end

  assign disp_o = lvl[LAYERS];

endmodule
