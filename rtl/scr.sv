// scr: Single-Cycle Reducer.
//
// An SCR compares every element of a W-wide input array with one target and
// reduces the W comparison results to a single value in the same cycle. It
// has two configurations, chosen by the FILTER parameter:
//
//   FILTER = 0 (reshaping): each comparator subtracts the target from its
//     element and reports 1 when the difference is zero or positive, i.e. when
//     element >= target. An adder tree of clog2(W) layers sums the 1-bit
//     results, so count_o is the number of valid elements >= target.
//   FILTER = 1 (reindexing): each comparator reports a hit when its element
//     equals the target, and passes {1, payload} of that lane (zero
//     otherwise). An OR tree merges the 33-bit lane results, so hit_o says
//     whether the target was found and value_o is the payload stored beside
//     it (the renumbered VID). Elements are assumed unique, so at most one
//     lane hits.
//
// Lanes whose valid bit is low take no part. Purely combinational; W must be
// a power of two. Element width defaults to one 32-bit VID.
//
// From the paper: comparators plus a reduction tree, the adder tree for
// reshaping, the OR tree returning hit plus the 32-bit renumbered VID, and
// the example input 1,2,3,3 with target 3 giving 2. This design's own: the
// valid lanes and the subtract-and-borrow comparator.
//
// Only the outputs of the configured mode carry information: with FILTER = 0
// hit_o and value_o are constant zero, with FILTER = 1 count_o is the hit bit.
module scr #(
  parameter int unsigned W      = 32,
  parameter int unsigned DW     = 32,
  parameter bit          FILTER = 1'b0,
  parameter int unsigned CW     = $clog2(W) + 1
) (
  input  logic [W-1:0][DW-1:0] elem_i,
  input  logic [W-1:0][DW-1:0] payload_i,
  input  logic [W-1:0]         valid_i,
  input  logic [DW-1:0]        target_i,
  output logic [CW-1:0]        count_o,
  output logic                 hit_o,
  output logic [DW-1:0]        value_o
);

  localparam int unsigned LAYERS = $clog2(W);

  // Comparator logic.
  logic [W-1:0]      cmp;
  logic [W-1:0][DW:0] diff;  // element - target, with a borrow bit on top
  always_comb begin
    for (int i = 0; i < W; i++) begin
      diff[i] = {1'b0, elem_i[i]} - {1'b0, target_i};
      if (FILTER) cmp[i] = valid_i[i] && (elem_i[i] == target_i);
      else        cmp[i] = valid_i[i] && !diff[i][DW];
    end
  end

  if (!FILTER) begin : g_adder_tree
    logic [LAYERS:0][W-1:0][CW-1:0] sum;
    always_comb begin
      for (int i = 0; i < W; i++) sum[0][i] = CW'(cmp[i]);
    end
    for (genvar l = 0; l < LAYERS; l++) begin : g_lvl
      for (genvar i = 0; i < W; i++) begin : g_node
        if (i < (W >> (l + 1))) begin : g_add
          assign sum[l+1][i] = sum[l][2*i] + sum[l][2*i+1];
        end else begin : g_zero
          assign sum[l+1][i] = '0;
        end
      end
    end
    assign count_o = sum[LAYERS][0];
    assign hit_o   = 1'b0;
    assign value_o = '0;
  end else begin : g_filter_tree
    logic [LAYERS:0][W-1:0][DW:0] flt;
    always_comb begin
      for (int i = 0; i < W; i++) flt[0][i] = cmp[i] ? {1'b1, payload_i[i]} : '0;
    end
    for (genvar l = 0; l < LAYERS; l++) begin : g_lvl
      for (genvar i = 0; i < W; i++) begin : g_node
        if (i < (W >> (l + 1))) begin : g_or
          assign flt[l+1][i] = flt[l][2*i] | flt[l][2*i+1];
        end else begin : g_zero
          assign flt[l+1][i] = '0;
        end
      end
    end
    assign hit_o   = flt[LAYERS][0][DW];
    assign value_o = flt[LAYERS][0][DW-1:0];
    assign count_o = CW'(hit_o);
  end

endmodule
