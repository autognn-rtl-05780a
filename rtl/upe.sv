// upe: Unified Processing Element, the set-partitioning engine.
//
// A UPE takes an array of N elements (VIDs or 64-bit edge pairs) and an array
// of N condition bits, and returns the elements whose condition is set, packed
// to the left in their original order, together with how many there are.
// Three pieces do this in one combinational pass:
//   * AND gates clear every element whose condition bit is low (filtered array);
//   * the prefix-sum logic (upe_prefix_sum) turns the condition bits into the
//     displacement array, the running count of selected elements;
//   * the relocation logic (upe_relocation) moves each selected element left by
//     its index minus its exclusive running count, i.e. by the number of
//     unselected elements before it.
// The same datapath serves radix-sort passes (condition = one key bit or its
// inverse) and unique random selection (condition = one-hot or bitmap), which
// is why it is called unified.
//
// Timing: purely combinational; callers register the result. Positions past
// count_o are zero. N must be a power of two.
//
// From the paper: AND filter, prefix sum and relocation, and their use for
// both radix sorting and selection. This design's own: shift = index minus
// exclusive count, computed from the inclusive prefix sum.
module upe #(
  parameter int unsigned N  = 64,
  parameter int unsigned DW = 64,
  parameter int unsigned CW = $clog2(N) + 1
) (
  input  logic [N-1:0][DW-1:0] node_i,
  input  logic [N-1:0]         cond_i,
  output logic [N-1:0][DW-1:0] node_o,
  output logic [N-1:0]         valid_o,
  output logic [CW-1:0]        count_o
);

  logic [N-1:0][DW-1:0] filtered;
  logic [N-1:0][CW-1:0] disp;
  logic [N-1:0][CW-1:0] shift;

  always_comb begin
    for (int i = 0; i < N; i++) filtered[i] = node_i[i] & {DW{cond_i[i]}};
  end

  upe_prefix_sum #(.N(N), .CW(CW)) u_psum (
    .cond_i (cond_i),
    .disp_o (disp)
  );

  // Exclusive count of selected elements before i is disp[i] - cond[i]; the
  // element moves left by i minus that.
  always_comb begin
    for (int i = 0; i < N; i++) shift[i] = CW'(i) - (disp[i] - CW'(cond_i[i]));
  end

  upe_relocation #(.N(N), .DW(DW), .SW(CW)) u_reloc (
    .data_i  (filtered),
    .valid_i (cond_i),
    .shift_i (shift),
    .data_o  (node_o),
    .valid_o (valid_o)
  );

  assign count_o = disp[N-1];

endmodule
