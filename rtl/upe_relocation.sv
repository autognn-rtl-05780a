// upe_relocation: relocation logic of a Unified Processing Element (UPE).
//
// Every valid input element carries the distance it must move to the left.
// The network has log2(N) routing layers; layer l looks at bit l of each
// element's distance and moves the element 2^l places left when that bit is
// set, so the lowest bit is served first and the highest last. Each output
// position of a layer is a 2:1 multiplexer with a single select bit: it takes
// the element 2^l places to its right when that element is valid and moving in
// this layer, and otherwise keeps its own element if that one stays put. For
// the left-compaction a UPE performs (distance = number of unselected elements
// before the element) no two valid elements ever meet in one position.
//
// Positions left without a valid element come out as zero with valid low.
// Purely combinational. N must be a power of two; DW is the element width
// (64 bits, one edge of two VIDs).
//
// From the paper: log2(N) layers of 2:1 multiplexers controlled by one bit
// of the distance each, lowest bit first. This design's own: zero-filling
// the empty positions and the valid bits that travel with the data.
module upe_relocation #(
  parameter int unsigned N  = 64,
  parameter int unsigned DW = 64,
  parameter int unsigned SW = $clog2(N) + 1
) (
  input  logic [N-1:0][DW-1:0] data_i,
  input  logic [N-1:0]         valid_i,
  input  logic [N-1:0][SW-1:0] shift_i,
  output logic [N-1:0][DW-1:0] data_o,
  output logic [N-1:0]         valid_o
);

  localparam int unsigned LAYERS = $clog2(N);

  logic [LAYERS:0][N-1:0][DW-1:0] d;
  logic [LAYERS:0][N-1:0]         v;
  logic [LAYERS:0][N-1:0][SW-1:0] s;

  assign d[0] = data_i;
  assign v[0] = valid_i;
  assign s[0] = shift_i;

  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    localparam int unsigned STEP = 1 << l;
    for (genvar j = 0; j < N; j++) begin : g_pos
      logic take_right;  // the multiplexer's single select bit
      logic keep_own;
      if (j + STEP < N) begin : g_right
        assign take_right = v[l][j+STEP] & s[l][j+STEP][l];
      end else begin : g_edge
        assign take_right = 1'b0;
      end
      assign keep_own = v[l][j] & ~s[l][j][l];
      if (j + STEP < N) begin : g_mux
        assign d[l+1][j] = take_right ? d[l][j+STEP] : (keep_own ? d[l][j] : '0);
        assign s[l+1][j] = take_right ? s[l][j+STEP] : s[l][j];
      end else begin : g_nomux
        assign d[l+1][j] = keep_own ? d[l][j] : '0;
        assign s[l+1][j] = s[l][j];
      end
      assign v[l+1][j] = take_right | keep_own;
    end
  end

  assign data_o  = d[LAYERS];
  assign valid_o = v[LAYERS];

endmodule
