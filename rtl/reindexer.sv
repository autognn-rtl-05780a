// reindexer: subgraph-reindexing controller.
//
// Gives every original VID that reaches it a new, dense VID in order of
// first appearance, without a hash map. Its SRAM bank holds two arrays side
// by side, original VIDs and renumbered VIDs; a counter holds how many
// mappings exist. For a request the bank is read one group of
// N_SCR * W_SCR pairs at a time and N_SCR SCRs in the filter-tree
// configuration compare the W_SCR original VIDs each against the requested
// VID; the OR tree returns {hit, renumbered VID}. On a hit that VID is
// returned. When every group holding mappings has been searched without a hit,
// the counter value becomes the new VID, the pair (VID, counter) is appended
// and the counter increments.
//
// Handshake: req_i with vid_i is accepted when ready_o is high; resp_valid_o
// pulses with new_vid_o and found_o (already mapped). Latency: two cycles per
// searched group (synchronous bank read, then compare) plus one. clear_i
// empties the map. A request when the bank is full sets overflow_o and
// returns no new mapping. map_idx_i reads back the original VID stored for a
// new VID (one cycle), which is the order of the sampled embedding table.
//
// From the paper: the SRAM bank of original/renumbered pairs searched by
// filter-tree SCRs, and the counter that gives the next new VID on a miss.
// This design's own: group size N_SCR*W_SCR, two cycles per group, the
// overflow flag, and the read-back port.
module reindexer
  import agnn_pkg::*;
#(
  parameter int unsigned N_SCR     = 8,
  parameter int unsigned W_SCR     = 32,
  parameter int unsigned MAP_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear_i,
  input  logic        req_i,
  input  vid_t        vid_i,
  output logic        ready_o,
  output logic        resp_valid_o,
  output vid_t        new_vid_o,
  output logic        found_o,
  output logic [31:0] count_o,
  output logic        overflow_o,
  input  logic [31:0] map_idx_i,
  output vid_t        map_orig_o
);

  localparam int unsigned GSZ    = N_SCR * W_SCR;
  localparam int unsigned GROUPS = (MAP_DEPTH + GSZ - 1) / GSZ;
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned EW     = $clog2(GSZ);

  typedef enum logic [1:0] { X_IDLE, X_READ, X_CMP, X_INSERT } xstate_e;

  xstate_e st;
  vid_t    tgt;
  logic [GW-1:0] g;
  logic [31:0]   count;

  // SRAM bank: orig and renum arrays, one group per word.
  logic [GSZ-1:0][VID_W-1:0] orig_mem  [GROUPS];
  logic [GSZ-1:0][VID_W-1:0] renum_mem [GROUPS];
  logic [GSZ-1:0][VID_W-1:0] orig_q, renum_q;
  logic [GSZ-1:0]            lane_valid;

  logic [N_SCR-1:0]            hit;
  logic [N_SCR-1:0][VID_W-1:0] val;
  logic                        any_hit;
  vid_t                        hit_val;

  for (genvar s = 0; s < N_SCR; s++) begin : g_scr
    logic [$clog2(W_SCR):0] cnt_unused;
    scr #(.W(W_SCR), .DW(VID_W), .FILTER(1'b1)) u_scr (
      .elem_i    (orig_q[s*W_SCR +: W_SCR]),
      .payload_i (renum_q[s*W_SCR +: W_SCR]),
      .valid_i   (lane_valid[s*W_SCR +: W_SCR]),
      .target_i  (tgt),
      .count_o   (cnt_unused),
      .hit_o     (hit[s]),
      .value_o   (val[s])
    );
  end

  always_comb begin
    any_hit = |hit;
    hit_val = '0;
    for (int s = 0; s < N_SCR; s++) hit_val |= val[s];
    for (int e = 0; e < GSZ; e++) lane_valid[e] = (32'(g) * GSZ + 32'(e)) < count;
  end

  assign ready_o = (st == X_IDLE) && !clear_i;
  assign count_o = count;

  always_ff @(posedge clk) begin
    if (st == X_READ) begin
      orig_q  <= orig_mem[g];
      renum_q <= renum_mem[g];
    end
    if (st == X_INSERT && count < MAP_DEPTH) begin
      orig_mem[count[GW+EW-1:EW]][count[EW-1:0]]  <= tgt;
      renum_mem[count[GW+EW-1:EW]][count[EW-1:0]] <= count;
    end
    map_orig_o <= orig_mem[map_idx_i[GW+EW-1:EW]][map_idx_i[EW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; tgt <= '0; g <= '0; count <= '0;
      resp_valid_o <= 1'b0; new_vid_o <= '0; found_o <= 1'b0; overflow_o <= 1'b0;
    end else begin
      resp_valid_o <= 1'b0;
      if (clear_i) begin
        count <= '0; overflow_o <= 1'b0; st <= X_IDLE;
      end else case (st)
        X_IDLE: if (req_i) begin
          tgt <= vid_i;
          g <= '0;
          st <= (count == 0) ? X_INSERT : X_READ;
        end
        X_READ: st <= X_CMP;
        X_CMP: begin
          if (any_hit) begin
            resp_valid_o <= 1'b1; new_vid_o <= hit_val; found_o <= 1'b1;
            st <= X_IDLE;
          end else if ((32'(g) + 1) * GSZ >= count) st <= X_INSERT;
          else begin
            g <= g + 1'b1;
            st <= X_READ;
          end
        end
        X_INSERT: begin
          resp_valid_o <= 1'b1; found_o <= 1'b0;
          if (count < MAP_DEPTH) begin
            new_vid_o <= count;
            count <= count + 1;
          end else begin
            new_vid_o <= '1;
            overflow_o <= 1'b1;
          end
          st <= X_IDLE;
        end
        default: st <= X_IDLE;
      endcase
    end
  end

endmodule
