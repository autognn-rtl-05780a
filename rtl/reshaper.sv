// reshaper: data-reshaping controller, builds the CSC pointer array.
//
// Input is an edge array sorted by destination VID, read from the scratchpad
// one row (one COO segment of W_SCR edges) at a time. Output is the pointer
// array ptr[0..n_nodes], where ptr[t] is the number of edges whose destination
// is smaller than t, so that the sources of vertex t are index entries
// ptr[t] .. ptr[t+1]-1.
//
// The reshaper keeps two counters: v, the first of the N_SCR target VIDs
// being worked on, and base, the number of edges already consumed. Each
// cycle the N_SCR SCRs (adder-tree configuration) count, for targets
// v .. v+N_SCR-1, the edges of the buffered segment whose destination is >=
// the target; the count of smaller ones is the segment length minus that,
// and ptr[t] = acc[t] + that count, where acc[t] counts the edges below t in
// segments already consumed. A target is complete once the segment holds an
// edge >= it (or no edges remain). If all N_SCR targets are complete their
// pointers are written as one row and v advances by N_SCR (acc restarts at
// base, since every consumed edge is below the new targets); otherwise the
// segment is consumed (base grows by its length, each acc by its count) and
// the next one is fetched. Cost: about (n_nodes+1)/N_SCR evaluation cycles plus two cycles
// per segment, matching the max(n/n_scr, e/w_scr) shape of the cost model.
//
// The pointer memory (MAX_N+1 entries, rows of N_SCR) has two read ports so
// the sampler can fetch ptr[t] and ptr[t+1] in one cycle; reads take one
// cycle. Memory read request: rd_en_o/rd_addr_o, data rd_data_i next cycle
// (the port is assumed granted). start_i begins a run; done_o pulses at the
// end; cycles_o counts the cycles of the last run.
//
// From the paper: N_SCR adder-tree SCRs evaluating consecutive target VIDs
// against a COO segment, and the two-way choice between moving the target
// window and fetching the next segment. This design's own: the per-target
// accumulators, the completion rule (the segment holds an edge >= target),
// and the dual-read pointer memory.
// The assertion is sampled on the clock and disabled during reset, so rst_n
// also appears in a synchronous context; that is only for checking, and the
// flops themselves use the asynchronous active-low reset throughout.
module reshaper
  import agnn_pkg::*;
#(
  parameter int unsigned N_SCR = 8,
  parameter int unsigned W_SCR = 32,
  parameter int unsigned MAX_N = 4096
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start_i,
  input  row_addr_t                   coo_base_i,
  input  logic [31:0]                 n_edges_i,
  input  logic [31:0]                 n_nodes_i,
  output logic                        busy_o,
  output logic                        done_o,
  output logic [31:0]                 cycles_o,
  // COO segment reads
  output logic                        rd_en_o,
  output row_addr_t                   rd_addr_o,
  input  logic [W_SCR-1:0][ELEM_W-1:0] rd_data_i,
  // pointer array reads: ptr[idx] and ptr[idx+1]
  input  logic [31:0]                 ptr_idx_i,
  output logic [31:0]                 ptr_lo_o,
  output logic [31:0]                 ptr_hi_o
);

  localparam int unsigned PTR_ROWS = (MAX_N + 1 + N_SCR - 1) / N_SCR;
  localparam int unsigned PRW      = $clog2(PTR_ROWS);
  localparam int unsigned LW       = $clog2(N_SCR);
  localparam int unsigned CW       = $clog2(W_SCR) + 1;

  typedef enum logic [1:0] { R_IDLE, R_LOAD, R_WAIT, R_EVAL } rstate_e;

  rstate_e st;
  logic [31:0] v, base, cycles;
  row_addr_t   seg;
  logic [W_SCR-1:0][VID_W-1:0] seg_dst;
  logic [W_SCR-1:0]            seg_valid;
  logic [CW-1:0]               seg_len;
  logic [31:0]                 remaining;

  logic [N_SCR-1:0][VID_W-1:0] ptr_row;
  logic [N_SCR-1:0][31:0]      acc, cnt_lt;
  logic [N_SCR-1:0]            complete;
  logic [N_SCR-1:0][CW-1:0]    cnt_ge;

  logic [N_SCR-1:0][31:0] ptr_mem [PTR_ROWS];

  assign remaining = n_edges_i - base;

  // The SCR array: target v+i against the buffered segment.
  for (genvar i = 0; i < N_SCR; i++) begin : g_scr
    logic hit_unused;
    logic [VID_W-1:0] val_unused;
    scr #(.W(W_SCR), .DW(VID_W), .FILTER(1'b0), .CW(CW)) u_scr (
      .elem_i    (seg_dst),
      .payload_i ('0),
      .valid_i   (seg_valid),
      .target_i  (v + 32'(i)),
      .count_o   (cnt_ge[i]),
      .hit_o     (hit_unused),
      .value_o   (val_unused)
    );
    assign cnt_lt[i]   = 32'(seg_len - cnt_ge[i]);
    assign ptr_row[i]  = acc[i] + cnt_lt[i];
    assign complete[i] = (cnt_ge[i] != '0) || (32'(seg_len) == remaining);
  end

  assign busy_o    = (st != R_IDLE);
  assign rd_en_o   = (st == R_LOAD);
  assign rd_addr_o = coo_base_i + seg;
  assign cycles_o  = cycles;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE;
      v <= '0; base <= '0; seg <= '0; cycles <= '0; acc <= '0;
      seg_dst <= '0; seg_valid <= '0; seg_len <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (st != R_IDLE) cycles <= cycles + 1;
      case (st)
        R_IDLE: if (start_i) begin
          v <= '0; base <= '0; seg <= '0; cycles <= '0; acc <= '0;
          if (n_edges_i == 0) begin
            seg_valid <= '0; seg_len <= '0;
            st <= R_EVAL;
          end else st <= R_LOAD;
        end
        R_LOAD: st <= R_WAIT;
        R_WAIT: begin
          for (int i = 0; i < W_SCR; i++) begin
            seg_dst[i]   <= rd_data_i[i][ELEM_W-1:VID_W];
            seg_valid[i] <= (32'(i) < remaining);
          end
          seg_len <= (remaining >= W_SCR) ? CW'(W_SCR) : CW'(remaining);
          st <= R_EVAL;
        end
        R_EVAL: begin
          if (complete[N_SCR-1]) begin
            ptr_mem[v[PRW+LW-1:LW]] <= ptr_row;
            v <= v + N_SCR;
            for (int i = 0; i < N_SCR; i++) acc[i] <= base;
            if (v + N_SCR > n_nodes_i) begin
              st <= R_IDLE;
              done_o <= 1'b1;
            end
          end else begin
            base <= base + 32'(seg_len);
            for (int i = 0; i < N_SCR; i++) acc[i] <= acc[i] + cnt_lt[i];
            seg  <= seg + 1'b1;
            st   <= R_LOAD;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end

  // Pointer reads, one cycle latency.
  logic [31:0] idx1;
  assign idx1 = ptr_idx_i + 1;
  always_ff @(posedge clk) begin
    ptr_lo_o <= ptr_mem[ptr_idx_i[PRW+LW-1:LW]][ptr_idx_i[LW-1:0]];
    ptr_hi_o <= ptr_mem[idx1[PRW+LW-1:LW]][idx1[LW-1:0]];
  end

  // v is always a multiple of N_SCR, so pointer rows are written aligned.
  assert property (@(posedge clk) disable iff (!rst_n) v[LW-1:0] == '0);

endmodule
