// agnn_workflow: end-to-end preprocessing sequencer.
//
// Runs the whole preprocessing of one request without host involvement:
//   1. graph conversion of the input COO (edges in scratchpad rows from
//      G_BASE): pad the array to a power-of-two number of UPE-width chunks,
//      edge ordering on the UPE kernel, data reshaping on the reshaper;
//   2. graph sampling, node-wise, for `layers` hops: the batch vertices are
//      reindexed first (so they become 0..batch-1) and form the first
//      frontier. For every frontier vertex v the pointer pair ptr[v],
//      ptr[v+1] locates its in-neighbours in the sorted COO; a JOB_SELECT
//      picks k of them on a UPE. Jobs are issued in groups of up to N_UPE
//      (one result row per UPE slot); when the group has finished, the
//      sampled edges (u -> v) are drained: u and v are renumbered by the
//      reindexer, the renumbered edge {v', u'} is appended to the subgraph COO,
//      and u joins the next hop's frontier;
//   3. graph conversion of the sampled subgraph: padding, ordering, reshaping.
// Vertices without in-neighbours issue no job. Neighbour lists longer than
// W/2 are cut to their first W/2 entries; k is capped to W/2.
//
// Results: the subgraph's pointer array in the reshaper, its index array in
// the src fields of the sorted subgraph rows (sub_base_o), and the new-to-old
// VID table in the reindexer. Errors (frontier, subgraph or map overflow) are
// sticky in err_o. The sequencer owns scratchpad port B while busy_o is high.
//
// From the paper: the order of the steps (conversion, per-layer selection
// and reindexing, conversion of the subgraph) and that the whole flow runs
// without the host. This design's own: everything else, including keeping
// the graph in the scratchpad, groups of N_UPE jobs, the frontier buffers,
// the scratchpad layout (G_BASE ... SEL_BASE) and the error flags.
// Timing: one request from start_i to done_o; cycle counts per phase are
// reported on cyc_*_o.
//
// Fields of sel_job_o that a selection job does not use (kind, row_b, len,
// vid_bits) are constant, which synthesis reports as constant outputs.
module agnn_workflow
  import agnn_pkg::*;
#(
  parameter int unsigned N_UPE     = 32,
  parameter int unsigned W         = 64,
  parameter int unsigned MAX_E     = 4096,
  parameter int unsigned MAX_SUB_E = 2048,
  parameter int unsigned MAX_FRONT = 512,
  parameter int unsigned MAX_BATCH = 64,
  parameter int unsigned RE        = W / 2,
  parameter int unsigned G_BASE    = 0,
  parameter int unsigned G_TMP     = G_BASE + MAX_E / RE,
  parameter int unsigned S_BASE    = G_TMP + MAX_E / RE,
  parameter int unsigned S_TMP     = S_BASE + MAX_SUB_E / RE,
  parameter int unsigned SEL_BASE  = S_TMP + MAX_SUB_E / RE
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic        start_i,
  input  logic [31:0] n_edges_i,
  input  logic [31:0] n_nodes_i,
  input  logic [7:0]  k_i,
  input  logic [3:0]  layers_i,
  input  logic [31:0] batch_i,
  input  logic [15:0] seed_i,
  // batch list written by the host
  input  logic        bvid_we_i,
  input  logic [31:0] bvid_idx_i,
  input  vid_t        bvid_i,
  output logic        busy_o,
  output logic        done_o,
  output logic [2:0]  err_o,
  output logic [31:0] sub_edges_o,
  output row_addr_t   sub_base_o,
  output logic [31:0] cyc_order_o,
  output logic [31:0] cyc_reshape_o,
  output logic [31:0] cyc_sample_o,
  // UPE kernel
  output logic        sort_start_o,
  output row_addr_t   sort_base_o,
  output row_addr_t   sort_tmp_o,
  output row_addr_t   sort_chunks_o,
  input  logic        sort_done_i,
  input  row_addr_t   sort_result_i,
  output logic        sel_valid_o,
  output upe_job_t    sel_job_o,
  input  logic        sel_ready_i,
  input  logic        upe_idle_i,
  // scratchpad port B
  output logic                     sp_en_o,
  output logic                     sp_we_o,
  output row_addr_t                sp_addr_o,
  output logic [RE-1:0][ELEM_W-1:0] sp_wdata_o,
  input  logic [RE-1:0][ELEM_W-1:0] sp_rdata_i,
  // SCR kernel: reshaper
  output logic        rs_start_o,
  output row_addr_t   rs_coo_base_o,
  output logic [31:0] rs_n_edges_o,
  output logic [31:0] rs_n_nodes_o,
  input  logic        rs_done_i,
  input  logic        rs_rd_en_i,
  input  row_addr_t   rs_rd_addr_i,
  output logic [31:0] ptr_idx_o,
  input  logic [31:0] ptr_lo_i,
  input  logic [31:0] ptr_hi_i,
  // SCR kernel: reindexer
  output logic        ri_clear_o,
  output logic        ri_req_o,
  output vid_t        ri_vid_o,
  input  logic        ri_ready_i,
  input  logic        ri_resp_valid_i,
  input  vid_t        ri_new_vid_i,
  input  logic [31:0] ri_count_i,
  input  logic        ri_overflow_i
);

  localparam int unsigned SW = (N_UPE > 1) ? $clog2(N_UPE) : 1;
  localparam int unsigned FW = $clog2(MAX_FRONT);
  localparam int unsigned BW = $clog2(MAX_BATCH);

  typedef enum logic [4:0] {
    W_IDLE, W_PAD_RD, W_PAD_WAIT, W_PAD_WR, W_SORT_GO, W_SORT_WAIT,
    W_RESH_GO, W_RESH_WAIT, W_MAPB, W_MAPB_WAIT,
    W_GRP, W_PTR, W_PTR_WAIT, W_JOB, W_SETTLE, W_JOBWAIT,
    W_DRAIN, W_DRD, W_DMAP, W_DMAP_WAIT, W_EL, W_EL_WAIT, W_SUBWR,
    W_HOPEND, W_SUBFLUSH, W_DONE
  } wstate_e;

  wstate_e st;

  // batch list and frontier buffers (ping-pong)
  vid_t batch_mem [MAX_BATCH];
  vid_t front_mem [2][MAX_FRONT];
  logic cur;
  logic [31:0] front_cnt, next_cnt, fi;

  // conversion phase
  logic        is_sub;
  logic [31:0] cnt;           // elements in the array being converted
  row_addr_t   base, tmp, nch, pr, sorted;
  logic [RE-1:0][ELEM_W-1:0] row_q;

  // sampling phase
  logic [3:0]  hop;
  logic [31:0] bi;
  logic [SW:0] s, ds;
  vid_t        slot_v   [N_UPE];
  logic [N_UPE-1:0] slot_has;
  logic [31:0] lo_q, deg_full;
  logic [15:0] lfsr;
  logic [7:0]  k_eff;
  logic [$clog2(RE):0] ei;
  vid_t        nv, u_q;
  logic [RE-1:0][ELEM_W-1:0] sub_row;
  logic [$clog2(RE):0] sub_fill;
  row_addr_t   sub_rows;
  logic [31:0] sub_edges;
  logic [1:0]  settle;
  logic [2:0]  err;

  // chunks needed for cnt elements, rounded up to a power of two (>= 1)
  function automatic row_addr_t pow2_chunks(input logic [31:0] n);
    logic [31:0] need;
    row_addr_t   c;
    need = (n + W - 1) / W;
    c = 1;
    for (int i = 0; i < ROW_AW; i++) if (32'(c) < need) c = c << 1;
    return c;
  endfunction

  assign k_eff = (k_i > 8'(RE)) ? 8'(RE) : ((k_i == 0) ? 8'd1 : k_i);
  assign busy_o = (st != W_IDLE);
  assign err_o = err;
  assign sub_edges_o = sub_edges;
  assign sub_base_o = sorted;

  // scratchpad port B: the reshaper reads while reshaping, the sequencer otherwise
  logic seq_en, seq_we;
  row_addr_t seq_addr;
  logic [RE-1:0][ELEM_W-1:0] seq_wdata;
  assign sp_en_o    = (st == W_RESH_WAIT) ? rs_rd_en_i   : seq_en;
  assign sp_we_o    = (st == W_RESH_WAIT) ? 1'b0         : seq_we;
  assign sp_addr_o  = (st == W_RESH_WAIT) ? rs_rd_addr_i : seq_addr;
  assign sp_wdata_o = seq_wdata;

  always_comb begin
    seq_en = 1'b0; seq_we = 1'b0; seq_addr = '0; seq_wdata = row_q;
    case (st)
      W_PAD_RD: begin seq_en = 1'b1; seq_addr = base + pr; end
      W_PAD_WR: begin
        seq_en = 1'b1; seq_we = 1'b1; seq_addr = base + pr;
        for (int i = 0; i < RE; i++)
          seq_wdata[i] = ((32'(pr) * RE + 32'(i)) < cnt) ? row_q[i] : PAD_ELEM;
      end
      W_DRAIN: begin seq_en = (32'(ds) < 32'(s)) && slot_has[ds[SW-1:0]]; seq_addr = row_addr_t'(SEL_BASE) + row_addr_t'(ds); end
      W_SUBWR, W_SUBFLUSH: begin
        seq_en = (st == W_SUBWR) || (sub_fill != 0); seq_we = seq_en;
        seq_addr = row_addr_t'(S_BASE) + sub_rows; seq_wdata = sub_row;
      end
      default: ;
    endcase
  end

  // job for the current frontier vertex
  logic [31:0] deg_cap;
  assign deg_full = ptr_hi_i - ptr_lo_i;
  always_comb begin
    deg_cap = (deg_full > RE) ? RE : deg_full;
    sel_job_o = '0;
    sel_job_o.kind   = JOB_SELECT;
    sel_job_o.row_a  = row_addr_t'(sorted) + row_addr_t'(lo_q / RE);
    sel_job_o.offset = 8'(lo_q % RE);
    sel_job_o.deg    = 8'(deg_cap);
    sel_job_o.k      = k_eff;
    sel_job_o.row_c  = row_addr_t'(SEL_BASE) + row_addr_t'(s);
    sel_job_o.seed   = lfsr;
  end
  assign sel_valid_o = (st == W_JOB);

  assign sort_start_o  = (st == W_SORT_GO);
  assign sort_base_o   = base;
  assign sort_tmp_o    = tmp;
  assign sort_chunks_o = nch;
  assign rs_start_o    = (st == W_RESH_GO);
  assign rs_coo_base_o = sorted;
  assign rs_n_edges_o  = cnt;
  assign rs_n_nodes_o  = is_sub ? ri_count_i : n_nodes_i;
  assign ptr_idx_o     = front_mem[cur][fi[FW-1:0]];
  assign ri_clear_o    = (st == W_IDLE) && start_i;
  assign ri_req_o      = ((st == W_MAPB && bi < batch_i && bi < MAX_BATCH) || st == W_DMAP || st == W_EL) && ri_ready_i &&
                         !(st == W_EL && (ei == ($clog2(RE)+1)'(RE) || row_q[ei[$clog2(RE)-1:0]] == PAD_ELEM));
  always_comb begin
    case (st)
      W_MAPB:  ri_vid_o = batch_mem[bi[BW-1:0]];
      W_DMAP:  ri_vid_o = slot_v[ds[SW-1:0]];
      default: ri_vid_o = elem_src(row_q[ei[$clog2(RE)-1:0]]);
    endcase
  end

  always_ff @(posedge clk) begin
    if (bvid_we_i && !busy_o) batch_mem[bvid_idx_i[BW-1:0]] <= bvid_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; done_o <= 1'b0; err <= '0;
      cur <= 1'b0; front_cnt <= '0; next_cnt <= '0; fi <= '0;
      is_sub <= 1'b0; cnt <= '0; base <= '0; tmp <= '0; nch <= '0; pr <= '0; sorted <= '0;
      row_q <= '0; hop <= '0; bi <= '0; s <= '0; ds <= '0; slot_has <= '0;
      lo_q <= '0; lfsr <= 16'h1; ei <= '0; nv <= '0; u_q <= '0;
      sub_row <= '0; sub_fill <= '0; sub_rows <= '0; sub_edges <= '0; settle <= '0;
      cyc_order_o <= '0; cyc_reshape_o <= '0; cyc_sample_o <= '0;
    end else begin
      done_o <= 1'b0;
      if (ri_overflow_i) err[2] <= 1'b1;
      case (st)
        W_PAD_RD, W_PAD_WAIT, W_PAD_WR, W_SORT_GO, W_SORT_WAIT: cyc_order_o <= cyc_order_o + 1;
        W_RESH_GO, W_RESH_WAIT: cyc_reshape_o <= cyc_reshape_o + 1;
        W_IDLE, W_DONE, W_SUBFLUSH: ;
        default: cyc_sample_o <= cyc_sample_o + 1;
      endcase
      case (st)
        W_IDLE: if (start_i) begin
          err <= '0;
          is_sub <= 1'b0;
          cnt <= n_edges_i;
          base <= row_addr_t'(G_BASE); tmp <= row_addr_t'(G_TMP);
          nch <= pow2_chunks(n_edges_i);
          pr <= row_addr_t'(n_edges_i / RE);
          lfsr <= (seed_i == 0) ? 16'hBEEF : seed_i;
          sub_edges <= '0; sub_rows <= '0; sub_fill <= '0; sub_row <= {RE{PAD_ELEM}};
          cyc_order_o <= '0; cyc_reshape_o <= '0; cyc_sample_o <= '0;
          st <= W_PAD_RD;
        end

        // ---- padding to a power-of-two number of chunks
        W_PAD_RD: st <= (pr >= 2 * nch) ? W_SORT_GO : W_PAD_WAIT;
        W_PAD_WAIT: begin row_q <= sp_rdata_i; st <= W_PAD_WR; end
        W_PAD_WR: begin pr <= pr + 1'b1; st <= W_PAD_RD; end

        // ---- ordering and reshaping
        W_SORT_GO: st <= W_SORT_WAIT;
        W_SORT_WAIT: if (sort_done_i) begin sorted <= sort_result_i; st <= W_RESH_GO; end
        W_RESH_GO: st <= W_RESH_WAIT;
        W_RESH_WAIT: if (rs_done_i) begin
          if (is_sub) st <= W_DONE;
          else begin
            bi <= '0; front_cnt <= '0; cur <= 1'b0; hop <= 4'd1;
            st <= W_MAPB;
          end
        end

        // ---- batch vertices get the first new VIDs and form hop 1's frontier
        W_MAPB: begin
          if (bi >= batch_i || bi >= MAX_BATCH) begin
            fi <= '0; next_cnt <= '0;
            st <= W_GRP;
          end else if (ri_ready_i) st <= W_MAPB_WAIT;
        end
        W_MAPB_WAIT: if (ri_resp_valid_i) begin
          if (front_cnt < MAX_FRONT) begin
            front_mem[cur][front_cnt[FW-1:0]] <= batch_mem[bi[BW-1:0]];
            front_cnt <= front_cnt + 1;
          end else err[0] <= 1'b1;
          bi <= bi + 1;
          st <= W_MAPB;
        end

        // ---- issue one group of selection jobs
        W_GRP: begin s <= '0; slot_has <= '0; st <= W_PTR; end
        W_PTR: begin
          if (fi >= front_cnt || 32'(s) == N_UPE) begin
            settle <= 2'd2;
            st <= W_SETTLE;
          end else st <= W_PTR_WAIT;  // pointer pair arrives next cycle
        end
        W_PTR_WAIT: begin
          lo_q <= ptr_lo_i;
          slot_v[s[SW-1:0]] <= front_mem[cur][fi[FW-1:0]];
          if (ptr_hi_i == ptr_lo_i) begin  // no in-neighbours: no job
            s <= s + 1'b1; fi <= fi + 1;
            st <= W_PTR;
          end else st <= W_JOB;
        end
        W_JOB: if (sel_ready_i) begin
          slot_has[s[SW-1:0]] <= 1'b1;
          lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
          s <= s + 1'b1; fi <= fi + 1;
          st <= W_PTR;
        end
        W_SETTLE: begin settle <= settle - 1'b1; if (settle == 2'd1) st <= W_JOBWAIT; end
        W_JOBWAIT: if (upe_idle_i) begin ds <= '0; st <= W_DRAIN; end

        // ---- drain the group's result rows through the reindexer
        W_DRAIN: begin
          if (32'(ds) >= 32'(s)) st <= W_HOPEND;
          else if (!slot_has[ds[SW-1:0]]) ds <= ds + 1'b1;
          else st <= W_DRD;
        end
        W_DRD: begin row_q <= sp_rdata_i; st <= W_DMAP; end
        W_DMAP: if (ri_ready_i) st <= W_DMAP_WAIT;
        W_DMAP_WAIT: if (ri_resp_valid_i) begin nv <= ri_new_vid_i; ei <= '0; st <= W_EL; end
        W_EL: begin
          if (ei == ($clog2(RE)+1)'(RE) || row_q[ei[$clog2(RE)-1:0]] == PAD_ELEM) begin
            ds <= ds + 1'b1;
            st <= W_DRAIN;
          end else if (ri_ready_i) begin
            u_q <= elem_src(row_q[ei[$clog2(RE)-1:0]]);
            st <= W_EL_WAIT;
          end
        end
        W_EL_WAIT: if (ri_resp_valid_i) begin
          ei <= ei + 1'b1;
          if (hop < layers_i) begin
            if (next_cnt < MAX_FRONT) begin
              front_mem[~cur][next_cnt[FW-1:0]] <= u_q;
              next_cnt <= next_cnt + 1;
            end else err[0] <= 1'b1;
          end
          if (sub_edges < MAX_SUB_E) begin
            sub_row[sub_fill[$clog2(RE)-1:0]] <= make_elem(nv, ri_new_vid_i);
            sub_edges <= sub_edges + 1;
            if (sub_fill == ($clog2(RE)+1)'(RE - 1)) st <= W_SUBWR;
            else begin sub_fill <= sub_fill + 1'b1; st <= W_EL; end
          end else begin
            err[1] <= 1'b1;
            st <= W_EL;
          end
        end
        W_SUBWR: begin
          sub_rows <= sub_rows + 1'b1;
          sub_fill <= '0;
          sub_row <= {RE{PAD_ELEM}};
          st <= W_EL;
        end

        W_HOPEND: begin
          if (fi < front_cnt) st <= W_GRP;
          else if (hop < layers_i) begin
            hop <= hop + 1'b1;
            cur <= ~cur;
            front_cnt <= next_cnt;
            next_cnt <= '0;
            fi <= '0;
            st <= W_GRP;
          end else st <= W_SUBFLUSH;
        end

        // ---- convert the sampled subgraph
        W_SUBFLUSH: begin
          is_sub <= 1'b1;
          cnt <= sub_edges;
          base <= row_addr_t'(S_BASE); tmp <= row_addr_t'(S_TMP);
          nch <= pow2_chunks(sub_edges);
          pr <= row_addr_t'(sub_edges / RE);
          st <= W_PAD_RD;
        end

        W_DONE: begin done_o <= 1'b1; st <= W_IDLE; end
        default: st <= W_IDLE;
      endcase
    end
  end

endmodule
