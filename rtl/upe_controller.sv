// upe_controller: issues the UPE jobs that make up edge ordering, and passes
// sampling jobs through.
//
// Edge ordering of an edge array that occupies 2*n_chunks scratchpad rows
// starting at sort_base (one chunk = W elements = two rows, each element the
// concatenated {dst, src} pair, the array padded with all-ones elements):
//   1. splitting: one JOB_SORT per chunk, handed to the scheduler as fast as
//      idle UPEs appear (radix sort inside each UPE);
//   2. merging: rounds of JOB_MERGE jobs. Round r merges pairs of sorted runs
//      of 2^r chunks, ping-ponging between sort_base and sort_tmp; all merges
//      of a round run in parallel on different UPEs and the round ends when
//      the scheduler's scoreboard shows every UPE idle.
// When one run spans the whole array the controller raises sort_done_o and
// reports in sort_result_o which of the two regions holds the sorted edges.
// n_chunks must be a power of two.
//
// Sampling jobs (JOB_SELECT) from the workflow sequencer are forwarded to the
// scheduler while no ordering is in progress; all_idle_o reports when every
// issued job has completed.
//
// From the paper: splitting into UPE-width chunks, sorting each on a UPE,
// then merging on UPEs in parallel. This design's own: padding to a power of
// two chunks, the round barrier on the scoreboard, the two-region ping-pong.
module upe_controller
  import agnn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // ordering command
  input  logic       sort_start_i,
  input  row_addr_t  sort_base_i,
  input  row_addr_t  sort_tmp_i,
  input  row_addr_t  sort_chunks_i,
  input  logic [5:0] vid_bits_i,
  output logic       sort_done_o,
  output row_addr_t  sort_result_o,
  // sampling jobs
  input  logic       sel_valid_i,
  input  upe_job_t   sel_job_i,
  output logic       sel_ready_o,
  output logic       all_idle_o,
  // to the scheduler
  output logic       job_valid_o,
  output upe_job_t   job_o,
  input  logic       job_ready_i,
  input  logic       sched_idle_i,
  // cycle counters of the last ordering, for the host
  output logic [31:0] split_cycles_o,
  output logic [31:0] merge_cycles_o
);

  typedef enum logic [2:0] { C_IDLE, C_SPLIT, C_BARRIER, C_WAIT, C_MERGE, C_DONE } cstate_e;

  cstate_e   st;
  row_addr_t idx, n_jobs, run_rows, src, dst, chunks;
  logic      in_merge;
  logic [5:0] vb;
  logic [1:0] settle;

  always_comb begin
    job_o = '0;
    job_o.vid_bits = vb;
    job_valid_o = 1'b0;
    sel_ready_o = 1'b0;
    case (st)
      C_SPLIT: begin
        job_o.kind  = JOB_SORT;
        job_o.row_a = sort_base_i + 2 * idx;
        job_valid_o = 1'b1;
      end
      C_MERGE: begin
        job_o.kind  = JOB_MERGE;
        job_o.row_a = src + 2 * idx * run_rows;
        job_o.row_b = src + 2 * idx * run_rows + run_rows;
        job_o.row_c = dst + 2 * idx * run_rows;
        job_o.len   = run_rows;
        job_valid_o = 1'b1;
      end
      C_IDLE: begin
        job_o       = sel_job_i;
        job_valid_o = sel_valid_i;
        sel_ready_o = job_ready_i;
      end
      default: ;
    endcase
  end

  assign all_idle_o = sched_idle_i && (st == C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE;
      idx <= '0; n_jobs <= '0; run_rows <= '0; src <= '0; dst <= '0; chunks <= '0;
      vb <= 6'd32; settle <= '0; in_merge <= 1'b0;
      sort_done_o <= 1'b0; sort_result_o <= '0;
      split_cycles_o <= '0; merge_cycles_o <= '0;
    end else begin
      sort_done_o <= 1'b0;
      if (st != C_IDLE && st != C_DONE) begin
        if (in_merge) merge_cycles_o <= merge_cycles_o + 1;
        else          split_cycles_o <= split_cycles_o + 1;
      end
      case (st)
        C_IDLE: if (sort_start_i) begin
          vb <= vid_bits_i;
          chunks <= sort_chunks_i;
          n_jobs <= sort_chunks_i;
          idx <= '0;
          in_merge <= 1'b0;
          split_cycles_o <= '0; merge_cycles_o <= '0;
          src <= sort_base_i; dst <= sort_tmp_i;
          run_rows <= 2;
          st <= C_SPLIT;
        end
        C_SPLIT, C_MERGE: if (job_ready_i) begin
          if (idx + 1'b1 == n_jobs) begin
            st <= C_BARRIER;
            settle <= 2'd2;
          end
          idx <= idx + 1'b1;
        end
        C_BARRIER: begin  // let the scoreboard see the last issued job
          settle <= settle - 1'b1;
          if (settle == 2'd1) st <= C_WAIT;
        end
        C_WAIT: if (sched_idle_i) begin
          if (in_merge) begin
            src <= dst; dst <= src;
            run_rows <= run_rows << 1;
          end
          in_merge <= 1'b1;
          idx <= '0;
          // Runs after this round: (2*chunks rows) / (run length).
          if ((in_merge ? (run_rows << 1) : run_rows) >= 2 * chunks) st <= C_DONE;
          else begin
            n_jobs <= chunks / (in_merge ? (run_rows << 1) : run_rows);
            st <= C_MERGE;
          end
        end
        C_DONE: begin
          sort_done_o   <= 1'b1;
          sort_result_o <= src;
          st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
