// upe_engine: one UPE together with the sequencer that runs a whole job on it.
//
// The UPE scheduler hands a job (agnn_pkg::upe_job_t) to an idle engine; the
// engine works through it on its own, reaching the shared scratchpad through
// the UPE crossbar one row (W/2 elements) at a time, and pulses done_o when
// it has written its result back. Three jobs exist:
//
//  JOB_SORT   Radix sort of one W-element chunk (rows row_a, row_a+1) in place.
//             Each radix digit is one key bit, least significant first: the
//             low vid_bits bits of the source VID, then of the destination VID,
//             so the chunk ends up ordered by (dst, src). A digit pass takes two
//             UPE cycles: the elements whose bit is 0 are compacted to the left,
//             then the elements whose bit is 1 are compacted to the right (the
//             UPE is fed the mirrored array and its result mirrored back). The
//             two results interleave without overlap because the chunk is full.
//  JOB_MERGE  Merge of two sorted runs of len rows each (row_a.., row_b..) into
//             rows row_c.. following the w/2-at-a-time buffer merge: the buffer
//             holds W elements, is sorted (by the same radix sort), its lower
//             half is written out, and the lower half is refilled with the next
//             w/2 elements of the run whose next element is smaller. A run that
//             is used up counts as +infinity; when both are used up the upper
//             half is written as well.
//  JOB_SELECT Unique random selection of k of the deg elements that start at
//             element `offset` of row row_a. The window is first aligned with
//             one UPE pass. An index array 0..deg-1 then holds the unsampled
//             positions; each draw picks r = (lfsr * remaining) >> 16, extracts
//             index r with a one-hot condition, marks it in the sampled bitmap,
//             and removes it from the index array with the inverted condition.
//             A final pass with the bitmap as condition extracts the sampled
//             edges, which are written to row row_c followed by padding
//             elements. When deg <= k every element is taken.
//
// Memory port: req_o with we_o/addr_o/wdata_o is held until gnt_i; read data
// arrives with rvalid_i one cycle after the grant. Requires deg <= W/2 and
// k <= W/2 (the caller caps them). W must be a power of two.
//
// From the paper: radix sort by set-partitioning, the merge of Algorithm 1
// and the selection steps (random index, one-hot extract, bitmap, final
// extract). This design's own: placing a sequencer next to every UPE, the
// handling of exhausted runs, the LFSR and the scaled-random draw, the
// W/2 limits on deg and k, and the row-wide memory port.
module upe_engine
  import agnn_pkg::*;
#(
  parameter int unsigned W  = 64,
  parameter int unsigned RE = W / 2   // elements per scratchpad row
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start_i,
  input  upe_job_t               job_i,
  output logic                   busy_o,
  output logic                   done_o,
  // scratchpad row port
  output logic                   req_o,
  output logic                   we_o,
  output row_addr_t              addr_o,
  output logic [RE-1:0][ELEM_W-1:0] wdata_o,
  input  logic                   gnt_i,
  input  logic                   rvalid_i,
  input  logic [RE-1:0][ELEM_W-1:0] rdata_i
);

  localparam int unsigned CW = $clog2(W) + 1;

  typedef enum logic [4:0] {
    S_IDLE, S_MEM_REQ, S_MEM_WAIT,
    S_SORT_RD1, S_RADIX0, S_RADIX1, S_SORT_WR0, S_SORT_WR1,
    S_M_RDB, S_M_PFA, S_M_PFB, S_M_OUT, S_M_NEXT, S_M_REFILL,
    S_S_RD1, S_S_ALIGN, S_S_DRAW, S_S_REMOVE, S_S_FINAL, S_S_WR,
    S_DONE
  } state_e;

  typedef enum logic [1:0] { SL_LO, SL_HI, SL_ROWA, SL_ROWB } slot_e;

  state_e   state, ret_state;
  slot_e    mem_slot;
  upe_job_t job;

  logic [W-1:0][ELEM_W-1:0]  buf_q;    // working buffer (chunk, merge buffer, neighbours)
  logic [W-1:0][ELEM_W-1:0]  aux_q;    // zero-compaction result / index array
  logic [W-1:0]              auxv_q;
  logic [RE-1:0][ELEM_W-1:0] rowa_q, rowb_q;  // merge: next unread row of A and B
  logic                      rowa_ok, rowb_ok;
  row_addr_t                 ra, rb, rc;       // merge: rows of A/B consumed, rows of C written
  logic [5:0]                pass;             // radix digit
  logic [CW-1:0]             remain;           // select: unsampled count
  logic [7:0]                drawn;            // select: draws done
  logic [W-1:0]              bitmap;           // select: sampled positions
  logic [15:0]               lfsr;

  // Memory request registers
  logic                      mreq, mwe;
  row_addr_t                 maddr;
  logic [RE-1:0][ELEM_W-1:0] mwdata;

  assign req_o   = (state == S_MEM_REQ);
  assign we_o    = mwe;
  assign addr_o  = maddr;
  assign wdata_o = mwdata;
  assign busy_o  = (state != S_IDLE);

  // ---------------------------------------------------------------------------
  // The UPE and its input multiplexers
  // ---------------------------------------------------------------------------
  logic [W-1:0][ELEM_W-1:0] upe_in, upe_out;
  logic [W-1:0]             upe_cond, upe_vout;
  logic [CW-1:0]            upe_cnt;

  upe #(.N(W), .DW(ELEM_W), .CW(CW)) u_upe (
    .node_i  (upe_in),
    .cond_i  (upe_cond),
    .node_o  (upe_out),
    .valid_o (upe_vout),
    .count_o (upe_cnt)
  );

  logic [5:0]   vb, bitpos;
  logic [W-1:0] keybit;
  logic [W-1:0] window;
  logic [W-1:0] onehot;
  logic [W-1:0] live;     // positions 0..remain-1 of the index array
  logic [CW-1:0] rnd_idx;
  logic [31:0]  rnd_prod;

  always_comb begin
    vb = (job.vid_bits == 6'd0) ? 6'd1 : ((job.vid_bits > 6'd32) ? 6'd32 : job.vid_bits);
    bitpos = (pass < vb) ? pass : 6'(6'd32 + pass - vb);
    for (int i = 0; i < W; i++) begin
      keybit[i] = buf_q[i][bitpos];
      window[i] = (i >= int'(job.offset)) && (i < int'(job.offset) + int'(job.deg));
      live[i]   = (i < int'(remain));
    end
    rnd_prod = 32'(lfsr) * 32'(remain);
    rnd_idx  = CW'(rnd_prod >> 16);
    onehot   = W'(1) << rnd_idx;
  end

  always_comb begin
    upe_in   = buf_q;
    upe_cond = '0;
    case (state)
      S_RADIX0:   upe_cond = ~keybit;
      S_RADIX1: begin
        for (int i = 0; i < W; i++) begin
          upe_in[i]   = buf_q[W-1-i];
          upe_cond[i] = keybit[W-1-i];
        end
      end
      S_S_ALIGN:  upe_cond = window;
      S_S_DRAW:   begin upe_in = aux_q; upe_cond = onehot; end
      S_S_REMOVE: begin upe_in = aux_q; upe_cond = live & ~onehot; end
      S_S_FINAL:  upe_cond = bitmap;
      default: ;
    endcase
  end

  // Mirrored result of the ones-compaction, i.e. ones packed to the right.
  logic [W-1:0][ELEM_W-1:0] ones_right;
  always_comb begin
    for (int i = 0; i < W; i++) ones_right[i] = upe_out[W-1-i];
  end

  logic last_pass;
  assign last_pass = (pass == 6'(2 * vb - 1));

  // Merge: take the next refill from A?
  logic take_a;
  assign take_a = rowa_ok && (!rowb_ok || (rowa_q[0] < rowb_q[0]));

  // ---------------------------------------------------------------------------
  // Sequencer
  // ---------------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ret_state <= S_IDLE;
      mem_slot  <= SL_LO;
      job       <= '0;
      buf_q     <= '0;
      aux_q     <= '0;
      auxv_q    <= '0;
      rowa_q    <= '0;
      rowb_q    <= '0;
      rowa_ok   <= 1'b0;
      rowb_ok   <= 1'b0;
      ra        <= '0;
      rb        <= '0;
      rc        <= '0;
      pass      <= '0;
      remain    <= '0;
      drawn     <= '0;
      bitmap    <= '0;
      lfsr      <= 16'h1;
      mreq      <= 1'b0;
      mwe       <= 1'b0;
      maddr     <= '0;
      mwdata    <= '0;
      done_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (state)
        S_IDLE: if (start_i) begin
          job <= job_i;
          pass <= '0;
          mwe <= 1'b0;
          maddr <= job_i.row_a;
          mem_slot <= SL_LO;
          state <= S_MEM_REQ;
          case (job_i.kind)
            JOB_SORT:  ret_state <= S_SORT_RD1;
            JOB_MERGE: begin ret_state <= S_M_RDB; ra <= 1; rb <= 1; rc <= '0; end
            default: begin
              ret_state <= S_S_RD1;
              lfsr <= (job_i.seed == 16'd0) ? 16'hACE1 : job_i.seed;
            end
          endcase
        end

        // Generic one-row memory access; returns to ret_state.
        S_MEM_REQ: if (gnt_i) state <= mwe ? ret_state : S_MEM_WAIT;
        S_MEM_WAIT: if (rvalid_i) begin
          case (mem_slot)
            SL_LO:   for (int i = 0; i < RE; i++) buf_q[i]    <= rdata_i[i];
            SL_HI:   for (int i = 0; i < RE; i++) buf_q[RE+i] <= rdata_i[i];
            SL_ROWA: rowa_q <= rdata_i;
            default: rowb_q <= rdata_i;
          endcase
          state <= ret_state;
        end

        // ------------------------------------------------------------- sort
        S_SORT_RD1: begin
          maddr <= job.row_a + 1'b1; mem_slot <= SL_HI; mwe <= 1'b0;
          ret_state <= S_RADIX0; state <= S_MEM_REQ;
        end
        S_RADIX0: begin
          aux_q  <= upe_out;
          auxv_q <= upe_vout;
          state  <= S_RADIX1;
        end
        S_RADIX1: begin
          for (int i = 0; i < W; i++) buf_q[i] <= auxv_q[i] ? aux_q[i] : ones_right[i];
          if (last_pass) begin
            pass  <= '0;
            state <= (job.kind == JOB_SORT) ? S_SORT_WR0 : S_M_OUT;
          end else begin
            pass  <= pass + 1'b1;
            state <= S_RADIX0;
          end
        end
        S_SORT_WR0: begin
          mwe <= 1'b1; maddr <= job.row_a;
          for (int i = 0; i < RE; i++) mwdata[i] <= buf_q[i];
          ret_state <= S_SORT_WR1; state <= S_MEM_REQ;
        end
        S_SORT_WR1: begin
          mwe <= 1'b1; maddr <= job.row_a + 1'b1;
          for (int i = 0; i < RE; i++) mwdata[i] <= buf_q[RE+i];
          ret_state <= S_DONE; state <= S_MEM_REQ;
        end

        // ------------------------------------------------------------ merge
        S_M_RDB: begin
          maddr <= job.row_b; mem_slot <= SL_HI; mwe <= 1'b0;
          ret_state <= S_M_PFA; state <= S_MEM_REQ;
        end
        S_M_PFA: begin
          rowa_ok <= (ra < job.len);
          if (ra < job.len) begin
            maddr <= job.row_a + ra; mem_slot <= SL_ROWA; mwe <= 1'b0;
            ret_state <= S_M_PFB; state <= S_MEM_REQ;
          end else state <= S_M_PFB;
        end
        S_M_PFB: begin
          rowb_ok <= (rb < job.len);
          if (rb < job.len) begin
            maddr <= job.row_b + rb; mem_slot <= SL_ROWB; mwe <= 1'b0;
            ret_state <= S_RADIX0; state <= S_MEM_REQ;
          end else state <= S_RADIX0;
        end
        S_M_OUT: begin  // buffer sorted: emit its lower half
          mwe <= 1'b1; maddr <= job.row_c + rc;
          for (int i = 0; i < RE; i++) mwdata[i] <= buf_q[i];
          rc <= rc + 1'b1;
          ret_state <= S_M_NEXT; state <= S_MEM_REQ;
        end
        S_M_NEXT: begin
          if (!rowa_ok && !rowb_ok) begin
            mwe <= 1'b1; maddr <= job.row_c + rc;
            for (int i = 0; i < RE; i++) mwdata[i] <= buf_q[RE+i];
            ret_state <= S_DONE; state <= S_MEM_REQ;
          end else begin
            for (int i = 0; i < RE; i++) buf_q[i] <= take_a ? rowa_q[i] : rowb_q[i];
            state <= S_M_REFILL;
            if (take_a) ra <= ra + 1'b1; else rb <= rb + 1'b1;
          end
        end
        S_M_REFILL: begin  // fetch the next row of the run just used
          if (take_a) begin
            rowa_ok <= (ra < job.len);
            if (ra < job.len) begin
              maddr <= job.row_a + ra; mem_slot <= SL_ROWA; mwe <= 1'b0;
              ret_state <= S_RADIX0; state <= S_MEM_REQ;
            end else state <= S_RADIX0;
          end else begin
            rowb_ok <= (rb < job.len);
            if (rb < job.len) begin
              maddr <= job.row_b + rb; mem_slot <= SL_ROWB; mwe <= 1'b0;
              ret_state <= S_RADIX0; state <= S_MEM_REQ;
            end else state <= S_RADIX0;
          end
        end

        // ----------------------------------------------------------- select
        S_S_RD1: begin
          maddr <= job.row_a + 1'b1; mem_slot <= SL_HI; mwe <= 1'b0;
          ret_state <= S_S_ALIGN; state <= S_MEM_REQ;
        end
        S_S_ALIGN: begin
          buf_q <= upe_out;
          for (int i = 0; i < W; i++) aux_q[i] <= ELEM_W'(i);
          remain <= CW'(job.deg);
          drawn  <= '0;
          if (job.deg <= job.k) begin
            for (int i = 0; i < W; i++) bitmap[i] <= (i < int'(job.deg));
            state <= S_S_FINAL;
          end else begin
            bitmap <= '0;
            state  <= S_S_DRAW;
          end
        end
        S_S_DRAW: begin   // one-hot condition extracts the drawn index
          bitmap[upe_out[0][$clog2(W)-1:0]] <= 1'b1;
          state <= S_S_REMOVE;
        end
        S_S_REMOVE: begin // the unsampled index array loses that element
          aux_q  <= upe_out;
          remain <= remain - 1'b1;
          drawn  <= drawn + 1'b1;
          lfsr   <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
          state  <= (drawn + 1'b1 == job.k) ? S_S_FINAL : S_S_DRAW;
        end
        S_S_FINAL: begin
          buf_q <= upe_out;
          auxv_q <= upe_vout;
          state <= S_S_WR;
        end
        S_S_WR: begin
          mwe <= 1'b1; maddr <= job.row_c;
          for (int i = 0; i < RE; i++) mwdata[i] <= auxv_q[i] ? buf_q[i] : PAD_ELEM;
          ret_state <= S_DONE; state <= S_MEM_REQ;
        end

        S_DONE: begin
          done_o <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{upe_cnt, mreq};

endmodule
