// Self-checking test of the UPE kernel (controller, scheduler, engines,
// crossbar, scratchpad) at a reduced size: 4 UPEs of width 16.
// Random edge arrays of 1, 2, 8 and 16 chunks (padded with all-ones
// elements) are written through scratchpad port B, ordered, and read back;
// the result must equal the testbench's own sort of the same edges. Then a
// burst of sampling jobs is issued and every result row is checked for the
// right number of distinct neighbours of the right vertex.
module tb_upe_kernel;
  import agnn_pkg::*;
  localparam int unsigned N_UPE = 4;
  localparam int unsigned W = 16;
  localparam int unsigned RE = W / 2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sort_start = 0, sort_done, sel_valid = 0, sel_ready, all_idle;
  row_addr_t sort_base = 0, sort_tmp = 64, sort_chunks = 1, sort_result;
  logic [5:0] vid_bits = 10;
  upe_job_t sel_job = '0;
  logic [31:0] split_cyc, merge_cyc;
  logic sp_en = 0, sp_we = 0;
  row_addr_t sp_addr = 0;
  logic [RE-1:0][63:0] sp_wdata = '0, sp_rdata;

  upe_kernel #(.N_UPE(N_UPE), .W(W), .SP_ROWS(256)) dut (
    .clk, .rst_n,
    .sort_start_i (sort_start), .sort_base_i (sort_base), .sort_tmp_i (sort_tmp),
    .sort_chunks_i (sort_chunks), .vid_bits_i (vid_bits),
    .sort_done_o (sort_done), .sort_result_o (sort_result),
    .sel_valid_i (sel_valid), .sel_job_i (sel_job), .sel_ready_o (sel_ready), .all_idle_o (all_idle),
    .split_cycles_o (split_cyc), .merge_cycles_o (merge_cyc),
    .sp_en_i (sp_en), .sp_we_i (sp_we), .sp_addr_i (sp_addr), .sp_wdata_i (sp_wdata), .sp_rdata_o (sp_rdata)
  );

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic wr_row(input row_addr_t a, input logic [RE-1:0][63:0] d);
    @(negedge clk); sp_en = 1; sp_we = 1; sp_addr = a; sp_wdata = d;
    @(negedge clk); sp_en = 0; sp_we = 0;
  endtask
  task automatic rd_row(input row_addr_t a, output logic [RE-1:0][63:0] d);
    @(negedge clk); sp_en = 1; sp_we = 0; sp_addr = a;
    @(negedge clk); sp_en = 0; d = sp_rdata;
  endtask

  initial begin
    logic [63:0] ref_q [$];
    logic [RE-1:0][63:0] row;
    int nch, ne, cyc, nsel;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (ref_q[i]) ;
    for (int t = 0; t < 4; t++) begin
      nch = (t == 0) ? 1 : (t == 1) ? 2 : (t == 2) ? 8 : 16;
      ne = nch * W - (t * 3);    // last few positions are padding
      ref_q.delete();
      for (int r = 0; r < 2 * nch; r++) begin
        for (int i = 0; i < RE; i++) begin
          if (r * RE + i < ne) row[i] = {32'($urandom % 1000), 32'($urandom % 1000)};
          else row[i] = '1;
          ref_q.push_back(row[i]);
        end
        wr_row(row_addr_t'(r), row);
      end
      ref_q.sort();
      @(negedge clk);
      sort_chunks = row_addr_t'(nch); sort_start = 1;
      @(negedge clk); sort_start = 0;
      cyc = 1;
      while (!sort_done) begin @(negedge clk); cyc++; end
      for (int r = 0; r < 2 * nch; r++) begin
        rd_row(sort_result + row_addr_t'(r), row);
        for (int i = 0; i < RE; i++) begin
          checks++;
          if (row[i] != ref_q[r * RE + i]) begin
            failures++;
            if (failures < 8) $display("t=%0d row %0d el %0d got %h exp %h", t, r, i, row[i], ref_q[r * RE + i]);
          end
        end
      end
      $display("ordering %0d chunks: %0d cycles (split %0d, merge %0d)", nch, cyc, split_cyc, merge_cyc);
    end

    // sampling burst: 12 jobs, each a window of 8 neighbours of vertex 500+j
    for (int j = 0; j < 12; j++) begin
      for (int i = 0; i < RE; i++) row[i] = {32'(500 + j), 32'(i)};
      wr_row(row_addr_t'(128 + 2 * j), row);
      wr_row(row_addr_t'(129 + 2 * j), row);
    end
    for (int j = 0; j < 12; j++) begin
      @(negedge clk);
      sel_job = '0; sel_job.kind = JOB_SELECT; sel_job.row_a = row_addr_t'(128 + 2 * j);
      sel_job.offset = 8'(j % 4); sel_job.deg = 8'd6; sel_job.k = 8'(2 + j % 5);
      sel_job.row_c = row_addr_t'(160 + j); sel_job.seed = 16'(j * 77 + 1);
      sel_valid = 1;
      while (!sel_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk); sel_valid = 0;
    repeat (3) @(negedge clk);
    while (!all_idle) @(negedge clk);
    for (int j = 0; j < 12; j++) begin
      rd_row(row_addr_t'(160 + j), row);
      nsel = 0;
      for (int i = 0; i < RE; i++) if (row[i] != '1) begin
        nsel++;
        checks++;
        if (row[i][63:32] != 32'(500 + j) || row[i][31:0] < 32'(j % 4) || row[i][31:0] >= 32'(j % 4 + 6)
            || (i > 0 && row[i] <= row[i-1])) begin
          failures++; $display("job %0d bad sample %h", j, row[i]);
        end
      end
      checks++;
      if (nsel != ((2 + j % 5) < 6 ? (2 + j % 5) : 6)) begin failures++; $display("job %0d got %0d samples", j, nsel); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
