// tb_scr_kernel: test of the SCR kernel (reshaper + reindexer + shared read
// port) at a reduced size (2 SCRs of width 4).
//
// Several random sorted edge lists are held in a row memory model (one row
// of W_SCR edges per address, data one cycle after rd_en) and reshaped; the
// pointer array read back through the shell port must equal the count of
// edges with a smaller destination, for each vertex and its successor. Then a
// random VID stream is reindexed: new VIDs must follow first-seen order, hits
// must report found, and the new-to-old table read through the port (address
// bit 31 set) must match. Reshaping time is checked against its bound: one
// evaluation cycle per window plus three per segment read.
`timescale 1ns/1ps
module tb_scr_kernel;
  import agnn_pkg::*;
  localparam int N_SCR = 2, W_SCR = 4, MAX_N = 64, MAP_DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rs_start = 0, rs_busy, rs_done, rs_rd_en;
  row_addr_t rs_base = 0, rs_rd_addr;
  logic [31:0] rs_ne = 0, rs_nn = 0, rs_cycles;
  logic [W_SCR-1:0][ELEM_W-1:0] rs_data;
  logic ri_clear = 0, ri_req = 0, ri_ready, ri_rv, ri_found, ri_ovf;
  vid_t ri_vid = 0, ri_new;
  logic [31:0] ri_count, bus_addr = 0, bus_rd, bus_rdn;
  logic [W_SCR-1:0][ELEM_W-1:0] mem [64];
  int checks = 0, failures = 0;

  scr_kernel #(.N_SCR(N_SCR), .W_SCR(W_SCR), .MAX_N(MAX_N), .MAP_DEPTH(MAP_DEPTH)) dut (
    .clk, .rst_n, .rs_start_i(rs_start), .rs_coo_base_i(rs_base), .rs_n_edges_i(rs_ne),
    .rs_n_nodes_i(rs_nn), .rs_busy_o(rs_busy), .rs_done_o(rs_done), .rs_cycles_o(rs_cycles),
    .rs_rd_en_o(rs_rd_en), .rs_rd_addr_o(rs_rd_addr), .rs_rd_data_i(rs_data),
    .ri_clear_i(ri_clear), .ri_req_i(ri_req), .ri_vid_i(ri_vid), .ri_ready_o(ri_ready),
    .ri_resp_valid_o(ri_rv), .ri_new_vid_o(ri_new), .ri_found_o(ri_found), .ri_count_o(ri_count),
    .ri_overflow_o(ri_ovf), .bus_addr_i(bus_addr), .bus_rdata_o(bus_rd), .bus_rdata_next_o(bus_rdn));

  always_ff @(posedge clk) if (rs_rd_en) rs_data <= mem[rs_rd_addr[5:0]];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    int dst [$];
    int old2new [int];
    int new2old [$];
    int t0, cyc, nseg, bound, hits;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int nn, ne;
      nn = (trial == 0) ? 2 : $urandom_range(1, 30);
      ne = (trial == 1) ? 0 : $urandom_range(0, 60);
      dst = {};
      for (int i = 0; i < ne; i++) dst.push_back($urandom_range(0, nn - 1));
      dst.sort();
      foreach (mem[r]) for (int e = 0; e < W_SCR; e++)
        mem[r][e] = (r * W_SCR + e < ne) ? make_elem(vid_t'(dst[r * W_SCR + e]), vid_t'($urandom_range(0, 99)))
                                          : PAD_ELEM;
      @(negedge clk); rs_start = 1; rs_base = 0; rs_ne = ne; rs_nn = nn;
      @(negedge clk); rs_start = 0;
      t0 = $time / 10;
      while (!rs_done) @(posedge clk);
      cyc = $time / 10 - t0;
      nseg = (ne + W_SCR - 1) / W_SCR;
      bound = 3 * nseg + (nn / N_SCR + 1) + 4;
      chk(cyc <= bound, $sformatf("reshape took %0d cycles, bound %0d", cyc, bound));
      for (int v = 0; v < nn; v++) begin
        int lo, hi;
        lo = 0; hi = 0;
        foreach (dst[i]) begin if (dst[i] < v) lo++; if (dst[i] < v + 1) hi++; end
        @(negedge clk); bus_addr = v;
        @(negedge clk);
        chk(bus_rd == lo && bus_rdn == hi, $sformatf("ptr[%0d] %0d/%0d exp %0d/%0d", v, bus_rd, bus_rdn, lo, hi));
      end
    end
    // reindexing
    @(negedge clk); ri_clear = 1; @(negedge clk); ri_clear = 0;
    hits = 0;
    for (int i = 0; i < 80; i++) begin
      int v, expn;
      bit f;
      v = $urandom_range(0, 40);
      f = old2new.exists(v);
      if (!f && new2old.size() >= MAP_DEPTH) continue;
      if (!f) begin old2new[v] = new2old.size(); new2old.push_back(v); end
      expn = old2new[v];
      while (!ri_ready) @(negedge clk);
      ri_req = 1; ri_vid = vid_t'(v);
      @(negedge clk); ri_req = 0;
      while (!ri_rv) @(negedge clk);
      chk(ri_new == vid_t'(expn) && ri_found == f, $sformatf("reindex %0d -> %0d exp %0d", v, ri_new, expn));
      if (f) hits++;
      @(negedge clk);
    end
    chk(ri_count == new2old.size(), "map count");
    chk(hits > 0 && hits < 80, "hits and misses");
    foreach (new2old[i]) begin
      @(negedge clk); bus_addr = 32'h8000_0000 | i;
      @(negedge clk);
      chk(bus_rd == new2old[i], $sformatf("table[%0d]", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
