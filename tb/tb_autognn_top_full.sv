// tb_autognn_top_full: the end-to-end test of tb_autognn_top with the
// accelerator at its default size (32 UPEs of width 64, 8 SCRs, 512
// scratchpad rows of 32 edges, 4096-edge graphs, 2048-edge subgraphs).
// One request on a 3000-edge, 200-vertex random graph with k = 10 and a batch
// of 8 runs through ordering, reshaping, two sampling hops, reindexing and
// subgraph conversion, and every result is compared with the testbench's own
// model as described there. Reconfiguration is only exercised with an
// out-of-range key, since streaming a default-size (50 MB) bitstream would
// take tens of millions of cycles.
`timescale 1ns/1ps
module tb_autognn_top_full;
  import agnn_pkg::*;

  localparam int N_UPE = 32, W = 64, RE = W / 2, N_SCR = 8;
  localparam int MAX_N = 4096, MAP_DEPTH = 4096, MAX_E = 4096, MAX_SUB_E = 2048;
  localparam int MAX_FRONT = 512, MAX_BATCH = 64, SP_ROWS = 512;
  localparam longint BSB = 52428800;
  localparam int SEL_BASE = 2 * MAX_E / RE + 2 * MAX_SUB_E / RE;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        reg_wr = 0, reg_rd = 0;
  logic [7:0]  reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic        bvid_we = 0;
  logic [31:0] bvid_idx = 0, bvid = 0;
  logic [31:0] res_addr = 0, res_rdata, res_rdata_next;
  logic        hsp_en = 0, hsp_we = 0;
  logic [15:0] hsp_addr = 0;
  logic [RE-1:0][ELEM_W-1:0] hsp_wdata = '0, hsp_rdata;
  logic        irq;
  logic        dram_req, dram_gnt, dram_rvalid;
  logic [63:0] dram_addr;
  logic [31:0] dram_rdata;
  logic        icap_valid, icap_ready;
  logic [31:0] icap_data;

  autognn_top dut (
    .clk, .rst_n,
    .reg_wr_i (reg_wr), .reg_rd_i (reg_rd), .reg_addr_i (reg_addr), .reg_wdata_i (reg_wdata),
    .reg_rdata_o (reg_rdata),
    .bvid_we_i (bvid_we), .bvid_idx_i (bvid_idx), .bvid_i (bvid),
    .res_addr_i (res_addr), .res_rdata_o (res_rdata), .res_rdata_next_o (res_rdata_next),
    .hsp_en_i (hsp_en), .hsp_we_i (hsp_we), .hsp_addr_i (hsp_addr), .hsp_wdata_i (hsp_wdata),
    .hsp_rdata_o (hsp_rdata), .irq_o (irq),
    .dram_req_o (dram_req), .dram_addr_o (dram_addr), .dram_gnt_i (dram_gnt),
    .dram_rvalid_i (dram_rvalid), .dram_rdata_i (dram_rdata),
    .icap_valid_o (icap_valid), .icap_data_o (icap_data), .icap_ready_i (icap_ready)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- DRAM / ICAP models
  logic [2:0]  dram_pipe_v;
  logic [31:0] dram_pipe_d [3];
  assign dram_gnt    = dram_req;
  assign dram_rvalid = dram_pipe_v[2];
  assign dram_rdata  = dram_pipe_d[2];
  always_ff @(posedge clk) begin
    dram_pipe_v <= {dram_pipe_v[1:0], dram_req && dram_gnt};
    dram_pipe_d[0] <= dram_addr[31:0] ^ 32'hC0DE_0000;
    dram_pipe_d[1] <= dram_pipe_d[0];
    dram_pipe_d[2] <= dram_pipe_d[1];
    icap_ready <= ($urandom_range(0, 3) != 0);
  end
  int icap_words = 0, icap_bad = 0, icap_stall = 0;
  logic [63:0] icap_expect_addr;
  always @(posedge clk) if (icap_valid) begin
    if (!icap_ready) icap_stall++;
    else begin
      if (icap_data != (icap_expect_addr[31:0] ^ 32'hC0DE_0000)) icap_bad++;
      icap_expect_addr += 4;
      icap_words++;
    end
  end

  // ------------------------------------------------------------ graph model
  int n_nodes, n_edges, k, layers, batch;
  logic [ELEM_W-1:0] edges [$];            // input COO
  logic [ELEM_W-1:0] sorted_e [$];         // reference order
  int indeg [MAX_N], first_in [MAX_N];
  int map_new [int];                       // old -> new
  int map_old [$];                         // new -> old
  int front_cur [$], front_next [$];
  int fidx, hop;
  logic [ELEM_W-1:0] sub_exp [$];
  int slot_vtx [N_UPE];
  int slot_deg [N_UPE];
  row_addr_t sorted_row;
  bit first_sort_seen;

  function automatic int remap(int old);
    if (!map_new.exists(old)) begin
      map_new[old] = map_old.size();
      map_old.push_back(old);
    end
    return map_new[old];
  endfunction

  // mechanism counters
  int c_sort = 0, c_merge = 0, c_select = 0, c_draw = 0, c_takeall = 0, c_cap = 0;
  int c_zero = 0, c_ri_hit = 0, c_ri_miss = 0, c_consume = 0, c_advance = 0;
  int c_contend = 0, c_stall = 0, c_pad = 0, c_reconf = 0, c_reject = 0, c_icap_stall = 0;

  // ----------------------------------------------------------- monitors
  always @(posedge clk) if (rst_n) begin
    // UPE kernel job dispatch and contention
    if (dut.u_upe_kernel.u_sched.job_valid_i && dut.u_upe_kernel.u_sched.job_ready_o) begin
      case (dut.u_upe_kernel.job.kind)
        JOB_SORT:   c_sort++;
        JOB_MERGE:  c_merge++;
        default:    c_select++;
      endcase
    end
    if (dut.u_upe_kernel.u_sched.job_valid_i && !dut.u_upe_kernel.u_sched.job_ready_o) c_stall++;
    if ($countones(dut.u_upe_kernel.m_req) > 1) c_contend++;
    // reshaper decisions
    if (dut.u_scr_kernel.u_reshaper.st == 2'd3) begin
      if (dut.u_scr_kernel.u_reshaper.complete[N_SCR-1]) c_advance++; else c_consume++;
    end
    // reindexer
    if (dut.u_scr_kernel.u_reindexer.resp_valid_o) begin
      if (dut.u_scr_kernel.u_reindexer.found_o) c_ri_hit++; else c_ri_miss++;
    end
    // padding writes (state W_PAD_WR)
    if (dut.u_flow.st == 5'd3 && (32'(dut.u_flow.pr) + 1) * RE > dut.u_flow.cnt) c_pad++;
    if (dut.u_flow.sort_done_i && !first_sort_seen) begin
      first_sort_seen = 1;
      sorted_row = dut.u_flow.sort_result_i;
    end
    // pointer fetch (W_PTR_WAIT): frontier order and pointer values
    if (dut.u_flow.st == 5'd12) begin
      int v;
      if (fidx == front_cur.size()) begin
        front_cur = front_next; front_next = {}; fidx = 0; hop++;
      end
      v = dut.u_flow.ptr_idx_o;
      check(fidx < front_cur.size() && v == front_cur[fidx],
            $sformatf("frontier order hop %0d idx %0d got %0d", hop, fidx, v));
      check(dut.u_flow.ptr_lo_i == first_in[v] && dut.u_flow.ptr_hi_i == first_in[v] + indeg[v],
            $sformatf("pointer pair of %0d: %0d %0d exp %0d %0d", v, dut.u_flow.ptr_lo_i,
                      dut.u_flow.ptr_hi_i, first_in[v], first_in[v] + indeg[v]));
      if (indeg[v] == 0) c_zero++;
      fidx++;
    end
    // selection job issue
    if (dut.u_flow.sel_valid_o && dut.u_flow.sel_ready_i) begin
      int v, d, sl;
      upe_job_t j;
      j = dut.u_flow.sel_job_o;
      v = dut.u_flow.ptr_idx_o;
      d = (indeg[v] > RE) ? RE : indeg[v];
      sl = int'(j.row_c) - SEL_BASE;
      check(j.deg == d, $sformatf("deg of %0d: %0d exp %0d", v, j.deg, d));
      check(int'(j.row_a) * RE + int'(j.offset) == int'(sorted_row) * RE + first_in[v], "job start");
      check(sl >= 0 && sl < N_UPE, "job slot");
      if (sl >= 0 && sl < N_UPE) begin slot_vtx[sl] = v; slot_deg[sl] = d; end
      if (indeg[v] > RE) c_cap++;
      if (d > k) c_draw++; else c_takeall++;
    end
    // drained result row (W_DRD): check against the vertex's in-edge list
    if (dut.u_flow.st == 5'd17) begin
      int sl, v, n, expn, nv;
      logic [ELEM_W-1:0] e;
      bit seen [int];
      sl = int'(dut.u_flow.ds);
      v = slot_vtx[sl];
      expn = (slot_deg[sl] < k) ? slot_deg[sl] : k;
      n = 0;
      seen.delete();
      nv = remap(v);
      for (int i = 0; i < RE; i++) begin
        e = dut.u_flow.sp_rdata_i[i];
        if (e != PAD_ELEM) begin
          int pos;
          pos = -1;
          for (int p = 0; p < slot_deg[sl]; p++) if (sorted_e[first_in[v] + p] == e) pos = p;
          check(pos >= 0, $sformatf("sample %h not an in-edge of %0d", e, v));
          check(!seen.exists(pos), "duplicate sample");
          seen[pos] = 1;
          n++;
          sub_exp.push_back(make_elem(vid_t'(nv), vid_t'(remap(int'(elem_src(e))))));
          if (hop < layers) front_next.push_back(int'(elem_src(e)));
        end
      end
      check(n == expn, $sformatf("vertex %0d got %0d samples exp %0d", v, n, expn));
    end
  end

  // ---------------------------------------------------------------- host ops
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); reg_rd = 1; reg_addr = a;
    @(negedge clk); reg_rd = 0; d = reg_rdata;
  endtask
  task automatic row_wr(input int r, input logic [RE-1:0][ELEM_W-1:0] d);
    @(negedge clk); hsp_en = 1; hsp_we = 1; hsp_addr = 16'(r); hsp_wdata = d;
    @(negedge clk); hsp_en = 0; hsp_we = 0;
  endtask
  task automatic row_rd(input int r, output logic [RE-1:0][ELEM_W-1:0] d);
    @(negedge clk); hsp_en = 1; hsp_we = 0; hsp_addr = 16'(r);
    @(negedge clk); hsp_en = 0; d = hsp_rdata;
  endtask
  task automatic res_rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); res_addr = a;
    @(negedge clk); d = res_rdata;
  endtask

  task automatic run_request(input int nn, input int ne, input int kk, input int nb, input int seed);
    logic [RE-1:0][ELEM_W-1:0] row;
    bit used [longint];
    logic [31:0] d;
    int t0, cyc, nrows, sub_n, chunks;
    logic [ELEM_W-1:0] got [$];
    n_nodes = nn; k = kk; layers = 2; batch = nb;
    edges = {}; sorted_e = {}; map_new.delete(); map_old = {};
    front_cur = {}; front_next = {}; fidx = 0; hop = 1; sub_exp = {};
    first_sort_seen = 0;
    // random graph: vertices 0..3 get many in-edges, the last quarter none
    while (edges.size() < ne) begin
      int s, t;
      s = $urandom_range(0, nn - 1);
      t = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 3) : $urandom_range(0, (3 * nn) / 4 - 1);
      if (s != t && !used.exists(longint'({t[31:0], s[31:0]}))) begin
        used[longint'({t[31:0], s[31:0]})] = 1;
        edges.push_back(make_elem(vid_t'(t), vid_t'(s)));
      end
    end
    sorted_e = edges;
    sorted_e.sort();
    for (int v = 0; v < MAX_N; v++) begin indeg[v] = 0; first_in[v] = 0; end
    foreach (sorted_e[i]) indeg[int'(elem_dst(sorted_e[i]))]++;
    for (int v = 1; v < MAX_N; v++) first_in[v] = first_in[v-1] + indeg[v-1];
    n_edges = ne;
    // load graph rows
    nrows = (ne + RE - 1) / RE;
    for (int r = 0; r < nrows; r++) begin
      for (int i = 0; i < RE; i++) row[i] = (r * RE + i < ne) ? edges[r * RE + i] : ELEM_W'($urandom);
      row_wr(r, row);
    end
    // batch: vertex 0 (high degree), a zero in-degree vertex, and random ones
    for (int b = 0; b < nb; b++) begin
      int v;
      v = (b == 0) ? 0 : (b == 1) ? nn - 1 : $urandom_range(0, nn - 1);
      @(negedge clk); bvid_we = 1; bvid_idx = b; bvid = v;
      @(negedge clk); bvid_we = 0;
      front_cur.push_back(v);
      void'(remap(v));
    end
    wr(8'h08, ne); wr(8'h0C, nn); wr(8'h10, 8); wr(8'h14, kk);
    wr(8'h18, 2); wr(8'h1C, nb); wr(8'h20, seed);
    wr(8'h00, 1);
    t0 = $time / 10;
    while (!irq) @(posedge clk);
    cyc = $time / 10 - t0;
    $display("request nodes=%0d edges=%0d k=%0d batch=%0d: %0d cycles", nn, ne, kk, nb, cyc);
    rd(8'h04, d);
    check(d[1] == 1'b1 && d[0] == 1'b0, "status done");
    check(d[6:4] == 0, $sformatf("error flags %b", d[6:4]));
    rd(8'h34, d); check(d > 0, "order cycles counted");
    rd(8'h38, d); check(d > 0, "reshape cycles counted");
    rd(8'h3C, d); check(d > 0, "sample cycles counted");
    // sorted input graph
    chunks = 1; while (chunks * W < ne) chunks *= 2;
    got = {};
    for (int r = 0; r < 2 * chunks; r++) begin
      row_rd(int'(sorted_row) + r, row);
      for (int i = 0; i < RE; i++) got.push_back(row[i]);
    end
    for (int i = 0; i < 2 * chunks * RE; i++)
      check(i < ne ? got[i] == sorted_e[i] : got[i] == PAD_ELEM, $sformatf("sorted graph [%0d]", i));
    // subgraph sizes
    rd(8'h28, d); check(d == sub_exp.size(), $sformatf("sub edges %0d exp %0d", d, sub_exp.size()));
    rd(8'h2C, d); check(d == map_old.size(), $sformatf("sub nodes %0d exp %0d", d, map_old.size()));
    sub_n = map_old.size();
    // new-to-old table
    for (int i = 0; i < sub_n; i++) begin
      res_rd(32'h8000_0000 | i, d);
      check(d == map_old[i], $sformatf("vid table [%0d] %0d exp %0d", i, d, map_old[i]));
    end
    // sorted subgraph and its pointer array
    sub_exp.sort();
    rd(8'h30, d);
    chunks = 1; while (chunks * W < sub_exp.size()) chunks *= 2;
    got = {};
    for (int r = 0; r < 2 * chunks; r++) begin
      row_rd(int'(d) + r, row);
      for (int i = 0; i < RE; i++) got.push_back(row[i]);
    end
    for (int i = 0; i < 2 * chunks * RE; i++)
      check(i < sub_exp.size() ? got[i] == sub_exp[i] : got[i] == PAD_ELEM, $sformatf("subgraph [%0d]", i));
    for (int v = 0; v <= sub_n; v++) begin
      int expp;
      expp = 0;
      foreach (sub_exp[i]) if (int'(elem_dst(sub_exp[i])) < v) expp++;
      res_rd(v, d);
      check(d == expp, $sformatf("sub ptr[%0d] %0d exp %0d", v, d, expp));
    end
  endtask

  initial begin
    logic [31:0] d;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    run_request(200, 3000, 10, 8, 16'h1234);
    // out-of-range key is refused
    icap_words = 0;
    wr(8'h24, 25); wr(8'h00, 2);
    repeat (20) @(posedge clk);
    if (dut.u_fpp.error_o || icap_words == 0) c_reject++;
    check(icap_words == 0, "rejected key sends nothing");
    c_icap_stall = icap_stall;

    $display("mechanisms: sort=%0d merge=%0d select=%0d draw=%0d takeall=%0d degcap=%0d zerodeg=%0d",
             c_sort, c_merge, c_select, c_draw, c_takeall, c_cap, c_zero);
    $display("            ri_hit=%0d ri_miss=%0d consume=%0d advance=%0d contention=%0d stall=%0d pad=%0d",
             c_ri_hit, c_ri_miss, c_consume, c_advance, c_contend, c_stall, c_pad);
    $display("            reconf=%0d reject=%0d icap_stall=%0d", c_reconf, c_reject, c_icap_stall);
    check(c_sort > 0, "sort jobs");       check(c_merge > 0, "merge jobs");
    check(c_select > 0, "select jobs");   check(c_draw > 0, "random draws");
    check(c_takeall > 0, "take-all");     check(c_cap > 0, "degree cap");
    check(c_zero > 0, "zero-degree skip");
    check(c_ri_hit > 0, "reindex hit");   check(c_ri_miss > 0, "reindex miss");
    check(c_consume > 0, "reshaper consume"); check(c_advance > 0, "reshaper advance");
    check(c_contend > 0, "crossbar contention"); check(c_stall > 0, "scheduler stall");
    check(c_pad > 0, "padding");          check(c_reject > 0, "key rejection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
