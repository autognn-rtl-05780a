// Self-checking test of upe_engine against a row memory model in the
// testbench (grant withheld at random, read data one cycle after grant).
//  * SORT: random chunks are sorted in place; result compared with a
//    reference sort of the same elements.
//  * MERGE: two sorted runs (prepared by the testbench) are merged; result
//    compared with the reference merge, for several run lengths.
//  * SELECT: k of deg neighbours at an unaligned offset; checked that exactly
//    min(k, deg) distinct elements of the window come back, followed by padding.
// Sort-job cycle count is checked against 2 cycles per radix digit plus the
// row transfers.
module tb_upe_engine;
  import agnn_pkg::*;
  localparam int unsigned W = 16;
  localparam int unsigned RE = W / 2;
  localparam int unsigned ROWS = 64;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, req, we, gnt, rvalid;
  upe_job_t job;
  row_addr_t addr;
  logic [RE-1:0][63:0] wdata, rdata;
  logic [RE-1:0][63:0] mem [ROWS];

  upe_engine #(.W(W)) dut (.clk, .rst_n, .start_i(start), .job_i(job), .busy_o(busy), .done_o(done),
    .req_o(req), .we_o(we), .addr_o(addr), .wdata_o(wdata), .gnt_i(gnt), .rvalid_i(rvalid), .rdata_i(rdata));

  // memory model
  always_ff @(posedge clk) begin
    rvalid <= 1'b0;
    if (req && gnt) begin
      if (we) mem[addr] <= wdata;
      else begin rdata <= mem[addr]; rvalid <= 1'b1; end
    end
  end
  always_ff @(posedge clk) gnt <= ($urandom % 4) != 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic run(input upe_job_t j, output int cycles);
    @(negedge clk);
    job = j; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic logic [63:0] el(int r, int i);
    return mem[r][i];
  endfunction

  initial begin
    logic [63:0] ref_a [$];
    logic [63:0] ra_q [$];
    logic [63:0] rb_q [$];
    upe_job_t j;
    int cyc, vb, len, deg, k, off, n;
    logic [63:0] got [$];
    start = 0; job = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- SORT
    for (int t = 0; t < 12; t++) begin
      vb = (t < 6) ? 5 : 12;
      ref_a.delete();
      for (int i = 0; i < W; i++) begin
        logic [63:0] e;
        e = {32'($urandom % (1 << vb)), 32'($urandom % (1 << vb))};
        if (t == 3 && i > 10) e = '1;     // padding elements sort last
        mem[4 + i / RE][i % RE] = e;
        ref_a.push_back(e);
      end
      ref_a.sort();
      j = '0; j.kind = JOB_SORT; j.row_a = 4; j.vid_bits = 6'(vb);
      run(j, cyc);
      for (int i = 0; i < W; i++) begin
        checks++;
        if (el(4 + i / RE, i % RE) != ref_a[i]) begin
          failures++; if (failures < 8) $display("sort t=%0d i=%0d got %h exp %h", t, i, el(4 + i / RE, i % RE), ref_a[i]);
        end
      end
      // 2 cycles per digit; 4 row transfers take at least 2 cycles each.
      checks++;
      if (cyc < 4 * vb || cyc > 4 * vb + 60) begin failures++; $display("sort cycles %0d", cyc); end
    end

    // ---------------- MERGE
    for (int t = 0; t < 9; t++) begin
      len = 1 + (t % 3) * 2;  // rows per run: 1, 3, 5
      vb = 8;
      ra_q.delete(); rb_q.delete(); ref_a.delete();
      for (int i = 0; i < len * RE; i++) begin
        ra_q.push_back({32'($urandom % 256), 32'($urandom % 256)});
        rb_q.push_back({32'($urandom % 256), 32'($urandom % 256)});
      end
      if (t == 4) for (int i = 0; i < len * RE; i++) rb_q[i] = {32'd200 + 32'(i % 8), 32'd0};
      ra_q.sort(); rb_q.sort();
      for (int i = 0; i < len * RE; i++) begin
        mem[i / RE][i % RE] = ra_q[i];
        mem[16 + i / RE][i % RE] = rb_q[i];
        ref_a.push_back(ra_q[i]); ref_a.push_back(rb_q[i]);
      end
      ref_a.sort();
      j = '0; j.kind = JOB_MERGE; j.row_a = 0; j.row_b = 16; j.row_c = 32; j.len = row_addr_t'(len); j.vid_bits = 6'(vb);
      run(j, cyc);
      for (int i = 0; i < 2 * len * RE; i++) begin
        checks++;
        if (el(32 + i / RE, i % RE) != ref_a[i]) begin
          failures++; if (failures < 8) $display("merge t=%0d i=%0d got %h exp %h", t, i, el(32 + i / RE, i % RE), ref_a[i]);
        end
      end
    end

    // ---------------- SELECT
    for (int t = 0; t < 20; t++) begin
      off = $urandom % RE;
      deg = 1 + ($urandom % RE);
      k = 1 + ($urandom % 6);
      for (int i = 0; i < W; i++) mem[40 + i / RE][i % RE] = {32'd77, 32'(1000 + i)};
      j = '0; j.kind = JOB_SELECT; j.row_a = 40; j.row_c = 50; j.offset = 8'(off);
      j.deg = 8'(deg); j.k = 8'(k); j.seed = 16'($urandom);
      run(j, cyc);
      got.delete();
      n = (deg < k) ? deg : k;
      for (int i = 0; i < RE; i++) if (mem[50][i] != '1) got.push_back(mem[50][i]);
      checks++;
      if (got.size() != n) begin failures++; $display("select t=%0d got %0d elems exp %0d", t, got.size(), n); end
      for (int i = 0; i < got.size(); i++) begin
        checks++;
        if (got[i][63:32] != 32'd77 || got[i][31:0] < 32'(1000 + off) || got[i][31:0] >= 32'(1000 + off + deg)
            || (i > 0 && got[i] <= got[i-1])) begin
          failures++; $display("select t=%0d bad element %h", t, got[i]);
        end
      end
      checks++;
      if (cyc > 40 + 4 * k) begin failures++; $display("select cycles %0d", cyc); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
