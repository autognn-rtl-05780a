// Self-checking test of the reindexer (2 SCRs of width 4, 64 pairs). First
// the example in the reindexer figure: with 2->0 and 4->1 mapped, VID 5 is
// not found and becomes 2. Then random VIDs from a small range: each
// response is compared with a first-appearance map kept in the testbench
// (found flag and new VID), the map read-back port is checked, and
// overflowing the bank must raise the overflow flag.
module tb_reindexer;
  import agnn_pkg::*;
  localparam int unsigned N_SCR = 2, W_SCR = 4, DEPTH = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, req = 0, ready, rv, found, ovf;
  vid_t vid = 0, nv, morig;
  logic [31:0] cnt, midx = 0;

  reindexer #(.N_SCR(N_SCR), .W_SCR(W_SCR), .MAP_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .clear_i(clear), .req_i(req), .vid_i(vid), .ready_o(ready),
    .resp_valid_o(rv), .new_vid_o(nv), .found_o(found), .count_o(cnt), .overflow_o(ovf),
    .map_idx_i(midx), .map_orig_o(morig));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic lookup(input vid_t v, output vid_t n, output logic f);
    @(negedge clk);
    while (!ready) @(negedge clk);
    vid = v; req = 1;
    @(negedge clk); req = 0;
    while (!rv) @(negedge clk);
    n = nv; f = found;
  endtask

  initial begin
    int map [int];
    vid_t n, v;
    logic f;
    int order [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    lookup(2, n, f); lookup(4, n, f); lookup(5, n, f);
    checks++;
    if (n != 2 || f) begin failures++; $display("figure example: got %0d found %b", n, f); end
    lookup(4, n, f);
    checks++;
    if (n != 1 || !f) begin failures++; $display("re-lookup 4 got %0d", n); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int t = 0; t < 300; t++) begin
      v = 1000 + $urandom % 60;
      lookup(v, n, f);
      checks++;
      if (map.exists(v)) begin
        if (!f || n != vid_t'(map[v])) begin failures++; if (failures < 8) $display("v=%0d got %0d/%b exp %0d", v, n, f, map[v]); end
      end else begin
        if (f || n != vid_t'(map.num())) begin failures++; if (failures < 8) $display("v=%0d new got %0d/%b exp %0d", v, n, f, map.num()); end
        map[v] = map.num();
        order.push_back(v);
      end
    end
    for (int i = 0; i < order.size(); i++) begin
      midx = i; @(negedge clk); @(negedge clk);
      checks++;
      if (morig != vid_t'(order[i])) begin failures++; $display("map[%0d]=%0d exp %0d", i, morig, order[i]); end
    end
    // fill to overflow
    for (int i = 0; i < 10; i++) lookup(5000 + i, n, f);
    checks++;
    if (!ovf || cnt != DEPTH) begin failures++; $display("overflow %b count %0d", ovf, cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
