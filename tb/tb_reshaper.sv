// Self-checking test of the reshaper (4 SCRs of width 8). Random sorted edge
// arrays, including empty vertices, runs longer than a segment and an empty
// edge array, are placed in a row memory model; every pointer entry
// 0..n_nodes is compared with a count of smaller destinations made in the
// testbench. The run length is checked against the bound
// (n+1)/N_SCR + 3*segments + 4 cycles.
module tb_reshaper;
  import agnn_pkg::*;
  localparam int unsigned N_SCR = 4, W_SCR = 8, MAX_N = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, rd_en;
  logic [31:0] ne, nn, cycles, pidx = 0, plo, phi;
  row_addr_t rd_addr;
  logic [W_SCR-1:0][63:0] rd_data;
  logic [W_SCR-1:0][63:0] mem [64];

  reshaper #(.N_SCR(N_SCR), .W_SCR(W_SCR), .MAX_N(MAX_N)) dut (
    .clk, .rst_n, .start_i(start), .coo_base_i(row_addr_t'(2)), .n_edges_i(ne), .n_nodes_i(nn),
    .busy_o(busy), .done_o(done), .cycles_o(cycles),
    .rd_en_o(rd_en), .rd_addr_o(rd_addr), .rd_data_i(rd_data),
    .ptr_idx_i(pidx), .ptr_lo_o(plo), .ptr_hi_o(phi));

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  initial begin
    int dsts [$];
    int exp, bound;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      nn = 1 + $urandom % 200;
      ne = (t == 0) ? 0 : $urandom % 300;
      if (t == 1) nn = 3;     // dense: long runs per destination
      dsts.delete();
      for (int i = 0; i < ne; i++) dsts.push_back($urandom % nn);
      dsts.sort();
      for (int i = 0; i < 64 * W_SCR; i++) mem[i / W_SCR][i % W_SCR] = '1;
      for (int i = 0; i < ne; i++) mem[2 + i / W_SCR][i % W_SCR] = {32'(dsts[i]), 32'($urandom)};
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      bound = (nn + 1) / N_SCR + 3 * ((ne + W_SCR - 1) / W_SCR) + 4;
      checks++;
      if (cycles > bound) begin failures++; $display("t=%0d cycles %0d > %0d", t, cycles, bound); end
      for (int v = 0; v < nn; v++) begin
        pidx = v;
        @(negedge clk);
        exp = 0;
        foreach (dsts[i]) if (dsts[i] < v) exp++;
        checks++;
        if (plo != exp) begin failures++; if (failures < 8) $display("t=%0d ptr[%0d]=%0d exp %0d", t, v, plo, exp); end
        exp = 0;
        foreach (dsts[i]) if (dsts[i] < v + 1) exp++;
        checks++;
        if (phi != exp) begin failures++; if (failures < 8) $display("t=%0d ptr[%0d]=%0d exp %0d", t, v + 1, phi, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
