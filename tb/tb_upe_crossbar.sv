// tb_upe_crossbar: random test of the UPE-to-scratchpad crossbar.
//
// 32 requesters hold random read/write requests until granted, against a
// small memory model behind the scratchpad port (read data one cycle after
// the request). The testbench checks: one grant per cycle, only to a
// requester, chosen round-robin from the last winner (reference arbiter);
// the granted request's fields reach the scratchpad port; rvalid goes to the
// read requester one cycle later with the memory contents; and no requester
// waits more than N_UPE grants.
`timescale 1ns/1ps
module tb_upe_crossbar;
  import agnn_pkg::*;
  localparam int N = 32, RE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, we, gnt, rvalid;
  row_addr_t [N-1:0] addr;
  logic [N-1:0][RE-1:0][ELEM_W-1:0] wdata;
  logic [RE-1:0][ELEM_W-1:0] rdata, s_wdata, s_rdata;
  logic s_en, s_we;
  row_addr_t s_addr;
  logic [RE-1:0][ELEM_W-1:0] mem [16];
  int checks = 0, failures = 0, wait_c [N], maxwait = 0, contended = 0;

  upe_crossbar #(.N_UPE(N), .RE(RE)) dut (.clk, .rst_n, .m_req_i(req), .m_we_i(we), .m_addr_i(addr),
    .m_wdata_i(wdata), .m_gnt_o(gnt), .m_rvalid_o(rvalid), .m_rdata_o(rdata),
    .s_en_o(s_en), .s_we_o(s_we), .s_addr_o(s_addr), .s_wdata_o(s_wdata), .s_rdata_i(s_rdata));

  always_ff @(posedge clk) if (s_en) begin
    if (s_we) mem[s_addr[3:0]] <= s_wdata; else s_rdata <= mem[s_addr[3:0]];
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    int ptr, exp_w, last_rd;
    logic [RE-1:0][ELEM_W-1:0] exp_data;
    bit pend_rd;
    req = '0; we = '0; addr = '0; wdata = '0; ptr = 0; pend_rd = 0; last_rd = 0;
    foreach (mem[i]) mem[i] = '0;
    foreach (wait_c[i]) wait_c[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 8000; c++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) if (!req[i] && $urandom_range(0, 7) == 0) begin
        req[i] = 1; we[i] = $urandom_range(0, 1); addr[i] = row_addr_t'($urandom_range(0, 15));
        for (int e = 0; e < RE; e++) wdata[i][e] = {$urandom, $urandom};
      end
      #1;
      // read data from last cycle's grant
      if (pend_rd) begin
        chk(rvalid == (N'(1) << last_rd), "rvalid to reader");
        chk(rdata == exp_data, "read data");
      end else chk(rvalid == '0, "no rvalid");
      exp_w = -1;
      for (int o = 0; o < N; o++) if (exp_w < 0 && req[(ptr + o) % N]) exp_w = (ptr + o) % N;
      if ($countones(req) > 1) contended++;
      if (exp_w < 0) chk(gnt == '0 && !s_en, "idle");
      else begin
        chk(gnt == (N'(1) << exp_w), $sformatf("grant %h exp %0d", gnt, exp_w));
        chk(s_en && s_we == we[exp_w] && s_addr == addr[exp_w], "port fields");
        if (we[exp_w]) chk(s_wdata == wdata[exp_w], "write data");
      end
      pend_rd = 0;
      if (exp_w >= 0) begin
        if (!we[exp_w]) begin pend_rd = 1; last_rd = exp_w; exp_data = mem[addr[exp_w][3:0]]; end
        ptr = (exp_w + 1) % N;
      end
      for (int i = 0; i < N; i++) if (req[i]) begin
        if (i == exp_w) begin if (wait_c[i] > maxwait) maxwait = wait_c[i]; wait_c[i] = 0; end
        else wait_c[i]++;
      end
      @(posedge clk); #1;
      if (exp_w >= 0) req[exp_w] = 0;
    end
    $display("contended cycles=%0d longest wait=%0d", contended, maxwait);
    chk(maxwait < N, "bounded wait");
    chk(contended > 0, "contention seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
