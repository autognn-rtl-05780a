// tb_cfg_regs: random test of the configuration/status register block.
// Random writes (including to read-only and unmapped addresses) and reads are
// issued on the register bus; a reference register file predicts every read
// value (one cycle after rd_en), the configuration outputs, the width
// truncation of narrow fields, the one-cycle start pulses and the sticky done
// bit (set by done_i, cleared by a start write). Status inputs are random.
`timescale 1ns/1ps
module tb_cfg_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr = 0, rd = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  logic start, rstart;
  logic [31:0] ne, nn, batch;
  logic [5:0] vb; logic [7:0] k; logic [3:0] layers; logic [15:0] seed; logic [4:0] rkey;
  logic busy = 0, done = 0, rbusy = 0;
  logic [2:0] errs = 0;
  logic [31:0] se = 0, sn = 0, sb = 0, c1 = 0, c2 = 0, c3 = 0;
  int checks = 0, failures = 0;

  cfg_regs dut (.clk, .rst_n, .wr_en_i(wr), .rd_en_i(rd), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata),
    .start_o(start), .reconf_start_o(rstart), .n_edges_o(ne), .n_nodes_o(nn), .vid_bits_o(vb), .k_o(k),
    .layers_o(layers), .batch_o(batch), .seed_o(seed), .reconf_key_o(rkey), .busy_i(busy), .done_i(done),
    .reconf_busy_i(rbusy), .err_i(errs), .sub_edges_i(se), .sub_nodes_i(sn), .sub_base_i(sb),
    .cyc_order_i(c1), .cyc_reshape_i(c2), .cyc_sample_i(c3));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  logic [31:0] m [16];
  bit done_m;
  function automatic logic [31:0] expect_rd(input logic [7:0] a);
    case (a)
      8'h04: return {25'd0, errs, 1'b0, rbusy, done_m, busy};
      8'h08, 8'h0C, 8'h1C: return m[a[5:2]];
      8'h10: return m[4] & 32'h3F;
      8'h14: return m[5] & 32'hFF;
      8'h18: return m[6] & 32'hF;
      8'h20: return m[8] & 32'hFFFF;
      8'h24: return m[9] & 32'h1F;
      8'h28: return se; 8'h2C: return sn; 8'h30: return sb;
      8'h34: return c1; 8'h38: return c2; 8'h3C: return c3;
      default: return 0;
    endcase
  endfunction

  initial begin
    logic [31:0] e;
    bit exp_start, exp_rstart;
    m = '{default: 0}; m[4] = 32; m[5] = 10; m[6] = 2; m[8] = 1;
    done_m = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      busy = $urandom; rbusy = $urandom; errs = 3'($urandom); se = $urandom; sn = $urandom;
      sb = $urandom; c1 = $urandom; c2 = $urandom; c3 = $urandom;
      done = ($urandom_range(0, 15) == 0);
      wr = $urandom_range(0, 1); rd = !wr && $urandom_range(0, 1);
      addr = ($urandom_range(0, 9) == 0) ? 8'($urandom) : 8'($urandom_range(0, 15) * 4);
      wdata = $urandom;
      e = expect_rd(addr);
      exp_start = wr && addr == 8'h00 && wdata[0];
      exp_rstart = wr && addr == 8'h00 && wdata[1];
      @(posedge clk); #1;
      if (done) done_m = 1;
      if (exp_start) done_m = 0;
      if (wr && addr[1:0] == 0 && addr < 8'h28 && addr != 8'h04 && addr != 8'h00) m[addr[5:2]] = wdata;
      if (rd) chk(rdata == e, $sformatf("read %h: %h exp %h", addr, rdata, e));
      chk(start == exp_start && rstart == exp_rstart, "start pulses");
      chk(ne == m[2] && nn == m[3] && batch == m[7] && vb == m[4][5:0] && k == m[5][7:0] &&
          layers == m[6][3:0] && seed == m[8][15:0] && rkey == m[9][4:0], "configuration outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
