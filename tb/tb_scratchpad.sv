// tb_scratchpad: random test of the two-port scratchpad at its default size
// (1024 rows of 32 edges). Both ports issue random reads and writes every
// cycle against a reference array; reads must return the old contents one
// cycle later, including when the other port writes the same row in the
// same cycle. Every row is written first so that nothing uninitialised is read.
`timescale 1ns/1ps
module tb_scratchpad;
  import agnn_pkg::*;
  localparam int ROWS = 1024, RE = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  row_addr_t a_addr, b_addr;
  logic [RE-1:0][ELEM_W-1:0] a_wd, b_wd, a_rd, b_rd, ea, eb;
  logic [RE-1:0][ELEM_W-1:0] ref_m [ROWS];
  int checks = 0, failures = 0, same_row = 0;

  scratchpad #(.ROWS(ROWS), .RE(RE)) dut (.clk, .a_en_i(a_en), .a_we_i(a_we), .a_addr_i(a_addr),
    .a_wdata_i(a_wd), .a_rdata_o(a_rd), .b_en_i(b_en), .b_we_i(b_we), .b_addr_i(b_addr),
    .b_wdata_i(b_wd), .b_rdata_o(b_rd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask
  function automatic logic [RE-1:0][ELEM_W-1:0] rnd_row();
    for (int e = 0; e < RE; e++) rnd_row[e] = {$urandom, $urandom};
  endfunction

  initial begin
    bit ra, rb;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0;
    for (int r = 0; r < ROWS; r += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = row_addr_t'(r);     a_wd = rnd_row(); ref_m[r] = a_wd;
      b_en = 1; b_we = 1; b_addr = row_addr_t'(r + 1); b_wd = rnd_row(); ref_m[r + 1] = b_wd;
    end
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 3) != 0; a_we = $urandom_range(0, 1); b_en = $urandom_range(0, 3) != 0;
      b_we = $urandom_range(0, 1) && !(a_en && a_we);
      a_addr = row_addr_t'($urandom_range(0, ROWS - 1));
      b_addr = ($urandom_range(0, 7) == 0) ? a_addr : row_addr_t'($urandom_range(0, ROWS - 1));
      a_wd = rnd_row(); b_wd = rnd_row();
      if (a_en && b_en && a_addr == b_addr) same_row++;
      ra = a_en && !a_we; rb = b_en && !b_we;
      ea = ref_m[a_addr]; eb = ref_m[b_addr];
      @(posedge clk); #1;
      if (a_en && a_we) ref_m[a_addr] = a_wd;
      if (b_en && b_we) ref_m[b_addr] = b_wd;
      if (ra) chk(a_rd == ea, $sformatf("port A row %0d", a_addr));
      if (rb) chk(b_rd == eb, $sformatf("port B row %0d", b_addr));
    end
    chk(same_row > 0, "same-row access seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
