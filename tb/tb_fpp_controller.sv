// tb_fpp_controller: test of the reconfiguration controller with a small
// bitstream size (256 bytes) and 20 slots. A DRAM model grants after a random
// delay and returns the address-derived word two cycles later; a
// configuration-port model accepts at random. For several keys the words
// delivered must be exactly the slot's words, in order, and done must pulse
// once; a key of 20 or more must raise error and send nothing. The time per
// word is checked against its bound (grant wait + latency + 2 + port stalls).
`timescale 1ns/1ps
module tb_fpp_controller;
  localparam longint BSB = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, err, dreq, dgnt, drv, ivalid, iready;
  logic [4:0] key = 0;
  logic [31:0] words, drd, idata;
  logic [63:0] daddr;
  int checks = 0, failures = 0, got = 0, bad = 0, stalls = 0, gwait = 0;
  logic [63:0] exp_addr;
  logic [1:0] pv;
  logic [31:0] pd [2];

  fpp_controller #(.N_BITSTREAMS(20), .BS_BYTES(BSB), .DRAM_BASE(64'h1000)) dut (
    .clk, .rst_n, .start_i(start), .key_i(key), .busy_o(busy), .done_o(done), .error_o(err),
    .words_o(words), .dram_req_o(dreq), .dram_addr_o(daddr), .dram_gnt_i(dgnt),
    .dram_rvalid_i(drv), .dram_rdata_i(drd), .icap_valid_o(ivalid), .icap_data_o(idata),
    .icap_ready_i(iready));

  always_ff @(posedge clk) begin
    dgnt <= dreq && !dgnt && ($urandom_range(0, 1) == 0);
    pv <= {pv[0], dreq && dgnt};
    pd[0] <= ~daddr[31:0]; pd[1] <= pd[0];
    iready <= $urandom_range(0, 2) != 0;
  end
  assign drv = pv[1];
  assign drd = pd[1];
  always @(posedge clk) begin
    if (dreq && !dgnt) gwait++;
    if (ivalid && !iready) stalls++;
    if (ivalid && iready) begin
      if (idata != ~exp_addr[31:0]) bad++;
      exp_addr += 4; got++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    int keys [6] = '{0, 19, 7, 20, 3, 31};
    int t0, cyc, dones;
    pv = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (keys[n]) begin
      got = 0; bad = 0; stalls = 0; gwait = 0; dones = 0;
      exp_addr = 64'h1000 + 64'(keys[n]) * BSB;
      @(negedge clk); start = 1; key = 5'(keys[n]);
      @(negedge clk); start = 0;
      t0 = $time / 10;
      if (keys[n] >= 20) begin
        repeat (10) @(negedge clk);
        chk(err && !busy && got == 0, $sformatf("key %0d refused", keys[n]));
      end else begin
        while (busy) begin @(posedge clk); if (done) dones++; end
        #1; if (done) dones++;
        cyc = $time / 10 - t0;
        chk(!err, "no error");
        chk(got == BSB / 4 && words == BSB / 4, $sformatf("key %0d words %0d", keys[n], got));
        chk(bad == 0, "word contents");
        chk(dones == 1, "one done pulse");
        chk(cyc <= (BSB / 4) * 5 + gwait + stalls + 4, $sformatf("cycles %0d", cyc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
