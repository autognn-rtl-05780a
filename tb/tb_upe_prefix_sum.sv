// Self-checking test of upe_prefix_sum: the example printed in the UPE
// figure (0,1,0,1 -> 0,1,1,2) at N=4, then random condition arrays at N=64
// checked against a running count computed in the testbench.
module tb_upe_prefix_sum;
  localparam int unsigned N = 64;
  localparam int unsigned CW = $clog2(N) + 1;
  int checks = 0, failures = 0;

  logic [N-1:0] cond;
  logic [N-1:0][CW-1:0] disp;
  logic [3:0] c4;
  logic [3:0][2:0] d4;

  upe_prefix_sum #(.N(N)) dut (.cond_i(cond), .disp_o(disp));
  upe_prefix_sum #(.N(4)) dut4 (.cond_i(c4), .disp_o(d4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    c4 = 4'b1010;  // element 0 is the lsb: array 0,1,0,1
    #1;
    checks++;
    if (d4[0] != 0 || d4[1] != 1 || d4[2] != 1 || d4[3] != 2) begin
      failures++; $display("figure example failed");
    end
    for (int t = 0; t < 200; t++) begin
      cond = {$urandom, $urandom};
      if (t == 0) cond = '1;
      if (t == 1) cond = '0;
      #1;
      exp = 0;
      for (int i = 0; i < N; i++) begin
        exp += int'(cond[i]);
        checks++;
        if (int'(disp[i]) != exp) begin
          failures++;
          if (failures < 5) $display("mismatch t=%0d i=%0d got %0d exp %0d", t, i, disp[i], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
