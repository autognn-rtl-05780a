// Self-checking test of the UPE: random element arrays with random, empty,
// full and one-hot conditions; the expected result is the stable list of
// selected elements, worked out by walking the array in the testbench.
module tb_upe;
  localparam int unsigned N = 64;
  localparam int unsigned CW = $clog2(N) + 1;
  int checks = 0, failures = 0;

  logic [N-1:0][63:0] node, out;
  logic [N-1:0] cond, vout;
  logic [CW-1:0] cnt;

  upe #(.N(N), .DW(64)) dut (.node_i(node), .cond_i(cond), .node_o(out), .valid_o(vout), .count_o(cnt));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp [N];
    int n;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) node[i] = {$urandom, $urandom};
      case (t % 4)
        0: cond = {$urandom, $urandom};
        1: cond = (t < 100) ? '1 : {$urandom, $urandom} & {$urandom, $urandom};
        2: cond = 64'(1) << ($urandom % N);
        default: cond = (t < 100) ? '0 : ~({$urandom, $urandom} & {$urandom, $urandom});
      endcase
      #1;
      n = 0;
      for (int i = 0; i < N; i++) if (cond[i]) begin exp[n] = node[i]; n++; end
      checks++;
      if (int'(cnt) != n) begin failures++; $display("count t=%0d got %0d exp %0d", t, cnt, n); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (i < n) begin
          if (!vout[i] || out[i] != exp[i]) begin
            failures++;
            if (failures < 6) $display("t=%0d pos %0d got %h exp %h", t, i, out[i], exp[i]);
          end
        end else if (vout[i] || out[i] != '0) begin
          failures++;
          if (failures < 6) $display("t=%0d pos %0d should be empty", t, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
