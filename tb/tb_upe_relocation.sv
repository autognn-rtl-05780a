// Self-checking test of upe_relocation. First the example printed in the
// relocation figure: elements a,b,c,d with b and d kept; b moves one place,
// d two, giving b,d. Then random compaction patterns at N=64, where each kept
// element's distance is the number of dropped elements before it and the
// expected output is the kept elements in order.
module tb_upe_relocation;
  localparam int unsigned N = 64;
  localparam int unsigned SW = $clog2(N) + 1;
  int checks = 0, failures = 0;

  logic [N-1:0][63:0] din, dout;
  logic [N-1:0] vin, vout;
  logic [N-1:0][SW-1:0] sh;

  logic [3:0][7:0] d4i, d4o;
  logic [3:0] v4i, v4o;
  logic [3:0][2:0] s4;

  upe_relocation #(.N(N), .DW(64)) dut (.data_i(din), .valid_i(vin), .shift_i(sh), .data_o(dout), .valid_o(vout));
  upe_relocation #(.N(4), .DW(8)) dut4 (.data_i(d4i), .valid_i(v4i), .shift_i(s4), .data_o(d4o), .valid_o(v4o));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp [N];
    int n, gaps;
    // a b c d with a and c cleared: b shifts 1, d shifts 2.
    d4i = {8'h0d, 8'h00, 8'h0b, 8'h00};
    v4i = 4'b1010;
    s4  = {3'd2, 3'd1, 3'd1, 3'd0};
    #1;
    checks++;
    if (d4o[0] != 8'h0b || d4o[1] != 8'h0d || v4o != 4'b0011) begin
      failures++; $display("figure example failed: %h %b", d4o, v4o);
    end
    for (int t = 0; t < 300; t++) begin
      vin = {$urandom, $urandom};
      if (t % 3 == 0) vin = vin & {$urandom, $urandom};
      n = 0; gaps = 0;
      for (int i = 0; i < N; i++) begin
        din[i] = vin[i] ? {$urandom, $urandom} : '0;
        sh[i] = SW'(gaps);
        if (vin[i]) begin exp[n] = din[i]; n++; end else gaps++;
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (i < n ? (!vout[i] || dout[i] != exp[i]) : (vout[i] || dout[i] != '0)) begin
          failures++;
          if (failures < 6) $display("t=%0d pos %0d got %h/%b", t, i, dout[i], vout[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
