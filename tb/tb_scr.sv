// Self-checking test of the SCR in both configurations. Adder tree: the
// example printed in the SCR figure (input 1,2,3,3, target 3 -> 2), then
// random arrays with the count of valid elements >= target computed in the
// testbench. Filter tree: a table of unique VIDs with payloads, searched for
// present and absent targets.
module tb_scr;
  localparam int unsigned W = 32;
  localparam int unsigned CW = $clog2(W) + 1;
  int checks = 0, failures = 0;

  logic [W-1:0][31:0] el, pl;
  logic [W-1:0] vl;
  logic [31:0] tg;
  logic [CW-1:0] cnt, fcnt;
  logic hit, dummy_hit;
  logic [31:0] val, dummy_val;

  logic [3:0][31:0] e4, p4;
  logic [2:0] c4;
  logic h4;
  logic [31:0] v4;

  scr #(.W(W), .FILTER(1'b0)) u_add (.elem_i(el), .payload_i(pl), .valid_i(vl), .target_i(tg),
                                     .count_o(cnt), .hit_o(dummy_hit), .value_o(dummy_val));
  scr #(.W(W), .FILTER(1'b1)) u_flt (.elem_i(el), .payload_i(pl), .valid_i(vl), .target_i(tg),
                                     .count_o(fcnt), .hit_o(hit), .value_o(val));
  scr #(.W(4)) u_fig (.elem_i(e4), .payload_i(p4), .valid_i(4'hf), .target_i(32'd3),
                      .count_o(c4), .hit_o(h4), .value_o(v4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp, idx;
    e4 = {32'd3, 32'd3, 32'd2, 32'd1};
    p4 = '0;
    #1;
    checks++;
    if (c4 != 3'd2) begin failures++; $display("figure example got %0d", c4); end
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < W; i++) begin
        el[i] = (t % 2) ? ($urandom % 64) : $urandom;
        pl[i] = $urandom;
      end
      vl = (t % 5 == 0) ? '1 : $urandom;
      tg = (t % 2) ? ($urandom % 64) : $urandom;
      #1;
      exp = 0;
      for (int i = 0; i < W; i++) if (vl[i] && el[i] >= tg) exp++;
      checks++;
      if (int'(cnt) != exp) begin failures++; if (failures < 6) $display("count got %0d exp %0d", cnt, exp); end
    end
    // filter tree: unique elements
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < W; i++) begin el[i] = i * 7 + 3 + t; pl[i] = $urandom; end
      vl = $urandom;
      idx = $urandom % W;
      tg = (t % 3 == 0) ? 32'hFFFF_0000 : el[idx];
      #1;
      checks++;
      if (t % 3 == 0) begin
        if (hit) begin failures++; $display("false hit"); end
      end else if (hit != vl[idx] || (vl[idx] && (val != pl[idx] || fcnt != 1))) begin
        failures++; if (failures < 6) $display("filter t=%0d hit %b val %h exp %h", t, hit, val, pl[idx]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
