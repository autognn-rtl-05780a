// tb_upe_scheduler: random test of the UPE job scheduler.
//
// Jobs are offered at random; engines finish after random times. A reference
// scoreboard in the testbench predicts which engine must start (the lowest
// idle one), whether the job is accepted, and the all-idle flag, and checks
// that acceptance happens in the same cycle as the offer whenever an engine is
// idle (zero-cycle dispatch). Run at the default 32 engines.
`timescale 1ns/1ps
module tb_upe_scheduler;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic job_valid, job_ready, all_idle;
  logic [N-1:0] done, start, sb;
  int checks = 0, failures = 0;
  logic [N-1:0] model;
  int left [N];
  int accepted = 0, refused = 0;

  upe_scheduler #(.N_UPE(N)) dut (.clk, .rst_n, .job_valid_i(job_valid), .job_ready_o(job_ready),
    .done_i(done), .start_o(start), .scoreboard_o(sb), .all_idle_o(all_idle));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    logic [N-1:0] exp_start;
    job_valid = 0; done = '0; model = '0;
    foreach (left[i]) left[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      // engines finish
      done = '0;
      for (int i = 0; i < N; i++) if (model[i]) begin
        if (left[i] == 0) done[i] = 1; else left[i]--;
      end
      job_valid = (c < 2500) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 9) == 0);
      #1;
      exp_start = '0;
      for (int i = 0; i < N; i++) if (!model[i]) begin exp_start[i] = job_valid; break; end
      chk(sb == model, "scoreboard");
      chk(all_idle == (model == '0), "all idle");
      chk(job_ready == (model != '1), "ready");
      chk(start == exp_start, $sformatf("start %h exp %h", start, exp_start));
      if (job_valid && job_ready) accepted++;
      if (job_valid && !job_ready) refused++;
      @(posedge clk); #1;
      model = (model & ~done) | exp_start;
      for (int i = 0; i < N; i++) if (exp_start[i]) left[i] = $urandom_range(0, 120);
    end
    $display("accepted=%0d refused(full)=%0d", accepted, refused);
    chk(accepted > 0 && refused > 0, "both full and free cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
