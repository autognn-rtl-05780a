// upe_scheduler: hands jobs to idle UPE engines, tracked on a scoreboard.
//
// The scoreboard keeps one busy bit per UPE engine. A job offered on
// job_valid_i is accepted (job_ready_o) in any cycle in which some engine is
// idle; it goes to the lowest-numbered idle engine, whose start bit is raised
// for that cycle and whose scoreboard bit is set. The bit is cleared when the
// engine reports done. all_idle_o tells the UPE controller that every issued
// job has finished (used as a barrier between merge rounds).
//
// From the paper: a scoreboard of busy/idle UPEs that assigns work. This
// design's own: lowest-index choice and same-cycle dispatch. Job offered and
// accepted in the same cycle; the busy bit is set on the next edge.
// The assertion is sampled on the clock and disabled during reset, so rst_n
// also appears in a synchronous context; that is only for checking, and the
// flops themselves use the asynchronous active-low reset throughout.
module upe_scheduler #(
  parameter int unsigned N_UPE = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             job_valid_i,
  output logic             job_ready_o,
  input  logic [N_UPE-1:0] done_i,
  output logic [N_UPE-1:0] start_o,
  output logic [N_UPE-1:0] scoreboard_o,
  output logic             all_idle_o
);

  logic [N_UPE-1:0] busy_q;
  logic             found;

  always_comb begin
    found   = 1'b0;
    start_o = '0;
    for (int i = 0; i < N_UPE; i++) begin
      if (!found && !busy_q[i]) begin
        found = 1'b1;
        start_o[i] = job_valid_i;
      end
    end
    job_ready_o = found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy_q <= '0;
    else        busy_q <= (busy_q & ~done_i) | start_o;
  end

  assign scoreboard_o = busy_q;
  assign all_idle_o   = (busy_q == '0);

  // A job only starts on an idle engine, and never on two at once.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(start_o) && ((start_o & busy_q) == '0));

endmodule
