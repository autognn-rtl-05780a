// upe_kernel: the UPE half of the hardware kernel.
//
// Contains the UPE controller, the UPE scheduler with its scoreboard, N_UPE
// UPE engines (each a UPE plus its job sequencer), the crossbar that connects
// the engines to the shared scratchpad, and the scratchpad itself.
//
// Interface: an ordering command (sort_*), a sampling job port (sel_*), and
// port B of the scratchpad (sp_*) through which the rest of the design and
// the host read and write rows. Ordering and sampling are described in
// upe_controller and upe_engine. The number and width of UPEs are parameters,
// standing in for the pre-compiled UPE variants among which the host chooses.
//
// From the paper: the composition (controller, scheduler, UPEs, crossbar,
// scratchpad). This design's own: the port split and the per-UPE sequencers.
// The assertion is sampled on the clock and disabled during reset, so rst_n
// also appears in a synchronous context; that is only for checking, and the
// flops themselves use the asynchronous active-low reset throughout.
module upe_kernel
  import agnn_pkg::*;
#(
  parameter int unsigned N_UPE   = 32,
  parameter int unsigned W       = 64,
  parameter int unsigned SP_ROWS = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sort_start_i,
  input  row_addr_t  sort_base_i,
  input  row_addr_t  sort_tmp_i,
  input  row_addr_t  sort_chunks_i,
  input  logic [5:0] vid_bits_i,
  output logic       sort_done_o,
  output row_addr_t  sort_result_o,
  input  logic       sel_valid_i,
  input  upe_job_t   sel_job_i,
  output logic       sel_ready_o,
  output logic       all_idle_o,
  output logic [31:0] split_cycles_o,
  output logic [31:0] merge_cycles_o,
  // scratchpad port B
  input  logic                          sp_en_i,
  input  logic                          sp_we_i,
  input  row_addr_t                     sp_addr_i,
  input  logic [W/2-1:0][ELEM_W-1:0]    sp_wdata_i,
  output logic [W/2-1:0][ELEM_W-1:0]    sp_rdata_o
);

  localparam int unsigned RE = W / 2;

  logic      job_valid, job_ready, sched_idle;
  upe_job_t  job;
  logic [N_UPE-1:0] start, done, busy, scoreboard;

  logic [N_UPE-1:0]                     m_req, m_we, m_gnt, m_rvalid;
  row_addr_t [N_UPE-1:0]                m_addr;
  logic [N_UPE-1:0][RE-1:0][ELEM_W-1:0] m_wdata;
  logic [RE-1:0][ELEM_W-1:0]            m_rdata;

  logic                      s_en, s_we;
  row_addr_t                 s_addr;
  logic [RE-1:0][ELEM_W-1:0] s_wdata, s_rdata;

  upe_controller u_ctrl (
    .clk, .rst_n,
    .sort_start_i, .sort_base_i, .sort_tmp_i, .sort_chunks_i, .vid_bits_i,
    .sort_done_o, .sort_result_o,
    .sel_valid_i, .sel_job_i, .sel_ready_o, .all_idle_o,
    .job_valid_o (job_valid), .job_o (job), .job_ready_i (job_ready),
    .sched_idle_i (sched_idle),
    .split_cycles_o, .merge_cycles_o
  );

  upe_scheduler #(.N_UPE(N_UPE)) u_sched (
    .clk, .rst_n,
    .job_valid_i (job_valid), .job_ready_o (job_ready),
    .done_i (done), .start_o (start), .scoreboard_o (scoreboard), .all_idle_o (sched_idle)
  );

  for (genvar u = 0; u < N_UPE; u++) begin : g_upe
    upe_engine #(.W(W)) u_engine (
      .clk, .rst_n,
      .start_i (start[u]), .job_i (job), .busy_o (busy[u]), .done_o (done[u]),
      .req_o (m_req[u]), .we_o (m_we[u]), .addr_o (m_addr[u]), .wdata_o (m_wdata[u]),
      .gnt_i (m_gnt[u]), .rvalid_i (m_rvalid[u]), .rdata_i (m_rdata)
    );
  end

  upe_crossbar #(.N_UPE(N_UPE), .RE(RE)) u_xbar (
    .clk, .rst_n,
    .m_req_i (m_req), .m_we_i (m_we), .m_addr_i (m_addr), .m_wdata_i (m_wdata),
    .m_gnt_o (m_gnt), .m_rvalid_o (m_rvalid), .m_rdata_o (m_rdata),
    .s_en_o (s_en), .s_we_o (s_we), .s_addr_o (s_addr), .s_wdata_o (s_wdata), .s_rdata_i (s_rdata)
  );

  scratchpad #(.ROWS(SP_ROWS), .RE(RE)) u_sp (
    .clk,
    .a_en_i (s_en), .a_we_i (s_we), .a_addr_i (s_addr), .a_wdata_i (s_wdata), .a_rdata_o (s_rdata),
    .b_en_i (sp_en_i), .b_we_i (sp_we_i), .b_addr_i (sp_addr_i), .b_wdata_i (sp_wdata_i), .b_rdata_o (sp_rdata_o)
  );

  // The scoreboard must agree with the engines: an engine marked idle is idle.
  assert property (@(posedge clk) disable iff (!rst_n) ((~scoreboard & busy) == '0));

endmodule
