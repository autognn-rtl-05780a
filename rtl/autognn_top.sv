// autognn_top: graph-preprocessing accelerator, hardware kernel plus the
// shell pieces that are logic (configuration registers, FPP controller).
//
// Data flow of one request (see agnn_workflow): the host writes the COO edge
// array into scratchpad rows through the row port (the path a DMA engine
// would use), the batch vertices through the batch port, and the sizes and
// sampling parameters into the registers, then sets CTRL.start. The kernel
// orders the edges on the UPE kernel, builds the pointer array on the
// reshaper, samples k in-neighbours per vertex for `layers` hops on the UPEs,
// renumbers the sampled vertices on the reindexer, and converts the sampled
// subgraph to CSC the same way. The host then reads the subgraph pointer array
// and the new-to-old VID table through the result port (SCR kernel bus) and
// the subgraph's index array from scratchpad rows at STATUS SUB_BASE.
//
// Reconfiguration: writing RECONF_KEY and CTRL bit 1 makes the FPP
// controller stream the selected bitstream from device DRAM to the
// configuration port. In RTL the UPE/SCR count and width are parameters.
//
// Ports: reg_* 32-bit register bus (read data one cycle later); bvid_* batch
// list writes; res_* result reads (one cycle); hsp_* scratchpad rows, only
// while the kernel is idle; dram_*/icap_* toward the device DRAM controller
// and the configuration access port, which are outside this design.
//
// From the paper: the split into a fixed shell (registers, FPP controller,
// host and DRAM connections) and a kernel (UPE kernel, SCR kernel). This
// design's own: the port list, the on-chip graph storage and the sizes
// SP_ROWS, MAX_E, MAX_SUB_E, MAX_N, MAP_DEPTH. The SCR width is tied to W/2.
// The assertion is sampled on the clock and disabled during reset, so rst_n
// also appears in a synchronous context; that is only for checking, and the
// flops themselves use the asynchronous active-low reset throughout.
module autognn_top
  import agnn_pkg::*;
#(
  parameter int unsigned N_UPE     = 32,
  parameter int unsigned W         = 64,
  parameter int unsigned N_SCR     = 8,
  parameter int unsigned MAX_N     = 4096,
  parameter int unsigned MAP_DEPTH = 4096,
  parameter int unsigned MAX_E     = 4096,
  parameter int unsigned MAX_SUB_E = 2048,
  parameter int unsigned MAX_FRONT = 512,
  parameter int unsigned MAX_BATCH = 64,
  parameter int unsigned SP_ROWS   = 512,
  parameter longint unsigned BS_BYTES = 64'd52428800
) (
  input  logic        clk,
  input  logic        rst_n,
  // register bus
  input  logic        reg_wr_i,
  input  logic        reg_rd_i,
  input  logic [7:0]  reg_addr_i,
  input  logic [31:0] reg_wdata_i,
  output logic [31:0] reg_rdata_o,
  // batch list
  input  logic        bvid_we_i,
  input  logic [31:0] bvid_idx_i,
  input  logic [31:0] bvid_i,
  // result reads (pointer array / VID table)
  input  logic [31:0] res_addr_i,
  output logic [31:0] res_rdata_o,
  output logic [31:0] res_rdata_next_o,
  // scratchpad rows
  input  logic                        hsp_en_i,
  input  logic                        hsp_we_i,
  input  logic [15:0]                 hsp_addr_i,
  input  logic [W/2-1:0][ELEM_W-1:0]  hsp_wdata_i,
  output logic [W/2-1:0][ELEM_W-1:0]  hsp_rdata_o,
  output logic        irq_o,
  // device DRAM read port and configuration access port
  output logic        dram_req_o,
  output logic [63:0] dram_addr_o,
  input  logic        dram_gnt_i,
  input  logic        dram_rvalid_i,
  input  logic [31:0] dram_rdata_i,
  output logic        icap_valid_o,
  output logic [31:0] icap_data_o,
  input  logic        icap_ready_i
);

  localparam int unsigned RE = W / 2;

  // configuration
  logic        start, reconf_start;
  logic [31:0] n_edges, n_nodes, batch;
  logic [5:0]  vid_bits;
  logic [7:0]  k;
  logic [3:0]  layers;
  logic [15:0] seed;
  logic [4:0]  reconf_key;

  // workflow status
  logic        wf_busy, wf_done;
  logic [2:0]  wf_err;
  logic [31:0] sub_edges, cyc_order, cyc_reshape, cyc_sample;
  row_addr_t   sub_base;

  // UPE kernel
  logic        sort_start, sort_done, sel_valid, sel_ready, upe_idle;
  row_addr_t   sort_base, sort_tmp, sort_chunks, sort_result;
  upe_job_t    sel_job;
  logic [31:0] split_cyc, merge_cyc;
  logic        sp_en, sp_we, wf_sp_en, wf_sp_we;
  row_addr_t   sp_addr, wf_sp_addr;
  logic [RE-1:0][ELEM_W-1:0] sp_wdata, wf_sp_wdata, sp_rdata;

  // SCR kernel
  logic        rs_start, rs_busy, rs_done, rs_rd_en;
  row_addr_t   rs_coo_base, rs_rd_addr;
  logic [31:0] rs_n_edges, rs_n_nodes, rs_cycles;
  logic        ri_clear, ri_req, ri_ready, ri_resp_valid, ri_found, ri_overflow;
  vid_t        ri_vid, ri_new_vid;
  logic [31:0] ri_count, wf_ptr_idx, bus_addr;

  // reconfiguration
  logic        fpp_busy, fpp_done, fpp_err;
  logic [31:0] fpp_words;

  cfg_regs u_regs (
    .clk, .rst_n,
    .wr_en_i (reg_wr_i), .rd_en_i (reg_rd_i), .addr_i (reg_addr_i), .wdata_i (reg_wdata_i),
    .rdata_o (reg_rdata_o),
    .start_o (start), .reconf_start_o (reconf_start),
    .n_edges_o (n_edges), .n_nodes_o (n_nodes), .vid_bits_o (vid_bits), .k_o (k),
    .layers_o (layers), .batch_o (batch), .seed_o (seed), .reconf_key_o (reconf_key),
    .busy_i (wf_busy), .done_i (wf_done), .reconf_busy_i (fpp_busy), .err_i (wf_err),
    .sub_edges_i (sub_edges), .sub_nodes_i (ri_count), .sub_base_i (32'(sub_base)),
    .cyc_order_i (cyc_order), .cyc_reshape_i (cyc_reshape), .cyc_sample_i (cyc_sample)
  );

  agnn_workflow #(
    .N_UPE (N_UPE), .W (W), .MAX_E (MAX_E), .MAX_SUB_E (MAX_SUB_E),
    .MAX_FRONT (MAX_FRONT), .MAX_BATCH (MAX_BATCH)
  ) u_flow (
    .clk, .rst_n,
    .start_i (start && !fpp_busy), .n_edges_i (n_edges), .n_nodes_i (n_nodes),
    .k_i (k), .layers_i (layers), .batch_i (batch), .seed_i (seed),
    .bvid_we_i, .bvid_idx_i, .bvid_i,
    .busy_o (wf_busy), .done_o (wf_done), .err_o (wf_err),
    .sub_edges_o (sub_edges), .sub_base_o (sub_base),
    .cyc_order_o (cyc_order), .cyc_reshape_o (cyc_reshape), .cyc_sample_o (cyc_sample),
    .sort_start_o (sort_start), .sort_base_o (sort_base), .sort_tmp_o (sort_tmp),
    .sort_chunks_o (sort_chunks), .sort_done_i (sort_done), .sort_result_i (sort_result),
    .sel_valid_o (sel_valid), .sel_job_o (sel_job), .sel_ready_i (sel_ready), .upe_idle_i (upe_idle),
    .sp_en_o (wf_sp_en), .sp_we_o (wf_sp_we), .sp_addr_o (wf_sp_addr), .sp_wdata_o (wf_sp_wdata),
    .sp_rdata_i (sp_rdata),
    .rs_start_o (rs_start), .rs_coo_base_o (rs_coo_base), .rs_n_edges_o (rs_n_edges),
    .rs_n_nodes_o (rs_n_nodes), .rs_done_i (rs_done), .rs_rd_en_i (rs_rd_en), .rs_rd_addr_i (rs_rd_addr),
    .ptr_idx_o (wf_ptr_idx), .ptr_lo_i (res_rdata_o), .ptr_hi_i (res_rdata_next_o),
    .ri_clear_o (ri_clear), .ri_req_o (ri_req), .ri_vid_o (ri_vid), .ri_ready_i (ri_ready),
    .ri_resp_valid_i (ri_resp_valid), .ri_new_vid_i (ri_new_vid), .ri_count_i (ri_count),
    .ri_overflow_i (ri_overflow)
  );

  // Scratchpad port B: the sequencer while it runs, the host otherwise.
  assign sp_en    = wf_busy ? wf_sp_en    : hsp_en_i;
  assign sp_we    = wf_busy ? wf_sp_we    : hsp_we_i;
  assign sp_addr  = wf_busy ? wf_sp_addr  : row_addr_t'(hsp_addr_i);
  assign sp_wdata = wf_busy ? wf_sp_wdata : hsp_wdata_i;
  assign hsp_rdata_o = sp_rdata;

  upe_kernel #(.N_UPE (N_UPE), .W (W), .SP_ROWS (SP_ROWS)) u_upe_kernel (
    .clk, .rst_n,
    .sort_start_i (sort_start), .sort_base_i (sort_base), .sort_tmp_i (sort_tmp),
    .sort_chunks_i (sort_chunks), .vid_bits_i (vid_bits),
    .sort_done_o (sort_done), .sort_result_o (sort_result),
    .sel_valid_i (sel_valid), .sel_job_i (sel_job), .sel_ready_o (sel_ready), .all_idle_o (upe_idle),
    .split_cycles_o (split_cyc), .merge_cycles_o (merge_cyc),
    .sp_en_i (sp_en), .sp_we_i (sp_we), .sp_addr_i (sp_addr), .sp_wdata_i (sp_wdata), .sp_rdata_o (sp_rdata)
  );

  // Result port: the sequencer reads pointer pairs while it runs.
  assign bus_addr = wf_busy ? wf_ptr_idx : res_addr_i;

  scr_kernel #(.N_SCR (N_SCR), .W_SCR (RE), .MAX_N (MAX_N), .MAP_DEPTH (MAP_DEPTH)) u_scr_kernel (
    .clk, .rst_n,
    .rs_start_i (rs_start), .rs_coo_base_i (rs_coo_base), .rs_n_edges_i (rs_n_edges),
    .rs_n_nodes_i (rs_n_nodes), .rs_busy_o (rs_busy), .rs_done_o (rs_done), .rs_cycles_o (rs_cycles),
    .rs_rd_en_o (rs_rd_en), .rs_rd_addr_o (rs_rd_addr), .rs_rd_data_i (sp_rdata),
    .ri_clear_i (ri_clear), .ri_req_i (ri_req), .ri_vid_i (ri_vid), .ri_ready_o (ri_ready),
    .ri_resp_valid_o (ri_resp_valid), .ri_new_vid_o (ri_new_vid), .ri_found_o (ri_found),
    .ri_count_o (ri_count), .ri_overflow_o (ri_overflow),
    .bus_addr_i (bus_addr), .bus_rdata_o (res_rdata_o), .bus_rdata_next_o (res_rdata_next_o)
  );

  fpp_controller #(.BS_BYTES (BS_BYTES)) u_fpp (
    .clk, .rst_n,
    .start_i (reconf_start && !wf_busy), .key_i (reconf_key),
    .busy_o (fpp_busy), .done_o (fpp_done), .error_o (fpp_err), .words_o (fpp_words),
    .dram_req_o, .dram_addr_o, .dram_gnt_i, .dram_rvalid_i, .dram_rdata_i,
    .icap_valid_o, .icap_data_o, .icap_ready_i
  );

  assign irq_o = wf_done | fpp_done;

  logic unused;
  assign unused = ^{split_cyc, merge_cyc, rs_busy, rs_cycles, ri_found, fpp_err, fpp_words};

endmodule
