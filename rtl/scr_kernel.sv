// scr_kernel: the SCR half of the hardware kernel.
//
// Holds the reshaper (data reshaping, with its N_SCR adder-tree SCRs and the
// pointer array) and the reindexer (subgraph reindexing, with its N_SCR
// filter-tree SCRs and the mapping SRAM bank). Both controllers are reached
// through one read port toward the shell (bus_*): address bit 31 clear reads
// the pointer array entry bus_addr_i[30:0] (and the next entry on
// bus_rdata_next_o), set reads the original VID stored for new VID
// bus_addr_i[30:0]. Reads take one cycle. The control ports of the two
// controllers are passed through to the workflow sequencer.
//
// From the paper: reshaper and reindexer behind one port toward the shell.
// This design's own: a plain address-decoded read port instead of an AXI
// crossbar, and the address-bit-31 split.
module scr_kernel
  import agnn_pkg::*;
#(
  parameter int unsigned N_SCR     = 8,
  parameter int unsigned W_SCR     = 32,
  parameter int unsigned MAX_N     = 4096,
  parameter int unsigned MAP_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  // reshaper control
  input  logic        rs_start_i,
  input  row_addr_t   rs_coo_base_i,
  input  logic [31:0] rs_n_edges_i,
  input  logic [31:0] rs_n_nodes_i,
  output logic        rs_busy_o,
  output logic        rs_done_o,
  output logic [31:0] rs_cycles_o,
  output logic        rs_rd_en_o,
  output row_addr_t   rs_rd_addr_o,
  input  logic [W_SCR-1:0][ELEM_W-1:0] rs_rd_data_i,
  // reindexer control
  input  logic        ri_clear_i,
  input  logic        ri_req_i,
  input  vid_t        ri_vid_i,
  output logic        ri_ready_o,
  output logic        ri_resp_valid_o,
  output vid_t        ri_new_vid_o,
  output logic        ri_found_o,
  output logic [31:0] ri_count_o,
  output logic        ri_overflow_o,
  // single read port toward the shell
  input  logic [31:0] bus_addr_i,
  output logic [31:0] bus_rdata_o,
  output logic [31:0] bus_rdata_next_o
);

  logic [31:0] ptr_lo, ptr_hi;
  vid_t        map_orig;
  logic        sel_map_q;

  reshaper #(.N_SCR(N_SCR), .W_SCR(W_SCR), .MAX_N(MAX_N)) u_reshaper (
    .clk, .rst_n,
    .start_i (rs_start_i), .coo_base_i (rs_coo_base_i),
    .n_edges_i (rs_n_edges_i), .n_nodes_i (rs_n_nodes_i),
    .busy_o (rs_busy_o), .done_o (rs_done_o), .cycles_o (rs_cycles_o),
    .rd_en_o (rs_rd_en_o), .rd_addr_o (rs_rd_addr_o), .rd_data_i (rs_rd_data_i),
    .ptr_idx_i ({1'b0, bus_addr_i[30:0]}), .ptr_lo_o (ptr_lo), .ptr_hi_o (ptr_hi)
  );

  reindexer #(.N_SCR(N_SCR), .W_SCR(W_SCR), .MAP_DEPTH(MAP_DEPTH)) u_reindexer (
    .clk, .rst_n,
    .clear_i (ri_clear_i), .req_i (ri_req_i), .vid_i (ri_vid_i), .ready_o (ri_ready_o),
    .resp_valid_o (ri_resp_valid_o), .new_vid_o (ri_new_vid_o), .found_o (ri_found_o),
    .count_o (ri_count_o), .overflow_o (ri_overflow_o),
    .map_idx_i ({1'b0, bus_addr_i[30:0]}), .map_orig_o (map_orig)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_map_q <= 1'b0;
    else        sel_map_q <= bus_addr_i[31];
  end

  assign bus_rdata_o      = sel_map_q ? map_orig : ptr_lo;
  assign bus_rdata_next_o = sel_map_q ? '0 : ptr_hi;

endmodule
