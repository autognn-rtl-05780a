// scratchpad: shared on-chip memory of the UPE kernel.
//
// Holds edge arrays (64-bit {dst, src} elements) in rows of RE elements, the
// unit in which UPEs move data (half a UPE width). Two independent ports:
// port A serves the UPEs through the UPE crossbar, port B serves the workflow
// sequencer, the SCR kernel and the host. Both ports read synchronously: data
// appears the cycle after the request. A write and a read of the same row in
// the same cycle from different ports return the old contents. Written as an
// array so that synthesis can map it onto block or ultra RAM.
//
// From the paper: a scratchpad shared by the UPEs. This design's own: its
// size (ROWS), the row width of W/2 edges and the second port.
module scratchpad
  import agnn_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned RE   = 32
) (
  input  logic                       clk,
  input  logic                       a_en_i,
  input  logic                       a_we_i,
  input  row_addr_t                  a_addr_i,
  input  logic [RE-1:0][ELEM_W-1:0]  a_wdata_i,
  output logic [RE-1:0][ELEM_W-1:0]  a_rdata_o,
  input  logic                       b_en_i,
  input  logic                       b_we_i,
  input  row_addr_t                  b_addr_i,
  input  logic [RE-1:0][ELEM_W-1:0]  b_wdata_i,
  output logic [RE-1:0][ELEM_W-1:0]  b_rdata_o
);

  localparam int unsigned AW = $clog2(ROWS);

  logic [RE-1:0][ELEM_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (a_en_i) begin
      if (a_we_i) mem[a_addr_i[AW-1:0]] <= a_wdata_i;
      a_rdata_o <= mem[a_addr_i[AW-1:0]];
    end
    if (b_en_i) begin
      if (b_we_i) mem[b_addr_i[AW-1:0]] <= b_wdata_i;
      b_rdata_o <= mem[b_addr_i[AW-1:0]];
    end
  end

endmodule
