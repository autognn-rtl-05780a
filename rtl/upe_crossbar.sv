// upe_crossbar: switch between the UPE engines and the scratchpad.
//
// N_UPE engines each present a row request (req/we/addr/wdata). Every cycle
// a round-robin arbiter grants at most one of them the scratchpad port; the
// pointer moves past the winner so that every engine is served within N_UPE
// grants. Read data returns one cycle after the grant and is broadcast to all
// engines, with rvalid raised only for the engine that was granted.
//
// With one scratchpad bank the switch has N_UPE inputs and one output.
//
// From the paper: UPEs and scratchpad joined by a crossbar. This design's
// own: a single bank (so an N:1 switch), round-robin arbitration and the
// one-cycle read latency.
// The assertion is sampled on the clock and disabled during reset, so rst_n
// also appears in a synchronous context; that is only for checking, and the
// flops themselves use the asynchronous active-low reset throughout.
//
// m_rdata_o is the scratchpad read data broadcast to every engine unchanged
// (only rvalid says whose it is), so those output bits come straight from
// s_rdata_i by design.
module upe_crossbar
  import agnn_pkg::*;
#(
  parameter int unsigned N_UPE = 32,
  parameter int unsigned RE    = 32
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [N_UPE-1:0]                      m_req_i,
  input  logic [N_UPE-1:0]                      m_we_i,
  input  row_addr_t [N_UPE-1:0]                 m_addr_i,
  input  logic [N_UPE-1:0][RE-1:0][ELEM_W-1:0]  m_wdata_i,
  output logic [N_UPE-1:0]                      m_gnt_o,
  output logic [N_UPE-1:0]                      m_rvalid_o,
  output logic [RE-1:0][ELEM_W-1:0]             m_rdata_o,
  // scratchpad port
  output logic                                  s_en_o,
  output logic                                  s_we_o,
  output row_addr_t                             s_addr_o,
  output logic [RE-1:0][ELEM_W-1:0]             s_wdata_o,
  input  logic [RE-1:0][ELEM_W-1:0]             s_rdata_i
);

  localparam int unsigned IW = (N_UPE > 1) ? $clog2(N_UPE) : 1;

  logic [IW-1:0] ptr;        // highest priority requester
  logic [IW-1:0] win;
  logic          any;

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int o = 0; o < N_UPE; o++) begin
      int idx;
      idx = (int'(ptr) + o) % N_UPE;
      if (!any && m_req_i[idx]) begin
        any = 1'b1;
        win = IW'(idx);
      end
    end
    m_gnt_o = '0;
    if (any) m_gnt_o[win] = 1'b1;
  end

  assign s_en_o    = any;
  assign s_we_o    = any & m_we_i[win];
  assign s_addr_o  = m_addr_i[win];
  assign s_wdata_o = m_wdata_i[win];
  assign m_rdata_o = s_rdata_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr        <= '0;
      m_rvalid_o <= '0;
    end else begin
      m_rvalid_o <= '0;
      if (any) begin
        ptr <= (int'(win) == N_UPE - 1) ? '0 : win + 1'b1;
        if (!m_we_i[win]) m_rvalid_o[win] <= 1'b1;
      end
    end
  end

  // A grant is one-hot and only goes to a requester.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(m_gnt_o) && ((m_gnt_o & ~m_req_i) == '0));

endmodule
