// fpp_controller: FPGA programming port controller (partial reconfiguration).
//
// The host selects a pre-compiled kernel variant by key. The bitstreams are
// staged in device DRAM in fixed slots: key n occupies BS_BYTES bytes from
// DRAM_BASE + n * BS_BYTES. On start_i the controller latches the key, reads
// that slot word by word from DRAM and hands every 32-bit word to the
// configuration access port (ICAP) with a valid/ready handshake, then pulses
// done_o. Keys at or above N_BITSTREAMS are rejected (error_o, nothing sent).
//
// DRAM read port: dram_req_o/dram_addr_o held until dram_gnt_i; data on
// dram_rvalid_i some cycles later. One word is in flight at a time, so the
// rate is one word per (DRAM latency + 2) cycles at best.
//
// From the paper: the key selects a bitstream in device DRAM, which is sent
// to the configuration port; 20 bitstreams of 50 MB. This design's own:
// the fixed slot layout, word-at-a-time transfer and the error on bad keys.
module fpp_controller #(
  parameter int unsigned N_BITSTREAMS = 20,
  parameter longint unsigned BS_BYTES = 64'd52428800,   // 50 MB per bitstream
  parameter longint unsigned DRAM_BASE = 64'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_i,
  input  logic [4:0]  key_i,
  output logic        busy_o,
  output logic        done_o,
  output logic        error_o,
  output logic [31:0] words_o,
  // internal DRAM
  output logic        dram_req_o,
  output logic [63:0] dram_addr_o,
  input  logic        dram_gnt_i,
  input  logic        dram_rvalid_i,
  input  logic [31:0] dram_rdata_i,
  // configuration access port
  output logic        icap_valid_o,
  output logic [31:0] icap_data_o,
  input  logic        icap_ready_i
);

  localparam longint unsigned WORDS = BS_BYTES / 4;

  typedef enum logic [1:0] { F_IDLE, F_REQ, F_WAIT, F_SEND } fstate_e;

  fstate_e st;
  logic [63:0] addr, remaining;

  assign busy_o       = (st != F_IDLE);
  assign dram_req_o   = (st == F_REQ);
  assign dram_addr_o  = addr;
  assign icap_valid_o = (st == F_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; addr <= '0; remaining <= '0; done_o <= 1'b0; error_o <= 1'b0;
      words_o <= '0; icap_data_o <= '0;
    end else begin
      done_o <= 1'b0;
      case (st)
        F_IDLE: if (start_i) begin
          if (32'(key_i) >= N_BITSTREAMS) error_o <= 1'b1;
          else begin
            error_o <= 1'b0;
            addr <= DRAM_BASE + 64'(key_i) * BS_BYTES;
            remaining <= WORDS;
            words_o <= '0;
            st <= F_REQ;
          end
        end
        F_REQ:  if (dram_gnt_i) st <= F_WAIT;
        F_WAIT: if (dram_rvalid_i) begin icap_data_o <= dram_rdata_i; st <= F_SEND; end
        F_SEND: if (icap_ready_i) begin
          words_o <= words_o + 1;
          addr <= addr + 4;
          remaining <= remaining - 1;
          if (remaining == 1) begin st <= F_IDLE; done_o <= 1'b1; end
          else st <= F_REQ;
        end
        default: st <= F_IDLE;
      endcase
    end
  end

endmodule
