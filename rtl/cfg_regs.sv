// cfg_regs: host-visible configuration and status registers.
//
// A 32-bit register bus (write: wr_en_i/addr_i/wdata_i; read: rd_en_i/addr_i,
// data on rdata_o the next cycle) reaches the registers below. Addresses are
// byte offsets; the map is this design's own.
//   0x00 CTRL      w: bit0 start preprocessing, bit1 start reconfiguration (pulses)
//   0x04 STATUS    r: bit0 busy, bit1 done (sticky, cleared by start),
//                     bit2 reconfiguration busy, bits 6:4 error flags
//   0x08 N_EDGES   0x0C N_NODES   0x10 VID_BITS   0x14 K
//   0x18 LAYERS    0x1C BATCH     0x20 SEED       0x24 RECONF_KEY
//   0x28 SUB_EDGES r    0x2C SUB_NODES r   0x30 SUB_BASE r (row of sorted subgraph)
//   0x34 CYC_ORDER r    0x38 CYC_RESHAPE r 0x3C CYC_SAMPLE r
// Writes to read-only addresses are ignored; unmapped reads return 0.
//
// From the paper: the host configures the kernel and starts reconfiguration
// through registers. This design's own: all addresses and fields.
module cfg_regs (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en_i,
  input  logic        rd_en_i,
  input  logic [7:0]  addr_i,
  input  logic [31:0] wdata_i,
  output logic [31:0] rdata_o,
  // to the kernel
  output logic        start_o,
  output logic        reconf_start_o,
  output logic [31:0] n_edges_o,
  output logic [31:0] n_nodes_o,
  output logic [5:0]  vid_bits_o,
  output logic [7:0]  k_o,
  output logic [3:0]  layers_o,
  output logic [31:0] batch_o,
  output logic [15:0] seed_o,
  output logic [4:0]  reconf_key_o,
  // from the kernel
  input  logic        busy_i,
  input  logic        done_i,
  input  logic        reconf_busy_i,
  input  logic [2:0]  err_i,
  input  logic [31:0] sub_edges_i,
  input  logic [31:0] sub_nodes_i,
  input  logic [31:0] sub_base_i,
  input  logic [31:0] cyc_order_i,
  input  logic [31:0] cyc_reshape_i,
  input  logic [31:0] cyc_sample_i
);

  logic done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_o <= 1'b0; reconf_start_o <= 1'b0;
      n_edges_o <= '0; n_nodes_o <= '0; vid_bits_o <= 6'd32; k_o <= 8'd10;
      layers_o <= 4'd2; batch_o <= '0; seed_o <= 16'h1; reconf_key_o <= '0;
      done_q <= 1'b0; rdata_o <= '0;
    end else begin
      start_o <= 1'b0; reconf_start_o <= 1'b0;
      if (done_i) done_q <= 1'b1;
      if (wr_en_i) begin
        case (addr_i)
          8'h00: begin
            start_o <= wdata_i[0];
            reconf_start_o <= wdata_i[1];
            if (wdata_i[0]) done_q <= 1'b0;
          end
          8'h08: n_edges_o    <= wdata_i;
          8'h0C: n_nodes_o    <= wdata_i;
          8'h10: vid_bits_o   <= wdata_i[5:0];
          8'h14: k_o          <= wdata_i[7:0];
          8'h18: layers_o     <= wdata_i[3:0];
          8'h1C: batch_o      <= wdata_i;
          8'h20: seed_o       <= wdata_i[15:0];
          8'h24: reconf_key_o <= wdata_i[4:0];
          default: ;
        endcase
      end
      if (rd_en_i) begin
        case (addr_i)
          8'h04: rdata_o <= {25'd0, err_i, 1'b0, reconf_busy_i, done_q, busy_i};
          8'h08: rdata_o <= n_edges_o;
          8'h0C: rdata_o <= n_nodes_o;
          8'h10: rdata_o <= {26'd0, vid_bits_o};
          8'h14: rdata_o <= {24'd0, k_o};
          8'h18: rdata_o <= {28'd0, layers_o};
          8'h1C: rdata_o <= batch_o;
          8'h20: rdata_o <= {16'd0, seed_o};
          8'h24: rdata_o <= {27'd0, reconf_key_o};
          8'h28: rdata_o <= sub_edges_i;
          8'h2C: rdata_o <= sub_nodes_i;
          8'h30: rdata_o <= sub_base_i;
          8'h34: rdata_o <= cyc_order_i;
          8'h38: rdata_o <= cyc_reshape_i;
          8'h3C: rdata_o <= cyc_sample_i;
          default: rdata_o <= '0;
        endcase
      end
    end
  end

endmodule
