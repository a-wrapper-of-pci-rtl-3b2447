// tx_module: the transmit half of the wrapper.
//
// N_FIFO dual-clock FIFOs collect TLPs from user modules, each written in its
// own clock usr_clk[i] as pwr_pkg::fifo_word_t words (one QW plus start/end
// markers). A tx_scheduler in the PCIe core's clock domain sends complete TLPs
// from them to the core's transmit TRN interface, FIFO 0 having the highest
// priority. A user module may check usr_wr_count before writing, to write a
// packet only when it fits (usr_full, usr_wr_ack and usr_overflow report a
// failed single write).
//
// Structure (scheduler plus several FIFOs, four of them) follows the paper;
// depth and the per-FIFO user clocks are this design's choices. A packet
// becomes eligible at most 3 trn_clk after its last word is written.
module tx_module
  import pwr_pkg::*;
#(
  parameter int unsigned N_FIFO = 4,
  parameter int unsigned ADDR_W = 9
) (
  input  logic              trn_clk,
  input  logic              trn_rst_n,
  output logic [63:0]       trn_td,
  output logic [7:0]        trn_trem_n,
  output logic              trn_tsof_n,
  output logic              trn_teof_n,
  output logic              trn_tsrc_rdy_n,
  output logic              trn_tsrc_dsc_n,
  input  logic              trn_tdst_rdy_n,
  input  logic [3:0]        trn_tbuf_av,
  // user side
  input  logic              usr_clk      [N_FIFO],
  input  logic              usr_rst_n    [N_FIFO],
  input  logic [N_FIFO-1:0] usr_wr_en,
  input  fifo_word_t        usr_din      [N_FIFO],
  output logic [N_FIFO-1:0] usr_full,
  output logic [N_FIFO-1:0] usr_wr_ack,
  output logic [N_FIFO-1:0] usr_overflow,
  output logic [ADDR_W:0]   usr_wr_count [N_FIFO],
  // status pulses (trn_clk)
  output logic              pkt_sent,
  output logic              resync_drop
);

  fifo_word_t        dout     [N_FIFO];
  logic [N_FIFO-1:0] empty, rd_en;
  logic [ADDR_W:0]   rd_count [N_FIFO];

  for (genvar i = 0; i < int'(N_FIFO); i++) begin : g_fifo
    logic [FIFO_W-1:0] dout_bits;
    logic              valid, underflow;
    async_fifo #(.DATA_W(FIFO_W), .ADDR_W(ADDR_W)) u_fifo (
      .wr_clk(usr_clk[i]), .wr_rst_n(usr_rst_n[i]), .wr_en(usr_wr_en[i]),
      .din(usr_din[i]), .full(usr_full[i]), .wr_ack(usr_wr_ack[i]),
      .overflow(usr_overflow[i]), .wr_data_count(usr_wr_count[i]),
      .rd_clk(trn_clk), .rd_rst_n(trn_rst_n), .rd_en(rd_en[i]),
      .dout(dout_bits), .empty(empty[i]), .valid, .underflow,
      .rd_data_count(rd_count[i])
    );
    assign dout[i] = fifo_word_t'(dout_bits);
  end

  tx_scheduler #(.N_FIFO(N_FIFO), .ADDR_W(ADDR_W)) u_sched (
    .clk(trn_clk), .rst_n(trn_rst_n),
    .fifo_dout(dout), .fifo_empty(empty), .fifo_rd_count(rd_count),
    .fifo_rd_en(rd_en),
    .trn_td, .trn_trem_n, .trn_tsof_n, .trn_teof_n, .trn_tsrc_rdy_n,
    .trn_tsrc_dsc_n, .trn_tdst_rdy_n, .trn_tbuf_av,
    .pkt_sent, .resync_drop
  );

endmodule
