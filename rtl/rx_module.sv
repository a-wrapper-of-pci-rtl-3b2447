// rx_module: the receive half of the wrapper.
//
// An rx_handler in the PCIe core's clock domain (trn_clk) fills N_FIFO
// dual-clock FIFOs; each FIFO is read by a user module in its own clock
// usr_clk[i] through a plain first-word-fall-through FIFO interface. Every
// FIFO word is a pwr_pkg::fifo_word_t: one QW of a TLP with start and end
// markers, so a user module sees whole TLPs, and can use usr_rd_count to wait
// for a complete packet before it starts reading.
//
// Structure (handler plus several FIFOs) follows the paper; the FIFO depth and
// the number of FIFOs are this design's defaults. Latency from the last header
// beat on the TRN interface to the packet's first word at the FIFO output: 3
// trn_clk for the decision and the first write, then at most 3 usr_clk for the
// pointer to cross.
module rx_module
  import pwr_pkg::*;
#(
  parameter int unsigned N_FIFO    = 4,
  parameter int unsigned ADDR_W    = 9,
  parameter int unsigned ROUTE_LSB = 12,
  parameter int unsigned CPL_FIFO  = N_FIFO - 1
) (
  input  logic              trn_clk,
  input  logic              trn_rst_n,
  input  logic [63:0]       trn_rd,
  input  logic [7:0]        trn_rrem_n,
  input  logic              trn_rsof_n,
  input  logic              trn_reof_n,
  input  logic              trn_rsrc_rdy_n,
  input  logic              trn_rsrc_dsc_n,
  input  logic [6:0]        trn_rbar_hit_n,
  output logic              trn_rdst_rdy_n,
  output logic              trn_rnp_ok_n,
  // user side, one FIFO per destination
  input  logic              usr_clk      [N_FIFO],
  input  logic              usr_rst_n    [N_FIFO],
  input  logic [N_FIFO-1:0] usr_rd_en,
  output fifo_word_t        usr_dout     [N_FIFO],
  output logic [N_FIFO-1:0] usr_empty,
  output logic [N_FIFO-1:0] usr_valid,
  output logic [ADDR_W:0]   usr_rd_count [N_FIFO],
  // status pulses (trn_clk)
  output logic              pkt_dispatched,
  output logic              pkt_discarded,
  output logic              stall
);

  logic [N_FIFO-1:0] wr_en;
  fifo_word_t        din;
  logic [ADDR_W:0]   wr_count [N_FIFO];

  rx_handler #(
    .N_FIFO(N_FIFO), .ADDR_W(ADDR_W), .ROUTE_LSB(ROUTE_LSB), .CPL_FIFO(CPL_FIFO)
  ) u_handler (
    .clk(trn_clk), .rst_n(trn_rst_n),
    .trn_rd, .trn_rrem_n, .trn_rsof_n, .trn_reof_n, .trn_rsrc_rdy_n,
    .trn_rsrc_dsc_n, .trn_rbar_hit_n, .trn_rdst_rdy_n, .trn_rnp_ok_n,
    .fifo_wr_en(wr_en), .fifo_din(din), .fifo_wr_count(wr_count),
    .pkt_dispatched, .pkt_discarded, .stall
  );

  for (genvar i = 0; i < int'(N_FIFO); i++) begin : g_fifo
    logic [FIFO_W-1:0] dout_bits;
    logic              full, wr_ack, overflow, underflow;
    async_fifo #(.DATA_W(FIFO_W), .ADDR_W(ADDR_W)) u_fifo (
      .wr_clk(trn_clk), .wr_rst_n(trn_rst_n), .wr_en(wr_en[i]), .din(din),
      .full, .wr_ack, .overflow, .wr_data_count(wr_count[i]),
      .rd_clk(usr_clk[i]), .rd_rst_n(usr_rst_n[i]), .rd_en(usr_rd_en[i]),
      .dout(dout_bits), .empty(usr_empty[i]), .valid(usr_valid[i]),
      .underflow, .rd_data_count(usr_rd_count[i])
    );
    assign usr_dout[i] = fifo_word_t'(dout_bits);
    // Space is reserved before a packet is written, so this never fires.
    a_no_overflow: assert property (@(posedge trn_clk) disable iff (!trn_rst_n)
                                    !(wr_en[i] && full));
  end

endmodule
