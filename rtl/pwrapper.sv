// pwrapper: PCIe endpoint wrapper with FIFO interfaces.
//
// It sits between the transaction (TRN) and configuration (CFG) interfaces of
// a PCIe endpoint core and any number of user modules, and gives each user
// module nothing but FIFOs: N_RX receive FIFOs, each fed with the TLPs whose
// destination address falls into its window of BAR0 (or with completions, for
// FIFO CPL_FIFO), and N_TX transmit FIFOs whose TLPs are sent to the core in
// fixed priority order. Every FIFO is dual-clock, so each user module runs in
// a clock of its own, and carries 64-bit words with start/end-of-packet
// markers (pwr_pkg::fifo_word_t). A conf_intr block gives configuration
// values and a shared interrupt port.
//
// The split into TX, RX and CONF&INTR parts follows the paper; the counts and
// depths are defaults of this design (four TX FIFOs as in the paper's build).
// All TRN/CFG signals use the core's names and active-low conventions and
// run on trn_clk.
module pwrapper
  import pwr_pkg::*;
#(
  parameter int unsigned N_RX      = 4,
  parameter int unsigned N_TX      = 4,
  parameter int unsigned ADDR_W    = 9,
  parameter int unsigned ROUTE_LSB = 12,
  parameter int unsigned CPL_FIFO  = N_RX - 1,
  parameter int unsigned N_IRQ     = 4
) (
  input  logic              trn_clk,
  input  logic              trn_reset_n,
  // receive TRN
  input  logic [63:0]       trn_rd,
  input  logic [7:0]        trn_rrem_n,
  input  logic              trn_rsof_n,
  input  logic              trn_reof_n,
  input  logic              trn_rsrc_rdy_n,
  input  logic              trn_rsrc_dsc_n,
  input  logic [6:0]        trn_rbar_hit_n,
  output logic              trn_rdst_rdy_n,
  output logic              trn_rnp_ok_n,
  // transmit TRN
  output logic [63:0]       trn_td,
  output logic [7:0]        trn_trem_n,
  output logic              trn_tsof_n,
  output logic              trn_teof_n,
  output logic              trn_tsrc_rdy_n,
  output logic              trn_tsrc_dsc_n,
  input  logic              trn_tdst_rdy_n,
  input  logic [3:0]        trn_tbuf_av,
  // configuration and interrupt
  input  logic [7:0]        cfg_bus_number,
  input  logic [4:0]        cfg_device_number,
  input  logic [2:0]        cfg_function_number,
  input  logic [15:0]       cfg_command,
  input  logic [15:0]       cfg_dcommand,
  input  logic [31:0]       cfg_do,
  input  logic              cfg_rd_wr_done_n,
  output logic [9:0]        cfg_dwaddr,
  output logic              cfg_rd_en_n,
  output logic              cfg_trn_pending_n,
  output logic              cfg_interrupt_n,
  input  logic              cfg_interrupt_rdy_n,
  output logic [7:0]        cfg_interrupt_di,
  output logic              cfg_interrupt_assert_n,
  // user RX FIFOs
  input  logic              rx_clk      [N_RX],
  input  logic              rx_rst_n    [N_RX],
  input  logic [N_RX-1:0]   rx_rd_en,
  output fifo_word_t        rx_dout     [N_RX],
  output logic [N_RX-1:0]   rx_empty,
  output logic [N_RX-1:0]   rx_valid,
  output logic [ADDR_W:0]   rx_rd_count [N_RX],
  // user TX FIFOs
  input  logic              tx_clk      [N_TX],
  input  logic              tx_rst_n    [N_TX],
  input  logic [N_TX-1:0]   tx_wr_en,
  input  fifo_word_t        tx_din      [N_TX],
  output logic [N_TX-1:0]   tx_full,
  output logic [N_TX-1:0]   tx_wr_ack,
  output logic [N_TX-1:0]   tx_overflow,
  output logic [ADDR_W:0]   tx_wr_count [N_TX],
  // user configuration / interrupt (trn_clk)
  input  logic              usr_trn_pending,
  output logic [15:0]       completer_id,
  output logic              bus_master_en,
  output logic [12:0]       max_payload_bytes,
  output logic [12:0]       max_rd_req_bytes,
  input  logic              cfg_rd_req,
  input  logic [9:0]        cfg_rd_dwaddr,
  output logic              cfg_rd_busy,
  output logic              cfg_rd_valid,
  output logic [31:0]       cfg_rd_data,
  input  logic [N_IRQ-1:0]  irq_req,
  output logic [N_IRQ-1:0]  irq_ack,
  // status pulses (trn_clk)
  output logic              rx_pkt_dispatched,
  output logic              rx_pkt_discarded,
  output logic              rx_stall,
  output logic              tx_pkt_sent,
  output logic              tx_resync_drop
);

  rx_module #(
    .N_FIFO(N_RX), .ADDR_W(ADDR_W), .ROUTE_LSB(ROUTE_LSB), .CPL_FIFO(CPL_FIFO)
  ) u_rx (
    .trn_clk, .trn_rst_n(trn_reset_n),
    .trn_rd, .trn_rrem_n, .trn_rsof_n, .trn_reof_n, .trn_rsrc_rdy_n,
    .trn_rsrc_dsc_n, .trn_rbar_hit_n, .trn_rdst_rdy_n, .trn_rnp_ok_n,
    .usr_clk(rx_clk), .usr_rst_n(rx_rst_n), .usr_rd_en(rx_rd_en),
    .usr_dout(rx_dout), .usr_empty(rx_empty), .usr_valid(rx_valid),
    .usr_rd_count(rx_rd_count),
    .pkt_dispatched(rx_pkt_dispatched), .pkt_discarded(rx_pkt_discarded),
    .stall(rx_stall)
  );

  tx_module #(.N_FIFO(N_TX), .ADDR_W(ADDR_W)) u_tx (
    .trn_clk, .trn_rst_n(trn_reset_n),
    .trn_td, .trn_trem_n, .trn_tsof_n, .trn_teof_n, .trn_tsrc_rdy_n,
    .trn_tsrc_dsc_n, .trn_tdst_rdy_n, .trn_tbuf_av,
    .usr_clk(tx_clk), .usr_rst_n(tx_rst_n), .usr_wr_en(tx_wr_en),
    .usr_din(tx_din), .usr_full(tx_full), .usr_wr_ack(tx_wr_ack),
    .usr_overflow(tx_overflow), .usr_wr_count(tx_wr_count),
    .pkt_sent(tx_pkt_sent), .resync_drop(tx_resync_drop)
  );

  conf_intr #(.N_IRQ(N_IRQ)) u_conf_intr (
    .clk(trn_clk), .rst_n(trn_reset_n),
    .cfg_bus_number, .cfg_device_number, .cfg_function_number,
    .cfg_command, .cfg_dcommand, .cfg_do, .cfg_rd_wr_done_n,
    .cfg_dwaddr, .cfg_rd_en_n, .cfg_trn_pending_n,
    .cfg_interrupt_n, .cfg_interrupt_rdy_n, .cfg_interrupt_di,
    .cfg_interrupt_assert_n,
    .usr_trn_pending, .completer_id, .bus_master_en,
    .max_payload_bytes, .max_rd_req_bytes,
    .cfg_rd_req, .cfg_rd_dwaddr, .cfg_rd_busy, .cfg_rd_valid, .cfg_rd_data,
    .irq_req, .irq_ack
  );

endmodule
