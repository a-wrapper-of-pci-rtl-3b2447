// pwrapper_board: the wrapper as brought up on the FPGA board.
//
// A pwrapper whose RX FIFO 0 and TX FIFO 0 are used by a test_module: the host
// writes a byte to the LEDs with a memory write into the first 4 KB window of
// BAR0 and reads the switches back with a memory read of the same window. The
// other RX and TX FIFOs (1 .. N-1) stay free for further user modules and are
// ports of this top, numbered from 0 (port element k is FIFO k+1). The PCIe
// core (trn_* and cfg_* ports) is outside: this top is what sits next to it.
//
// The test module runs on its own clock test_clk, which shows the clock
// domain isolation of the FIFOs. It reads the completer ID from the trn_clk
// domain directly: the value only changes during enumeration, long before any
// read request arrives, so no synchroniser is used for it.
module pwrapper_board
  import pwr_pkg::*;
#(
  parameter int unsigned N_RX      = 4,
  parameter int unsigned N_TX      = 4,
  parameter int unsigned ADDR_W    = 9,
  parameter int unsigned ROUTE_LSB = 12,
  parameter int unsigned N_IRQ     = 4
) (
  input  logic              trn_clk,
  input  logic              trn_reset_n,
  input  logic [63:0]       trn_rd,
  input  logic [7:0]        trn_rrem_n,
  input  logic              trn_rsof_n,
  input  logic              trn_reof_n,
  input  logic              trn_rsrc_rdy_n,
  input  logic              trn_rsrc_dsc_n,
  input  logic [6:0]        trn_rbar_hit_n,
  output logic              trn_rdst_rdy_n,
  output logic              trn_rnp_ok_n,
  output logic [63:0]       trn_td,
  output logic [7:0]        trn_trem_n,
  output logic              trn_tsof_n,
  output logic              trn_teof_n,
  output logic              trn_tsrc_rdy_n,
  output logic              trn_tsrc_dsc_n,
  input  logic              trn_tdst_rdy_n,
  input  logic [3:0]        trn_tbuf_av,
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
  // board
  input  logic              test_clk,
  input  logic              test_rst_n,
  input  logic [7:0]        switches,
  output logic [7:0]        leds,
  // free user RX FIFOs 1 .. N_RX-1
  input  logic              rx_clk      [N_RX-1],
  input  logic              rx_rst_n    [N_RX-1],
  input  logic [N_RX-2:0]   rx_rd_en,
  output fifo_word_t        rx_dout     [N_RX-1],
  output logic [N_RX-2:0]   rx_empty,
  output logic [N_RX-2:0]   rx_valid,
  output logic [ADDR_W:0]   rx_rd_count [N_RX-1],
  // free user TX FIFOs 1 .. N_TX-1
  input  logic              tx_clk      [N_TX-1],
  input  logic              tx_rst_n    [N_TX-1],
  input  logic [N_TX-2:0]   tx_wr_en,
  input  fifo_word_t        tx_din      [N_TX-1],
  output logic [N_TX-2:0]   tx_full,
  output logic [N_TX-2:0]   tx_wr_ack,
  output logic [N_TX-2:0]   tx_overflow,
  output logic [ADDR_W:0]   tx_wr_count [N_TX-1],
  // configuration / interrupt for user modules (trn_clk)
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
  // status pulses
  output logic              rx_pkt_dispatched,
  output logic              rx_pkt_discarded,
  output logic              rx_stall,
  output logic              tx_pkt_sent,
  output logic              tx_resync_drop,
  output logic              test_wr_seen,
  output logic              test_rd_seen
);

  logic              rxc   [N_RX];
  logic              rxr   [N_RX];
  logic [N_RX-1:0]   rxe;
  fifo_word_t        rxd   [N_RX];
  logic [N_RX-1:0]   rxem, rxv;
  logic [ADDR_W:0]   rxcnt [N_RX];

  logic              txc   [N_TX];
  logic              txr   [N_TX];
  logic [N_TX-1:0]   txe;
  fifo_word_t        txd   [N_TX];
  logic [N_TX-1:0]   txf, txa, txo;
  logic [ADDR_W:0]   txcnt [N_TX];

  logic       t_rx_rd_en, t_tx_wr_en;
  fifo_word_t t_tx_din;

  assign rxc[0] = test_clk;
  assign rxr[0] = test_rst_n;
  assign rxe[0] = t_rx_rd_en;
  assign txc[0] = test_clk;
  assign txr[0] = test_rst_n;
  assign txe[0] = t_tx_wr_en;
  assign txd[0] = t_tx_din;

  for (genvar k = 1; k < int'(N_RX); k++) begin : g_rx_port
    assign rxc[k]           = rx_clk[k-1];
    assign rxr[k]           = rx_rst_n[k-1];
    assign rxe[k]           = rx_rd_en[k-1];
    assign rx_dout[k-1]     = rxd[k];
    assign rx_empty[k-1]    = rxem[k];
    assign rx_valid[k-1]    = rxv[k];
    assign rx_rd_count[k-1] = rxcnt[k];
  end

  for (genvar k = 1; k < int'(N_TX); k++) begin : g_tx_port
    assign txc[k]           = tx_clk[k-1];
    assign txr[k]           = tx_rst_n[k-1];
    assign txe[k]           = tx_wr_en[k-1];
    assign txd[k]           = tx_din[k-1];
    assign tx_full[k-1]     = txf[k];
    assign tx_wr_ack[k-1]   = txa[k];
    assign tx_overflow[k-1] = txo[k];
    assign tx_wr_count[k-1] = txcnt[k];
  end

  pwrapper #(
    .N_RX(N_RX), .N_TX(N_TX), .ADDR_W(ADDR_W), .ROUTE_LSB(ROUTE_LSB),
    .N_IRQ(N_IRQ)
  ) u_pwrapper (
    .trn_clk, .trn_reset_n,
    .trn_rd, .trn_rrem_n, .trn_rsof_n, .trn_reof_n, .trn_rsrc_rdy_n,
    .trn_rsrc_dsc_n, .trn_rbar_hit_n, .trn_rdst_rdy_n, .trn_rnp_ok_n,
    .trn_td, .trn_trem_n, .trn_tsof_n, .trn_teof_n, .trn_tsrc_rdy_n,
    .trn_tsrc_dsc_n, .trn_tdst_rdy_n, .trn_tbuf_av,
    .cfg_bus_number, .cfg_device_number, .cfg_function_number,
    .cfg_command, .cfg_dcommand, .cfg_do, .cfg_rd_wr_done_n,
    .cfg_dwaddr, .cfg_rd_en_n, .cfg_trn_pending_n,
    .cfg_interrupt_n, .cfg_interrupt_rdy_n, .cfg_interrupt_di,
    .cfg_interrupt_assert_n,
    .rx_clk(rxc), .rx_rst_n(rxr), .rx_rd_en(rxe), .rx_dout(rxd),
    .rx_empty(rxem), .rx_valid(rxv), .rx_rd_count(rxcnt),
    .tx_clk(txc), .tx_rst_n(txr), .tx_wr_en(txe), .tx_din(txd),
    .tx_full(txf), .tx_wr_ack(txa), .tx_overflow(txo), .tx_wr_count(txcnt),
    .usr_trn_pending, .completer_id, .bus_master_en,
    .max_payload_bytes, .max_rd_req_bytes,
    .cfg_rd_req, .cfg_rd_dwaddr, .cfg_rd_busy, .cfg_rd_valid, .cfg_rd_data,
    .irq_req, .irq_ack,
    .rx_pkt_dispatched, .rx_pkt_discarded, .rx_stall,
    .tx_pkt_sent, .tx_resync_drop
  );

  test_module #(.ADDR_W(ADDR_W)) u_test (
    .clk(test_clk), .rst_n(test_rst_n),
    .rx_dout(rxd[0]), .rx_empty(rxem[0]), .rx_rd_en(t_rx_rd_en),
    .tx_din(t_tx_din), .tx_wr_en(t_tx_wr_en), .tx_wr_count(txcnt[0]),
    .completer_id, .switches, .leds,
    .wr_seen(test_wr_seen), .rd_seen(test_rd_seen)
  );

endmodule
