// conf_intr: the configuration and interrupt part of the wrapper.
//
// It groups a cfg_module, which reads the PCIe core's configuration state for
// the user modules, and an intr_arb, which lets N_IRQ user modules share the
// core's interrupt port. The grouping follows the paper; see the two modules
// for what each does and for their timing.
module conf_intr #(
  parameter int unsigned N_IRQ       = 4,
  parameter logic [7:0]  VECTOR_BASE = 8'd0
) (
  input  logic             clk,
  input  logic             rst_n,
  // core configuration interface
  input  logic [7:0]       cfg_bus_number,
  input  logic [4:0]       cfg_device_number,
  input  logic [2:0]       cfg_function_number,
  input  logic [15:0]      cfg_command,
  input  logic [15:0]      cfg_dcommand,
  input  logic [31:0]      cfg_do,
  input  logic             cfg_rd_wr_done_n,
  output logic [9:0]       cfg_dwaddr,
  output logic             cfg_rd_en_n,
  output logic             cfg_trn_pending_n,
  // core interrupt interface
  output logic             cfg_interrupt_n,
  input  logic             cfg_interrupt_rdy_n,
  output logic [7:0]       cfg_interrupt_di,
  output logic             cfg_interrupt_assert_n,
  // user side
  input  logic             usr_trn_pending,
  output logic [15:0]      completer_id,
  output logic             bus_master_en,
  output logic [12:0]      max_payload_bytes,
  output logic [12:0]      max_rd_req_bytes,
  input  logic             cfg_rd_req,
  input  logic [9:0]       cfg_rd_dwaddr,
  output logic             cfg_rd_busy,
  output logic             cfg_rd_valid,
  output logic [31:0]      cfg_rd_data,
  input  logic [N_IRQ-1:0] irq_req,
  output logic [N_IRQ-1:0] irq_ack
);

  cfg_module u_cfg (
    .clk, .rst_n,
    .cfg_bus_number, .cfg_device_number, .cfg_function_number,
    .cfg_command, .cfg_dcommand, .cfg_do, .cfg_rd_wr_done_n,
    .cfg_dwaddr, .cfg_rd_en_n, .cfg_trn_pending_n,
    .usr_trn_pending, .completer_id, .bus_master_en,
    .max_payload_bytes, .max_rd_req_bytes,
    .rd_req(cfg_rd_req), .rd_dwaddr(cfg_rd_dwaddr), .rd_busy(cfg_rd_busy),
    .rd_valid(cfg_rd_valid), .rd_data(cfg_rd_data)
  );

  intr_arb #(.N_IRQ(N_IRQ), .VECTOR_BASE(VECTOR_BASE)) u_intr (
    .clk, .rst_n, .irq_req, .irq_ack,
    .cfg_interrupt_n, .cfg_interrupt_rdy_n, .cfg_interrupt_di,
    .cfg_interrupt_assert_n
  );

endmodule
