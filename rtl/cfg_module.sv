// cfg_module: configuration side of the wrapper.
//
// The PCIe core owns the configuration space; this module turns what the
// core reports into ready-to-use values for the user modules and gives them a
// simple request/response port for reading any configuration DW.
//   * completer_id = {bus, device, function} as assigned by the host; a module
//     that returns completions puts it in the completion header.
//   * bus_master_en (Command bit 2), max_payload_bytes and max_rd_req_bytes
//     (Device Control bits [7:5] and [14:12], 128 << code).
//   * Reading configuration DW `rd_dwaddr`: pulse rd_req; the module drives the
//     core's cfg_dwaddr / cfg_rd_en_n and waits for cfg_rd_wr_done_n, then
//     returns the DW on rd_data with a one-clock rd_valid. Requests arriving
//     while busy are ignored (rd_busy is high).
//   * cfg_trn_pending_n tells the core that user modules wait for completions.
// The paper names this module and says it configures the core; all of the
// above is this design's choice, built on the Xilinx core's configuration
// port signals. All outputs are registered; the values follow the core's
// inputs one clock later.
module cfg_module (
  input  logic        clk,
  input  logic        rst_n,
  // from / to the core's configuration interface
  input  logic [7:0]  cfg_bus_number,
  input  logic [4:0]  cfg_device_number,
  input  logic [2:0]  cfg_function_number,
  input  logic [15:0] cfg_command,
  input  logic [15:0] cfg_dcommand,
  input  logic [31:0] cfg_do,
  input  logic        cfg_rd_wr_done_n,
  output logic [9:0]  cfg_dwaddr,
  output logic        cfg_rd_en_n,
  output logic        cfg_trn_pending_n,
  // to the user modules
  input  logic        usr_trn_pending,
  output logic [15:0] completer_id,
  output logic        bus_master_en,
  output logic [12:0] max_payload_bytes,
  output logic [12:0] max_rd_req_bytes,
  input  logic        rd_req,
  input  logic [9:0]  rd_dwaddr,
  output logic        rd_busy,
  output logic        rd_valid,
  output logic [31:0] rd_data
);

  function automatic logic [12:0] size_code(input logic [2:0] code);
    return (code > 3'd5) ? 13'd4096 : (13'd128 << code);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      completer_id      <= '0;
      bus_master_en     <= 1'b0;
      max_payload_bytes <= 13'd128;
      max_rd_req_bytes  <= 13'd128;
      cfg_trn_pending_n <= 1'b1;
      cfg_dwaddr        <= '0;
      cfg_rd_en_n       <= 1'b1;
      rd_busy           <= 1'b0;
      rd_valid          <= 1'b0;
      rd_data           <= '0;
    end else begin
      completer_id      <= {cfg_bus_number, cfg_device_number, cfg_function_number};
      bus_master_en     <= cfg_command[2];
      max_payload_bytes <= size_code(cfg_dcommand[7:5]);
      max_rd_req_bytes  <= size_code(cfg_dcommand[14:12]);
      cfg_trn_pending_n <= !usr_trn_pending;
      rd_valid          <= 1'b0;
      if (!rd_busy) begin
        if (rd_req) begin
          cfg_dwaddr  <= rd_dwaddr;
          cfg_rd_en_n <= 1'b0;
          rd_busy     <= 1'b1;
        end
      end else if (!cfg_rd_wr_done_n) begin
        cfg_rd_en_n <= 1'b1;
        rd_busy     <= 1'b0;
        rd_valid    <= 1'b1;
        rd_data     <= cfg_do;
      end
    end
  end

endmodule
