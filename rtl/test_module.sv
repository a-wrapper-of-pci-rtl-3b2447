// test_module: the board-level user of the wrapper used to bring it up.
//
// It reads TLPs from one RX FIFO and answers through one TX FIFO:
//   * a memory write: the lower 8 bits of the first payload DW are latched
//     onto the 8 LEDs;
//   * a memory read: it returns one completion with data (CplD, one DW) whose
//     lower 8 bits are the 8 switches, addressed back to the requester with
//     the requester ID, tag, traffic class and attributes of the request;
//   * anything else is read out and ignored.
// It parses the start/end markers of the FIFO words, never the lengths, and
// it writes the two QWs of a completion only when the TX FIFO has room for
// both, so neither FIFO can be over- or under-run.
//
// The LED and switch behaviour follows the paper. The completion fields are
// this design's: one DW, byte count 4, successful status, lower address
// {addr[6:2], 2'b00}, so a read larger than one DW is answered with one DW.
// Everything runs on clk, the user clock of both FIFOs.
module test_module
  import pwr_pkg::*;
#(
  parameter int unsigned ADDR_W = 9
) (
  input  logic            clk,
  input  logic            rst_n,
  // RX FIFO read side (first-word fall-through)
  input  fifo_word_t      rx_dout,
  input  logic            rx_empty,
  output logic            rx_rd_en,
  // TX FIFO write side
  output fifo_word_t      tx_din,
  output logic            tx_wr_en,
  input  logic [ADDR_W:0] tx_wr_count,
  // board
  input  logic [15:0]     completer_id,
  input  logic [7:0]      switches,
  output logic [7:0]      leds,
  // status pulses
  output logic            wr_seen,
  output logic            rd_seen
);

  localparam int unsigned DEPTH = 2 ** ADDR_W;

  typedef enum logic [5:0] {
    T_IDLE = 6'b000001, T_HDR1 = 6'b000010, T_DATA = 6'b000100,
    T_SKIP = 6'b001000, T_CPL0 = 6'b010000, T_CPL1 = 6'b100000
  } state_e;

  state_e      state;
  logic [63:0] qw0;
  logic        cpl_pending;
  logic [15:0] req_id;
  logic [7:0]  tag;
  logic [2:0]  tc;
  logic [1:0]  attr;
  logic [6:0]  lower_addr;
  logic [7:0]  sw_q;

  wire [31:0] dw0 = qw0[63:32];
  wire        pop = rx_rd_en;

  always_comb begin
    rx_rd_en = 1'b0;
    unique case (state)
      T_IDLE, T_HDR1, T_DATA, T_SKIP: rx_rd_en = !rx_empty;
      default:                        rx_rd_en = 1'b0;
    endcase
  end

  wire tx_room = (tx_wr_count <= (ADDR_W+1)'(DEPTH - 2));

  always_comb begin
    tx_wr_en = 1'b0;
    tx_din   = '{sof: 1'b1, eof: 1'b0, half: 1'b0,
                 data: {1'b0, 2'b10, 5'b01010, 1'b0, tc, 4'b0000, 1'b0, 1'b0,
                        attr, 2'b00, 10'd1,
                        completer_id, 3'b000, 1'b0, 12'd4}};
    if (state == T_CPL0) begin
      tx_wr_en = tx_room;
    end else if (state == T_CPL1) begin
      tx_wr_en = 1'b1;
      tx_din   = '{sof: 1'b0, eof: 1'b1, half: 1'b0,
                   data: {req_id, tag, 1'b0, lower_addr, 24'h0, sw_q}};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= T_IDLE;
      qw0         <= '0;
      cpl_pending <= 1'b0;
      req_id      <= '0;
      tag         <= '0;
      tc          <= '0;
      attr        <= '0;
      lower_addr  <= '0;
      sw_q        <= '0;
      leds        <= '0;
      wr_seen     <= 1'b0;
      rd_seen     <= 1'b0;
    end else begin
      wr_seen <= 1'b0;
      rd_seen <= 1'b0;
      unique case (state)
        T_IDLE: if (pop && rx_dout.sof) begin
          qw0   <= rx_dout.data;
          state <= rx_dout.eof ? T_IDLE : T_HDR1;
        end
        T_HDR1: if (pop) begin
          if (rx_dout.sof) begin
            qw0 <= rx_dout.data;              // previous packet was cut short
          end else begin
            if (is_mem_req(dw0) && has_data(dw0)) begin
              wr_seen <= 1'b1;
              if (!hdr_4dw(dw0)) leds <= rx_dout.data[7:0];
            end else if (is_mem_req(dw0)) begin
              rd_seen     <= 1'b1;
              cpl_pending <= 1'b1;
              req_id      <= qw0[31:16];
              tag         <= qw0[15:8];
              tc          <= dw0[22:20];
              attr        <= dw0[13:12];
              lower_addr  <= {req_addr_lo(dw0, rx_dout.data)[6:2], 2'b00};
              sw_q        <= switches;
            end
            if (rx_dout.eof)
              state <= (is_mem_req(dw0) && !has_data(dw0)) ? T_CPL0 : T_IDLE;
            else if (is_mem_req(dw0) && has_data(dw0) && hdr_4dw(dw0))
              state <= T_DATA;
            else
              state <= T_SKIP;
          end
        end
        T_DATA: if (pop) begin
          leds  <= rx_dout.data[39:32];
          state <= rx_dout.eof ? T_IDLE : T_SKIP;
        end
        T_SKIP: if (pop && rx_dout.eof) begin
          state <= cpl_pending ? T_CPL0 : T_IDLE;
        end
        T_CPL0: if (tx_room) state <= T_CPL1;
        T_CPL1: begin
          cpl_pending <= 1'b0;
          state       <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(state));

endmodule
