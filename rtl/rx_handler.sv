// rx_handler: receives TLPs from the PCIe core and distributes them to RX FIFOs.
//
// A single finite state machine with the three states of the paper's RX FSM,
// IDLE, DISPATCH and DISCARD, one-hot coded as the paper recommends. In IDLE
// it accepts the first two quad words (QW) of a TLP from the core's receive
// TRN interface; they hold the whole header and so the destination address
// (DA). It then decodes the DA:
//   * a memory read/write that hit BAR0 goes to FIFO addr[ROUTE_LSB +: log2 N]
//     (each FIFO owns a 2**ROUTE_LSB byte window of BAR0);
//   * a completion goes to FIFO CPL_FIFO;
//   * anything else, or a window with no FIFO, is illegal and is discarded.
// For a legal TLP the handler holds trn_rdst_rdy_n high (throttling the core)
// until the destination FIFO has room for the whole TLP, whose size it takes
// from the header length field. Then it writes the two buffered QWs and streams
// the rest of the packet straight through, one QW per clock, without further
// checks: the space was reserved up front, so a packet is never cut. For an
// illegal TLP it keeps accepting beats until the end of the packet and drops
// them. A beat arriving without start-of-frame in IDLE is dropped (resync).
//
// The FSM states, reading two QWs, routing by DA and discarding follow the
// paper; the routing rule, the wait-for-space policy (the paper's approach #2)
// and the marker bits stored with each QW are this design's choices.
//
// Timing: a TLP of N QWs (N >= 2) occupies the interface for N + 3 clocks when
// space is available: 2 header beats, 1 decode clock, 2 clocks writing the
// header into the FIFO, then N - 2 data beats. The next TLP may start on the
// clock after the last beat (back-to-back). trn_rdst_rdy_n depends on state
// registers only. trn_rsrc_dsc_n (source discontinue) ends the packet: the
// last written QW is not marked and the reader must resynchronise on the next
// start marker. A TLP larger than the FIFO depth would wait forever; the
// FIFOs must hold the largest TLP the link can carry.
module rx_handler
  import pwr_pkg::*;
#(
  parameter int unsigned N_FIFO    = 4,
  parameter int unsigned ADDR_W    = 9,    // FIFO depth 2**ADDR_W
  parameter int unsigned ROUTE_LSB = 12,
  parameter int unsigned CPL_FIFO  = N_FIFO - 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // receive TRN interface of the core (active-low controls)
  input  logic [63:0]       trn_rd,
  input  logic [7:0]        trn_rrem_n,
  input  logic              trn_rsof_n,
  input  logic              trn_reof_n,
  input  logic              trn_rsrc_rdy_n,
  input  logic              trn_rsrc_dsc_n,
  input  logic [6:0]        trn_rbar_hit_n,
  output logic              trn_rdst_rdy_n,
  output logic              trn_rnp_ok_n,
  // write side of the RX FIFOs
  output logic [N_FIFO-1:0] fifo_wr_en,
  output fifo_word_t        fifo_din,
  input  logic [ADDR_W:0]   fifo_wr_count [N_FIFO],
  // status pulses
  output logic              pkt_dispatched,
  output logic              pkt_discarded,
  output logic              stall          // legal TLP waiting for FIFO space
);

  localparam int unsigned IDX_W = (N_FIFO > 1) ? $clog2(N_FIFO) : 1;
  localparam int unsigned DEPTH = 2 ** ADDR_W;

  typedef enum logic [2:0] {
    S_IDLE     = 3'b001,
    S_DISCARD  = 3'b010,
    S_DISPATCH = 3'b100
  } state_e;

  state_e      state;
  logic [1:0]  hdr_cnt;    // IDLE: QWs of the header captured so far
  logic [1:0]  wr_phase;   // DISPATCH: 0/1 write buffered QW0/QW1, 2 stream
  logic [63:0] qw0, qw1;
  logic        eof1, half1;
  logic [IDX_W-1:0] dst;
  logic [6:0]  bar_hit_n;

  // ---------------- destination decode ----------------
  logic             legal;
  logic [IDX_W-1:0] idx;
  logic [10:0]      need;
  logic [31:0]      addr;
  logic [ADDR_W:0]  space;

  always_comb begin
    addr  = req_addr_lo(qw0[63:32], qw1);
    need  = tlp_qwords(qw0[63:32]);
    legal = 1'b0;
    idx   = '0;
    if (is_cpl(qw0[63:32])) begin
      legal = 1'b1;
      idx   = IDX_W'(CPL_FIFO);
    end else if (is_mem_req(qw0[63:32]) && !bar_hit_n[0]) begin
      idx   = (N_FIFO > 1) ? IDX_W'(addr >> ROUTE_LSB) : '0;
      legal = (32'(addr >> ROUTE_LSB) < 32'(N_FIFO));
    end
    space = (ADDR_W+1)'(DEPTH) - fifo_wr_count[idx];
  end

  wire beat = !trn_rsrc_rdy_n && !trn_rdst_rdy_n;
  wire last = !trn_reof_n || !trn_rsrc_dsc_n;

  // ready towards the core: from state registers only
  always_comb begin
    unique case (state)
      S_IDLE:     trn_rdst_rdy_n = (hdr_cnt == 2'd2);
      S_DISCARD:  trn_rdst_rdy_n = eof1;
      S_DISPATCH: trn_rdst_rdy_n = (wr_phase != 2'd2);
      default:    trn_rdst_rdy_n = 1'b1;
    endcase
  end
  assign trn_rnp_ok_n = 1'b0;  // non-posted TLPs are always welcome

  // FIFO write port
  always_comb begin
    fifo_wr_en = '0;
    fifo_din   = '{sof: 1'b0, eof: 1'b0, half: 1'b0, data: trn_rd};
    if (state == S_DISPATCH) begin
      unique case (wr_phase)
        2'd0: begin
          fifo_din   = '{sof: 1'b1, eof: 1'b0, half: 1'b0, data: qw0};
          fifo_wr_en[dst] = 1'b1;
        end
        2'd1: begin
          fifo_din   = '{sof: 1'b0, eof: eof1, half: half1, data: qw1};
          fifo_wr_en[dst] = 1'b1;
        end
        default: begin
          fifo_din   = '{sof: 1'b0, eof: !trn_reof_n, half: trn_rrem_n[0], data: trn_rd};
          fifo_wr_en[dst] = beat;
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      hdr_cnt        <= '0;
      wr_phase       <= '0;
      qw0            <= '0;
      qw1            <= '0;
      eof1           <= 1'b0;
      half1          <= 1'b0;
      dst            <= '0;
      bar_hit_n      <= '1;
      pkt_dispatched <= 1'b0;
      pkt_discarded  <= 1'b0;
      stall          <= 1'b0;
    end else begin
      pkt_dispatched <= 1'b0;
      pkt_discarded  <= 1'b0;
      stall          <= 1'b0;
      unique case (state)
        S_IDLE: begin
          unique case (hdr_cnt)
            2'd0: if (beat && !trn_rsof_n && trn_rsrc_dsc_n) begin
              qw0       <= trn_rd;
              bar_hit_n <= trn_rbar_hit_n;
              hdr_cnt   <= 2'd1;
            end
            2'd1: if (!trn_rsrc_dsc_n) begin
              hdr_cnt <= 2'd0;                 // aborted by the core
            end else if (beat) begin
              qw1     <= trn_rd;
              eof1    <= !trn_reof_n;
              half1   <= trn_rrem_n[0];
              hdr_cnt <= 2'd2;
            end
            default: begin
              if (!legal) begin
                state   <= S_DISCARD;
                hdr_cnt <= 2'd0;
              end else if (11'(space) >= need) begin
                state    <= S_DISPATCH;
                dst      <= idx;
                wr_phase <= 2'd0;
                hdr_cnt  <= 2'd0;
              end else begin
                stall <= 1'b1;
              end
            end
          endcase
        end
        S_DISCARD: begin
          if (eof1 || (beat && last)) begin
            state         <= S_IDLE;
            eof1          <= 1'b0;
            pkt_discarded <= 1'b1;
          end
        end
        S_DISPATCH: begin
          unique case (wr_phase)
            2'd0: wr_phase <= 2'd1;
            2'd1: if (eof1) begin
              state          <= S_IDLE;
              pkt_dispatched <= 1'b1;
            end else begin
              wr_phase <= 2'd2;
            end
            default: if (beat && last) begin
              state          <= S_IDLE;
              pkt_dispatched <= 1'b1;
            end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(state));
  a_dst:    assert property (@(posedge clk) disable iff (!rst_n)
                             state == S_DISPATCH |-> 32'(dst) < 32'(N_FIFO));

endmodule
