// intr_arb: shares the PCIe core's single interrupt port among user modules.
//
// Each of N_IRQ user modules raises irq_req[i] and holds it until it sees a
// one-clock irq_ack[i]. The arbiter picks one pending request round-robin
// (the search starts after the last winner), drives the core's interrupt
// request cfg_interrupt_n low with cfg_interrupt_di = VECTOR_BASE + i (the
// MSI vector, so the driver can tell the sources apart) and keeps it low
// until the core answers with cfg_interrupt_rdy_n. It then acknowledges the
// winner and returns to idle for one clock before the next request.
// The paper names this module ("interrupt arbitration") and says the wrapper
// offers an interrupt interface; round-robin order, MSI vectors and the
// request/acknowledge handshake are this design's choices. Legacy INTx
// signalling (cfg_interrupt_assert_n) is not used: assert_n is held low
// whenever a request is presented, which the core ignores in MSI mode.
module intr_arb #(
  parameter int unsigned N_IRQ       = 4,
  parameter logic [7:0]  VECTOR_BASE = 8'd0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_IRQ-1:0] irq_req,
  output logic [N_IRQ-1:0] irq_ack,
  output logic             cfg_interrupt_n,
  input  logic             cfg_interrupt_rdy_n,
  output logic [7:0]       cfg_interrupt_di,
  output logic             cfg_interrupt_assert_n
);

  localparam int unsigned IDX_W = (N_IRQ > 1) ? $clog2(N_IRQ) : 1;

  typedef enum logic [2:0] {A_IDLE = 3'b001, A_REQ = 3'b010, A_ACK = 3'b100} state_e;
  state_e           state;
  logic [IDX_W-1:0] last, win, cand;
  logic             found;

  always_comb begin
    found = 1'b0;
    cand  = '0;
    for (int k = 1; k <= int'(N_IRQ); k++) begin
      if (!found && irq_req[(int'(last) + k) % int'(N_IRQ)]) begin
        found = 1'b1;
        cand  = IDX_W'((int'(last) + k) % int'(N_IRQ));
      end
    end
  end

  assign cfg_interrupt_n        = (state != A_REQ);
  assign cfg_interrupt_assert_n = (state != A_REQ);
  assign cfg_interrupt_di       = VECTOR_BASE + 8'(win);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= A_IDLE;
      last    <= IDX_W'(N_IRQ - 1);
      win     <= '0;
      irq_ack <= '0;
    end else begin
      irq_ack <= '0;
      unique case (state)
        A_IDLE: if (found) begin
          win   <= cand;
          state <= A_REQ;
        end
        A_REQ: if (!cfg_interrupt_rdy_n) begin
          irq_ack[win] <= 1'b1;
          last         <= win;
          state        <= A_ACK;
        end
        A_ACK: state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(state));

endmodule
