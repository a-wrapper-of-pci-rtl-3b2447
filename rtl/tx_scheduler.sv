// tx_scheduler: sends TLPs from several TX FIFOs to the PCIe core, one at a time.
//
// Two FSMs, as in the paper. The Judging FSM (IDLE, TRANSMIT) looks at every
// FIFO's head word and read count. A FIFO is ready when its head word carries
// the start marker and its read count covers the whole TLP whose length is in
// that head word (the paper's approach #2: only complete TLPs are started), and
// the core reports buffer space for the TLP's class on trn_tbuf_av. Among the
// ready FIFOs the lowest index wins (fixed priority). The Judging FSM then
// raises `send` with the FIFO number to the TX FSM and waits in TRANSMIT for
// `done`. The TX FSM (IDLE, SEND) streams the TLP from the FIFO's
// first-word-fall-through output onto the transmit TRN interface, popping one
// word per accepted beat, and pulses `done` on the end-of-frame beat.
// A head word without the start marker (a damaged packet) is popped and
// dropped by the Judging FSM in IDLE until a start marker shows up.
//
// Two FSMs, judging by priority and complete-packet detection through the read
// count follow the paper; fixed priority by index, the use of trn_tbuf_av as
// the "other factor" and the resync on markers are this design's choices.
//
// Timing: a TLP of N QWs takes N + 3 clocks from the Judging decision to the
// next decision when the core never throttles: 1 decision clock, 1 clock for
// the TX FSM to pick up `send`, N beats, 1 clock for `done` to return.
// trn_tsrc_rdy_n is low exactly while the TX FSM is in SEND.
module tx_scheduler
  import pwr_pkg::*;
#(
  parameter int unsigned N_FIFO = 4,
  parameter int unsigned ADDR_W = 9
) (
  input  logic              clk,
  input  logic              rst_n,
  // read side of the TX FIFOs (first-word fall-through)
  input  fifo_word_t        fifo_dout     [N_FIFO],
  input  logic [N_FIFO-1:0] fifo_empty,
  input  logic [ADDR_W:0]   fifo_rd_count [N_FIFO],
  output logic [N_FIFO-1:0] fifo_rd_en,
  // transmit TRN interface of the core (active-low controls)
  output logic [63:0]       trn_td,
  output logic [7:0]        trn_trem_n,
  output logic              trn_tsof_n,
  output logic              trn_teof_n,
  output logic              trn_tsrc_rdy_n,
  output logic              trn_tsrc_dsc_n,
  input  logic              trn_tdst_rdy_n,
  input  logic [3:0]        trn_tbuf_av,
  // status pulses
  output logic              pkt_sent,
  output logic              resync_drop
);

  localparam int unsigned IDX_W = (N_FIFO > 1) ? $clog2(N_FIFO) : 1;

  typedef enum logic [1:0] {J_IDLE = 2'b01, J_TRANSMIT = 2'b10} jstate_e;
  typedef enum logic [1:0] {T_IDLE = 2'b01, T_SEND     = 2'b10} tstate_e;

  jstate_e          jstate;
  tstate_e          tstate;
  logic             send, done;
  logic [IDX_W-1:0] sel;

  // ---------------- judging ----------------
  logic [N_FIFO-1:0] ready, junk;
  logic              any_ready, any_junk;
  logic [IDX_W-1:0]  pick, junk_idx;

  always_comb begin
    for (int i = 0; i < int'(N_FIFO); i++) begin
      junk[i]  = !fifo_empty[i] && !fifo_dout[i].sof;
      ready[i] = !fifo_empty[i] && fifo_dout[i].sof &&
                 (11'(fifo_rd_count[i]) >= tlp_qwords(fifo_dout[i].data[63:32])) &&
                 trn_tbuf_av[tlp_class(fifo_dout[i].data[63:32])];
    end
    any_ready = 1'b0;
    any_junk  = 1'b0;
    pick      = '0;
    junk_idx  = '0;
    for (int i = int'(N_FIFO) - 1; i >= 0; i--) begin
      if (ready[i]) begin any_ready = 1'b1; pick     = IDX_W'(i); end
      if (junk[i])  begin any_junk  = 1'b1; junk_idx = IDX_W'(i); end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      jstate <= J_IDLE;
      send   <= 1'b0;
      sel    <= '0;
    end else begin
      send <= 1'b0;
      unique case (jstate)
        J_IDLE: if (any_ready && !any_junk) begin
          sel    <= pick;
          send   <= 1'b1;
          jstate <= J_TRANSMIT;
        end
        J_TRANSMIT: if (done) jstate <= J_IDLE;
        default: jstate <= J_IDLE;
      endcase
    end
  end

  // ---------------- transmit ----------------
  fifo_word_t cur;
  assign cur = fifo_dout[sel];
  wire beat = (tstate == T_SEND) && !trn_tdst_rdy_n;

  assign trn_td         = cur.data;
  assign trn_trem_n     = (cur.eof && cur.half) ? 8'h0F : 8'h00;
  assign trn_tsof_n     = !(tstate == T_SEND && cur.sof);
  assign trn_teof_n     = !(tstate == T_SEND && cur.eof);
  assign trn_tsrc_rdy_n = (tstate != T_SEND);
  assign trn_tsrc_dsc_n = 1'b1;

  always_comb begin
    fifo_rd_en = '0;
    if (beat)
      fifo_rd_en[sel] = 1'b1;
    else if (jstate == J_IDLE && tstate == T_IDLE && any_junk)
      fifo_rd_en[junk_idx] = 1'b1;
  end
  assign resync_drop = (jstate == J_IDLE && tstate == T_IDLE && any_junk);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate   <= T_IDLE;
      done     <= 1'b0;
      pkt_sent <= 1'b0;
    end else begin
      done     <= 1'b0;
      pkt_sent <= 1'b0;
      unique case (tstate)
        T_IDLE: if (send) tstate <= T_SEND;
        T_SEND: if (beat && cur.eof) begin
          tstate   <= T_IDLE;
          done     <= 1'b1;
          pkt_sent <= 1'b1;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  a_onehot:   assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot(jstate) && $onehot(tstate));
  a_no_under: assert property (@(posedge clk) disable iff (!rst_n)
                               beat |-> !fifo_empty[sel]);

endmodule
