// tb_pwrapper: the wrapper with all FIFOs, receive and transmit at once.
//
// Core side (trn_clk, 16 ns): a random stream of TLPs into the receive TRN
// interface, and a throttling sink on the transmit TRN interface. User side:
// four readers and four writers, each on its own clock. Every TLP is checked
// word by word at its destination: receive TLPs at the reader of the FIFO
// their address selects (completions at FIFO 3, others dropped), transmit
// TLPs on the core side in the order their writer produced them. The
// configuration values and one interrupt are checked too.
module tb_pwrapper;
  import pwr_pkg::*;
  import tlp_gen_pkg::*;

  localparam int unsigned N = 4, AW = 6, DEPTH = 2 ** AW;

  logic trn_clk = 0, trn_reset_n = 0;
  logic [63:0] trn_rd = '0;
  logic [7:0]  trn_rrem_n = '0;
  logic trn_rsof_n = 1, trn_reof_n = 1, trn_rsrc_rdy_n = 1, trn_rsrc_dsc_n = 1;
  logic [6:0] trn_rbar_hit_n = '1;
  logic trn_rdst_rdy_n, trn_rnp_ok_n;
  logic [63:0] trn_td;
  logic [7:0] trn_trem_n;
  logic trn_tsof_n, trn_teof_n, trn_tsrc_rdy_n, trn_tsrc_dsc_n;
  logic trn_tdst_rdy_n = 0;
  logic [3:0] trn_tbuf_av = 4'hF;
  logic [7:0] cfg_bus_number = 8'h05;
  logic [4:0] cfg_device_number = 5'h00;
  logic [2:0] cfg_function_number = 3'h0;
  logic [15:0] cfg_command = 16'h0006, cfg_dcommand = 16'h2820;
  logic [31:0] cfg_do = '0;
  logic cfg_rd_wr_done_n = 1;
  logic [9:0] cfg_dwaddr;
  logic cfg_rd_en_n, cfg_trn_pending_n, cfg_interrupt_n, cfg_interrupt_assert_n;
  logic cfg_interrupt_rdy_n = 1;
  logic [7:0] cfg_interrupt_di;
  logic rx_clk [N], rx_rst_n [N], tx_clk [N], tx_rst_n [N];
  logic [N-1:0] rx_rd_en = '0, rx_empty, rx_valid;
  fifo_word_t rx_dout [N];
  logic [AW:0] rx_rd_count [N];
  logic [N-1:0] tx_wr_en = '0, tx_full, tx_wr_ack, tx_overflow;
  fifo_word_t tx_din [N];
  logic [AW:0] tx_wr_count [N];
  logic usr_trn_pending = 0;
  logic [15:0] completer_id;
  logic bus_master_en;
  logic [12:0] max_payload_bytes, max_rd_req_bytes;
  logic cfg_rd_req = 0;
  logic [9:0] cfg_rd_dwaddr = '0;
  logic cfg_rd_busy, cfg_rd_valid;
  logic [31:0] cfg_rd_data;
  logic [N-1:0] irq_req = '0, irq_ack;
  logic rx_pkt_dispatched, rx_pkt_discarded, rx_stall, tx_pkt_sent, tx_resync_drop;

  int checks = 0, failures = 0;
  fifo_word_t rx_exp [N][$];
  tlp_c tx_exp [N][$];
  logic [63:0] cur [$];
  int n_rx_words = 0, n_tx_tlps = 0, n_disc = 0, n_exp_disc = 0;

  always #8 trn_clk = ~trn_clk;
  initial for (int i = 0; i < N; i++) begin
    rx_clk[i] = 0; tx_clk[i] = 0; rx_rst_n[i] = 0; tx_rst_n[i] = 0; tx_din[i] = '0;
  end
  for (genvar g = 0; g < N; g++) begin : g_clk
    always #(3 + 2 * g) rx_clk[g] = ~rx_clk[g];
    always #(4 + 3 * g) tx_clk[g] = ~tx_clk[g];
  end

  pwrapper #(.N_RX(N), .N_TX(N), .ADDR_W(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge trn_clk) if (rx_pkt_discarded) n_disc++;

  // ---------- receive side ----------
  for (genvar g = 0; g < N; g++) begin : g_rd
    always @(negedge rx_clk[g]) begin
      rx_rd_en[g] <= 1'b0;
      if (rx_rst_n[g] && !rx_empty[g] && $urandom_range(0, 1) == 0) begin
        check(rx_exp[g].size() > 0 && rx_dout[g] == rx_exp[g][0], $sformatf("RX word FIFO %0d", g));
        if (rx_exp[g].size() > 0) void'(rx_exp[g].pop_front());
        rx_rd_en[g] <= 1'b1;
        n_rx_words++;
      end
    end
  end

  task automatic rx_send(input tlp_c t, input int d);
    if (d < 0) n_exp_disc++;
    else for (int i = 0; i < t.qw.size(); i++)
      rx_exp[d].push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                            half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
    for (int i = 0; i < t.qw.size(); i++) begin
      @(negedge trn_clk);
      trn_rsrc_rdy_n = 0;
      trn_rd         = t.qw[i];
      trn_rsof_n     = (i != 0);
      trn_reof_n     = (i != t.qw.size() - 1);
      trn_rrem_n     = (i == t.qw.size() - 1 && t.half) ? 8'h0F : 8'h00;
      trn_rbar_hit_n = 7'b1111110;
      while (trn_rdst_rdy_n) @(negedge trn_clk);
      @(posedge trn_clk);
    end
  endtask

  // ---------- transmit side ----------
  always @(negedge trn_clk) trn_tdst_rdy_n <= ($urandom_range(0, 5) == 0);

  always @(posedge trn_clk) if (trn_reset_n && !trn_tsrc_rdy_n && !trn_tdst_rdy_n) begin
    if (!trn_tsof_n) cur.delete();
    cur.push_back(trn_td);
    if (!trn_teof_n) begin
      int f;
      f = int'(cur[0][17:16]);
      n_tx_tlps++;
      check(tx_exp[f].size() > 0, "TX TLP expected");
      if (tx_exp[f].size() > 0) begin
        tlp_c e;
        e = tx_exp[f].pop_front();
        check(e.qw.size() == cur.size(), "TX TLP length");
        for (int i = 0; i < cur.size() && i < e.qw.size(); i++) check(cur[i] == e.qw[i], "TX word");
      end
    end
  end

  for (genvar g = 0; g < N; g++) begin : g_wr
    initial begin
      tlp_c t;
      wait (tx_rst_n[g]);
      for (int k = 0; k < 12; k++) begin
        t = mwr(32'h0, $urandom_range(1, 32), $urandom, $urandom_range(0, 1));
        t.qw[0][17:16] = 2'(g);
        tx_exp[g].push_back(t);
        // write the TLP only when it fits (approach #2 on the writer side)
        @(negedge tx_clk[g]);
        while (int'(tx_wr_count[g]) + t.qw.size() > DEPTH) @(negedge tx_clk[g]);
        for (int i = 0; i < t.qw.size(); i++) begin
          tx_wr_en[g] = 1;
          tx_din[g] = '{sof: i == 0, eof: i == t.qw.size() - 1,
                        half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]};
          @(negedge tx_clk[g]);
        end
        tx_wr_en[g] = 0;
      end
    end
  end

  // interrupt answer
  initial forever begin
    @(negedge trn_clk);
    if (!cfg_interrupt_n) begin @(negedge trn_clk); cfg_interrupt_rdy_n = 0; @(negedge trn_clk); cfg_interrupt_rdy_n = 1; end
  end
  always @(posedge trn_clk) irq_req <= irq_req & ~irq_ack;

  initial begin
    tlp_c t;
    logic [31:0] a;
    int kind;
    repeat (4) @(posedge trn_clk);
    trn_reset_n = 1;
    for (int i = 0; i < N; i++) begin rx_rst_n[i] = 1; tx_rst_n[i] = 1; end
    repeat (4) @(posedge trn_clk);
    check(completer_id == 16'h0500 && bus_master_en, "configuration values");
    check(max_payload_bytes == 256 && max_rd_req_bytes == 512, "payload sizes");
    irq_req = 4'b1000;
    for (int k = 0; k < 60; k++) begin
      kind = $urandom_range(0, 3);
      a = {18'h0, 3'($urandom_range(0, 4)), 1'b0, 10'($urandom)};
      case (kind)
        0: begin t = mwr(a, $urandom_range(1, 32), $urandom); rx_send(t, a[31:12] < N ? int'(a[13:12]) : -1); end
        1: begin t = mrd(a, 1, 16'h1, 8'(k)); rx_send(t, a[31:12] < N ? int'(a[13:12]) : -1); end
        2: begin t = cpld($urandom_range(1, 16), 16'h0500, 8'(k)); rx_send(t, 3); end
        default: begin t = iowr(a); rx_send(t, -1); end
      endcase
    end
    @(negedge trn_clk); trn_rsrc_rdy_n = 1;
    repeat (3000) @(posedge trn_clk);
    for (int i = 0; i < N; i++) begin
      check(rx_exp[i].size() == 0, $sformatf("RX FIFO %0d delivered all", i));
      check(tx_exp[i].size() == 0, $sformatf("TX FIFO %0d sent all", i));
    end
    check(n_disc == n_exp_disc, "discard count");
    check(n_tx_tlps == 4 * 12, "TX TLP count");
    check(irq_req == 0, "interrupt acknowledged");
    $display("rx_words=%0d tx_tlps=%0d discarded=%0d", n_rx_words, n_tx_tlps, n_disc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
