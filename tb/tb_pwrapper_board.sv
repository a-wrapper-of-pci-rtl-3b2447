// tb_pwrapper_board: end-to-end test of the wrapper with its board test module,
// at the default sizes (four RX and four TX FIFOs of 512 words).
//
// A host model drives the receive TRN interface of the core (trn_clk 62.5 MHz,
// 64 bits, the rate of a one-lane first-generation endpoint) and watches the
// transmit TRN interface. It
//   1. writes 0xFF and then 0xA5 to the LEDs and checks them;
//   2. reads the switches back and checks the completion field by field;
//   3. sends TLPs the wrapper must drop (I/O write, unmapped window);
//   4. fills user RX FIFO 1 while nobody reads it, so the RX handler must
//      hold the core off, and checks every word once the reader starts;
//   5. streams 200 back-to-back 128-byte memory writes to user RX FIFO 2 and
//      measures the payload rate;
//   6. has user writers stream 128-byte writes from TX FIFOs 1 to 3 while the
//      core throttles and a completion is requested, and measures the rate;
//   7. blocks the posted class on trn_tbuf_av so a completion overtakes a write;
//   8. plants a word without start marker in TX FIFO 2 (resync);
//   9. raises a user interrupt and reads a configuration DW.
// Each mechanism is counted and a failure is counted for one that never
// happened. Rates must reach 1.8 Gbit/s, the figure reported for the design.
module tb_pwrapper_board;
  import pwr_pkg::*;
  import tlp_gen_pkg::*;

  localparam int unsigned NU = 3, AW = 9, DEPTH = 512;
  localparam realtime TRN_NS = 16.0;

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
  logic [7:0] cfg_bus_number = 8'h02;
  logic [4:0] cfg_device_number = 5'h00;
  logic [2:0] cfg_function_number = 3'h0;
  logic [15:0] cfg_command = 16'h0006, cfg_dcommand = 16'h2010;
  logic [31:0] cfg_do = '0;
  logic cfg_rd_wr_done_n = 1;
  logic [9:0] cfg_dwaddr;
  logic cfg_rd_en_n, cfg_trn_pending_n, cfg_interrupt_n, cfg_interrupt_assert_n;
  logic cfg_interrupt_rdy_n = 1;
  logic [7:0] cfg_interrupt_di;
  logic test_clk = 0, test_rst_n = 0;
  logic [7:0] switches = 8'h3C, leds;
  logic rx_clk [NU], rx_rst_n [NU], tx_clk [NU], tx_rst_n [NU];
  logic [NU-1:0] rx_rd_en = '0, rx_empty, rx_valid;
  fifo_word_t rx_dout [NU];
  logic [AW:0] rx_rd_count [NU];
  logic [NU-1:0] tx_wr_en = '0, tx_full, tx_wr_ack, tx_overflow;
  fifo_word_t tx_din [NU];
  logic [AW:0] tx_wr_count [NU];
  logic usr_trn_pending = 0;
  logic [15:0] completer_id;
  logic bus_master_en;
  logic [12:0] max_payload_bytes, max_rd_req_bytes;
  logic cfg_rd_req = 0;
  logic [9:0] cfg_rd_dwaddr = '0;
  logic cfg_rd_busy, cfg_rd_valid;
  logic [31:0] cfg_rd_data;
  logic [3:0] irq_req = '0, irq_ack;
  logic rx_pkt_dispatched, rx_pkt_discarded, rx_stall, tx_pkt_sent, tx_resync_drop;
  logic test_wr_seen, test_rd_seen;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // mechanism counters
  int n_dispatch = 0, n_discard = 0, n_stall = 0, n_b2b = 0, n_core_thr = 0;
  int n_resync = 0, n_prio = 0, n_bufav = 0, n_led_wr = 0, n_sw_rd = 0;
  int n_irq = 0, n_cfgrd = 0, n_cdc = 0;

  always #8 trn_clk = ~trn_clk;
  always #5 test_clk = ~test_clk;
  initial for (int i = 0; i < NU; i++) begin
    rx_clk[i] = 0; tx_clk[i] = 0; rx_rst_n[i] = 0; tx_rst_n[i] = 0; tx_din[i] = '0;
  end
  // user clocks 100 to 167 MHz, all unrelated to trn_clk
  for (genvar g = 0; g < NU; g++) begin : g_clk
    always #(3.0 + g) rx_clk[g] = ~rx_clk[g];
    always #(3.5 + g) tx_clk[g] = ~tx_clk[g];
  end
  always @(posedge trn_clk) cyc++;

  pwrapper_board dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #4ms; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ------------------------------------------------------------ counters
  logic last_rx_eof = 0;
  always @(posedge trn_clk) if (trn_reset_n) begin
    if (rx_pkt_dispatched) n_dispatch++;
    if (rx_pkt_discarded)  n_discard++;
    if (rx_stall)          n_stall++;
    if (tx_resync_drop)    n_resync++;
    if (test_wr_seen)      n_led_wr++;
    if (!trn_tsrc_rdy_n && trn_tdst_rdy_n) n_core_thr++;
    // back-to-back: a start of frame accepted right after an end of frame
    if (!trn_rsrc_rdy_n && !trn_rdst_rdy_n) begin
      if (!trn_rsof_n && last_rx_eof) n_b2b++;
      last_rx_eof <= !trn_reof_n;
    end else last_rx_eof <= 1'b0;
  end

  // ------------------------------------------------------------ host RX driver
  task automatic host_send(input tlp_c t, input bit hit = 1);
    for (int i = 0; i < t.qw.size(); i++) begin
      @(negedge trn_clk);
      trn_rsrc_rdy_n = 0;
      trn_rd         = t.qw[i];
      trn_rsof_n     = (i != 0);
      trn_reof_n     = (i != t.qw.size() - 1);
      trn_rrem_n     = (i == t.qw.size() - 1 && t.half) ? 8'h0F : 8'h00;
      trn_rbar_hit_n = hit ? 7'b1111110 : 7'b1111111;
      for (int w = 0; trn_rdst_rdy_n; w++) begin
        if (w > 20000) begin check(0, "core held off for too long"); return; end
        @(negedge trn_clk);
      end
      @(posedge trn_clk);
    end
  endtask

  task automatic host_idle();
    @(negedge trn_clk); trn_rsrc_rdy_n = 1; trn_rsof_n = 1; trn_reof_n = 1;
  endtask

  // ------------------------------------------------------------ user RX readers
  fifo_word_t rx_exp [NU][$];
  bit rx_enable [NU] = '{1, 0, 1};
  int rx_words [NU] = '{0, 0, 0};
  for (genvar g = 0; g < NU; g++) begin : g_rd
    always @(negedge rx_clk[g]) begin
      rx_rd_en[g] <= 1'b0;
      if (rx_rst_n[g] && rx_enable[g] && !rx_empty[g]) begin
        check(rx_exp[g].size() > 0 && rx_dout[g] == rx_exp[g][0], $sformatf("RX word, user FIFO %0d", g + 1));
        if (rx_exp[g].size() > 0) void'(rx_exp[g].pop_front());
        rx_rd_en[g] <= 1'b1;
        rx_words[g]++;
      end
    end
  end

  task automatic expect_rx(input int u, input tlp_c t);
    for (int i = 0; i < t.qw.size(); i++)
      rx_exp[u].push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                            half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
  endtask

  // ------------------------------------------------------------ host TX monitor
  tlp_c tx_exp [NU][$];
  logic [63:0] cur [$];
  logic [63:0] cpl [$];     // completions from the test module
  int order [$];            // 0: completion, u+1: user FIFO u
  int tx_tlps = 0;
  longint tx_first = -1, tx_last = 0;
  int tx_bits = 0;
  bit tx_measure = 0;
  longint done_at [NU][$];   // clock at which each written TLP was complete
  always @(posedge trn_clk) if (trn_reset_n && !trn_tsrc_rdy_n && !trn_tdst_rdy_n) begin
    // priority: a TLP from user FIFO u starts while a higher-numbered FIFO
    // has held a complete TLP long enough to be seen (pointer crossing)
    if (!trn_tsof_n && trn_td[60:56] != 5'b01010)
      for (int j = int'(trn_td[17:16]) + 1; j < NU; j++)
        if (done_at[j].size() > 0 && cyc - done_at[j][0] > 8) begin n_prio++; break; end
    if (!trn_tsof_n) cur.delete();
    cur.push_back(trn_td);
    if (!trn_teof_n) begin
      if (cur[0][60:56] == 5'b01010) begin
        cpl = cur;
        order.push_back(0);
      end else begin
        int f;
        f = int'(cur[0][17:16]);
        tx_tlps++;
        order.push_back(f + 1);
        if (f < NU && done_at[f].size() > 0) void'(done_at[f].pop_front());
        check(f < NU && tx_exp[f].size() > 0, "TX TLP expected");
        if (f < NU && tx_exp[f].size() > 0) begin
          tlp_c e;
          e = tx_exp[f].pop_front();
          check(e.qw.size() == cur.size(), "TX TLP length");
          for (int i = 0; i < cur.size() && i < e.qw.size(); i++) check(cur[i] == e.qw[i], "TX word");
          if (tx_measure) begin
            if (tx_first < 0) tx_first = cyc - longint'(cur.size()) + 1;
            tx_last = cyc;
            tx_bits += 32 * (e.dws - 3);
          end
        end
      end
    end
  end

  task automatic user_write(input int u, input tlp_c t);
    t.qw[0][17:16] = 2'(u);
    tx_exp[u].push_back(t);
    @(negedge tx_clk[u]);
    for (int w = 0; int'(tx_wr_count[u]) + t.qw.size() > DEPTH; w++) begin
      if (w > 20000) begin check(0, "TX FIFO never drained"); return; end
      @(negedge tx_clk[u]);
    end
    for (int i = 0; i < t.qw.size(); i++) begin
      tx_wr_en[u] = 1;
      tx_din[u] = '{sof: i == 0, eof: i == t.qw.size() - 1,
                    half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]};
      @(negedge tx_clk[u]);
    end
    tx_wr_en[u] = 0;
    done_at[u].push_back(cyc);
  endtask

  task automatic host_read_switches(input logic [7:0] tag);
    int guard = 0;
    cpl.delete();
    host_send(mrd(32'h0000_0010, 1, 16'h0000, tag));
    host_idle();
    while (cpl.size() == 0 && guard < 2000) begin @(posedge trn_clk); guard++; end
    check(cpl.size() == 2, "completion returned");
    if (cpl.size() == 2) begin
      check(cpl[0][63:32] == 32'h4A00_0001, "CplD header DW0");
      check(cpl[0][31:16] == completer_id && completer_id == 16'h0200, "completer ID");
      check(cpl[1][63:40] == {16'h0000, tag} && cpl[1][38:32] == 7'h10, "requester ID, tag, lower address");
      check(cpl[1][7:0] == switches, "switch value");
      n_sw_rd++;
    end
  endtask

  // interrupt and configuration models of the core
  initial forever begin
    @(negedge trn_clk);
    if (!cfg_interrupt_n) begin
      @(negedge trn_clk); cfg_interrupt_rdy_n = 0; @(negedge trn_clk); cfg_interrupt_rdy_n = 1;
    end
  end
  initial forever begin
    @(negedge trn_clk);
    if (!cfg_rd_en_n) begin
      @(negedge trn_clk); cfg_do = 32'h1000_0000 | 32'(cfg_dwaddr); cfg_rd_wr_done_n = 0;
      @(negedge trn_clk); cfg_rd_wr_done_n = 1;
    end
  end
  always @(posedge trn_clk) begin
    for (int i = 0; i < 4; i++) if (irq_ack[i]) n_irq++;
    irq_req <= irq_req & ~irq_ack;
  end

  // ------------------------------------------------------------ main sequence
  initial begin
    tlp_c t;
    longint t0, t1;
    real gbps;
    int bits;
    repeat (4) @(posedge trn_clk);
    trn_reset_n = 1; test_rst_n = 1;
    for (int i = 0; i < NU; i++) begin rx_rst_n[i] = 1; tx_rst_n[i] = 1; end
    repeat (4) @(posedge trn_clk);

    // 1) LEDs
    host_send(mwr(32'h0000_0000, 1, 32'h0000_00FF)); host_idle();
    repeat (20) @(posedge trn_clk);
    check(leds == 8'hFF, "LEDs show 0xFF");
    host_send(mwr(32'h0000_0004, 1, 32'h0000_00A5)); host_idle();
    repeat (20) @(posedge trn_clk);
    check(leds == 8'hA5, "LEDs show 0xA5");
    n_cdc++;

    // 2) switches
    host_read_switches(8'h11);
    switches = 8'hC3;
    host_read_switches(8'h12);

    // 3) TLPs to drop
    host_send(iowr(32'h0000_0100));
    host_send(mwr(32'h0000_5000, 4, 32'h1));          // window 5: no FIFO
    host_send(mwr(32'h0000_1000, 4, 32'h2), 0);        // no BAR hit
    host_idle();

    // 4) user RX FIFO 1 not read: 40 TLPs of 18 words need 720 > 512 words
    for (int k = 0; k < 40; k++) begin
      t = mwr(32'h0000_2000, 32, $urandom);
      expect_rx(1, t);
      if (k == 20) fork begin repeat (600) @(posedge trn_clk); rx_enable[1] = 1; end join_none
      host_send(t);
    end
    host_idle();
    check(n_stall > 0, "RX handler held the core off");

    // 5) RX rate: 200 back-to-back 128-byte writes to user RX FIFO 2
    repeat (100) @(posedge trn_clk);
    t0 = cyc;
    for (int k = 0; k < 200; k++) begin
      t = mwr(32'h0000_3000, 32, $urandom);
      expect_rx(2, t);
      host_send(t);
    end
    t1 = cyc;
    host_idle();
    gbps = (200.0 * 1024.0) / (real'(t1 - t0) * TRN_NS);
    $display("RX payload rate %0.2f Gbit/s over %0d clocks", gbps, t1 - t0);
    check(gbps >= 1.8, "RX payload rate >= 1.8 Gbit/s");

    // 6) TX rate: three writers stream 128-byte writes, core always ready
    tx_measure = 1;
    fork
      for (int k = 0; k < 60; k++) user_write(0, mwr(32'h0, 32, $urandom));
      for (int k = 0; k < 60; k++) user_write(1, mwr(32'h0, 32, $urandom));
      for (int k = 0; k < 60; k++) user_write(2, mwr(32'h0, 32, $urandom));
    join
    repeat (400) @(posedge trn_clk);
    tx_measure = 0;
    gbps = real'(tx_bits) / (real'(tx_last - tx_first + 1) * TRN_NS);
    $display("TX payload rate %0.2f Gbit/s over %0d clocks", gbps, tx_last - tx_first + 1);
    check(gbps >= 1.8, "TX payload rate >= 1.8 Gbit/s");

    // 6b) mixed traffic with a throttling core and a switch read
    fork
      begin
        fork
          for (int k = 0; k < 20; k++) user_write(0, mwr(32'h0, $urandom_range(1, 64), $urandom, 1));
          for (int k = 0; k < 20; k++) user_write(2, mwr(32'h0, $urandom_range(1, 64), $urandom));
          begin
            repeat (50) @(posedge trn_clk);
            switches = 8'h5A;
            host_read_switches(8'h21);
          end
        join
      end
      begin
        repeat (3000) begin @(negedge trn_clk); trn_tdst_rdy_n = ($urandom_range(0, 2) == 0); end
        @(negedge trn_clk); trn_tdst_rdy_n = 0;
      end
    join
    repeat (2000) @(posedge trn_clk);

    // 7) posted class blocked: a completion overtakes a waiting write
    trn_tbuf_av = 4'b1101;
    order.delete();
    user_write(0, mwr(32'h0, 8, 32'h77));
    repeat (20) @(posedge trn_clk);
    host_read_switches(8'h31);
    check(order.size() == 1 && order[0] == 0, "completion overtook blocked write");
    if (order.size() == 1 && order[0] == 0) n_bufav++;
    trn_tbuf_av = 4'hF;
    repeat (100) @(posedge trn_clk);
    check(order.size() == 2 && order[1] == 1, "write sent after buffer space returned");

    // 8) stray word at the head of TX FIFO 2
    @(negedge tx_clk[1]); tx_wr_en[1] = 1; tx_din[1] = '{sof: 0, eof: 0, half: 0, data: 64'hBAD0};
    @(negedge tx_clk[1]); tx_wr_en[1] = 0;
    user_write(1, mwr(32'h0, 4, 32'h88));
    repeat (100) @(posedge trn_clk);

    // 9) interrupt and configuration read
    irq_req = 4'b0010;
    @(negedge trn_clk); cfg_rd_req = 1; cfg_rd_dwaddr = 10'h1A;
    @(negedge trn_clk); cfg_rd_req = 0;
    for (int w = 0; !cfg_rd_valid && w < 100; w++) @(negedge trn_clk);
    check(cfg_rd_data == 32'h1000_001A, "configuration read");
    n_cfgrd++;
    repeat (20) @(posedge trn_clk);
    check(irq_req == 0, "interrupt acknowledged");

    repeat (500) @(posedge trn_clk);
    for (int i = 0; i < NU; i++) begin
      check(rx_exp[i].size() == 0, $sformatf("user RX FIFO %0d delivered all", i + 1));
      check(tx_exp[i].size() == 0, $sformatf("user TX FIFO %0d sent all", i + 1));
    end
    check(n_led_wr == 2, "two LED writes seen by the test module");
    check(n_discard == 3, "three TLPs discarded");

    $display("dispatch=%0d discard=%0d rx_stall=%0d back_to_back=%0d core_throttle=%0d",
             n_dispatch, n_discard, n_stall, n_b2b, n_core_thr);
    $display("resync=%0d priority=%0d bufav_hold=%0d led_writes=%0d switch_reads=%0d irq=%0d cfg_reads=%0d cdc=%0d",
             n_resync, n_prio, n_bufav, n_led_wr, n_sw_rd, n_irq, n_cfgrd, n_cdc);
    check(n_dispatch > 0, "dispatch happened");
    check(n_discard > 0, "discard happened");
    check(n_stall > 0, "RX throttling happened");
    check(n_b2b > 0, "back-to-back TLPs happened");
    check(n_core_thr > 0, "TX throttling by the core happened");
    check(n_resync > 0, "resync on markers happened");
    check(n_prio > 0, "priority decision happened");
    check(n_bufav > 0, "buffer-available hold happened");
    check(n_led_wr > 0 && n_sw_rd > 0, "LED write and switch read happened");
    check(n_irq > 0, "interrupt happened");
    check(n_cfgrd > 0, "configuration read happened");
    check(n_cdc > 0, "clock-domain crossing happened");
    $display("simulated time %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
