// tb_tx_scheduler: self-checking test of the Judging FSM and TX FSM.
//
// The TX FIFOs are modelled by queues with first-word-fall-through outputs;
// user writers add TLP words to them at random times, so FIFOs often hold
// only part of a TLP. A monitor on the transmit TRN interface checks that
//   * each beat is the word the scheduler pops from a FIFO, markers included;
//   * a TLP is started only when its FIFO held all of it, and is sent without
//     gaps or interleaving;
//   * of several complete TLPs the one in the lowest-numbered FIFO goes first;
//   * a TLP class without buffer space (trn_tbuf_av) waits and others pass;
//   * a word without start marker at a FIFO head is dropped (resync);
//   * back-to-back TLPs from one FIFO take N + 3 clocks each.
module tb_tx_scheduler;
  import pwr_pkg::*;
  import tlp_gen_pkg::*;

  localparam int unsigned N = 4, AW = 6;

  logic clk = 0, rst_n = 0;
  fifo_word_t fifo_dout [N];
  logic [N-1:0] fifo_empty, fifo_rd_en;
  logic [AW:0] fifo_rd_count [N];
  logic [63:0] trn_td;
  logic [7:0] trn_trem_n;
  logic trn_tsof_n, trn_teof_n, trn_tsrc_rdy_n, trn_tsrc_dsc_n;
  logic trn_tdst_rdy_n = 0;
  logic [3:0] trn_tbuf_av = 4'hF;
  logic pkt_sent, resync_drop;

  int checks = 0, failures = 0;
  fifo_word_t q [N][$];
  int pkt_len [N][$];          // length of each complete TLP still to be sent
  int sent_from [$];
  longint sof_t [$];
  longint cyc = 0;
  int n_resync = 0, n_sent = 0, n_throttle = 0;
  bit in_pkt = 0;
  int cur_src = -1;
  bit throttle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  tx_scheduler #(.N_FIFO(N), .ADDR_W(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int i = 0; i < N; i++) begin
      fifo_empty[i]    = (q[i].size() == 0);
      fifo_dout[i]     = (q[i].size() != 0) ? q[i][0] : '0;
      fifo_rd_count[i] = (AW+1)'(q[i].size());
    end

  // core side: random throttling when enabled
  always @(negedge clk) trn_tdst_rdy_n <= throttle ? ($urandom_range(0, 3) == 0) : 1'b0;

  // per clock: which FIFOs hold a complete TLP (as the Judging FSM sees it)
  bit [N-1:0] hist [longint];
  bit         hist_ok [longint];
  longint     start_cyc = 0;
  logic       src_rdy_q = 1;
  always @(posedge clk) begin
    for (int j = 0; j < N; j++)
      hist[cyc][j] = pkt_len[j].size() > 0 && q[j].size() >= pkt_len[j][0] && q[j][0].sof;
    hist_ok[cyc] = (trn_tbuf_av == 4'hF);
    if (!trn_tsrc_rdy_n && src_rdy_q) start_cyc = cyc;
    src_rdy_q <= trn_tsrc_rdy_n;
  end

  // monitor and FIFO model
  always @(posedge clk) if (rst_n) begin
    if (pkt_sent) n_sent++;
    if (resync_drop) n_resync++;
    if (!trn_tsrc_rdy_n && trn_tdst_rdy_n) n_throttle++;
    check($countones(fifo_rd_en) <= 1, "one FIFO popped at a time");
    if (in_pkt) check(!trn_tsrc_rdy_n, "no gap inside a TLP");
    if (!trn_tsrc_rdy_n && !trn_tdst_rdy_n) begin
      int src;
      src = -1;
      for (int i = 0; i < N; i++) if (fifo_rd_en[i]) src = i;
      check(src >= 0, "beat pops a FIFO");
      if (src >= 0) begin
        fifo_word_t w;
        w = q[src][0];
        check(trn_td == w.data && trn_tsof_n == !w.sof && trn_teof_n == !w.eof &&
              trn_trem_n == ((w.eof && w.half) ? 8'h0F : 8'h00), "beat equals FIFO word");
        if (!trn_tsof_n) begin
          check(!in_pkt, "sof only between TLPs");
          check(pkt_len[src].size() > 0 && q[src].size() >= pkt_len[src][0],
                "TLP complete in FIFO when started");
          // priority: when the choice was made, no lower-numbered FIFO
          // held a complete TLP
          if (hist_ok[start_cyc - 2])
            for (int j = 0; j < src; j++)
              check(!hist[start_cyc - 2][j], $sformatf("priority %0d over %0d", j, src));
          in_pkt = 1; cur_src = src;
          sent_from.push_back(src);
          sof_t.push_back(cyc);
        end else begin
          check(src == cur_src, "no interleaving");
        end
        if (!trn_teof_n) begin
          in_pkt = 0;
          if (pkt_len[src].size() > 0) void'(pkt_len[src].pop_front());
        end
        void'(q[src].pop_front());
      end
    end else if (fifo_rd_en != 0) begin
      // a pop that is not a beat: only allowed for a word without start marker
      for (int i = 0; i < N; i++) if (fifo_rd_en[i]) begin
        check(q[i].size() > 0 && !q[i][0].sof, "only junk dropped outside a beat");
        void'(q[i].pop_front());
      end
    end
  end

  // write one TLP into FIFO f, word by word with random delays
  task automatic put(input int f, input tlp_c t, input bit slow);
    pkt_len[f].push_back(t.qw.size());
    for (int i = 0; i < t.qw.size(); i++) begin
      if (slow) repeat ($urandom_range(0, 4)) @(negedge clk);
      else @(negedge clk);
      q[f].push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                       half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
    end
  endtask

  task automatic wait_empty();
    int guard = 0;
    while ((q[0].size() + q[1].size() + q[2].size() + q[3].size()) != 0 && guard < 20000) begin
      @(posedge clk); guard++;
    end
    repeat (5) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    // 1) priority: all four FIFOs preloaded before reset is released
    for (int f = 0; f < N; f++)
      for (int k = 0; k < 2; k++) begin
        tlp_c t = mwr(32'h100 * f, 2 + k, 32'(f));
        pkt_len[f].push_back(t.qw.size());
        for (int i = 0; i < t.qw.size(); i++)
          q[f].push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                           half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
      end
    @(negedge clk); rst_n = 1;
    wait_empty();
    check(sent_from.size() == 8, "eight TLPs sent");
    for (int k = 0; k < 8 && k < sent_from.size(); k++)
      check(sent_from[k] == k / 2, $sformatf("order %0d from FIFO %0d", k, sent_from[k]));

    // 2) back-to-back rate from one FIFO
    sof_t.delete();
    for (int k = 0; k < 4; k++) begin
      tlp_c t = mwr(32'h0, 8, 32'(k));            // 6 QWs
      pkt_len[1].push_back(t.qw.size());
      for (int i = 0; i < t.qw.size(); i++)
        q[1].push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                         half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
    end
    wait_empty();
    for (int k = 0; k < 3; k++)
      check(sof_t[k+1] - sof_t[k] == 9, $sformatf("TLP interval %0d", sof_t[k+1] - sof_t[k]));

    // 3) buffer availability: posted class blocked, completion passes
    trn_tbuf_av = 4'b1101;
    sent_from.delete();
    begin
      tlp_c t0 = mwr(32'h0, 4, 32'h1);
      tlp_c t1 = cpld(2, 16'h1, 8'h2);
      put(0, t0, 0);
      put(1, t1, 0);
      repeat (30) @(posedge clk);
      check(sent_from.size() == 1 && sent_from[0] == 1, "completion passes blocked write");
      trn_tbuf_av = 4'hF;
      wait_empty();
      check(sent_from.size() == 2 && sent_from[1] == 0, "write sent after space returns");
    end

    // 4) resync: a stray word at the head of FIFO 2
    q[2].push_back('{sof: 0, eof: 0, half: 0, data: 64'hBAD});
    put(2, mwr(32'h0, 3, 32'h7), 0);
    wait_empty();
    check(n_resync >= 1, "stray word dropped");

    // 5) random traffic from four writers with core throttling
    throttle = 1;
    fork
      for (int k = 0; k < 25; k++) put(0, mwr(32'h0, $urandom_range(1, 12), $urandom), 1);
      for (int k = 0; k < 25; k++) put(1, mrd(32'h0, 1, 16'h1, 8'(k)), 1);
      for (int k = 0; k < 25; k++) put(2, cpld($urandom_range(1, 9), 16'h1, 8'(k)), 1);
      for (int k = 0; k < 25; k++) put(3, mwr(32'h0, $urandom_range(1, 5), $urandom, 1), 1);
    join
    wait_empty();
    throttle = 0;
    for (int f = 0; f < N; f++) check(pkt_len[f].size() == 0, "all TLPs sent");
    check(n_throttle > 0, "core throttled");
    $display("sent=%0d resync=%0d throttled=%0d", n_sent, n_resync, n_throttle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
