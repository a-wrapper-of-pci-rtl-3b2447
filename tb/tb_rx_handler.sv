// tb_rx_handler: self-checking test of the RX distribution FSM.
//
// Drives the receive TRN interface with a random mix of memory writes and
// reads into five 4 KB windows of BAR0 (window 4 has no FIFO), completions,
// I/O writes and requests without a BAR hit, with and without source gaps.
// The FIFOs are modelled by queues; every word written is compared with the
// word expected from the routing rule (window -> FIFO, completion -> FIFO 3,
// everything else dropped). It also checks the back-to-back timing of N + 3
// clocks per N-word TLP, and that a TLP waits (trn_rdst_rdy_n high) while its
// FIFO lacks space for it, then proceeds. Finally the core aborts TLPs with
// trn_rsrc_dsc_n: during the payload (the words so far reach the FIFO, none
// marked as the end), during the header (nothing is written) and during a
// discard; the next TLP must then be routed normally.
module tb_rx_handler;
  import pwr_pkg::*;
  import tlp_gen_pkg::*;

  localparam int unsigned N = 4, AW = 5, DEPTH = 2 ** AW;

  logic clk = 0, rst_n = 0;
  logic [63:0] trn_rd = '0;
  logic [7:0]  trn_rrem_n = '0;
  logic trn_rsof_n = 1, trn_reof_n = 1, trn_rsrc_rdy_n = 1, trn_rsrc_dsc_n = 1;
  logic [6:0] trn_rbar_hit_n = '1;
  logic trn_rdst_rdy_n, trn_rnp_ok_n;
  logic [N-1:0] fifo_wr_en;
  fifo_word_t fifo_din;
  logic [AW:0] fifo_wr_count [N];
  logic pkt_dispatched, pkt_discarded, stall;

  int checks = 0, failures = 0;
  fifo_word_t exp_q [N][$];
  int n_disp = 0, n_disc = 0, n_stall = 0, n_exp_disc = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  rx_handler #(.N_FIFO(N), .ADDR_W(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO model: compare each written word with the expected queue
  always @(posedge clk) if (rst_n) begin
    if (pkt_dispatched) n_disp++;
    if (pkt_discarded)  n_disc++;
    if (stall)          n_stall++;
    check($countones(fifo_wr_en) <= 1, "one FIFO written at a time");
    for (int i = 0; i < N; i++) if (fifo_wr_en[i]) begin
      if (exp_q[i].size() == 0) check(0, $sformatf("unexpected write to FIFO %0d", i));
      else check(fifo_din == exp_q[i].pop_front(), $sformatf("word in FIFO %0d", i));
    end
  end

  // returns the destination FIFO or -1
  function automatic int dest(input int kind, input logic [31:0] addr, input bit hit);
    if (kind == 2) return 3;                      // completion
    if (kind == 3 || !hit) return -1;             // I/O write or no BAR hit
    if (addr[31:12] < N) return int'(addr[13:12]);
    return -1;
  endfunction

  longint sof_t [$];

  task automatic send(input tlp_c t, input bit hit, input bit gaps);
    for (int i = 0; i < t.qw.size(); i++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) begin
        @(negedge clk); trn_rsrc_rdy_n = 1;
      end
      @(negedge clk);
      trn_rsrc_rdy_n = 0;
      trn_rd         = t.qw[i];
      trn_rsof_n     = (i != 0);
      trn_reof_n     = (i != t.qw.size() - 1);
      trn_rrem_n     = (i == t.qw.size() - 1 && t.half) ? 8'h0F : 8'h00;
      trn_rbar_hit_n = hit ? 7'b1111110 : 7'b1111111;
      while (trn_rdst_rdy_n) @(negedge clk);   // ready is stable within a cycle
      @(posedge clk);
      if (i == 0) sof_t.push_back(cyc);
    end
  endtask

  // sends beats 0..ab of t; beat ab carries trn_rsrc_dsc_n low (core abort)
  task automatic send_abort(input tlp_c t, input bit hit, input int ab);
    for (int i = 0; i <= ab; i++) begin
      @(negedge clk);
      trn_rsrc_rdy_n = 0;
      trn_rd         = t.qw[i];
      trn_rsof_n     = (i != 0);
      trn_reof_n     = 1;
      trn_rrem_n     = 8'h00;
      trn_rsrc_dsc_n = (i != ab);
      trn_rbar_hit_n = hit ? 7'b1111110 : 7'b1111111;
      if (i == ab && i == 1) @(posedge clk);     // header abort: ready not needed
      else begin
        while (trn_rdst_rdy_n) @(negedge clk);
        @(posedge clk);
      end
    end
    @(negedge clk); trn_rsrc_dsc_n = 1;
  endtask

  task automatic idle(input int n);
    @(negedge clk); trn_rsrc_rdy_n = 1; trn_rsof_n = 1; trn_reof_n = 1;
    repeat (n) @(posedge clk);
  endtask

  task automatic expect_tlp(input tlp_c t, input int d);
    if (d < 0) begin n_exp_disc++; return; end
    for (int i = 0; i < t.qw.size(); i++)
      exp_q[d].push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                           half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
  endtask

  function automatic tlp_c rand_tlp(output int kind, output logic [31:0] addr);
    kind = $urandom_range(0, 3);
    addr = {18'h0, 3'($urandom_range(0, 4)), 1'b0, 10'($urandom)};
    case (kind)
      0: return mwr(addr, $urandom_range(1, 16), $urandom, $urandom_range(0, 1));
      1: return mrd(addr, 1, 16'h0100, 8'($urandom));
      2: return cpld($urandom_range(1, 8), 16'h0008, 8'($urandom));
      default: return iowr(addr);
    endcase
  endfunction

  initial begin
    tlp_c t;
    int kind, d;
    logic [31:0] addr;
    bit hit;
    for (int i = 0; i < N; i++) fifo_wr_count[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1) random traffic with source gaps
    for (int k = 0; k < 120; k++) begin
      t   = rand_tlp(kind, addr);
      hit = ($urandom_range(0, 9) != 0);
      d   = dest(kind, addr, hit);
      expect_tlp(t, d);
      send(t, hit, 1);
    end
    idle(10);

    // 2) back-to-back timing: N + 3 clocks per TLP
    sof_t.delete();
    begin
      tlp_c b [4];
      b[0] = mwr(32'h0000_1000, 8, 32'h11, 0);   // 6 QWs
      b[1] = mrd(32'h0000_2004, 1, 16'h0100, 8'h5); // 2 QWs
      b[2] = cpld(4, 16'h0008, 8'h6);              // 4 QWs
      b[3] = mwr(32'h0000_0000, 1, 32'h22, 0);     // 2 QWs
      expect_tlp(b[0], 1); expect_tlp(b[1], 2); expect_tlp(b[2], 3); expect_tlp(b[3], 0);
      for (int k = 0; k < 4; k++) send(b[k], 1, 0);
      for (int k = 0; k < 3; k++)
        check(sof_t[k+1] - sof_t[k] == longint'(b[k].qw.size() + 3),
              $sformatf("back-to-back interval %0d = %0d", k, sof_t[k+1] - sof_t[k]));
    end
    idle(10);

    // 3) throttling: FIFO 2 has room for 4 words, the TLP needs 10
    fifo_wr_count[2] = (AW+1)'(DEPTH - 4);
    t = mwr(32'h0000_2000, 16, 32'h33, 0);       // 10 QWs
    expect_tlp(t, 2);
    fork
      send(t, 1, 0);
      begin
        repeat (30) @(posedge clk);
        check(exp_q[2].size() == 10, "nothing written while FIFO lacks space");
        check(trn_rdst_rdy_n == 1, "core throttled while waiting");
        fifo_wr_count[2] = '0;
      end
    join
    idle(10);

    // 4) source discontinue from the core
    begin
      int disp0, disc0;
      tlp_c a, nx;
      disp0 = n_disp; disc0 = n_disc;
      a = mwr(32'h0000_1000, 8, 32'h44, 0);        // 6 QWs, aborted on beat 3
      for (int i = 0; i <= 3; i++)
        exp_q[1].push_back('{sof: i == 0, eof: 1'b0, half: 1'b0, data: a.qw[i]});
      send_abort(a, 1, 3);
      idle(3);
      check(n_disp == disp0 + 1, "payload abort ends the dispatch");
      a = mwr(32'h0000_2000, 8, 32'h55, 0);        // aborted in the header
      send_abort(a, 1, 1);
      idle(3);
      a = iowr(32'h0000_0010);                      // discarded, aborted on beat 1
      a.qw.push_back(64'h0);                        // make it 3 beats long
      send_abort(a, 1, 2);
      idle(3);
      check(n_disc == disc0 + 1, "discard abort ends the discard");
      n_exp_disc++;
      nx = mwr(32'h0000_1008, 3, 32'h66, 0);        // next TLP routes normally
      expect_tlp(nx, 1);
      send(nx, 1, 0);
      idle(10);
      check(n_disp == disp0 + 2, "TLP after aborts is dispatched");
    end

    for (int i = 0; i < N; i++) check(exp_q[i].size() == 0, $sformatf("FIFO %0d got all words", i));
    check(n_disc == n_exp_disc, $sformatf("discarded %0d expected %0d", n_disc, n_exp_disc));
    check(n_stall > 0, "stall happened");
    $display("dispatched=%0d discarded=%0d stall_cycles=%0d", n_disp, n_disc, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
