// tb_tx_module: dual-clock TX FIFOs plus scheduler, end to end.
//
// Four user writers, each on its own clock, write random TLPs into their FIFO
// word by word, checking wr_data_count for room first (a writer never
// overruns its FIFO). The core side (trn_clk) throttles at random. A monitor
// on the transmit TRN interface rebuilds every TLP, identifies its FIFO by a
// tag in the header and checks that each FIFO's TLPs arrive complete, in
// order and unchanged.
module tb_tx_module;
  import pwr_pkg::*;
  import tlp_gen_pkg::*;

  localparam int unsigned N = 4, AW = 5, DEPTH = 2 ** AW;

  logic trn_clk = 0, trn_rst_n = 0;
  logic [63:0] trn_td;
  logic [7:0] trn_trem_n;
  logic trn_tsof_n, trn_teof_n, trn_tsrc_rdy_n, trn_tsrc_dsc_n;
  logic trn_tdst_rdy_n = 0;
  logic [3:0] trn_tbuf_av = 4'hF;
  logic usr_clk [N];
  logic usr_rst_n [N];
  logic [N-1:0] usr_wr_en = '0;
  fifo_word_t usr_din [N];
  logic [N-1:0] usr_full, usr_wr_ack, usr_overflow;
  logic [AW:0] usr_wr_count [N];
  logic pkt_sent, resync_drop;

  int checks = 0, failures = 0;
  tlp_c exp_t [N][$];
  logic [63:0] cur [$];
  bit cur_half;
  int n_pkts = 0, n_ovf = 0;

  always #4 trn_clk = ~trn_clk;
  initial for (int i = 0; i < N; i++) begin usr_clk[i] = 0; usr_rst_n[i] = 0; usr_din[i] = '0; end
  always #3   usr_clk[0] = ~usr_clk[0];
  always #4.5 usr_clk[1] = ~usr_clk[1];
  always #6   usr_clk[2] = ~usr_clk[2];
  always #9   usr_clk[3] = ~usr_clk[3];

  tx_module #(.N_FIFO(N), .ADDR_W(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #4000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge trn_clk) trn_tdst_rdy_n <= ($urandom_range(0, 4) == 0);

  // monitor: TLPs carry their FIFO number in requester ID bits [1:0]
  always @(posedge trn_clk) if (trn_rst_n) begin
    if (|usr_overflow) n_ovf++;
    if (!trn_tsrc_rdy_n && !trn_tdst_rdy_n) begin
      if (!trn_tsof_n) cur.delete();
      cur.push_back(trn_td);
      if (!trn_teof_n) begin
        int f;
        f = int'(cur[0][17:16]);
        n_pkts++;
        check(exp_t[f].size() > 0, "TLP expected");
        if (exp_t[f].size() > 0) begin
          tlp_c e;
          e = exp_t[f].pop_front();
          check(e.qw.size() == cur.size(), $sformatf("TLP length from FIFO %0d", f));
          for (int i = 0; i < cur.size() && i < e.qw.size(); i++)
            check(cur[i] == e.qw[i], "TLP word");
          check(trn_trem_n == (e.half ? 8'h0F : 8'h00), "trem_n");
        end
      end
    end
  end

  for (genvar g = 0; g < N; g++) begin : g_wr
    initial begin
      tlp_c t;
      logic [31:0] d[$];
      wait (usr_rst_n[g]);
      for (int k = 0; k < 40; k++) begin
        // random memory write whose requester ID names the FIFO
        t = mwr(32'h0, $urandom_range(1, 24), $urandom, $urandom_range(0, 1));
        t.qw[0][17:16] = 2'(g);
        exp_t[g].push_back(t);
        for (int i = 0; i < t.qw.size(); i++) begin
          @(negedge usr_clk[g]);
          usr_wr_en[g] = 0;
          while (usr_wr_count[g] >= (AW+1)'(DEPTH - 1) || $urandom_range(0, 3) == 0)
            @(negedge usr_clk[g]);
          usr_wr_en[g] = 1;
          usr_din[g] = '{sof: i == 0, eof: i == t.qw.size() - 1,
                         half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]};
        end
        @(negedge usr_clk[g]); usr_wr_en[g] = 0;
      end
    end
  end

  initial begin
    repeat (4) @(posedge trn_clk);
    trn_rst_n = 1;
    for (int i = 0; i < N; i++) usr_rst_n[i] = 1;
    #1500000;
    for (int i = 0; i < N; i++) check(exp_t[i].size() == 0, $sformatf("FIFO %0d all sent", i));
    check(n_pkts == 4 * 40, "TLP count");
    check(n_ovf == 0, "no overflow");
    $display("tlps=%0d", n_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
