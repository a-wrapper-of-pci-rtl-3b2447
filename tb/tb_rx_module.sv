// tb_rx_module: RX handler plus dual-clock FIFOs, end to end.
//
// The core side (trn_clk, 8 ns) sends a random mix of TLPs; four user readers,
// each on its own clock (5, 7, 11 and 13 ns), pop their FIFO at random. Small
// FIFOs (16 words) make the handler wait for space often. Every word a reader
// gets is compared with the TLP stream expected for that FIFO; at the end all
// expected words must have arrived and the discarded count must match.
module tb_rx_module;
  import pwr_pkg::*;
  import tlp_gen_pkg::*;

  localparam int unsigned N = 4, AW = 4;

  logic trn_clk = 0, trn_rst_n = 0;
  logic [63:0] trn_rd = '0;
  logic [7:0]  trn_rrem_n = '0;
  logic trn_rsof_n = 1, trn_reof_n = 1, trn_rsrc_rdy_n = 1, trn_rsrc_dsc_n = 1;
  logic [6:0] trn_rbar_hit_n = '1;
  logic trn_rdst_rdy_n, trn_rnp_ok_n;
  logic usr_clk [N];
  logic usr_rst_n [N];
  logic [N-1:0] usr_rd_en = '0;
  fifo_word_t usr_dout [N];
  logic [N-1:0] usr_empty, usr_valid;
  logic [AW:0] usr_rd_count [N];
  logic pkt_dispatched, pkt_discarded, stall;

  int checks = 0, failures = 0;
  fifo_word_t exp_q [N][$];
  int n_disc = 0, n_exp_disc = 0, n_stall = 0, n_got = 0;
  bit done = 0;

  always #4 trn_clk = ~trn_clk;
  initial begin
    for (int i = 0; i < N; i++) begin usr_clk[i] = 0; usr_rst_n[i] = 0; end
  end
  always #2.5 usr_clk[0] = ~usr_clk[0];
  always #3.5 usr_clk[1] = ~usr_clk[1];
  always #5.5 usr_clk[2] = ~usr_clk[2];
  always #6.5 usr_clk[3] = ~usr_clk[3];

  rx_module #(.N_FIFO(N), .ADDR_W(AW)) dut (.*);

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

  always @(posedge trn_clk) begin
    if (pkt_discarded) n_disc++;
    if (stall) n_stall++;
  end

  // user readers
  for (genvar g = 0; g < N; g++) begin : g_rd
    always @(negedge usr_clk[g]) begin
      usr_rd_en[g] <= 1'b0;
      if (usr_rst_n[g] && !usr_empty[g] && $urandom_range(0, 2) == 0) begin
        check(exp_q[g].size() > 0 && usr_dout[g] == exp_q[g][0],
              $sformatf("word from FIFO %0d", g));
        check(usr_valid[g] && usr_rd_count[g] != 0, "valid and count");
        if (exp_q[g].size() > 0) void'(exp_q[g].pop_front());
        usr_rd_en[g] <= 1'b1;
        n_got++;
      end
    end
  end

  function automatic int dest(input int kind, input logic [31:0] addr, input bit hit);
    if (kind == 2) return 3;
    if (kind == 3 || !hit) return -1;
    if (addr[31:12] < N) return int'(addr[13:12]);
    return -1;
  endfunction

  task automatic send(input tlp_c t, input bit hit);
    for (int i = 0; i < t.qw.size(); i++) begin
      while ($urandom_range(0, 5) == 0) begin
        @(negedge trn_clk); trn_rsrc_rdy_n = 1;
      end
      @(negedge trn_clk);
      trn_rsrc_rdy_n = 0;
      trn_rd         = t.qw[i];
      trn_rsof_n     = (i != 0);
      trn_reof_n     = (i != t.qw.size() - 1);
      trn_rrem_n     = (i == t.qw.size() - 1 && t.half) ? 8'h0F : 8'h00;
      trn_rbar_hit_n = hit ? 7'b1111110 : 7'b1111111;
      while (trn_rdst_rdy_n) @(negedge trn_clk);
      @(posedge trn_clk);
    end
  endtask

  initial begin
    tlp_c t;
    int kind, d;
    logic [31:0] addr;
    bit hit;
    repeat (4) @(posedge trn_clk);
    trn_rst_n = 1;
    for (int i = 0; i < N; i++) usr_rst_n[i] = 1;
    repeat (4) @(posedge trn_clk);
    for (int k = 0; k < 200; k++) begin
      kind = $urandom_range(0, 3);
      addr = {18'h0, 3'($urandom_range(0, 4)), 1'b0, 10'($urandom)};
      case (kind)
        0: t = mwr(addr, $urandom_range(1, 20), $urandom, $urandom_range(0, 1));
        1: t = mrd(addr, 1, 16'h0100, 8'($urandom));
        2: t = cpld($urandom_range(1, 12), 16'h0008, 8'($urandom));
        default: t = iowr(addr);
      endcase
      hit = ($urandom_range(0, 9) != 0);
      d = dest(kind, addr, hit);
      if (d < 0) n_exp_disc++;
      else for (int i = 0; i < t.qw.size(); i++)
        exp_q[d].push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                             half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
      send(t, hit);
    end
    @(negedge trn_clk); trn_rsrc_rdy_n = 1;
    repeat (400) @(posedge trn_clk);
    for (int i = 0; i < N; i++) check(exp_q[i].size() == 0, $sformatf("FIFO %0d delivered all", i));
    check(n_disc == n_exp_disc, "discard count");
    check(n_stall > 0, "handler waited for FIFO space");
    $display("words=%0d discarded=%0d stall_cycles=%0d", n_got, n_disc, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
