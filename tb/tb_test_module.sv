// tb_test_module: self-checking test of the board test module.
//
// The RX and TX FIFOs are modelled by queues. The test sends memory writes
// with 3 DW and 4 DW headers (LEDs must take the low byte of the first
// payload DW), memory reads (a CplD with the switch value must come back,
// with requester ID, tag, completer ID, byte count and lower address
// checked field by field), and completions and I/O writes that must be
// ignored. A nearly full TX FIFO must hold the completion back.
module tb_test_module;
  import pwr_pkg::*;
  import tlp_gen_pkg::*;
  localparam int unsigned AW = 4, DEPTH = 2 ** AW;

  logic clk = 0, rst_n = 0;
  fifo_word_t rx_dout, tx_din;
  logic rx_empty, rx_rd_en, tx_wr_en;
  logic [AW:0] tx_wr_count;
  logic [15:0] completer_id = 16'h0A08;
  logic [7:0] switches = 8'h00, leds;
  logic wr_seen, rd_seen;
  int checks = 0, failures = 0;
  fifo_word_t rxq [$], txq [$];
  int extra_used = 0;

  always #5 clk = ~clk;
  test_module #(.ADDR_W(AW)) dut (.*);

  // FIFO model outputs, refreshed after every change of the queues
  function automatic void upd();
    rx_empty    = (rxq.size() == 0);
    rx_dout     = (rxq.size() != 0) ? rxq[0] : '0;
    tx_wr_count = (AW+1)'(txq.size() + extra_used);
  endfunction
  initial upd();
  // the FIFO operations sampled on a rising edge take effect at the next
  // falling edge, so the block always samples stable FIFO outputs
  logic       do_pop = 0, do_push = 0;
  fifo_word_t push_w;
  always @(posedge clk) begin
    do_pop  <= rx_rd_en;
    do_push <= tx_wr_en;
    push_w  <= tx_din;
  end
  always @(negedge clk) begin
    if (do_pop && rxq.size() != 0) void'(rxq.pop_front());
    if (do_push) txq.push_back(push_w);
    do_pop  = 0;
    do_push = 0;
    upd();
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic put(input tlp_c t);
    @(negedge clk);
    for (int i = 0; i < t.qw.size(); i++)
      rxq.push_back('{sof: i == 0, eof: i == t.qw.size() - 1,
                      half: (i == t.qw.size() - 1) && t.half, data: t.qw[i]});
    upd();
    while (rxq.size() != 0) @(negedge clk);
    repeat (6) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 30; k++) begin
      logic [31:0] d;
      logic [31:0] a;
      int kind;
      kind = $urandom_range(0, 3);
      d = $urandom;
      a = {20'h0, 10'($urandom), 2'b00};
      case (kind)
        0, 1: begin
          put(mwr(a, $urandom_range(1, 6), d, kind == 1));
          check(leds == d[7:0], $sformatf("LEDs after %0d DW write", kind == 1 ? 4 : 3));
        end
        2: begin
          logic [7:0] tag;
          logic [15:0] rid;
          logic [7:0] old;
          tag = 8'($urandom); rid = 16'($urandom);
          switches = 8'($urandom);
          old = leds;
          put(mrd(a, 1, rid, tag));
          check(leds == old, "read leaves LEDs");
          check(txq.size() == 2, "CplD is two words");
          if (txq.size() == 2) begin
            check(txq[0].sof && !txq[0].eof && !txq[1].sof && txq[1].eof && !txq[1].half, "markers");
            check(txq[0].data[63:32] == 32'h4A00_0001, "CplD DW0");
            check(txq[0].data[31:0] == {16'h0A08, 4'h0, 12'd4}, "CplD DW1");
            check(txq[1].data[63:32] == {rid, tag, 1'b0, a[6:2], 2'b00}, "CplD DW2");
            check(txq[1].data[7:0] == switches, "CplD data = switches");
          end
          txq.delete(); upd();
        end
        default: begin
          logic [7:0] old;
          old = leds;
          if ($urandom_range(0, 1)) put(cpld(3, 16'h1, 8'h1)); else put(iowr(a));
          check(leds == old && txq.size() == 0, "other TLP ignored");
        end
      endcase
    end
    // completion held back while the TX FIFO has room for only one word
    extra_used = DEPTH - 1; upd();
    switches = 8'hA5;
    put(mrd(32'h40, 1, 16'h0100, 8'h33));
    check(txq.size() == 0, "completion waits for room");
    extra_used = 0; upd();
    repeat (5) @(negedge clk);
    check(txq.size() == 2 && txq[1].data[7:0] == 8'hA5, "completion after room");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
