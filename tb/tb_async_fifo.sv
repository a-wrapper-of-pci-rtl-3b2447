// tb_async_fifo: self-checking test of the dual-clock FWFT FIFO.
//
// Two unrelated clocks (10 ns write, 7 ns read). Phase 1 fills the FIFO with
// the reader idle and checks full, wr_ack, overflow and both data counts.
// Phase 2 drains it and checks every word, empty, valid and underflow.
// Phase 3 runs random concurrent writes and reads and compares every word
// read with a queue model.
module tb_async_fifo;
  localparam int unsigned DW = 16, AW = 3, DEPTH = 2 ** AW;

  logic wr_clk = 0, rd_clk = 0, wr_rst_n = 0, rd_rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [DW-1:0] din = '0, dout;
  logic full, wr_ack, overflow, empty, valid, underflow;
  logic [AW:0] wr_data_count, rd_data_count;
  int checks = 0, failures = 0;
  logic [DW-1:0] model[$];

  always #5 wr_clk = ~wr_clk;
  always #3.5 rd_clk = ~rd_clk;

  async_fifo #(.DATA_W(DW), .ADDR_W(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_wr, n_rd;
    repeat (3) @(posedge wr_clk);
    wr_rst_n = 1; rd_rst_n = 1;
    repeat (3) @(posedge rd_clk);
    check(empty && !valid && rd_data_count == 0, "empty after reset");
    // phase 1: fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge wr_clk); wr_en = 1; din = DW'(16'hA000 + i);
      @(posedge wr_clk); #1;
      check(wr_ack == 1 && wr_data_count == (AW+1)'(i+1), "wr_ack/count while filling");
    end
    @(negedge wr_clk);
    check(full, "full after DEPTH writes");
    din = 16'hdead;
    @(posedge wr_clk); #1;
    check(overflow && !wr_ack && wr_data_count == (AW+1)'(DEPTH), "overflow on full");
    @(negedge wr_clk); wr_en = 0;
    repeat (4) @(posedge rd_clk); #1;
    check(rd_data_count == (AW+1)'(DEPTH), "rd_data_count after sync");
    // phase 2: drain
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge rd_clk);
      check(valid && dout == DW'(16'hA000 + i), $sformatf("drain word %0d", i));
      rd_en = 1;
      @(posedge rd_clk); #1; rd_en = 0;
    end
    @(negedge rd_clk);
    check(empty, "empty after drain");
    rd_en = 1; @(posedge rd_clk); #1; rd_en = 0;
    check(underflow, "underflow on empty");
    repeat (4) @(posedge wr_clk); #1;
    check(wr_data_count == 0 && !full, "wr count back to 0");
    // phase 3: random traffic
    n_wr = 0; n_rd = 0;
    fork
      begin
        while (n_wr < 300) begin
          @(negedge wr_clk);
          wr_en = ($urandom_range(0, 3) != 0) && !full;
          din   = DW'($urandom);
          if (wr_en) begin model.push_back(din); n_wr++; end
        end
        @(negedge wr_clk); wr_en = 0;
      end
      begin
        while (n_rd < 300) begin
          @(negedge rd_clk);
          rd_en = 0;
          if (!empty && $urandom_range(0, 2) != 0) begin
            check(model.size() > 0 && dout == model[0], "random traffic word");
            if (model.size() > 0) void'(model.pop_front());
            rd_en = 1; n_rd++;
          end
        end
        @(negedge rd_clk); rd_en = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
