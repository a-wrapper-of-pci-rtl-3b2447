// tb_intr_arb: self-checking test of the interrupt arbiter.
//
// A core model answers each interrupt request after a random delay. Phase 1
// keeps all four sources requesting and checks the round-robin order
// 0,1,2,3,0,... and the MSI vector. Phase 2 raises requests at random and
// checks that each is acknowledged exactly once, that only pending sources
// are served and that the request line stays low until the core answers.
module tb_intr_arb;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] irq_req = '0, irq_ack;
  logic cfg_interrupt_n, cfg_interrupt_rdy_n = 1, cfg_interrupt_assert_n;
  logic [7:0] cfg_interrupt_di;
  int checks = 0, failures = 0;
  int served [$];
  int n_irq [N];
  bit rr_phase = 1;

  always #5 clk = ~clk;
  intr_arb #(.N_IRQ(N), .VECTOR_BASE(8'h10)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // core model
  initial forever begin
    @(negedge clk);
    if (!cfg_interrupt_n) begin
      int v;
      v = int'(cfg_interrupt_di) - 'h10;
      repeat ($urandom_range(0, 4)) begin
        @(negedge clk);
        check(!cfg_interrupt_n && int'(cfg_interrupt_di) - 'h10 == v, "request held");
      end
      check(v >= 0 && v < N && irq_req[v], "vector names a pending source");
      served.push_back(v);
      cfg_interrupt_rdy_n = 0;
      @(negedge clk);
      cfg_interrupt_rdy_n = 1;
    end
  end

  // sources: drop the request on acknowledge
  always @(posedge clk) for (int i = 0; i < N; i++)
    if (irq_ack[i]) begin
      n_irq[i]++;
      if (!rr_phase) irq_req[i] <= 1'b0;
    end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); irq_req = '1;
    while (served.size() < 12) @(negedge clk);
    for (int k = 0; k < 12; k++) check(served[k] == k % N, $sformatf("round robin %0d", k));
    rr_phase = 0;
    @(negedge clk); irq_req = '0;
    repeat (10) @(negedge clk);
    for (int i = 0; i < N; i++) n_irq[i] = 0;
    served.delete();
    begin
      int raised [N];
      for (int i = 0; i < N; i++) raised[i] = 0;
      for (int c = 0; c < 600; c++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++)
          if (!irq_req[i] && $urandom_range(0, 15) == 0) begin irq_req[i] = 1; raised[i]++; end
      end
      while (irq_req != 0) @(negedge clk);
      repeat (5) @(negedge clk);
      for (int i = 0; i < N; i++) check(n_irq[i] == raised[i], $sformatf("source %0d acks", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
