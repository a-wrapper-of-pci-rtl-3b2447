// tb_conf_intr: the configuration and interrupt block as a whole.
//
// Checks that the values derived from the core's configuration state come
// out, that a configuration read is carried out through the core's read
// port, and that interrupts from two sources reach the core's interrupt port
// with their own vectors and are acknowledged.
module tb_conf_intr;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  logic [7:0] cfg_bus_number = 8'h3C;
  logic [4:0] cfg_device_number = 5'h1;
  logic [2:0] cfg_function_number = 3'h2;
  logic [15:0] cfg_command = 16'h0006, cfg_dcommand = 16'h2040;  // MRRS 512, MPS 512
  logic [31:0] cfg_do = 0;
  logic cfg_rd_wr_done_n = 1;
  logic [9:0] cfg_dwaddr;
  logic cfg_rd_en_n, cfg_trn_pending_n;
  logic cfg_interrupt_n, cfg_interrupt_rdy_n = 1, cfg_interrupt_assert_n;
  logic [7:0] cfg_interrupt_di;
  logic usr_trn_pending = 1;
  logic [15:0] completer_id;
  logic bus_master_en;
  logic [12:0] max_payload_bytes, max_rd_req_bytes;
  logic cfg_rd_req = 0;
  logic [9:0] cfg_rd_dwaddr = 0;
  logic cfg_rd_busy, cfg_rd_valid;
  logic [31:0] cfg_rd_data;
  logic [N-1:0] irq_req = '0, irq_ack;
  int checks = 0, failures = 0;
  int vec [$];

  always #5 clk = ~clk;
  conf_intr #(.N_IRQ(N), .VECTOR_BASE(8'h20)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // core model: configuration reads and interrupts
  initial forever begin
    @(negedge clk);
    if (!cfg_rd_en_n) begin
      @(negedge clk);
      cfg_do = {22'h0, cfg_dwaddr} + 32'hC0DE_0000;
      cfg_rd_wr_done_n = 0;
      @(negedge clk);
      cfg_rd_wr_done_n = 1;
    end
  end
  initial forever begin
    @(negedge clk);
    if (!cfg_interrupt_n) begin
      vec.push_back(int'(cfg_interrupt_di));
      @(negedge clk); cfg_interrupt_rdy_n = 0;
      @(negedge clk); cfg_interrupt_rdy_n = 1;
    end
  end
  always @(posedge clk) irq_req <= irq_req & ~irq_ack;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(completer_id == 16'h3C0A, "completer id");
    check(bus_master_en, "bus master enable");
    check(max_payload_bytes == 512 && max_rd_req_bytes == 512, "sizes");
    check(!cfg_trn_pending_n, "pending");
    cfg_rd_req = 1; cfg_rd_dwaddr = 10'h1A;
    @(negedge clk); cfg_rd_req = 0;
    while (!cfg_rd_valid) @(negedge clk);
    check(cfg_rd_data == 32'hC0DE_001A, "config read");
    irq_req = 4'b0110;
    repeat (30) @(negedge clk);
    check(irq_req == 0, "both interrupts acknowledged");
    check(vec.size() == 2 && vec[0] == 'h21 && vec[1] == 'h22, "vectors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
