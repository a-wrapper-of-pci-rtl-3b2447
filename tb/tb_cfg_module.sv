// tb_cfg_module: self-checking test of the configuration module.
//
// Checks the completer ID, bus master enable and the payload / read request
// sizes for every Device Control code, the pending flag, and 40 configuration
// reads answered by a core model after a random delay with a value derived
// from the address.
module tb_cfg_module;
  logic clk = 0, rst_n = 0;
  logic [7:0] cfg_bus_number = 0;
  logic [4:0] cfg_device_number = 0;
  logic [2:0] cfg_function_number = 0;
  logic [15:0] cfg_command = 0, cfg_dcommand = 0;
  logic [31:0] cfg_do = 0;
  logic cfg_rd_wr_done_n = 1;
  logic [9:0] cfg_dwaddr;
  logic cfg_rd_en_n, cfg_trn_pending_n;
  logic usr_trn_pending = 0;
  logic [15:0] completer_id;
  logic bus_master_en;
  logic [12:0] max_payload_bytes, max_rd_req_bytes;
  logic rd_req = 0;
  logic [9:0] rd_dwaddr = 0;
  logic rd_busy, rd_valid;
  logic [31:0] rd_data;
  int checks = 0, failures = 0;
  int sizes [8] = '{128, 256, 512, 1024, 2048, 4096, 4096, 4096};

  always #5 clk = ~clk;
  cfg_module dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // core model: answers a read 1..6 clocks after cfg_rd_en_n goes low
  initial forever begin
    @(negedge clk);
    if (!cfg_rd_en_n) begin
      repeat ($urandom_range(0, 5)) @(negedge clk);
      cfg_do = {cfg_dwaddr, 22'h2A5A5} ^ 32'h1234_5678;
      cfg_rd_wr_done_n = 0;
      @(negedge clk);
      cfg_rd_wr_done_n = 1;
      cfg_do = '0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      cfg_bus_number = 8'($urandom); cfg_device_number = 5'($urandom);
      cfg_function_number = 3'($urandom);
      cfg_command = 16'($urandom);
      cfg_dcommand = 16'($urandom);
      usr_trn_pending = 1'($urandom);
      @(negedge clk); @(negedge clk);
      check(completer_id == {cfg_bus_number, cfg_device_number, cfg_function_number}, "completer id");
      check(bus_master_en == cfg_command[2], "bus master");
      check(max_payload_bytes == 13'(sizes[cfg_dcommand[7:5]]), "max payload");
      check(max_rd_req_bytes == 13'(sizes[cfg_dcommand[14:12]]), "max read request");
      check(cfg_trn_pending_n == !usr_trn_pending, "trn pending");
    end
    for (int k = 0; k < 40; k++) begin
      logic [9:0] a;
      int guard;
      a = 10'($urandom);
      @(negedge clk); rd_req = 1; rd_dwaddr = a;
      @(negedge clk); rd_req = 0;
      check(rd_busy && !cfg_rd_en_n && cfg_dwaddr == a, "read issued");
      guard = 0;
      while (!rd_valid && guard < 50) begin @(negedge clk); guard++; end
      check(rd_valid && rd_data == ({a, 22'h2A5A5} ^ 32'h1234_5678), "read data");
      @(negedge clk);
      check(!rd_busy && cfg_rd_en_n, "idle after read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
