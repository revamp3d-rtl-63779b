// tb_mu_mem_if: self-checking test of the MU memory interface. All four
// requesters (read and write of both paths) ask at once; the test checks
// that exactly one command per cycle leaves on the address bus, that it
// carries the right direction, port and address, that write data appears
// on the named data port, that round robin serves every requester within
// four cycles, that nothing is granted while the bus is not ready, and
// that returned read data reaches the path of its port.
module tb_mu_mem_if;
  import revamp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] rd_valid = '0, rd_ready, resp_valid, wr_valid = '0, wr_ready, mem_rvalid = '0;
  addr_t rd_addr [2], wr_addr [2];
  row_t  resp_row [2], wr_row [2], mem_wdata [2], mem_rdata [2];
  logic  mem_cmd_valid, mem_cmd_ready = 1;
  mu_cmd_t mem_cmd;
  int checks = 0, failures = 0;
  int served [4];

  mu_mem_if dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_addr[0] = 36'h100; rd_addr[1] = 36'h200; wr_addr[0] = 36'h300; wr_addr[1] = 36'h400;
    wr_row[0] = {16{32'hAAAA0000}}; wr_row[1] = {16{32'hBBBB1111}};
    mem_rdata[0] = '0; mem_rdata[1] = '0;
    for (int i = 0; i < 4; i++) served[i] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    rd_valid = 2'b11; wr_valid = 2'b11;
    for (int c = 0; c < 8; c++) begin
      #1;
      check($countones({rd_ready, wr_ready}) == 1, "one grant per cycle");
      check(mem_cmd_valid, "bus busy while requests wait");
      for (int p = 0; p < 2; p++) begin
        if (rd_ready[p]) begin
          served[p]++;
          check(!mem_cmd.we && mem_cmd.port == path_e'(p) && mem_cmd.addr == rd_addr[p], "read command");
        end
        if (wr_ready[p]) begin
          served[2 + p]++;
          check(mem_cmd.we && mem_cmd.port == path_e'(p) && mem_cmd.addr == wr_addr[p], "write command");
          check(mem_wdata[p] == wr_row[p], "write data on its port");
        end
      end
      @(posedge clk);
      if (c == 3) for (int i = 0; i < 4; i++) check(served[i] == 1, $sformatf("round robin served %0d once in 4 cycles", i));
    end
    for (int i = 0; i < 4; i++) check(served[i] == 2, "round robin fair over 8 cycles");
    // bus not ready: nothing granted
    mem_cmd_ready = 0; #1;
    check(rd_ready == 0 && wr_ready == 0, "no grant without bus ready");
    @(posedge clk); #1 mem_cmd_ready = 1;
    // only one requester: granted at once every cycle
    rd_valid = 2'b10; wr_valid = 2'b00; #1;
    check(rd_ready == 2'b10, "single requester granted");
    @(posedge clk); #1;
    check(rd_ready == 2'b10, "single requester granted back to back");
    rd_valid = 0;
    // read data returns on port 1 only
    mem_rvalid = 2'b10; mem_rdata[1] = {16{32'h12345678}}; #1;
    check(resp_valid == 2'b10 && resp_row[1] == {16{32'h12345678}}, "read data to its path");
    @(posedge clk); #1 mem_rvalid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
