// tb_mu_prefetcher: self-checking test of the MU stride prefetcher. A model
// memory answers each read after a fixed latency and a model buffer of 10
// rows is drained slowly. The test checks the address sequence
// (base + k*stride), the number of rows requested, that buffered plus
// in-flight rows never exceed the buffer, that every row is filled once,
// and that after a cancel the rows still in flight are dropped.
module tb_mu_prefetcher;
  import revamp_pkg::*;
  localparam int unsigned LAT = 6, CAP = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, cancel = 0, req_valid, req_ready = 1, resp_valid, fill_valid, busy;
  addr_t base = '0, stride = '0, req_addr;
  logic [7:0] nrows = '0;
  logic [3:0] free_rows;
  int checks = 0, failures = 0;
  int buffered = 0, inflight = 0, nreq = 0, nfill = 0, drain_div = 3;
  longint unsigned t = 0;
  longint unsigned ret_t[$];
  addr_t exp_addr;

  mu_prefetcher #(.LEN_W(8), .CW(4)) dut (.*);

  assign free_rows = 4'(CAP - buffered);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model memory + model buffer
  always @(posedge clk) begin
    t++;
    resp_valid <= 1'b0;
    if (ret_t.size() > 0 && ret_t[0] <= t) begin
      resp_valid <= 1'b1;
      void'(ret_t.pop_front());
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      checks++;
      if (req_addr != exp_addr) begin failures++; $display("FAIL: addr %h exp %h", req_addr, exp_addr); end
      exp_addr = exp_addr + stride;
      ret_t.push_back(t + LAT);
      nreq++;
      inflight++;
    end
    if (resp_valid) inflight--;
    if (fill_valid) begin buffered++; nfill++; end
    if (buffered > 0 && (t % drain_div) == 0) buffered--;
    checks++;
    if (buffered + inflight > CAP + 1) begin failures++; $display("FAIL: credit overrun"); end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    resp_valid = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // segment of 25 rows, stride 64
    base = 36'h1_0000_0040; stride = 64; nrows = 25; exp_addr = base;
    start = 1; @(posedge clk); #1 start = 0;
    check(busy, "busy after start");
    wait (!busy); @(posedge clk); #1;
    check(nreq == 25, $sformatf("25 requests (got %0d)", nreq));
    check(nfill == 25, $sformatf("25 fills (got %0d)", nfill));
    // a non-unit stride and a cancel part way with rows in flight
    while (buffered > 0) @(posedge clk);
    #1;
    nreq = 0; nfill = 0; drain_div = 1000;
    base = 36'h2_0000_0000; stride = 36'h1000; nrows = 40; exp_addr = base;
    start = 1; @(posedge clk); #1 start = 0;
    repeat (3) @(posedge clk); #1;
    check(nreq >= 2, "requests under way before cancel");
    cancel = 1; @(posedge clk); #1 cancel = 0;
    begin
      int n_at_cancel, f_at_cancel;
      n_at_cancel = nreq;
      f_at_cancel = nfill;
      repeat (LAT + 10) @(posedge clk); #1;
      check(nreq == n_at_cancel, $sformatf("no request after cancel %0d %0d", nreq, n_at_cancel));
      check(nfill == f_at_cancel, "in-flight rows dropped after cancel");
      check(!busy, "idle after cancel drained");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
