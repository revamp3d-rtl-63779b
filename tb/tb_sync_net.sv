// tb_sync_net: self-checking test of the synchronization path with 8
// cores. Cores post messages at random; the test checks one grant per
// cycle, that every granted message is broadcast unchanged on the next
// cycle, that a core that keeps asking is served within 8 cycles (round
// robin), and that every posted message is delivered exactly once.
module tb_sync_net;
  import revamp_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req_valid = '0, req_ready;
  sync_msg_t req_msg [N];
  logic bcast_valid;
  sync_msg_t bcast_msg;
  int checks = 0, failures = 0, wait_cyc [N], posted = 0, delivered = 0;
  sync_msg_t exp_q[$];

  sync_net #(.NUM_CORES(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (bcast_valid) begin
      delivered++;
      check(exp_q.size() > 0 && bcast_msg == exp_q[0], "broadcast equals granted message");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    check($countones(req_ready) <= 1, "one grant per cycle");
    for (int c = 0; c < N; c++) begin
      if (req_valid[c] && req_ready[c]) begin
        exp_q.push_back(req_msg[c]);
        wait_cyc[c] = 0;
      end else if (req_valid[c]) begin
        wait_cyc[c]++;
        check(wait_cyc[c] < N, "served within N cycles");
      end
    end
  end

  initial begin
    for (int c = 0; c < N; c++) begin wait_cyc[c] = 0; req_msg[c] = '{op: SYNC_NOP, addr: '0, src: 8'(c)}; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int cyc = 0; cyc < 400; cyc++) begin
      logic [N-1:0] fired;
      fired = req_valid & req_ready;   // sampled just before the edge
      @(posedge clk); #1;
      req_valid = req_valid & ~fired;
      for (int c = 0; c < N; c++) begin
        if (!req_valid[c] && cyc < 380 && $urandom_range(0, 2) == 0) begin
          req_valid[c] = 1;
          req_msg[c] = '{op: $urandom_range(0, 1) ? SYNC_LOCK : SYNC_UNLOCK,
                         addr: addr_t'($urandom()), src: 8'(c)};
          posted++;
        end
      end
      #7;
    end
    req_valid = '0;
    repeat (N * 4) @(posedge clk);
    check(delivered == posted, $sformatf("all %0d messages delivered (%0d)", posted, delivered));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
