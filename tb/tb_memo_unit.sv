// tb_memo_unit: self-checking test of the memoization unit against a
// behavioural main memory with a 20-cycle read latency. It records both
// paths of a loop whose hard-to-predict branch sits in row 2, checks the
// rows written to the reserved region, replays the predicted path with
// random execution backpressure, replays again with a misprediction and
// checks that the other path continues right after the branch row within a
// few cycles (no refetch), checks an abort when the other path was never
// recorded, a lookup miss, a recording abandoned on write-queue overflow,
// and a 25-row loop that is longer than the buffer.
module tb_memo_unit;
  import revamp_pkg::*;
  localparam addr_t BASE = 36'hF_0000_0000;
  localparam addr_t STRIDE = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  rec_start = 0, issue_valid = 0, issue_br = 0, rec_end = 0;
  addr_t rec_pc = '0, lookup_pc = '0;
  path_e rec_path = PATH_TAKEN;
  row_t  issue_row = '0, replay_row;
  logic  lookup_valid = 0, pred_taken = 0, lookup_hit, br_valid = 0, br_mispredict = 0;
  logic  replay_valid, exec_ready = 1, fe_gate;
  logic  ev_switch, ev_abort, ev_done, rec_overflow, rec_busy;
  logic  mem_cmd_valid, mem_cmd_ready, stall = 0;
  mu_cmd_t mem_cmd;
  row_t  mem_wdata [2], mem_rdata [2];
  logic [1:0] mem_rvalid;
  int unsigned n_reads, n_writes;
  int checks = 0, failures = 0;
  int n_switch = 0, n_abort = 0, n_done = 0, n_ovf = 0;
  row_t got[$];
  bit   rand_ready = 0;

  memo_unit dut (.clk, .rst_n, .cfg_stride(STRIDE), .rec_start, .rec_pc, .rec_path,
    .issue_valid, .issue_row, .issue_br, .rec_end, .lookup_valid, .lookup_pc,
    .pred_taken, .lookup_hit, .br_valid, .br_mispredict, .replay_valid, .replay_row,
    .exec_ready, .fe_gate, .ev_switch, .ev_abort, .ev_done, .rec_overflow, .rec_busy,
    .mem_cmd_valid, .mem_cmd_ready, .mem_cmd, .mem_wdata, .mem_rvalid, .mem_rdata);

  mu_mem_model #(.RD_LAT(20)) mem (.clk, .stall, .cmd_valid(mem_cmd_valid),
    .cmd_ready(mem_cmd_ready), .cmd(mem_cmd), .wdata(mem_wdata), .rvalid(mem_rvalid),
    .rdata(mem_rdata), .n_reads, .n_writes);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic row_t mk(int tag, int i);
    return {8{32'(tag), 32'(i + 1)}};
  endfunction

  // collect accepted replay rows; count events
  always @(posedge clk) if (rst_n) begin
    if (replay_valid && exec_ready) got.push_back(replay_row);
    if (ev_switch) n_switch++;
    if (ev_abort) n_abort++;
    if (ev_done) n_done++;
    if (rec_overflow) n_ovf++;
  end
  always @(negedge clk) exec_ready <= rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  // record one segment: rows tag(0..n-1), with rows below 'common' from tag 'ctag'
  task automatic record(addr_t pc, path_e p, int n, int br_row, int tag, int ctag, int common);
    rec_start = 1; rec_pc = pc; rec_path = p;
    @(posedge clk); #1 rec_start = 0;
    for (int i = 0; i < n; i++) begin
      issue_valid = 1; issue_br = (i == br_row);
      issue_row = (i < common) ? mk(ctag, i) : mk(tag, i);
      rec_end = (i == n - 1);
      @(posedge clk); #1;
    end
    issue_valid = 0; issue_br = 0; rec_end = 0;
  endtask

  task automatic lookup(addr_t pc, bit taken, output bit hit);
    lookup_valid = 1; lookup_pc = pc; pred_taken = taken; #1;
    hit = lookup_hit;
    @(posedge clk); #1 lookup_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hit;
    int t0, t1;
    int w0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    w0 = n_writes;     // anything the model saw before reset took hold

    // ---- 1. record both paths of loop A (branch in row 2) ----
    record(36'h1000, PATH_TAKEN, 6, 2, 1, 1, 3);
    record(36'h1000, PATH_NOT_TAKEN, 7, 2, 2, 1, 3);
    wait (!rec_busy); @(posedge clk); #1;
    check(n_writes - w0 == 13, $sformatf("13 rows written (got %0d)", n_writes - w0));
    check(mem.store.exists(BASE) && mem.store[BASE] == mk(1, 0), "taken row 0 at region base");
    check(mem.store.exists(BASE + 64 * STRIDE + 6 * STRIDE) &&
          mem.store[BASE + 64 * STRIDE + 6 * STRIDE] == mk(2, 6), "not-taken row 6 placed");
    check(!fe_gate, "frontend on while not replaying");

    // ---- 2. replay predicted (taken) path, random backpressure ----
    got.delete(); rand_ready = 1;
    lookup(36'h1000, 1, hit);
    check(hit, "lookup hit loop A");
    check(fe_gate, "frontend gated during replay");
    t0 = $time / 10;
    wait (got.size() == 1); t1 = $time / 10;
    check(t1 - t0 <= 20 + 6, $sformatf("first row within memory latency + few cycles (%0d)", t1 - t0));
    wait (n_done == 1); @(posedge clk); #1; rand_ready = 0;
    check(got.size() == 6, $sformatf("6 rows replayed (got %0d)", got.size()));
    for (int i = 0; i < 6 && i < got.size(); i++)
      check(got[i] == ((i < 3) ? mk(1, i) : mk(1, i)), $sformatf("taken row %0d", i));
    check(!fe_gate, "frontend back on after replay");

    // ---- 3. replay with misprediction: switch to the loaded other path ----
    got.delete();
    lookup(36'h1000, 1, hit);
    check(hit, "lookup hit again");
    wait (got.size() == 3);            // branch row (row 2) accepted
    @(posedge clk); #1;
    br_valid = 1; br_mispredict = 1;
    @(posedge clk); #1 br_valid = 0; br_mispredict = 0;
    check(n_switch == 1, "path switch on misprediction");
    check(fe_gate, "still gated after switch");
    begin
      int nb;
      nb = got.size();
      t0 = $time / 10;
      wait (got.size() == nb + 1); t1 = $time / 10;
      check(t1 - t0 <= 3, $sformatf("other path resumes within 3 cycles (%0d)", t1 - t0));
      check(got[nb] == mk(2, 3), "resumes at the row after the branch");
    end
    wait (n_done == 2); @(posedge clk); #1;
    check(got[got.size() - 1] == mk(2, 6), "ends with last not-taken row");
    for (int i = 0; i < 3; i++) check(got[i] == mk(1, i), "common prefix");

    // ---- 4. loop B with only its taken path: misprediction aborts ----
    record(36'h2000, PATH_TAKEN, 4, 1, 3, 3, 0);
    wait (!rec_busy); @(posedge clk); #1;
    lookup(36'h2000, 0, hit);
    check(!hit, "miss: predicted path not recorded");
    got.delete();
    lookup(36'h2000, 1, hit);
    check(hit, "hit loop B taken");
    wait (got.size() == 2);
    @(posedge clk); #1;
    br_valid = 1; br_mispredict = 1;
    @(posedge clk); #1 br_valid = 0; br_mispredict = 0;
    check(n_abort == 1, "abort without other path");
    check(!fe_gate, "frontend back on after abort");
    lookup(36'h3000, 1, hit);
    check(!hit, "miss on unknown loop");

    // ---- 5. write queue overflow while memory stalls ----
    stall = 1;
    record(36'h4000, PATH_TAKEN, 8, 1, 4, 4, 0);
    check(n_ovf == 1, "recording abandoned on overflow");
    stall = 0;
    wait (!rec_busy); @(posedge clk); #1;
    lookup(36'h4000, 1, hit);
    check(!hit, "abandoned recording not replayable");

    // ---- 6. a loop longer than the buffer ----
    record(36'h5000, PATH_NOT_TAKEN, 25, 30, 5, 5, 0);
    wait (!rec_busy); @(posedge clk); #1;
    got.delete(); rand_ready = 1;
    lookup(36'h5000, 0, hit);
    check(hit, "hit long loop");
    wait (n_done == 3); @(posedge clk); #1; rand_ready = 0;
    check(got.size() == 25, $sformatf("25 rows replayed (got %0d)", got.size()));
    for (int i = 0; i < 25 && i < got.size(); i++)
      check(got[i] == mk(5, i), $sformatf("long loop row %0d", i));

    $display("events: switch=%0d abort=%0d done=%0d overflow=%0d", n_switch, n_abort, n_done, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
