// tb_mu_buffer: self-checking test of the MU buffer. It fills each path
// half to its 10-row capacity, checks occupancy and free counts, pops rows
// back and compares them (and the one-cycle read latency) with a queue
// model, wraps the circular pointers, mixes pushes and pops in one cycle,
// and checks that a flush empties only its own path.
module tb_mu_buffer;
  import revamp_pkg::*;
  localparam int unsigned ROWS = MU_BUF_BYTES / ROW_BYTES / MU_PATHS;
  localparam int unsigned CW   = $clog2(ROWS + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] fill_valid = '0, pop = '0, flush = '0;
  row_t fill_row [2];
  row_t rd_row [2];
  logic [CW-1:0] count [2], free_rows [2];
  int checks = 0, failures = 0;
  row_t model [2][$];

  mu_buffer dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic row_t mk(int p, int i);
    return {16{32'(p * 1000 + i)}};
  endfunction

  task automatic push(int p, int i);
    fill_valid[p] = 1'b1; fill_row[p] = mk(p, i);
    @(posedge clk); #1;
    fill_valid[p] = 1'b0;
    model[p].push_back(mk(p, i));
  endtask

  task automatic pop_check(int p);
    row_t exp;
    pop[p] = 1'b1;
    @(posedge clk); #1;
    pop[p] = 1'b0;
    exp = model[p].pop_front();
    check(rd_row[p] == exp, $sformatf("path %0d row data", p));
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fill_row[0] = '0; fill_row[1] = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    check(ROWS == 10, "10 rows per path for 1280 bytes");
    check(count[0] == 0 && free_rows[0] == CW'(ROWS), "empty after reset");
    for (int i = 0; i < ROWS; i++) push(0, i);
    check(count[0] == CW'(ROWS) && free_rows[0] == 0, "path 0 full");
    check(count[1] == 0, "path 1 untouched");
    for (int i = 0; i < 3; i++) push(1, 100 + i);
    // one-cycle latency: data appears exactly one edge after pop
    pop[0] = 1'b1; @(posedge clk); #1 pop[0] = 1'b0;
    check(rd_row[0] == model[0].pop_front(), "one-cycle read");
    for (int i = 0; i < 4; i++) pop_check(0);
    // wrap around
    for (int i = 0; i < 5; i++) push(0, 20 + i);
    check(count[0] == CW'(ROWS), "full again after wrap");
    // push and pop in the same cycle
    fill_valid[0] = 1'b1; fill_row[0] = mk(0, 99); pop[0] = 1'b1;
    @(posedge clk); #1; fill_valid[0] = 1'b0; pop[0] = 1'b0;
    check(rd_row[0] == model[0].pop_front(), "simultaneous pop data");
    model[0].push_back(mk(0, 99));
    check(count[0] == CW'(ROWS), "simultaneous push/pop keeps count");
    while (model[0].size() > 0) pop_check(0);
    check(count[0] == 0, "path 0 drained");
    // flush only path 1
    push(0, 50);
    flush[1] = 1'b1; @(posedge clk); #1 flush[1] = 1'b0;
    model[1].delete();
    check(count[1] == 0 && count[0] == 1, "flush clears only its path");
    push(1, 200);
    pop_check(1);
    pop_check(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
