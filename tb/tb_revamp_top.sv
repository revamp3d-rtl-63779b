// tb_revamp_top: end-to-end test of revamp_top at its default size (64
// cores), with a behavioural main memory (20-cycle reads) behind every
// memoization unit. It exercises, on different cores at the same time:
//   - recording both paths of a loop and replaying it with the frontend
//     gated (core 0), then replaying with a misprediction that switches to
//     the already-loaded other path (core 0)
//   - a misprediction without a recorded other path, which ends replay
//     (core 5), a normal replay on the last core (core 63)
//   - a recording abandoned because memory stalls (core 7)
//   - register-file locking: grant, refusal of a held address, local
//     spinning on the read port, refusal when all 4 entries are in use,
//     release and re-acquire, and two cores racing for one address
//   - ordinary memory traffic leaving on the baseline path
//   - the L1 of core 12: a 2-cycle hit, misses, and a dirty line written
//     back and read again after eviction
// Each mechanism is counted; one that never happens is a failure.
module tb_revamp_top;
  import revamp_pkg::*;
  localparam int N = 64;
  localparam addr_t STRIDE = 64;

  logic clk = 0, rst_n = 1;
  addr_t cfg_stride = STRIDE;
  always #5 clk = ~clk;

  logic  rec_start [N], issue_valid [N], issue_br [N], rec_end [N], lookup_valid [N];
  logic  pred_taken [N], lookup_hit [N], br_valid [N], br_mispredict [N];
  logic  replay_valid [N], exec_ready [N], fe_gate [N], ev_switch [N], ev_abort [N];
  logic  ev_done [N], rec_overflow [N], rec_busy [N];
  addr_t rec_pc [N], lookup_pc [N], probe_addr [N];
  path_e rec_path [N];
  row_t  issue_row [N], replay_row [N];
  logic  mem_cmd_valid [N], mem_cmd_ready [N], stall [N];
  mu_cmd_t mem_cmd [N];
  row_t  mem_wdata [N][MU_PATHS], mem_rdata [N][MU_PATHS];
  logic [MU_PATHS-1:0] mem_rvalid [N];
  logic  msg_valid [N], msg_ready [N], base_valid [N], base_ready [N];
  core_msg_t msg [N], base_msg [N];
  logic  probe_locked [N], grant_valid [N], grant_ok [N];
  logic [7:0] probe_owner [N];
  int unsigned n_reads [N], n_writes [N];
  logic  l1_req_valid [N], l1_req_ready [N], l1_req_we [N], l1_resp_valid [N], l1_resp_miss [N];
  addr_t l1_req_addr [N], l1_mem_addr [N];
  logic [63:0] l1_req_wdata [N], l1_resp_rdata [N];
  logic [7:0] l1_req_be [N];
  logic  l1_mem_valid [N], l1_mem_ready [N], l1_mem_we [N], l1_mem_rvalid [N];
  row_t  l1_mem_wdata [N], l1_mem_rdata [N];
  logic [$clog2(SYNC_ENTRIES+1)-1:0] lock_used [N];

  revamp_top dut (.*);

  for (genvar c = 0; c < N; c++) begin : g_mem
    mu_mem_model #(.RD_LAT(20)) mem (.clk, .stall(stall[c]), .cmd_valid(mem_cmd_valid[c]),
      .cmd_ready(mem_cmd_ready[c]), .cmd(mem_cmd[c]), .wdata(mem_wdata[c]),
      .rvalid(mem_rvalid[c]), .rdata(mem_rdata[c]), .n_reads(n_reads[c]),
      .n_writes(n_writes[c]));
  end

  // ---- line memory behind the L1s: 20-cycle reads, one per core ----
  row_t l1_store [addr_t];
  int   c_l1_wb = 0, c_l1_hit = 0, c_l1_miss = 0;
  for (genvar c = 0; c < N; c++) begin : g_l1mem
    int    cnt = 0;
    addr_t ra;
    assign l1_mem_ready[c] = 1'b1;
    always @(posedge clk) begin
      l1_mem_rvalid[c] <= 1'b0;
      if (cnt > 0) cnt <= cnt - 1;
      if (cnt == 1) begin
        l1_mem_rvalid[c] <= 1'b1;
        l1_mem_rdata[c]  <= l1_store.exists(ra) ? l1_store[ra] : {8{ra[31:0], 32'hD00D}};
      end
      if (rst_n && l1_mem_valid[c]) begin
        if (l1_mem_we[c]) begin l1_store[l1_mem_addr[c]] = l1_mem_wdata[c]; c_l1_wb++; end
        else begin ra <= l1_mem_addr[c]; cnt <= 20; end
      end
    end
  end

  int checks = 0, failures = 0;
  // mechanism counters
  int c_done = 0, c_switch = 0, c_abort = 0, c_ovf = 0, c_gated = 0;
  int c_grant = 0, c_refuse = 0, c_unlock = 0, c_base = 0, c_spin = 0;
  row_t got [N][$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic row_t mk(int tag, int i);
    return {8{32'(tag), 32'(i + 1)}};
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++) begin
      if (replay_valid[c] && exec_ready[c]) got[c].push_back(replay_row[c]);
      if (ev_done[c]) c_done++;
      if (ev_switch[c]) c_switch++;
      if (ev_abort[c]) c_abort++;
      if (rec_overflow[c]) c_ovf++;
      if (fe_gate[c]) c_gated++;
      if (base_valid[c] && base_ready[c]) c_base++;
    end
  end

  // ---- memoization helpers (one core each, may run in parallel) ----
  task automatic record(int c, addr_t pc, path_e p, int n, int br_row, int tag, int ctag, int common);
    rec_start[c] = 1; rec_pc[c] = pc; rec_path[c] = p;
    @(posedge clk); #1 rec_start[c] = 0;
    for (int i = 0; i < n; i++) begin
      issue_valid[c] = 1; issue_br[c] = (i == br_row);
      issue_row[c] = (i < common) ? mk(ctag, i) : mk(tag, i);
      rec_end[c] = (i == n - 1);
      @(posedge clk); #1;
    end
    issue_valid[c] = 0; issue_br[c] = 0; rec_end[c] = 0;
  endtask

  task automatic lookup(int c, addr_t pc, bit taken, output bit hit);
    lookup_valid[c] = 1; lookup_pc[c] = pc; pred_taken[c] = taken; #1;
    hit = lookup_hit[c];
    @(posedge clk); #1 lookup_valid[c] = 0;
  endtask

  task automatic mispredict(int c);
    br_valid[c] = 1; br_mispredict[c] = 1;
    @(posedge clk); #1 br_valid[c] = 0; br_mispredict[c] = 0;
  endtask

  // ---- L1 helper: one access, latency in edges after the accepting one ----
  task automatic l1_op(int c, bit we, addr_t a, logic [63:0] wd, output logic [63:0] rd,
                       output bit miss, output int lat);
    l1_req_valid[c] = 1; l1_req_we[c] = we; l1_req_addr[c] = a; l1_req_wdata[c] = wd;
    l1_req_be[c] = 8'hFF; #1;
    while (!l1_req_ready[c]) begin @(posedge clk); #1; end
    @(posedge clk); #1 l1_req_valid[c] = 0;
    lat = 0;
    while (!l1_resp_valid[c]) begin @(posedge clk); #1; lat++; end
    rd = l1_resp_rdata[c]; miss = l1_resp_miss[c];
    @(posedge clk); #1 lat++;
    if (miss) c_l1_miss++; else c_l1_hit++;
  endtask

  // ---- lock helper: send a message, wait for its grant ----
  task automatic lock_op(int c, sync_op_e op, addr_t a, output bit ok);
    msg[c] = '{is_sync: 1'b1, op: op, we: 1'b0, addr: a, data: '0};
    msg_valid[c] = 1;
    #1;
    while (!msg_ready[c]) begin @(posedge clk); #1; end
    @(posedge clk); #1 msg_valid[c] = 0;
    while (!grant_valid[c]) begin @(posedge clk); #1; end
    ok = grant_ok[c];
    if (op == SYNC_LOCK && ok) c_grant++;
    if (op == SYNC_LOCK && !ok) c_refuse++;
    if (op == SYNC_UNLOCK && ok) c_unlock++;
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;   // a real falling edge for the asynchronous resets
    for (int c = 0; c < N; c++) begin
      rec_start[c] = 0; issue_valid[c] = 0; issue_br[c] = 0; rec_end[c] = 0;
      lookup_valid[c] = 0; pred_taken[c] = 0; br_valid[c] = 0; br_mispredict[c] = 0;
      exec_ready[c] = 1; rec_pc[c] = '0; lookup_pc[c] = '0; probe_addr[c] = '0;
      rec_path[c] = PATH_TAKEN; issue_row[c] = '0; stall[c] = 0;
      msg_valid[c] = 0; msg[c] = '0; base_ready[c] = 1;
      l1_req_valid[c] = 0; l1_req_we[c] = 0; l1_req_addr[c] = '0; l1_req_wdata[c] = '0;
      l1_req_be[c] = '0;
    end
    repeat (3) @(posedge clk); #1 rst_n = 1;

    fork
      // ---------------- core 0: record, replay, switch ----------------
      begin
        bit hit;
        record(0, 36'h1000, PATH_TAKEN, 6, 2, 1, 1, 3);
        record(0, 36'h1000, PATH_NOT_TAKEN, 7, 2, 2, 1, 3);
        wait (!rec_busy[0]); @(posedge clk); #1;
        lookup(0, 36'h1000, 1, hit);
        check(hit && fe_gate[0], "core 0 replay starts, frontend gated");
        wait (ev_done[0]); @(posedge clk); #1;
        check(got[0].size() == 6, "core 0 replayed 6 rows");
        for (int i = 0; i < 6 && i < got[0].size(); i++) check(got[0][i] == mk(1, i), "core 0 taken rows");
        got[0].delete();
        lookup(0, 36'h1000, 1, hit);
        wait (got[0].size() == 3); @(posedge clk); #1;
        mispredict(0);
        wait (ev_done[0]); @(posedge clk); #1;
        check(got[0].size() >= 7, "core 0 rows after switch");
        check(got[0][got[0].size() - 4] == mk(2, 3) && got[0][got[0].size() - 1] == mk(2, 6),
              "core 0 continued on the other path after the branch");
      end
      // ---------------- core 5: abort ----------------
      begin
        bit hit;
        record(5, 36'h2000, PATH_TAKEN, 4, 1, 3, 3, 0);
        wait (!rec_busy[5]); @(posedge clk); #1;
        lookup(5, 36'h2000, 1, hit);
        check(hit, "core 5 hit");
        wait (got[5].size() == 2); @(posedge clk); #1;
        mispredict(5);
        check(!fe_gate[5], "core 5 frontend back after abort");
      end
      // ---------------- core 63: plain replay ----------------
      begin
        bit hit;
        record(63, 36'h3000, PATH_NOT_TAKEN, 12, 20, 9, 9, 0);
        wait (!rec_busy[63]); @(posedge clk); #1;
        lookup(63, 36'h3000, 0, hit);
        check(hit, "core 63 hit");
        wait (ev_done[63]); @(posedge clk); #1;
        check(got[63].size() == 12, "core 63 replayed 12 rows");
        for (int i = 0; i < 12 && i < got[63].size(); i++) check(got[63][i] == mk(9, i), "core 63 rows");
      end
      // ---------------- core 7: overflow ----------------
      begin
        bit hit;
        stall[7] = 1;
        record(7, 36'h4000, PATH_TAKEN, 8, 1, 4, 4, 0);
        stall[7] = 0;
        wait (!rec_busy[7]); @(posedge clk); #1;
        lookup(7, 36'h4000, 1, hit);
        check(!hit, "core 7 abandoned recording not replayable");
      end
      // ---------------- locks ----------------
      begin
        bit ok, ok2;
        lock_op(1, SYNC_LOCK, 36'hA0, ok);
        check(ok, "core 1 gets lock A");
        probe_addr[2] = 36'hA0; #1;
        check(probe_locked[2] && probe_owner[2] == 8'd1, "core 2 sees A held by core 1 in its own RF");
        lock_op(2, SYNC_LOCK, 36'hA0, ok);
        check(!ok, "core 2 refused A");
        lock_op(3, SYNC_LOCK, 36'hB0, ok);  check(ok, "core 3 gets B");
        lock_op(4, SYNC_LOCK, 36'hC0, ok);  check(ok, "core 4 gets C");
        lock_op(6, SYNC_LOCK, 36'hD0, ok);  check(ok, "core 6 gets D");
        check(lock_used[8] == 4 && lock_used[0] == 4, "every RF shows 4 entries in use");
        lock_op(8, SYNC_LOCK, 36'hE0, ok);  check(!ok, "core 8 refused: entries full");
        fork
          begin
            // core 2 spins locally until A is released
            while (probe_locked[2]) begin c_spin++; @(posedge clk); #1; end
          end
          begin
            repeat (10) @(posedge clk); #1;
            lock_op(1, SYNC_UNLOCK, 36'hA0, ok);
            check(ok, "core 1 releases A");
          end
        join
        check(c_spin >= 10, "core 2 spun on its register file");
        lock_op(2, SYNC_LOCK, 36'hA0, ok);
        check(ok, "core 2 gets A after release");
        lock_op(2, SYNC_UNLOCK, 36'hA0, ok);
        // race: cores 20 and 40 lock F in the same cycle, exactly one wins
        fork
          lock_op(20, SYNC_LOCK, 36'hF0, ok);
          lock_op(40, SYNC_LOCK, 36'hF0, ok2);
        join
        check(ok != ok2, "exactly one of two racing cores gets F");
        for (int c = 0; c < N; c++) begin
          probe_addr[c] = 36'hF0;
        end
        #1;
        for (int c = 0; c < N; c++)
          check(probe_locked[c] && probe_owner[c] == (ok ? 8'd20 : 8'd40), "all RFs agree on F");
      end
      // ---------------- L1 of core 12: hit, miss, write-back ----------------
      begin
        logic [63:0] rd;
        bit miss;
        int lat;
        l1_op(12, 1, 36'h4_0000_0040, 64'h1111_2222_3333_4444, rd, miss, lat);
        check(miss, "L1 first store misses");
        l1_op(12, 0, 36'h4_0000_0040, '0, rd, miss, lat);
        check(!miss && lat == 2 && rd == 64'h1111_2222_3333_4444, "L1 load hits in 2 cycles");
        // 8 more lines of the same set push the stored line out
        for (int i = 1; i <= 8; i++)
          l1_op(12, 1, 36'h4_0000_0040 + addr_t'(i) * 36'h1000, 64'(i), rd, miss, lat);
        l1_op(12, 0, 36'h4_0000_0040, '0, rd, miss, lat);
        check(miss && rd == 64'h1111_2222_3333_4444, "L1 evicted line read back from memory");
      end
      // ---------------- baseline path ----------------
      begin
        msg[10] = '{is_sync: 1'b0, op: SYNC_NOP, we: 1'b1, addr: 36'h123440, data: 64'hCAFE};
        base_ready[10] = 0;
        msg_valid[10] = 1; #1;
        check(base_valid[10] && !msg_ready[10], "store waits for the baseline path");
        @(posedge clk); #1 base_ready[10] = 1; #1;
        check(msg_ready[10] && base_msg[10].addr == 36'h123440 && base_msg[10].data == 64'hCAFE,
              "store leaves on the baseline path");
        @(posedge clk); #1 msg_valid[10] = 0;
      end
    join
    repeat (5) @(posedge clk);

    $display("mechanisms: replay_done=%0d switch=%0d abort=%0d overflow=%0d gated_cycles=%0d",
             c_done, c_switch, c_abort, c_ovf, c_gated);
    $display("mechanisms: l1_hit=%0d l1_miss=%0d l1_writeback=%0d", c_l1_hit, c_l1_miss, c_l1_wb);
    $display("mechanisms: lock_grant=%0d lock_refused=%0d unlock=%0d spin=%0d base_path=%0d",
             c_grant, c_refuse, c_unlock, c_spin, c_base);
    check(c_done > 0, "replay completed at least once");
    check(c_switch > 0, "path switch happened");
    check(c_abort > 0, "replay abort happened");
    check(c_ovf > 0, "recording overflow happened");
    check(c_gated > 0, "frontend gating happened");
    check(c_grant > 0 && c_refuse > 0 && c_unlock > 0, "lock grant, refusal and release happened");
    check(c_spin > 0, "local spinning happened");
    check(c_base > 0, "baseline path used");
    check(c_l1_hit > 0 && c_l1_miss > 0 && c_l1_wb > 0, "L1 hit, miss and write-back happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
