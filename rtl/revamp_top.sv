// revamp_top: the core-side additions of the design for NUM_CORES cores,
// wired as on the chip. Per core there is a memoization unit (MU) beside
// the issue stage, the router node's selection structure that splits the
// core's outgoing messages into memory traffic and lock traffic, and the
// register-file synchronization entries. One synchronization path joins
// the cores: a lock message from any core reaches the register files of
// all cores.
//
// What is outside, and therefore brought out as ports: the conventional
// out-of-order pipeline of each core (its issue stage feeds issue_*, its
// fetch stage asks lookup_*, its branch unit reports br_*, its execution
// stage takes replay_*), the baseline memory network toward the memory
// controllers (base_*), and the on-chip main memory that holds the
// memoized uop traces (mem_*, one address bus and two data ports per MU).
//
// Timing: see the blocks; nothing is added here. A lock request leaves a
// core, is serialised and broadcast in the next cycle, and its grant is
// reported to the requesting core one cycle later (grant_valid/grant_ok).
// lock_used gives each register file's count of held entries (all equal).
// Each core also has its private 32 KB, 8-way, 2-cycle L1 data cache
// (l1_req_*/l1_resp_* toward the core's load/store unit). The cache
// hierarchy has no shared last-level cache: L1 line reads and write-backs
// (l1_mem_*) and all base-path traffic go straight to the memory
// controllers over the baseline network.
module revamp_top
  import revamp_pkg::*;
#(
  parameter int unsigned NUM_CORES = 64,
  parameter int unsigned TRACES    = 8,
  parameter int unsigned MAX_ROWS  = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  addr_t             cfg_stride,
  // ---- memoization, per core ----
  input  logic              rec_start     [NUM_CORES],
  input  addr_t             rec_pc        [NUM_CORES],
  input  path_e             rec_path      [NUM_CORES],
  input  logic              issue_valid   [NUM_CORES],
  input  row_t              issue_row     [NUM_CORES],
  input  logic              issue_br      [NUM_CORES],
  input  logic              rec_end       [NUM_CORES],
  input  logic              lookup_valid  [NUM_CORES],
  input  addr_t             lookup_pc     [NUM_CORES],
  input  logic              pred_taken    [NUM_CORES],
  output logic              lookup_hit    [NUM_CORES],
  input  logic              br_valid      [NUM_CORES],
  input  logic              br_mispredict [NUM_CORES],
  output logic              replay_valid  [NUM_CORES],
  output row_t              replay_row    [NUM_CORES],
  input  logic              exec_ready    [NUM_CORES],
  output logic              fe_gate       [NUM_CORES],
  output logic              ev_switch     [NUM_CORES],
  output logic              ev_abort      [NUM_CORES],
  output logic              ev_done       [NUM_CORES],
  output logic              rec_overflow  [NUM_CORES],
  output logic              rec_busy      [NUM_CORES],
  // ---- MU main-memory ports, per core ----
  output logic              mem_cmd_valid [NUM_CORES],
  input  logic              mem_cmd_ready [NUM_CORES],
  output mu_cmd_t           mem_cmd       [NUM_CORES],
  output row_t              mem_wdata     [NUM_CORES][MU_PATHS],
  input  logic [MU_PATHS-1:0] mem_rvalid  [NUM_CORES],
  input  row_t              mem_rdata     [NUM_CORES][MU_PATHS],
  // ---- core messages and register-file synchronization, per core ----
  input  logic              msg_valid     [NUM_CORES],
  output logic              msg_ready     [NUM_CORES],
  input  core_msg_t         msg           [NUM_CORES],
  output logic              base_valid    [NUM_CORES],
  input  logic              base_ready    [NUM_CORES],
  output core_msg_t         base_msg      [NUM_CORES],
  input  addr_t             probe_addr    [NUM_CORES],
  output logic              probe_locked  [NUM_CORES],
  output logic [7:0]        probe_owner   [NUM_CORES],
  output logic              grant_valid   [NUM_CORES],
  output logic              grant_ok      [NUM_CORES],
  output logic [$clog2(SYNC_ENTRIES+1)-1:0] lock_used [NUM_CORES],
  // ---- private L1 data cache, per core ----
  input  logic              l1_req_valid  [NUM_CORES],
  output logic              l1_req_ready  [NUM_CORES],
  input  logic              l1_req_we     [NUM_CORES],
  input  addr_t             l1_req_addr   [NUM_CORES],
  input  logic [63:0]       l1_req_wdata  [NUM_CORES],
  input  logic [7:0]        l1_req_be     [NUM_CORES],
  output logic              l1_resp_valid [NUM_CORES],
  output logic [63:0]       l1_resp_rdata [NUM_CORES],
  output logic              l1_resp_miss  [NUM_CORES],
  output logic              l1_mem_valid  [NUM_CORES],
  input  logic              l1_mem_ready  [NUM_CORES],
  output logic              l1_mem_we     [NUM_CORES],
  output addr_t             l1_mem_addr   [NUM_CORES],
  output row_t              l1_mem_wdata  [NUM_CORES],
  input  logic              l1_mem_rvalid [NUM_CORES],
  input  row_t              l1_mem_rdata  [NUM_CORES]
);

  logic [NUM_CORES-1:0] s_valid, s_ready;
  sync_msg_t            s_msg [NUM_CORES];
  logic                 b_valid;
  sync_msg_t            b_msg;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    memo_unit #(.TRACES(TRACES), .MAX_ROWS(MAX_ROWS)) u_mu (
      .clk, .rst_n, .cfg_stride,
      .rec_start(rec_start[c]), .rec_pc(rec_pc[c]), .rec_path(rec_path[c]),
      .issue_valid(issue_valid[c]), .issue_row(issue_row[c]), .issue_br(issue_br[c]),
      .rec_end(rec_end[c]), .lookup_valid(lookup_valid[c]), .lookup_pc(lookup_pc[c]),
      .pred_taken(pred_taken[c]), .lookup_hit(lookup_hit[c]), .br_valid(br_valid[c]),
      .br_mispredict(br_mispredict[c]), .replay_valid(replay_valid[c]),
      .replay_row(replay_row[c]), .exec_ready(exec_ready[c]), .fe_gate(fe_gate[c]),
      .ev_switch(ev_switch[c]), .ev_abort(ev_abort[c]), .ev_done(ev_done[c]),
      .rec_overflow(rec_overflow[c]), .rec_busy(rec_busy[c]),
      .mem_cmd_valid(mem_cmd_valid[c]), .mem_cmd_ready(mem_cmd_ready[c]),
      .mem_cmd(mem_cmd[c]), .mem_wdata(mem_wdata[c]), .mem_rvalid(mem_rvalid[c]),
      .mem_rdata(mem_rdata[c])
    );

    logic sv, sr;
    assign s_valid[c] = sv;
    assign sr         = s_ready[c];

    sync_path_select #(.MY_ID(c)) u_sel (
      .in_valid(msg_valid[c]), .in_ready(msg_ready[c]), .in_msg(msg[c]),
      .base_valid(base_valid[c]), .base_ready(base_ready[c]), .base_msg(base_msg[c]),
      .sync_valid(sv), .sync_ready(sr), .sync_msg(s_msg[c])
    );

    sync_rf #(.MY_ID(c)) u_rf (
      .clk, .rst_n, .net_valid(b_valid), .net_msg(b_msg),
      .probe_addr(probe_addr[c]), .probe_locked(probe_locked[c]),
      .probe_owner(probe_owner[c]), .grant_valid(grant_valid[c]),
      .grant_ok(grant_ok[c]), .used(lock_used[c])
    );

    l1_dcache u_l1 (
      .clk, .rst_n,
      .req_valid(l1_req_valid[c]), .req_ready(l1_req_ready[c]), .req_we(l1_req_we[c]),
      .req_addr(l1_req_addr[c]), .req_wdata(l1_req_wdata[c]), .req_be(l1_req_be[c]),
      .resp_valid(l1_resp_valid[c]), .resp_rdata(l1_resp_rdata[c]), .resp_miss(l1_resp_miss[c]),
      .mem_req_valid(l1_mem_valid[c]), .mem_req_ready(l1_mem_ready[c]), .mem_req_we(l1_mem_we[c]),
      .mem_req_addr(l1_mem_addr[c]), .mem_req_wdata(l1_mem_wdata[c]),
      .mem_resp_valid(l1_mem_rvalid[c]), .mem_resp_row(l1_mem_rdata[c])
    );
  end

  sync_net #(.NUM_CORES(NUM_CORES)) u_net (
    .clk, .rst_n, .req_valid(s_valid), .req_ready(s_ready), .req_msg(s_msg),
    .bcast_valid(b_valid), .bcast_msg(b_msg)
  );

endmodule
