// memo_unit: the Memoization Unit (MU). It sits beside the issue stage and
// sees every issued uop group in parallel with the execution stage, so it
// adds no pipeline stage. It keeps loop bodies that have already been
// fetched, decoded and reordered, stores them in a reserved region of main
// memory and, when the loop comes round again, feeds the stored uops
// straight to execution while the frontend and reordering logic are gated
// off (fe_gate high).
//
// Recording. rec_start names a loop (its start PC) and the path of the
// loop's hard-to-predict branch this recording follows. Each issued row
// (8 uops) is queued and written to main memory through the memory
// interface port of that path; issue_br marks the row that holds the
// branch. rec_end commits the segment. If the write queue fills, or the
// segment grows past MAX_ROWS, the recording is abandoned (rec_overflow).
//
// Replay. lookup_valid with the PC of a loop head and the predicted branch
// direction starts replay on a hit: the prefetchers of both paths start
// reading their segments into the two halves of the buffer, and the
// predicted path is sent to execution (replay_valid/replay_row, with
// exec_ready as backpressure). Up to and including the branch row both
// halves advance together; after it only the predicted one does. If the
// branch then resolves as mispredicted, the unit drops the wrong half and
// continues from the other half, which is already loaded just past the
// branch: the correct path needs no refetch, decode or reorder
// (ev_switch). Without a recorded other path, replay ends (ev_abort) and
// the frontend takes over again. When the segment is exhausted, replay ends
// normally (ev_done).
//
// Memory layout: segment (entry e, path p) starts at
// MEMO_BASE + (e*2 + p) * MAX_ROWS * cfg_stride; row i is i*cfg_stride
// further on.
//
// Follows the design: placement after issue, the buffer / stride
// prefetcher / two-port memory interface split, memoizing both paths of a
// hard-to-predict branch, a reserved address space, frontend power-gating.
// Own choices: the trace table size, segment length limit, row format, the
// lockstep/switch rule, the write queue, and that a lookup is ignored while
// recording or while writes are pending.
module memo_unit
  import revamp_pkg::*;
#(
  parameter int unsigned TRACES    = 8,        // trace table entries
  parameter int unsigned MAX_ROWS  = 64,       // rows per path segment
  parameter int unsigned WQ_DEPTH  = 4,        // recorder write queue
  parameter addr_t       MEMO_BASE = 36'hF_0000_0000, // reserved region
  localparam int unsigned PATHS = MU_PATHS,
  localparam int unsigned LEN_W = $clog2(MAX_ROWS + 1),
  localparam int unsigned BROWS = MU_BUF_BYTES / ROW_BYTES / PATHS,
  localparam int unsigned CW    = $clog2(BROWS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  addr_t             cfg_stride,      // byte distance of rows
  // recording, from the issue stage
  input  logic              rec_start,
  input  addr_t             rec_pc,
  input  path_e             rec_path,
  input  logic              issue_valid,
  input  row_t              issue_row,
  input  logic              issue_br,
  input  logic              rec_end,
  // replay control, from fetch and branch resolution
  input  logic              lookup_valid,
  input  addr_t             lookup_pc,
  input  logic              pred_taken,
  output logic              lookup_hit,
  input  logic              br_valid,
  input  logic              br_mispredict,
  // replayed uops, to execution
  output logic              replay_valid,
  output row_t              replay_row,
  input  logic              exec_ready,
  output logic              fe_gate,         // frontend/reorder power-gated
  // events
  output logic              ev_switch,
  output logic              ev_abort,
  output logic              ev_done,
  output logic              rec_overflow,
  output logic              rec_busy,
  // main memory side (address bus + two data ports)
  output logic              mem_cmd_valid,
  input  logic              mem_cmd_ready,
  output mu_cmd_t           mem_cmd,
  output row_t              mem_wdata  [PATHS],
  input  logic [PATHS-1:0]  mem_rvalid,
  input  row_t              mem_rdata  [PATHS]
);

  localparam int unsigned EW = clog2_min1(TRACES);
  localparam int unsigned QW = clog2_min1(WQ_DEPTH);

  // ------------------------------------------------------------------------
  // Trace table
  // ------------------------------------------------------------------------
  logic                 t_valid [TRACES];
  addr_t                t_pc    [TRACES];
  logic [LEN_W-1:0]     t_len   [TRACES][PATHS];   // 0: path not recorded
  logic [LEN_W-1:0]     t_div   [TRACES][PATHS];   // row of the branch
  logic [EW-1:0]        victim;

  function automatic addr_t seg_base(logic [EW-1:0] e, path_e p, addr_t stride);
    addr_t slot;
    slot = addr_t'(e) * addr_t'(PATHS) + addr_t'(p);
    return MEMO_BASE + slot * addr_t'(MAX_ROWS) * stride;
  endfunction

  // ------------------------------------------------------------------------
  // Recorder
  // ------------------------------------------------------------------------
  typedef struct packed {
    path_e p;
    addr_t a;
    row_t  r;
  } wq_t;

  wq_t               wq [WQ_DEPTH];
  logic [QW-1:0]     wq_head, wq_tail;
  logic [QW:0]       wq_cnt;
  logic              recording;
  logic [EW-1:0]     rec_e;
  path_e             rec_p;
  logic [LEN_W-1:0]  rec_len, rec_div;
  logic              rec_div_seen;
  addr_t             rec_addr;

  logic [PATHS-1:0]  wr_valid, wr_ready;
  addr_t             wr_addr [PATHS];
  row_t              wr_row  [PATHS];
  logic              wq_pop, wq_push, rec_fail;

  assign wq_push  = recording && issue_valid && !rec_fail;
  assign rec_fail = recording && issue_valid &&
                    ((wq_cnt == (QW+1)'(WQ_DEPTH) && !wq_pop) ||
                     (rec_len == LEN_W'(MAX_ROWS)));
  assign wq_pop   = (wq_cnt != 0) && wr_ready[wq[wq_head].p];
  assign rec_busy = recording || (wq_cnt != 0);

  for (genvar p = 0; p < PATHS; p++) begin : g_wr
    assign wr_valid[p] = (wq_cnt != 0) && (wq[wq_head].p == path_e'(p));
    assign wr_addr[p]  = wq[wq_head].a;
    assign wr_row[p]   = wq[wq_head].r;
  end

  logic          hit_any;
  logic [EW-1:0] hit_e;
  always_comb begin
    hit_any = 1'b0;
    hit_e   = '0;
    for (int unsigned e = 0; e < TRACES; e++)
      if (!hit_any && t_valid[e] && t_pc[e] == rec_pc) begin
        hit_any = 1'b1;
        hit_e   = EW'(e);
      end
  end

  // ------------------------------------------------------------------------
  // Replay state
  // ------------------------------------------------------------------------
  typedef enum logic {S_IDLE, S_REPLAY} rstate_e;
  rstate_e           st;
  path_e             act;                 // path sent to execution
  logic              alt_ok;              // other path loaded and usable
  logic [LEN_W-1:0]  act_len, div_row, row_idx;
  logic              out_valid;
  path_e             out_path;

  // lookup
  logic              lk_hit;
  logic [EW-1:0]     lk_e;
  path_e             lk_p;
  always_comb begin
    lk_hit = 1'b0;
    lk_e   = '0;
    lk_p   = pred_taken ? PATH_TAKEN : PATH_NOT_TAKEN;
    for (int unsigned e = 0; e < TRACES; e++)
      if (!lk_hit && t_valid[e] && t_pc[e] == lookup_pc &&
          t_len[e][lk_p] != 0) begin
        lk_hit = 1'b1;
        lk_e   = EW'(e);
      end
  end
  assign lookup_hit = lookup_valid && lk_hit && st == S_IDLE && !rec_busy &&
                      !rec_start;

  // buffer + prefetchers
  logic [PATHS-1:0]  buf_fill, buf_pop, buf_flush;
  row_t              buf_rd   [PATHS];
  logic [CW-1:0]     buf_cnt  [PATHS];
  logic [CW-1:0]     buf_free [PATHS];
  logic [PATHS-1:0]  pf_start, pf_cancel, pf_req_valid, pf_req_ready, pf_busy;
  addr_t             pf_base  [PATHS];
  addr_t             pf_addr  [PATHS];
  logic [LEN_W-1:0]  pf_len   [PATHS];
  logic [PATHS-1:0]  resp_valid;
  row_t              resp_row [PATHS];

  // entry being replayed, and the length of its other path
  logic [EW-1:0]     rp_e;
  logic [LEN_W-1:0]  alt_len;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          rp_e <= '0;
    else if (lookup_hit) rp_e <= lk_e;
  end

  // pop / switch / end decisions
  logic lockstep, can_pop, do_pop, switch_now, abort_now, done_now;
  path_e alt;
  assign alt      = path_e'(~act);
  assign alt_len  = t_len[rp_e][alt];
  assign lockstep = alt_ok && (row_idx <= div_row);
  assign can_pop  = (buf_cnt[act] != 0) && (!lockstep || buf_cnt[alt] != 0);
  assign do_pop   = (st == S_REPLAY) && !switch_now && !abort_now &&
                    (row_idx < act_len) && can_pop && (!out_valid || exec_ready);

  logic mispred_now;
  assign mispred_now = (st == S_REPLAY) && br_valid && br_mispredict &&
                       (row_idx > div_row);
  assign switch_now = mispred_now && alt_ok;
  assign abort_now  = mispred_now && !alt_ok;
  assign done_now   = (st == S_REPLAY) && !mispred_now && (row_idx == act_len) &&
                      (!out_valid || exec_ready);

  for (genvar p = 0; p < PATHS; p++) begin : g_pf
    assign pf_start[p]  = lookup_hit && t_len[lk_e][p] != 0;
    assign pf_base[p]   = seg_base(lk_e, path_e'(p), cfg_stride);
    assign pf_len[p]    = t_len[lk_e][p];
    assign pf_cancel[p] = abort_now || done_now || (switch_now && act == path_e'(p));
    assign buf_flush[p] = pf_cancel[p];
    assign buf_pop[p]   = do_pop && (act == path_e'(p) || lockstep);

    mu_prefetcher #(.LEN_W(LEN_W), .CW(CW)) u_pf (
      .clk, .rst_n,
      .start(pf_start[p]), .base(pf_base[p]), .stride(cfg_stride),
      .nrows(pf_len[p]), .cancel(pf_cancel[p]), .free_rows(buf_free[p]),
      .req_valid(pf_req_valid[p]), .req_ready(pf_req_ready[p]),
      .req_addr(pf_addr[p]), .resp_valid(resp_valid[p]),
      .fill_valid(buf_fill[p]), .busy(pf_busy[p])
    );
  end

  mu_buffer u_buf (
    .clk, .rst_n,
    .fill_valid(buf_fill), .fill_row(resp_row), .pop(buf_pop),
    .flush(buf_flush), .rd_row(buf_rd), .count(buf_cnt), .free_rows(buf_free)
  );

  mu_mem_if u_mif (
    .clk, .rst_n,
    .rd_valid(pf_req_valid), .rd_ready(pf_req_ready), .rd_addr(pf_addr),
    .resp_valid(resp_valid), .resp_row(resp_row),
    .wr_valid(wr_valid), .wr_ready(wr_ready), .wr_addr(wr_addr), .wr_row(wr_row),
    .mem_cmd_valid, .mem_cmd_ready, .mem_cmd, .mem_wdata,
    .mem_rvalid, .mem_rdata
  );

  assign replay_valid = out_valid;
  assign replay_row   = buf_rd[out_path];
  assign fe_gate      = (st == S_REPLAY);
  assign ev_switch    = switch_now;
  assign ev_abort     = abort_now;
  assign ev_done      = done_now;
  assign rec_overflow = rec_fail;

  // ------------------------------------------------------------------------
  // Sequential logic
  // ------------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (wq_push) wq[wq_tail] <= '{p: rec_p, a: rec_addr, r: issue_row};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned e = 0; e < TRACES; e++) begin
        t_valid[e] <= 1'b0;
        t_pc[e]    <= '0;
        for (int unsigned p = 0; p < PATHS; p++) begin
          t_len[e][p] <= '0;
          t_div[e][p] <= '0;
        end
      end
      victim       <= '0;
      wq_head      <= '0;
      wq_tail      <= '0;
      wq_cnt       <= '0;
      recording    <= 1'b0;
      rec_e        <= '0;
      rec_p        <= PATH_TAKEN;
      rec_len      <= '0;
      rec_div      <= '0;
      rec_div_seen <= 1'b0;
      rec_addr     <= '0;
      st           <= S_IDLE;
      act          <= PATH_TAKEN;
      alt_ok       <= 1'b0;
      act_len      <= '0;
      div_row      <= '0;
      row_idx      <= '0;
      out_valid    <= 1'b0;
      out_path     <= PATH_TAKEN;
    end else begin
      // ---- write queue ----
      if (wq_push) wq_tail <= (wq_tail == QW'(WQ_DEPTH - 1)) ? '0 : wq_tail + 1'b1;
      if (wq_pop)  wq_head <= (wq_head == QW'(WQ_DEPTH - 1)) ? '0 : wq_head + 1'b1;
      wq_cnt <= wq_cnt + (QW+1)'(wq_push) - (QW+1)'(wq_pop);

      // ---- recorder ----
      if (rec_start && st == S_IDLE) begin
        logic [EW-1:0] e;
        e = hit_any ? hit_e : victim;
        if (!hit_any) begin
          victim <= (victim == EW'(TRACES - 1)) ? '0 : victim + 1'b1;
          for (int unsigned p = 0; p < PATHS; p++) begin
            t_len[e][p] <= '0;
            t_div[e][p] <= '0;
          end
        end
        t_valid[e]     <= 1'b1;
        t_pc[e]        <= rec_pc;
        t_len[e][rec_path] <= '0;      // being re-recorded: unusable
        recording      <= 1'b1;
        rec_e          <= e;
        rec_p          <= rec_path;
        rec_len        <= '0;
        rec_div        <= '0;
        rec_div_seen   <= 1'b0;
        rec_addr       <= seg_base(e, rec_path, cfg_stride);
      end else if (recording) begin
        if (rec_fail) begin
          recording <= 1'b0;           // segment stays unrecorded
        end else begin
          if (wq_push) begin
            rec_len  <= rec_len + 1'b1;
            rec_addr <= rec_addr + cfg_stride;
            if (issue_br && !rec_div_seen) begin
              rec_div      <= rec_len;
              rec_div_seen <= 1'b1;
            end
          end
          if (rec_end) begin
            logic [LEN_W-1:0] len_f;
            len_f = rec_len + LEN_W'(wq_push);
            recording <= 1'b0;
            t_len[rec_e][rec_p] <= len_f;
            t_div[rec_e][rec_p] <= (issue_br && wq_push && !rec_div_seen) ? rec_len :
                                   rec_div_seen ? rec_div : len_f;
          end
        end
      end

      // ---- replay ----
      if (do_pop) begin
        out_valid <= 1'b1;
        out_path  <= act;
        row_idx   <= row_idx + 1'b1;
      end else if (exec_ready) begin
        out_valid <= 1'b0;
      end

      case (st)
        S_IDLE: if (lookup_hit) begin
          st      <= S_REPLAY;
          act     <= lk_p;
          act_len <= t_len[lk_e][lk_p];
          div_row <= t_div[lk_e][lk_p];
          row_idx <= '0;
          alt_ok  <= (t_len[lk_e][~lk_p] != 0) &&
                     (t_div[lk_e][~lk_p] == t_div[lk_e][lk_p]) &&
                     (t_div[lk_e][lk_p] < t_len[lk_e][lk_p]) &&
                     (t_div[lk_e][~lk_p] < t_len[lk_e][~lk_p]);
        end
        S_REPLAY: begin
          if (switch_now) begin
            act       <= alt;
            act_len   <= alt_len;
            alt_ok    <= 1'b0;
            row_idx   <= div_row + 1'b1;   // other half is just past the branch
            out_valid <= 1'b0;             // squash the wrong-path row
          end else if (abort_now || done_now) begin
            st        <= S_IDLE;
            alt_ok    <= 1'b0;
            out_valid <= 1'b0;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_br_after_branch_row: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_REPLAY && br_valid && br_mispredict) |-> row_idx > div_row);
  a_no_replay_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    replay_valid |-> st == S_REPLAY);

  // The prefetchers work only for a replay; an end of replay cancels them.
  a_pf_only_in_replay: assert property (@(posedge clk) disable iff (!rst_n)
    (pf_busy != '0) |-> (st == S_REPLAY));

endmodule
