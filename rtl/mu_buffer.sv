// mu_buffer: the small SRAM buffer of the memoization unit (MU). It holds
// uop rows that the prefetcher has already brought in from the memoized
// trace region in main memory, so that replay reads them in one cycle.
//
// The 1280-byte buffer (the design's 1.28 KB) is split into one circular
// FIFO per path: half for the taken path and half for the not-taken path of
// the hard-to-predict branch, since both paths are prefetched at once. With
// 64-byte rows this gives BYTES / 64 / PATHS = 10 rows per path.
//
// Interface, per path p:
//   fill_valid[p]/fill_row[p]   write one row at the tail (must not be full)
//   pop[p]                      read the head row; rd_row[p] shows it on the
//                               next cycle and keeps it until the next pop
//   flush[p]                    drop every row of that path (wins over fill)
//   count[p], free_rows[p]      occupancy, for the prefetcher's credit check
// Timing: one-cycle read latency, writes visible to a pop one cycle later.
// Splitting the buffer per path and the FIFO organisation are own choices;
// the design only gives the size and the one-cycle access.
module mu_buffer
  import revamp_pkg::*;
#(
  parameter int unsigned BYTES = MU_BUF_BYTES,
  parameter int unsigned PATHS = MU_PATHS,
  localparam int unsigned ROWS = BYTES / ROW_BYTES / PATHS,
  localparam int unsigned PW   = clog2_min1(ROWS),
  localparam int unsigned CW   = $clog2(ROWS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PATHS-1:0]  fill_valid,
  input  row_t              fill_row  [PATHS],
  input  logic [PATHS-1:0]  pop,
  input  logic [PATHS-1:0]  flush,
  output row_t              rd_row    [PATHS],
  output logic [CW-1:0]     count     [PATHS],
  output logic [CW-1:0]     free_rows [PATHS]
);

  row_t          mem [PATHS][ROWS];
  logic [PW-1:0] head [PATHS];
  logic [PW-1:0] tail [PATHS];
  logic [CW-1:0] cnt  [PATHS];

  function automatic logic [PW-1:0] nxt(logic [PW-1:0] p);
    return (p == PW'(ROWS - 1)) ? '0 : p + 1'b1;
  endfunction

  for (genvar p = 0; p < PATHS; p++) begin : g_path
    logic do_push, do_pop;
    assign do_push = fill_valid[p] && !flush[p];
    assign do_pop  = pop[p] && !flush[p] && (cnt[p] != 0);

    always_ff @(posedge clk) begin
      if (do_push) mem[p][tail[p]] <= fill_row[p];
      if (do_pop)  rd_row[p]       <= mem[p][head[p]];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        head[p] <= '0;
        tail[p] <= '0;
        cnt[p]  <= '0;
      end else if (flush[p]) begin
        head[p] <= '0;
        tail[p] <= '0;
        cnt[p]  <= '0;
      end else begin
        if (do_push) tail[p] <= nxt(tail[p]);
        if (do_pop)  head[p] <= nxt(head[p]);
        cnt[p] <= cnt[p] + CW'(do_push) - CW'(do_pop);
      end
    end

    assign count[p]     = cnt[p];
    assign free_rows[p] = CW'(ROWS) - cnt[p];

    // A fill must never find the path full: the prefetcher checks credit.
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      do_push |-> (cnt[p] != CW'(ROWS)) || do_pop);
  end

endmodule
