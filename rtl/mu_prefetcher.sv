// mu_prefetcher: the stride prefetcher of the memoization unit for one path.
// When a memoized trace segment is to be replayed, it reads the segment's
// uop rows from main memory at addresses base, base+stride, base+2*stride...
// and hands the returning rows to the MU buffer, running ahead of replay so
// that the memory latency is hidden behind the rows already buffered.
//
// Flow control is by credit: a read is issued only while the rows in flight
// plus the rows already buffered leave room in the buffer half, so a fill can
// never overflow it. A cancel (the path was squashed or replay ended) stops
// issue at once; rows still in flight are counted and dropped on return.
//
// Interface:
//   start/base/stride/nrows  begin a segment of nrows rows (one-cycle pulse)
//   cancel                   abandon the current segment
//   free_rows                free rows of this path's buffer half
//   req_valid/req_ready/req_addr   read requests toward the memory interface
//   resp_valid               a read row came back for this path
//   fill_valid               forward it to the buffer (not a dropped row)
//   busy                     segment not yet fully requested and returned
// Timing: the first request leaves the cycle after start; one request per
// cycle at most. The design names only "a simple stride prefetcher"; the
// credit scheme and the stride supplied per trace are own choices.
module mu_prefetcher
  import revamp_pkg::*;
#(
  parameter int unsigned LEN_W = 8,           // bits of a segment length
  parameter int unsigned CW    = 4,           // bits of free_rows
  parameter int unsigned MAX_INFLIGHT = 15    // reads outstanding at most
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  addr_t             base,
  input  addr_t             stride,
  input  logic [LEN_W-1:0]  nrows,
  input  logic              cancel,
  input  logic [CW-1:0]     free_rows,
  output logic              req_valid,
  input  logic              req_ready,
  output addr_t             req_addr,
  input  logic              resp_valid,
  output logic              fill_valid,
  output logic              busy
);

  localparam int unsigned IW = $clog2(MAX_INFLIGHT + 1);

  addr_t             next_addr, stride_q;
  logic [LEN_W-1:0]  left;        // rows still to request
  logic [IW-1:0]     inflight;    // requested rows not yet returned
  logic [IW-1:0]     drop;        // returned rows to throw away

  logic issue, ret_keep, ret_drop;
  assign ret_drop   = resp_valid && (drop != 0);
  assign ret_keep   = resp_valid && (drop == 0);
  assign fill_valid = ret_keep;

  // Credit: free rows must exceed the rows already on their way.
  assign req_valid = (left != 0) && !cancel && !start &&
                     (IW'(inflight) < IW'(MAX_INFLIGHT)) &&
                     ({{(32-CW){1'b0}}, free_rows} > {{(32-IW){1'b0}}, inflight});
  assign req_addr  = next_addr;
  assign issue     = req_valid && req_ready;
  assign busy      = (left != 0) || (inflight != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_addr <= '0;
      stride_q  <= '0;
      left      <= '0;
      inflight  <= '0;
      drop      <= '0;
    end else begin
      if (cancel) begin
        left     <= '0;
        // everything in flight (less what returns now) is to be dropped
        drop     <= drop + inflight - IW'(ret_keep) - IW'(ret_drop);
        inflight <= '0;
      end else begin
        if (start) begin
          next_addr <= base;
          stride_q  <= stride;
          left      <= nrows;
        end else if (issue) begin
          next_addr <= next_addr + stride_q;
          left      <= left - 1'b1;
        end
        inflight <= inflight + IW'(issue) - IW'(ret_keep);
        drop     <= drop - IW'(ret_drop);
      end
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> (inflight != 0) || (drop != 0));

endmodule
