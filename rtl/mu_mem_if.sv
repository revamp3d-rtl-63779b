// mu_mem_if: the memory interface of the memoization unit. It has two
// read/write data ports, one for the taken path and one for the not-taken
// path of a hard-to-predict branch, and a single shared address bus.
//
// Four requesters compete for the address bus: the read request of each
// path's prefetcher and the write request of each path's trace recorder.
// A round-robin arbiter grants one of them per cycle. The command names the
// data port it uses; write data goes out on that port in the same cycle,
// read data comes back on that port later, in request order per port, and
// is handed to that path's prefetcher/buffer.
//
// Interface:
//   rd_valid/rd_ready/rd_addr [p]          prefetcher reads of path p
//   wr_valid/wr_ready/wr_addr/wr_row [p]   recorder writes of path p
//   resp_valid/resp_row [p]                read rows returned on port p
//   mem_cmd_valid/mem_cmd_ready/mem_cmd    the address bus
//   mem_wdata [p]                          write data of port p
//   mem_rvalid/mem_rdata [p]               read data of port p
// Timing: a request is granted in the cycle it is offered if the bus is
// free and it wins arbitration; returned data passes through unregistered.
// Ports and bus follow the design; the arbitration policy is an own choice.
module mu_mem_if
  import revamp_pkg::*;
#(
  parameter int unsigned PATHS = MU_PATHS
) (
  input  logic              clk,
  input  logic              rst_n,
  // prefetcher side
  input  logic [PATHS-1:0]  rd_valid,
  output logic [PATHS-1:0]  rd_ready,
  input  addr_t             rd_addr  [PATHS],
  output logic [PATHS-1:0]  resp_valid,
  output row_t              resp_row [PATHS],
  // recorder side
  input  logic [PATHS-1:0]  wr_valid,
  output logic [PATHS-1:0]  wr_ready,
  input  addr_t             wr_addr  [PATHS],
  input  row_t              wr_row   [PATHS],
  // main memory side
  output logic              mem_cmd_valid,
  input  logic              mem_cmd_ready,
  output mu_cmd_t           mem_cmd,
  output row_t              mem_wdata [PATHS],
  input  logic [PATHS-1:0]  mem_rvalid,
  input  row_t              mem_rdata [PATHS]
);

  localparam int unsigned NREQ = 2 * PATHS;   // reads first, then writes
  localparam int unsigned RW   = clog2_min1(NREQ);

  logic [NREQ-1:0] req, gnt;
  logic [RW-1:0]   last;       // last granted requester
  logic [RW-1:0]   sel;
  logic            any;

  assign req = {wr_valid, rd_valid};

  // Round robin: first requester after 'last', wrapping around.
  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int unsigned k = 1; k <= NREQ; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % NREQ;
      if (!any && req[idx]) begin
        any = 1'b1;
        sel = RW'(idx);
      end
    end
  end

  always_comb begin
    gnt = '0;
    if (any && mem_cmd_ready) gnt[sel] = 1'b1;
  end

  assign rd_ready = gnt[PATHS-1:0];
  assign wr_ready = gnt[NREQ-1:PATHS];

  assign mem_cmd_valid = any;
  always_comb begin
    mem_cmd = '0;
    if (int'(sel) < PATHS) begin
      mem_cmd.we   = 1'b0;
      mem_cmd.port = path_e'(1'(int'(sel) % PATHS));
      mem_cmd.addr = rd_addr[int'(sel) % PATHS];
    end else begin
      mem_cmd.we   = 1'b1;
      mem_cmd.port = path_e'(1'(int'(sel) % PATHS));
      mem_cmd.addr = wr_addr[int'(sel) % PATHS];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              last <= RW'(NREQ - 1);
    else if (any && mem_cmd_ready) last <= sel;
  end

  for (genvar p = 0; p < PATHS; p++) begin : g_port
    assign mem_wdata[p]  = wr_row[p];
    assign resp_valid[p] = mem_rvalid[p];
    assign resp_row[p]   = mem_rdata[p];
  end

  // The arbiter never grants two requesters in the same cycle.
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(gnt));

endmodule
