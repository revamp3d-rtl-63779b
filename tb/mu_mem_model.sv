// mu_mem_model: behavioural model of the main-memory side seen by the
// memoization unit, for testbenches only. It accepts one command per cycle
// on the address bus (when ready), stores written rows in a sparse array and
// returns read rows on the data port named by the command after RD_LAT
// cycles, in order per port. Unwritten rows read as a pattern derived from
// the address. The 20-cycle default is the 5 ns read latency of the
// on-chip RRAM at a 4 GHz core clock. 'stall' withholds ready to create
// backpressure.
module mu_mem_model
  import revamp_pkg::*;
#(
  parameter int unsigned RD_LAT = 20
) (
  input  logic             clk,
  input  logic             stall,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  mu_cmd_t          cmd,
  input  row_t             wdata  [MU_PATHS],
  output logic [MU_PATHS-1:0] rvalid,
  output row_t             rdata  [MU_PATHS],
  output int unsigned      n_reads,
  output int unsigned      n_writes
);
  row_t store [addr_t];
  typedef struct { longint unsigned t; row_t d; } pend_t;
  pend_t q0[$], q1[$];
  longint unsigned now = 0;

  function automatic row_t pattern(addr_t a);
    return {8{a[31:0] ^ 32'h5A5A_0000, a[31:0]}};
  endfunction

  assign cmd_ready = !stall;
  initial begin n_reads = 0; n_writes = 0; rvalid = '0; end

  always @(posedge clk) begin
    now++;
    if (cmd_valid && cmd_ready) begin
      if (cmd.we) begin
        store[cmd.addr] = wdata[cmd.port];
        n_writes++;
      end else begin
        pend_t e;
        e.t = now + RD_LAT;
        e.d = store.exists(cmd.addr) ? store[cmd.addr] : pattern(cmd.addr);
        if (cmd.port == PATH_TAKEN) q0.push_back(e); else q1.push_back(e);
        n_reads++;
      end
    end
    rvalid <= '0;
    if (q0.size() > 0 && q0[0].t <= now) begin rvalid[0] <= 1'b1; rdata[0] <= q0[0].d; void'(q0.pop_front()); end
    if (q1.size() > 0 && q1[0].t <= now) begin rvalid[1] <= 1'b1; rdata[1] <= q1[0].d; void'(q1.pop_front()); end
  end
endmodule
