// sync_net: the synchronization path of the on-chip network. It carries
// lock and unlock messages from the cores to the register files of all
// cores. The messages of all cores are serialised by a round-robin arbiter
// (the root of the tree) and the winner is broadcast to every register
// file in the next cycle, so all copies of the lock entries see one and the
// same order of messages.
//
// Interface: req_valid/req_ready/req_msg per core; bcast_valid/bcast_msg to
// every core's sync_rf write port.
// Timing: a message granted in cycle t is delivered at the edge ending t+1;
// one message per cycle overall.
// The design reuses the baseline meshes-of-trees network for this path and
// gives neither its latency nor its arbitration; the single arbiter and
// the one-cycle broadcast are own choices.
module sync_net
  import revamp_pkg::*;
#(
  parameter int unsigned NUM_CORES = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_CORES-1:0] req_valid,
  output logic [NUM_CORES-1:0] req_ready,
  input  sync_msg_t            req_msg [NUM_CORES],
  output logic                 bcast_valid,
  output sync_msg_t            bcast_msg
);
  localparam int unsigned IW = clog2_min1(NUM_CORES);

  logic [IW-1:0] last, sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int unsigned k = 1; k <= NUM_CORES; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % NUM_CORES;
      if (!any && req_valid[idx]) begin
        any = 1'b1;
        sel = IW'(idx);
      end
    end
  end

  always_comb begin
    req_ready = '0;
    if (any) req_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last        <= IW'(NUM_CORES - 1);
      bcast_valid <= 1'b0;
      bcast_msg   <= '{op: SYNC_NOP, addr: '0, src: '0};
    end else begin
      bcast_valid <= any;
      if (any) begin
        bcast_msg <= req_msg[sel];
        last      <= sel;
      end
    end
  end

  a_one_winner: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_ready));
endmodule
