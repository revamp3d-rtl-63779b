// sync_path_select: the selection structure added to a router node of the
// on-chip network. Each message a core sends enters here and leaves either
// on the baseline path, toward the memory hierarchy (loads and stores,
// unchanged), or on the synchronization path, toward the register files of
// the other cores (lock and unlock messages). The class bit of the message
// decides; a synchronization message is tagged with the sending core.
//
// Interface: in_valid/in_ready/in_msg from the core; base_valid/base_ready/
// base_msg toward memory; sync_valid/sync_ready/sync_msg toward the
// synchronization path. A message waits (in_ready low) while the path it
// needs is busy; the other path is not blocked by it in later cycles.
// Timing: combinational, no added cycle.
// The two-way selection in the router node follows the design; the class
// bit and message formats are own choices.
module sync_path_select
  import revamp_pkg::*;
#(
  parameter int unsigned MY_ID = 0
) (
  input  logic       in_valid,
  output logic       in_ready,
  input  core_msg_t  in_msg,
  output logic       base_valid,
  input  logic       base_ready,
  output core_msg_t  base_msg,
  output logic       sync_valid,
  input  logic       sync_ready,
  output sync_msg_t  sync_msg
);
  assign base_valid = in_valid && !in_msg.is_sync;
  assign sync_valid = in_valid &&  in_msg.is_sync;
  assign in_ready   = in_msg.is_sync ? sync_ready : base_ready;
  assign base_msg   = in_msg;
  assign sync_msg   = '{op: in_msg.op, addr: in_msg.addr, src: 8'(MY_ID)};
endmodule
