// sync_rf: the synchronization entries of one core's register file. Cores
// lock fine-grained data by writing the address of the data they lock into
// the register files of the other cores, instead of updating a lock
// variable through the caches and the coherence protocol. Each register
// file therefore holds, in ENTRIES extra entries, the addresses currently
// locked anywhere and by which core.
//
// Ports (the extra access ports added through the second logic layer):
//   write port  net_valid/net_msg  lock messages delivered by the
//               synchronization path; every register file sees the same
//               messages in the same order
//   read port   probe_addr -> probe_locked/probe_owner  lets the local core
//               check, without any network or cache traffic, whether an
//               address is locked (a waiting core spins on this)
//   grant       grant_valid/grant_ok  the outcome of this core's own LOCK or
//               UNLOCK, computed by this register file from the same
//               contents every other copy holds
// Rules: LOCK(a, src) is granted if no entry holds a and an entry is free;
// the entry then records (a, src). A LOCK that finds a held is refused, as
// is one that finds all entries in use (the core then falls back to an
// ordinary lock in memory). UNLOCK(a, src) frees the entry holding a for
// src. Because all copies apply the same ordered messages they agree.
// Timing: the update and the grant take effect at the clock edge that
// delivers the message; the read port is combinational.
// The 4 entries and the use of extra register-file ports follow the
// design; the message format and the refuse-when-full rule are own choices.
module sync_rf
  import revamp_pkg::*;
#(
  parameter int unsigned ENTRIES = SYNC_ENTRIES,
  parameter int unsigned MY_ID   = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  // write port from the synchronization path
  input  logic       net_valid,
  input  sync_msg_t  net_msg,
  // local read port
  input  addr_t      probe_addr,
  output logic       probe_locked,
  output logic [7:0] probe_owner,
  // result of this core's own messages
  output logic       grant_valid,
  output logic       grant_ok,
  output logic [$clog2(ENTRIES+1)-1:0] used
);

  logic       e_valid [ENTRIES];
  addr_t      e_addr  [ENTRIES];
  logic [7:0] e_owner [ENTRIES];

  // search of the message address and of a free entry
  logic match_any, free_any, rel_any;
  logic [clog2_min1(ENTRIES)-1:0] free_idx, rel_idx;
  always_comb begin
    match_any = 1'b0; free_any = 1'b0; rel_any = 1'b0;
    free_idx = '0; rel_idx = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (e_valid[i] && e_addr[i] == net_msg.addr && !match_any) begin
        match_any = 1'b1;
      end
      if (e_valid[i] && e_addr[i] == net_msg.addr && e_owner[i] == net_msg.src && !rel_any) begin
        rel_any = 1'b1; rel_idx = $bits(rel_idx)'(i);
      end
      if (!e_valid[i] && !free_any) begin
        free_any = 1'b1; free_idx = $bits(free_idx)'(i);
      end
    end
  end

  logic lock_ok;
  assign lock_ok = net_valid && net_msg.op == SYNC_LOCK && !match_any && free_any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) begin
        e_valid[i] <= 1'b0;
        e_addr[i]  <= '0;
        e_owner[i] <= '0;
      end
      grant_valid <= 1'b0;
      grant_ok    <= 1'b0;
    end else begin
      if (lock_ok) begin
        e_valid[free_idx] <= 1'b1;
        e_addr[free_idx]  <= net_msg.addr;
        e_owner[free_idx] <= net_msg.src;
      end
      if (net_valid && net_msg.op == SYNC_UNLOCK && rel_any)
        e_valid[rel_idx] <= 1'b0;
      grant_valid <= net_valid && net_msg.src == 8'(MY_ID) && net_msg.op != SYNC_NOP;
      grant_ok    <= (net_msg.op == SYNC_LOCK) ? lock_ok : rel_any;
    end
  end

  always_comb begin
    probe_locked = 1'b0;
    probe_owner  = '0;
    used         = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (e_valid[i]) used = used + 1'b1;
      if (e_valid[i] && e_addr[i] == probe_addr && !probe_locked) begin
        probe_locked = 1'b1;
        probe_owner  = e_owner[i];
      end
    end
  end

  // An address is never held twice.
  for (genvar i = 0; i < ENTRIES; i++) begin : g_chk
    for (genvar j = i + 1; j < ENTRIES; j++) begin : g_pair
      a_unique: assert property (@(posedge clk) disable iff (!rst_n)
        !(e_valid[i] && e_valid[j] && e_addr[i] == e_addr[j]));
    end
  end

endmodule
