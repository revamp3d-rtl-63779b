// tb_sync_rf: self-checking test of one register file's synchronization
// entries (core 2). It delivers lock and unlock messages from several cores
// and checks grants against a reference lock table: a free address is
// granted, a held one refused, a fifth lock refused while four are held,
// unlock by a non-owner ignored, the read port reports lock and owner, and
// grants are reported only for the core's own messages.
module tb_sync_rf;
  import revamp_pkg::*;
  localparam int MY = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic net_valid = 0;
  sync_msg_t net_msg = '{op: SYNC_NOP, addr: '0, src: '0};
  addr_t probe_addr = '0;
  logic probe_locked, grant_valid, grant_ok;
  logic [7:0] probe_owner;
  logic [2:0] used;
  int checks = 0, failures = 0;
  int ref_owner [addr_t];

  sync_rf #(.MY_ID(MY)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(sync_op_e op, addr_t a, int src);
    bit exp_ok;
    if (op == SYNC_LOCK) begin
      exp_ok = !ref_owner.exists(a) && ref_owner.size() < 4;
      if (exp_ok) ref_owner[a] = src;
    end else begin
      exp_ok = ref_owner.exists(a) && ref_owner[a] == src;
      if (exp_ok) ref_owner.delete(a);
    end
    net_valid = 1; net_msg = '{op: op, addr: a, src: 8'(src)};
    @(posedge clk); #1 net_valid = 0;
    check(grant_valid == (src == MY), "grant only for own messages");
    if (src == MY) check(grant_ok == exp_ok, $sformatf("grant %0d for %s %h", exp_ok, op.name(), a));
    check(used == 3'(ref_owner.size()), "entries in use");
    probe_addr = a; #1;
    check(probe_locked == ref_owner.exists(a), "read port lock state");
    if (ref_owner.exists(a)) check(probe_owner == 8'(ref_owner[a]), "read port owner");
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); #1 rst_n = 1;
    send(SYNC_LOCK, 36'h100, MY);     // granted
    send(SYNC_LOCK, 36'h100, 5);      // refused (held)
    send(SYNC_LOCK, 36'h100, MY);     // refused, even for owner
    send(SYNC_LOCK, 36'h200, 5);
    send(SYNC_LOCK, 36'h300, 7);
    send(SYNC_LOCK, 36'h400, 1);      // fourth entry
    send(SYNC_LOCK, 36'h500, MY);     // refused: full
    send(SYNC_UNLOCK, 36'h200, MY);   // not owner: ignored
    send(SYNC_UNLOCK, 36'h200, 5);    // freed
    send(SYNC_LOCK, 36'h500, MY);     // now granted
    send(SYNC_UNLOCK, 36'h100, MY);
    send(SYNC_UNLOCK, 36'h100, MY);   // second release finds nothing
    for (int i = 0; i < 60; i++)
      send($urandom_range(0, 1) ? SYNC_LOCK : SYNC_UNLOCK, addr_t'($urandom_range(1, 6) * 16),
           $urandom_range(0, 3));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
