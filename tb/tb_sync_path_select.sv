// tb_sync_path_select: self-checking test of the router node's selection
// structure. Random messages with random class bits and random readiness
// of the two paths are applied; each must appear on exactly the path its
// class names, tagged with the sending core when it is a lock message,
// and the core must see ready exactly when that path is ready.
module tb_sync_path_select;
  import revamp_pkg::*;
  localparam int ID = 9;
  logic in_valid, in_ready, base_valid, base_ready, sync_valid, sync_ready;
  core_msg_t in_msg, base_msg;
  sync_msg_t sync_msg;
  int checks = 0, failures = 0, n_sync = 0, n_base = 0;

  sync_path_select #(.MY_ID(ID)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      in_valid   = $urandom_range(0, 3) != 0;
      base_ready = $urandom_range(0, 1);
      sync_ready = $urandom_range(0, 1);
      in_msg.is_sync = $urandom_range(0, 1);
      in_msg.op   = $urandom_range(0, 1) ? SYNC_LOCK : SYNC_UNLOCK;
      in_msg.we   = $urandom_range(0, 1);
      in_msg.addr = {$urandom(), 4'h0};
      in_msg.data = {$urandom(), $urandom()};
      #1;
      check(base_valid == (in_valid && !in_msg.is_sync), "base path valid");
      check(sync_valid == (in_valid && in_msg.is_sync), "sync path valid");
      check(in_ready == (in_msg.is_sync ? sync_ready : base_ready), "ready from chosen path");
      if (base_valid) begin
        n_base++;
        check(base_msg == in_msg, "base message unchanged");
      end
      if (sync_valid) begin
        n_sync++;
        check(sync_msg.addr == in_msg.addr && sync_msg.op == in_msg.op && sync_msg.src == 8'(ID),
              "sync message carries address, op and source");
      end
      #9;
    end
    check(n_base > 0 && n_sync > 0, "both paths used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
