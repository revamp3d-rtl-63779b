// tb_l1_dcache: random loads and stores against the 32 KB, 8-way L1 at its
// default size, compared with a flat byte-array reference. Addresses come
// from a few sets with many tags, so lines are evicted, dirty lines written
// back and read again. Main memory is a behavioural model with a 20-cycle
// line read and random request backpressure. Checks: every load's data,
// the 2-cycle hit time (accept edge to answer edge), that misses and
// write-backs happened, and that a line read back after eviction keeps the
// stored bytes.
module tb_l1_dcache;
  import revamp_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_we = 0, resp_valid, resp_miss;
  addr_t req_addr = '0;
  logic [63:0] req_wdata = '0, resp_rdata;
  logic [7:0] req_be = '0;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  addr_t mem_req_addr;
  row_t mem_req_wdata, mem_resp_row;

  l1_dcache dut (.*);

  // ---- main memory model: 20-cycle line reads, writes at once ----
  row_t mem [addr_t];
  int   n_mem_wr = 0, n_mem_rd = 0;
  int   rd_cnt = -1;
  addr_t rd_a;
  function automatic row_t init_row(addr_t a);
    row_t r;
    for (int k = 0; k < 8; k++) r[k*64 +: 64] = {a[31:0], 32'(k) ^ 32'h5a5a_0000};
    return r;
  endfunction
  function automatic row_t mem_get(addr_t a);
    return mem.exists(a) ? mem[a] : init_row(a);
  endfunction
  always_ff @(posedge clk) mem_req_ready <= ($urandom % 4) != 0;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (rd_cnt > 0) rd_cnt <= rd_cnt - 1;
    if (rd_cnt == 1) begin
      mem_resp_valid <= 1'b1;
      mem_resp_row   <= mem_get(rd_a);
    end
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (mem_req_we) begin mem[mem_req_addr] = mem_req_wdata; n_mem_wr++; end
      else begin rd_a <= mem_req_addr; rd_cnt <= 20; n_mem_rd++; end
    end
  end

  // ---- reference: bytes of the whole space as seen by the core ----
  logic [7:0] ref_b [addr_t];
  function automatic logic [63:0] ref_word(addr_t a);
    logic [63:0] w;
    addr_t line = {a[ADDR_W-1:6], 6'b0};
    row_t r = mem_get(line);
    for (int k = 0; k < 8; k++) begin
      addr_t b = a + addr_t'(k);
      w[k*8 +: 8] = ref_b.exists(b) ? ref_b[b] : r[b[5:0]*8 +: 8];
    end
    return w;
  endfunction

  int checks = 0, failures = 0, hits = 0, misses = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one access; returns data, whether it missed and its latency in edges
  task automatic access(bit we, addr_t a, logic [63:0] wd, logic [7:0] be,
                        output logic [63:0] rd, output bit miss, output int lat);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = wd; req_be = be;
    #1;
    while (!req_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1 req_valid = 0;
    lat = 0;   // edges after the one that took the request
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    rd = resp_rdata; miss = resp_miss;
    @(posedge clk); #1;
    lat++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] rd, exp;
    bit miss;
    int lat;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      addr_t a;
      bit we;
      logic [63:0] wd;
      logic [7:0] be;
      // 3 sets x 12 tags: more lines per set than ways
      a  = {24'($urandom % 12) + 24'h100, 6'($urandom % 3) * 6'd17, 3'($urandom % 8), 3'b000};
      we = ($urandom % 3) == 0;
      wd = {$urandom, $urandom};
      be = 8'($urandom);
      exp = ref_word(a);
      access(we, a, wd, be, rd, miss, lat);
      if (we) begin
        for (int k = 0; k < 8; k++) if (be[k]) ref_b[a + addr_t'(k)] = wd[k*8 +: 8];
      end else begin
        check(rd == exp, $sformatf("load %h: got %h exp %h", a, rd, exp));
      end
      if (miss) misses++;
      else begin
        hits++;
        check(lat == 2, $sformatf("hit latency %0d, expected 2", lat));
      end
    end
    // back-to-back hits: answer every second cycle
    begin
      addr_t a;
      longint t0, t1;
      a = 36'h0_0000_1000;
      access(0, a, '0, '0, rd, miss, lat);
      check(rd == ref_word(a), "warm-up load");
      req_valid = 1; req_we = 0; req_addr = a;
      @(posedge clk); t0 = $time;
      @(posedge clk); #1;
      check(resp_valid && !resp_miss && req_ready, "answer and next take in the same cycle");
      @(posedge clk); t1 = $time; #1 req_valid = 0;
      check(t1 - t0 == 20, "second hit taken 2 cycles after the first");
      @(posedge clk); #1;
      check(resp_valid, "second hit answered");
    end
    $display("hits=%0d misses=%0d mem_reads=%0d mem_writes=%0d", hits, misses, n_mem_rd, n_mem_wr);
    check(hits > 1000, "hits happened");
    check(misses > 100, "misses happened");
    check(n_mem_wr > 50, "dirty lines were written back");
    check(n_mem_rd == misses + 1 || n_mem_rd >= misses, "every miss read its line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
