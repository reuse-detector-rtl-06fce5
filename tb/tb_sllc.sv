// tb_sllc: checks the shared STT-RAM cache controller at its default size
// (4 cores: 4096 sets x 16 ways, 6/17-cycle read/write). Every request is
// compared with a reference model that keeps each set's lines in recency
// order with their dirty bits: the hit/miss answer, the response latency
// (6 cycles for lookups and dropped clean write-backs, 17 for insertions and
// updates), the STT-RAM write and read pulses, and the dirty victims written
// back to memory (address, and that clean victims are not written back).
module tb_sllc;
  import rd_pkg::*;
  localparam int unsigned SETS = 4096, WAYS = 16, RL = 6, WL = 17;

  logic      clk = 0, rst_n = 0, ready, req_valid = 0, req_ready;
  sllc_req_t req = '0;
  logic      rsp_valid, rsp_hit, mm_valid, mm_ready = 0, stt_write, stt_read;
  sllc_op_e  rsp_op;
  baddr_t    mm_addr;
  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0, n_wb = 0;

  sllc dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (stt_write) n_wr++;
    if (stt_read)  n_rd++;
  end

  typedef struct { baddr_t a; bit d; } line_t;
  line_t m [SETS][$];

  function automatic int find(input baddr_t a);
    int s = int'(a[11:0]);
    foreach (m[s][i]) if (m[s][i].a == a) return i;
    return -1;
  endfunction

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  task automatic request(input sllc_op_e o, input baddr_t a, input bit d);
    int s = int'(a[11:0]);
    int i = find(a);
    int lat = 1, exp_lat, wr0 = n_wr, rd0 = n_rd;   // cycles after the accepting cycle
    bit exp_wb = 0, exp_wr = 0;
    baddr_t wb_a = '0;
    line_t l;
    // model
    exp_lat = RL;
    if (o == SLLC_READ) begin
      if (i >= 0) begin l = m[s][i]; m[s].delete(i); m[s].push_front(l); end
    end else if (i >= 0) begin
      if (d) begin
        l = m[s][i]; m[s].delete(i); l.d = 1; m[s].push_front(l);
        exp_lat = WL; exp_wr = 1;
      end
    end else begin
      exp_lat = WL; exp_wr = 1;
      if (m[s].size() == WAYS) begin
        l = m[s].pop_back();
        if (l.d) begin exp_wb = 1; wb_a = l.a; end
      end
      m[s].push_front('{a: a, d: d});
    end
    // drive
    @(negedge clk);
    req_valid = 1; req = '{op: o, addr: a, dirty: d};
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 0;
    while (!rsp_valid && lat < 40) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != exp_lat) fail($sformatf("op %0d %h latency %0d expected %0d", o, a, lat, exp_lat));
    checks++;
    if (rsp_hit != (i >= 0) || rsp_op != o) fail($sformatf("op %0d %h hit %0b expected %0b", o, a, rsp_hit, i >= 0));
    checks++;
    if ((n_wr - wr0) != int'(exp_wr) || (n_rd - rd0) != int'(o == SLLC_READ && i >= 0))
      fail($sformatf("op %0d %h STT-RAM writes %0d reads %0d", o, a, n_wr - wr0, n_rd - rd0));
    // victim write-back
    @(posedge clk); #1;
    checks++;
    if (mm_valid != exp_wb || (exp_wb && mm_addr != wb_a))
      fail($sformatf("write-back v=%0b %h, expected v=%0b %h", mm_valid, mm_addr, exp_wb, wb_a));
    if (mm_valid) begin
      repeat ($urandom_range(0, 3)) begin
        @(posedge clk); #1;
        checks++;
        if (!mm_valid || mm_addr != wb_a || req_ready) fail("write-back not held");
      end
      mm_ready = 1; @(posedge clk); #1 mm_ready = 0; n_wb++;
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (ready);
    // directed: miss, insert clean, hit, dirty update, clean drop
    request(SLLC_READ,  42'h5_000, 0);
    request(SLLC_WBACK, 42'h5_000, 0);
    request(SLLC_READ,  42'h5_000, 0);
    request(SLLC_WBACK, 42'h5_000, 1);
    request(SLLC_WBACK, 42'h5_000, 0);
    // fill set 0x123 with 16 dirty blocks, touch the oldest, insert two more
    for (int t = 1; t <= 16; t++) request(SLLC_WBACK, {30'(t), 12'h123}, 1);
    request(SLLC_READ,  {30'(1), 12'h123}, 0);
    request(SLLC_WBACK, {30'(99), 12'h123}, 0);   // evicts tag 2 (dirty)
    request(SLLC_WBACK, {30'(98), 12'h123}, 0);   // evicts tag 3 (dirty)
    // random traffic on three sets
    for (int n = 0; n < 3000; n++)
      request($urandom_range(0, 1) ? SLLC_READ : SLLC_WBACK,
              {30'($urandom_range(0, 25)), 12'($urandom_range(0, 2) * 1000)}, 1'($urandom()));
    checks++;
    if (n_wb == 0) fail("no dirty victim was written back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
