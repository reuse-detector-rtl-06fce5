// tb_hier_ctrl: checks the request flow and the reuse bit management with
// three cores, each with a small L2 (2 sets x 4 ways) and an L1 (2 sets x
// 2 ways), all real private_cache blocks, and testbench stand-ins
// for the SLLC (answers after 6 cycles; a fixed subset of addresses is
// "present"), main memory (answers after 10 cycles) and the Reuse Detectors
// (accept evicted blocks with random delay).
// A reference model of the six caches predicts for every request where the
// block comes from (own L1 or L2, SLLC, another core, memory), and for every
// L2 replacement the evicted block with its dirty and reuse bits: reuse set
// when the block came from the SLLC or another core, or when another core
// probed it; clear when it came from memory; dirty when the L1 wrote back a
// dirty copy earlier or held one when it was invalidated. It checks the
// cycle counts with the default access latencies (L1 2, L2 5 cycles): L1
// hit 2 cycles after acceptance, L2 hit 7 (8 with an L1 write-back). The
// walk-through and 3000 random requests must exercise
// every source, L1 back-invalidation of a dirty line and L1 write-backs.
module tb_hier_ctrl;
  import rd_pkg::*;
  localparam int NC = 3, SETS = 2, WAYS = 4, L1WAYS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              req_valid = 0, req_ready, req_write = 0, done_valid;
  logic [1:0]        req_core = '0, done_core, done_src;
  baddr_t            req_addr = '0;
  logic [NC-1:0]     l1_ready, l1_req_valid, l1_rsp_hit, l1_victim_valid;
  pc_op_e            l1_req_op;
  baddr_t            l1_req_addr;
  logic              l1_req_write;
  evict_t [NC-1:0]   l1_victim;
  logic [NC-1:0]     pc_ready, pc_req_valid, pc_rsp_hit, pc_victim_valid;
  pc_op_e            pc_req_op;
  baddr_t            pc_req_addr;
  logic              pc_req_reuse, pc_req_write;
  evict_t [NC-1:0]   pc_victim;
  logic              sllc_rd_valid, sllc_rd_ready = 0, sllc_rsp_valid = 0, sllc_rsp_hit = 0;
  baddr_t            sllc_rd_addr;
  logic              mm_rd_valid, mm_rd_ready = 0, mm_rd_done = 0;
  baddr_t            mm_rd_addr;
  logic [NC-1:0]     ev_valid, ev_ready = '0;
  evict_t            ev;

  hier_ctrl #(.NCORES(NC)) dut (.*);

  for (genvar c = 0; c < NC; c++) begin : g_pc
    private_cache #(.SETS(SETS), .WAYS(WAYS)) u_pc (
      .clk, .rst_n, .ready(pc_ready[c]), .req_valid(pc_req_valid[c]), .req_op(pc_req_op),
      .req_addr(pc_req_addr), .req_write(pc_req_write), .req_reuse(pc_req_reuse),
      .rsp_hit(pc_rsp_hit[c]), .victim_valid(pc_victim_valid[c]), .victim(pc_victim[c]));
    private_cache #(.SETS(SETS), .WAYS(L1WAYS)) u_l1 (
      .clk, .rst_n, .ready(l1_ready[c]), .req_valid(l1_req_valid[c]), .req_op(l1_req_op),
      .req_addr(l1_req_addr), .req_write(l1_req_write), .req_reuse(1'b0),
      .rsp_hit(l1_rsp_hit[c]), .victim_valid(l1_victim_valid[c]), .victim(l1_victim[c]));
  end

  function automatic bit in_sllc(input baddr_t a);
    return a[2] & a[1];          // the stand-in SLLC holds these addresses
  endfunction

  // ---- stand-ins
  int n_sllc_req = 0, n_mm_req = 0;
  initial forever begin
    @(posedge clk);
    sllc_rd_ready <= 1'($urandom_range(0, 1));
    mm_rd_ready   <= 1'($urandom_range(0, 1));
    ev_ready      <= NC'($urandom());
  end
  initial forever begin
    baddr_t a;
    @(posedge clk);
    if (sllc_rd_valid && sllc_rd_ready) begin
      a = sllc_rd_addr;
      n_sllc_req++;
      repeat (5) @(posedge clk);
      sllc_rsp_valid <= 1; sllc_rsp_hit <= in_sllc(a);
      @(posedge clk);
      sllc_rsp_valid <= 0;
    end
  end
  initial forever begin
    @(posedge clk);
    if (mm_rd_valid && mm_rd_ready) begin
      n_mm_req++;
      repeat (9) @(posedge clk);
      mm_rd_done <= 1;
      @(posedge clk);
      mm_rd_done <= 0;
    end
  end
  evict_t evq[NC][$];
  always @(posedge clk)
    for (int c = 0; c < NC; c++) if (ev_valid[c] && ev_ready[c]) evq[c].push_back(ev);

  // ---- reference model
  typedef struct { baddr_t a; bit d; bit r; } line_t;
  line_t m [NC][SETS][$];     // L2s, most recent first
  line_t m1 [NC][SETS][$];    // L1s

  function automatic int find(input int c, input baddr_t a);
    foreach (m[c][a[0]][i]) if (m[c][a[0]][i].a == a) return i;
    return -1;
  endfunction
  function automatic int find1(input int c, input baddr_t a);
    foreach (m1[c][a[0]][i]) if (m1[c][a[0]][i].a == a) return i;
    return -1;
  endfunction

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  int src_count[4];
  int n_l1_hit = 0, n_l2_hit = 0, n_l1_wb = 0, n_inval = 0, n_inval_dirty = 0;

  task automatic request(input int c, input baddr_t a, input bit w);
    int s = int'(a[0]);
    int i = find(c, a);
    int i1 = find1(c, a);
    int exp_src, exp_lat = 0, lat = 1;
    bit exp_ev = 0, r = 0;
    line_t l, evl;
    if (i1 >= 0) begin
      exp_src = 0; exp_lat = 2; n_l1_hit++;
      l = m1[c][s][i1]; m1[c][s].delete(i1); if (w) l.d = 1; m1[c][s].push_front(l);
    end else if (i >= 0) begin
      exp_src = 0; exp_lat = 7; n_l2_hit++;
      l = m[c][s][i]; m[c][s].delete(i); m[c][s].push_front(l);
    end else begin
      if (in_sllc(a)) begin exp_src = 1; r = 1; end
      else begin
        exp_src = 3;
        for (int o = 0; o < NC; o++) if (o != c) begin
          int j = find(o, a);
          if (j >= 0) begin exp_src = 2; r = 1; m[o][s][j].r = 1; end
        end
      end
      if (m[c][s].size() == WAYS) begin
        int j;
        exp_ev = 1; evl = m[c][s].pop_back();
        j = find1(c, evl.a);
        if (j >= 0) begin
          n_inval++;
          if (m1[c][s][j].d) begin evl.d = 1; n_inval_dirty++; end
          m1[c][s].delete(j);
        end
      end
      m[c][s].push_front('{a: a, d: 0, r: r});
    end
    if (i1 < 0) begin   // copy into the L1; a dirty L1 victim is written into the L2
      if (m1[c][s].size() == L1WAYS) begin
        line_t v = m1[c][s].pop_back();
        if (v.d) begin
          int j = find(c, v.a);
          n_l1_wb++; exp_lat++;
          if (j < 0) fail($sformatf("model: L1 victim %h not in L2", v.a));
          else m[c][s][j].d = 1;   // L2 LRU order unchanged
        end
      end
      m1[c][s].push_front('{a: a, d: w, r: 0});
    end
    @(negedge clk);
    req_valid = 1; req_core = 2'(c); req_addr = a; req_write = w;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 0;
    while (!done_valid && lat < 200) begin @(posedge clk); #1; lat++; end
    checks++;
    if (!done_valid || done_core != 2'(c) || int'(done_src) != exp_src)
      fail($sformatf("core %0d addr %h: source %0d, expected %0d", c, a, done_src, exp_src));
    src_count[exp_src]++;
    if (exp_src == 0) begin
      checks++;
      if (lat != exp_lat) fail($sformatf("private hit took %0d cycles, expected %0d", lat, exp_lat));
    end
    @(posedge clk); #1;
    checks++;
    if (exp_ev) begin
      if (evq[c].size() != 1) fail($sformatf("core %0d: %0d evictions, expected 1", c, evq[c].size()));
      else begin
        evict_t e = evq[c].pop_front();
        if (e.addr != evl.a || e.dirty != evl.d || e.reuse != evl.r)
          fail($sformatf("core %0d evicted %h d%0b r%0b, expected %h d%0b r%0b", c, e.addr, e.dirty, e.reuse, evl.a, evl.d, evl.r));
      end
    end else if (evq[c].size() != 0) fail($sformatf("core %0d: unexpected eviction", c));
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (&pc_ready && &l1_ready);
    // the paper-style walk-through on one set: A from memory, shared, reused
    request(0, 42'h10, 0);    // memory, reuse 0
    request(1, 42'h10, 0);    // from core 0: both reuse bits set
    request(0, 42'h10, 1);    // private hit, write
    request(0, 42'h06, 0);    // SLLC hit (in_sllc), reuse 1
    request(0, 42'h20, 0);    // memory; the L1 writes 0x10 back: dirty in the L2
    request(0, 42'h30, 0);    // memory; L2 set 0 now full
    request(0, 42'h40, 0);    // memory; evicts 0x10 dirty with reuse 1
    for (int n = 0; n < 3000; n++)
      request($urandom_range(0, NC - 1), 42'($urandom_range(0, 15)), 1'($urandom()));
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (src_count[k] == 0) fail($sformatf("source %0d never exercised", k));
    end
    checks += 4;
    if (n_l2_hit == 0)      fail("no L2 hit");
    if (n_l1_wb == 0)       fail("no L1 write-back");
    if (n_inval == 0)       fail("no L1 back-invalidation");
    if (n_inval_dirty == 0) fail("no dirty L1 line merged into an evicted block");
    $display("L1 hits %0d, L2 hits %0d, L1 write-backs %0d, back-invalidations %0d (dirty %0d)",
             n_l1_hit, n_l2_hit, n_l1_wb, n_inval, n_inval_dirty);
    $display("sources: private %0d, SLLC %0d, other core %0d, memory %0d",
             src_count[0], src_count[1], src_count[2], src_count[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
