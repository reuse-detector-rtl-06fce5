// tb_private_cache: checks the private cache tag store with reuse bits at
// its L2 default size (256 sets x 16 ways). A reference model keeps, per
// set, the valid lines in recency order (most recent first); LRU victim =
// last element. Random lookups, probes, fills and back-invalidations on a
// few sets, and write-backs from the level above (dirty, no LRU change), are
// compared operation by operation: hit/miss, and for fills and
// invalidations the reported block's address, dirty and reuse bits.
// Directed checks: a probe sets the reuse bit without changing the LRU
// order; a write hit sets dirty; an invalidated way is refilled before any
// valid line is replaced; the clearing sweep takes 256 cycles.
module tb_private_cache;
  import rd_pkg::*;
  localparam int unsigned SETS = 256, WAYS = 16;

  logic   clk = 0, rst_n = 0, ready, req_valid = 0, req_write = 0, req_reuse = 0;
  pc_op_e req_op = PC_LOOKUP;
  baddr_t req_addr = '0;
  logic   rsp_hit, victim_valid;
  evict_t victim;
  int checks = 0, failures = 0;

  private_cache #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { baddr_t a; bit d; bit r; } line_t;
  line_t m [SETS][$];

  function automatic int find(input baddr_t a);
    int s = int'(a[7:0]);
    foreach (m[s][i]) if (m[s][i].a == a) return i;
    return -1;
  endfunction

  task automatic op(input pc_op_e o, input baddr_t a, input bit w, input bit r);
    int s = int'(a[7:0]);
    int i = find(a);
    bit  ev_v = 0;
    line_t ev_l;
    line_t l;
    @(negedge clk);
    req_valid = 1; req_op = o; req_addr = a; req_write = w; req_reuse = r;
    #1;
    checks++;
    if (o != PC_FILL && rsp_hit != (i >= 0)) begin
      failures++; $display("FAIL op %0d %h hit=%0b model=%0b", o, a, rsp_hit, i >= 0);
    end
    case (o)
      PC_LOOKUP: if (i >= 0) begin
        l = m[s][i]; m[s].delete(i); if (w) l.d = 1; m[s].push_front(l);
      end
      PC_PROBE: if (i >= 0) m[s][i].r = 1;
      PC_FILL: begin
        if (m[s].size() == WAYS) begin ev_v = 1; ev_l = m[s].pop_back(); end
        m[s].push_front('{a: a, d: w, r: r});
        checks++;
        if (victim_valid != ev_v || (ev_v && (victim.addr != ev_l.a || victim.dirty != ev_l.d || victim.reuse != ev_l.r))) begin
          failures++;
          $display("FAIL fill %h victim v=%0b %h d%0b r%0b model v=%0b %h d%0b r%0b", a, victim_valid,
                   victim.addr, victim.dirty, victim.reuse, ev_v, ev_l.a, ev_l.d, ev_l.r);
        end
      end
      PC_WBACK: if (i >= 0) m[s][i].d = 1;
      PC_INVAL: begin
        checks++;
        if (victim_valid != (i >= 0) || (i >= 0 && (victim.addr != a || victim.dirty != m[s][i].d || victim.reuse != m[s][i].r))) begin
          failures++;
          $display("FAIL inval %h victim v=%0b d%0b r%0b", a, victim_valid, victim.dirty, victim.reuse);
        end
        if (i >= 0) m[s].delete(i);
      end
      default: ;
    endcase
    @(posedge clk); #1 req_valid = 0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int cyc = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!ready) begin @(posedge clk); cyc++; #1; end
    checks++;
    if (cyc != SETS) begin failures++; $display("FAIL clear took %0d cycles", cyc); end

    // directed: fill set 3 with 16 blocks, probe the oldest, it stays LRU
    for (int t = 0; t < 16; t++) op(PC_FILL, {34'(t), 8'd3}, 0, 0);
    op(PC_PROBE, {34'(0), 8'd3}, 0, 0);              // sets reuse of the oldest
    op(PC_LOOKUP, {34'(1), 8'd3}, 1, 0);             // write hit: dirty, most recent
    op(PC_FILL, {34'(100), 8'd3}, 0, 0);             // evicts tag 0 with reuse=1
    for (int t = 2; t < 16; t++) op(PC_FILL, {34'(200 + t), 8'd3}, 0, 1);  // tag 1 evicted dirty
    op(PC_INVAL, {34'(207), 8'd3}, 0, 0);            // drop a middle-aged line
    op(PC_FILL, {34'(300), 8'd3}, 1, 0);             // takes the freed way: no victim
    op(PC_FILL, {34'(301), 8'd3}, 0, 0);             // set full again: evicts tag 100
    // random
    for (int n = 0; n < 10000; n++) begin
      baddr_t a;
      int k;
      a = {34'($urandom_range(0, 23)), 8'($urandom_range(0, 2) * 85)};
      k = $urandom_range(0, 4);
      if (k == 2 && find(a) < 0) op(PC_FILL, a, 1'($urandom()), 1'($urandom()));
      else if (k == 4)           op(PC_WBACK, a, 0, 0);
      else if (k == 3)           op(PC_INVAL, a, 0, 0);
      else if (k == 1)           op(PC_PROBE, a, 0, 0);
      else                       op(PC_LOOKUP, a, 1'($urandom()), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
