// tb_reuse_detector: checks the eviction decision of one Reuse Detector at
// its default size. Directed cases cover the three outcomes and their
// latencies, and the decision pulse that comes with each: reuse bit set -> SLLC one cycle after acceptance without
// touching the buffer; reuse bit clear and unseen -> recorded, then memory
// (dirty) or dropped (clean) two cycles after acceptance; reuse bit clear and
// seen before -> SLLC. A random phase with random back-pressure compares
// every output with a reference that simply remembers the block addresses
// recorded so far (the address pool is chosen so that no set overflows and
// no two tags alias, so the reference needs no FIFO or compression).
module tb_reuse_detector;
  import rd_pkg::*;

  logic    clk = 0, rst_n = 0, ready, ev_valid = 0, ev_ready;
  evict_t  ev = '0;
  logic    sllc_valid, sllc_ready = 1, sllc_dirty, mm_valid, mm_ready = 1, dec_valid;
  baddr_t  sllc_addr, mm_addr;
  rd_dec_e dec;
  int checks = 0, failures = 0;

  reuse_detector dut (.*);

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // Sends one eviction, waits for the outcome, checks it and its latency.
  task automatic evict(input baddr_t a, input bit d, input bit r,
                       input rd_dec_e exp_dec, input int exp_lat);
    int lat;
    @(negedge clk);
    ev_valid = 1; ev = '{addr: a, dirty: d, reuse: r};
    while (!ev_ready) @(negedge clk);
    @(posedge clk); #1;
    ev_valid = 0;
    lat = 1;
    while (!(sllc_valid || mm_valid || (dec_valid && dec == RD_DISCARD)) && lat < 20) begin
      @(posedge clk); #1; lat++;
    end
    checks++;
    checks++;
    if (!dec_valid || dec != exp_dec) fail($sformatf("%h decision %0d, expected %0d", a, dec, exp_dec));
    case (exp_dec)
      RD_REUSED_BIT, RD_REUSED_BUF: if (!sllc_valid || sllc_addr != a || sllc_dirty != d) fail($sformatf("%h not sent to SLLC", a));
      RD_TO_MM:   if (!mm_valid || mm_addr != a) fail($sformatf("%h not sent to memory", a));
      default:    if (sllc_valid || mm_valid) fail($sformatf("%h not dropped", a));
    endcase
    checks++;
    if (lat != exp_lat) fail($sformatf("%h latency %0d, expected %0d", a, lat, exp_lat));
    @(posedge clk);   // the output handshake completes here
    @(negedge clk);
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random-phase scoreboard
  typedef struct { rd_dec_e d; baddr_t a; bit dirty; } exp_t;
  exp_t expq[$];
  bit   seen [baddr_t];
  bit   rnd_phase = 0;
  int   outs = 0;

  always @(posedge clk) if (rnd_phase) begin
    if ((sllc_valid && sllc_ready) || (mm_valid && mm_ready) || (dec_valid && dec == RD_DISCARD)) begin
      exp_t e;
      outs++;
      checks++;
      if (expq.size() == 0) fail("unexpected output");
      else begin
        e = expq.pop_front();
        if (sllc_valid && sllc_ready) begin
          if (e.d > RD_REUSED_BUF || sllc_addr != e.a || sllc_dirty != e.dirty) fail($sformatf("random: SLLC %h, expected %0d %h", sllc_addr, e.d, e.a));
        end else if (mm_valid && mm_ready) begin
          if (e.d != RD_TO_MM || mm_addr != e.a) fail($sformatf("random: memory %h, expected %0d %h", mm_addr, e.d, e.a));
        end else if (e.d != RD_DISCARD) fail($sformatf("random: dropped, expected %0d %h", e.d, e.a));
      end
    end
    sllc_ready <= 1'($urandom_range(0, 2) != 0);
    mm_ready   <= 1'($urandom_range(0, 2) != 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (ready);
    // reuse bit set: to SLLC, buffer untouched
    evict(42'h100, 0, 1, RD_REUSED_BIT, 1);
    evict(42'h100, 0, 0, RD_DISCARD, 2);     // unseen: recorded and dropped
    evict(42'h100, 1, 0, RD_REUSED_BUF, 2);     // now seen: to SLLC
    evict(42'h202, 1, 0, RD_TO_MM, 2);       // unseen dirty: to memory
    evict(42'h203, 0, 0, RD_DISCARD, 2);     // same sector, other block: unseen
    evict(42'h203, 1, 0, RD_REUSED_BUF, 2);
    evict(42'h202, 0, 0, RD_REUSED_BUF, 2);
    // back-pressure: the SLLC request is held until accepted
    sllc_ready = 0;
    @(negedge clk);
    ev_valid = 1; ev = '{addr: 42'h300, dirty: 1, reuse: 1};
    @(negedge clk); ev_valid = 0;
    repeat (5) begin
      @(negedge clk);
      checks++;
      if (!sllc_valid || sllc_addr != 42'h300 || ev_ready) fail($sformatf("request not held under back-pressure v=%0b a=%h r=%0b", sllc_valid, sllc_addr, ev_ready));
    end
    sllc_ready = 1;
    @(negedge clk);
    // random phase
    rnd_phase = 1;
    for (int n = 0; n < 3000; n++) begin
      baddr_t a;
      bit d, r;
      exp_t e;
      // tags < 1024 (no aliasing), 8 sets x 6 sectors (no set overflow)
      a = {31'($urandom_range(0, 5)), 10'($urandom_range(0, 7) * 37), 1'($urandom())};
      d = 1'($urandom());
      r = ($urandom_range(0, 3) == 0);
      e.a = a; e.dirty = d;
      if (r) e.d = RD_REUSED_BIT;
      else if (seen.exists(a)) e.d = RD_REUSED_BUF;
      else begin
        seen[a] = 1;
        e.d = d ? RD_TO_MM : RD_DISCARD;
      end
      expq.push_back(e);
      ev_valid = 1; ev = '{addr: a, dirty: d, reuse: r};
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
      #1 ev_valid = 0;
      @(negedge clk);
    end
    repeat (30) @(posedge clk);
    checks++;
    if (expq.size() != 0 || outs != 3000) fail($sformatf("random: %0d outputs, %0d missing", outs, expq.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
