// tb_rd_cmp_top: end-to-end test of the 4-core hierarchy at its default
// sizes (32 KB L1 and 256 KB L2 per core, 4 MB SLLC, 8K-entry Reuse
// Detector per core).
// Main memory is a testbench model: block fetches complete 20 cycles after
// acceptance, write-backs are accepted with random delays.
//
// Part 1 checks the private hit latencies (L1 2 cycles, L2 2 + 5 cycles
// from acceptance to done) and replays the Reuse Detector walk-through on
// one cache set: a block shared by two cores is inserted in the SLLC when
// evicted (reuse bit) and later hits there; a block fetched from memory and
// evicted clean is only recorded and dropped, the second time it is evicted
// it is found in the buffer and inserted; a dirty block that was never
// reused bypasses the SLLC and is written straight to memory.
// Part 2 runs all four cores at once on addresses folded onto two sets, so
// that every replacement path is taken, and checks conservation: every
// request completes; every block sent to the SLLC by a Reuse Detector is
// taken by it; every memory write is either a Reuse Detector bypass or a
// dirty SLLC victim.
// Each mechanism is counted and a count of zero is a failure: the four
// request sources, L1 and L2 hits, L1 dirty write-backs into the L2, L1
// back-invalidation that hands a dirty L1 copy to an evicted L2 block, the
// four Reuse Detector outcomes, SLLC insertion, update, clean drop and dirty
// victim write-back, Reuse Detector FIFO replacement, presence-bit merge
// within a sector, and (part 1) a false hit through compressed-tag aliasing.
module tb_rd_cmp_top;
  import rd_pkg::*;
  localparam int NC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                ready;
  logic    [NC-1:0]    core_req_valid = '0, core_req_ready, core_req_write = '0, core_done;
  baddr_t  [NC-1:0]    core_req_addr = '0;
  logic    [1:0]       core_done_src;
  logic                mm_rd_valid, mm_rd_ready = 0, mm_rd_done = 0;
  baddr_t              mm_rd_addr;
  logic                mm_wr_valid, mm_wr_ready = 0;
  baddr_t              mm_wr_addr;
  logic    [NC-1:0]    rd_dec_valid;
  rd_dec_e [NC-1:0]    rd_dec;
  logic                stt_write, stt_read;

  rd_cmp_top dut (.*);

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // ---- main memory model
  baddr_t mm_writes[$];
  initial forever begin
    @(posedge clk);
    mm_rd_ready <= 1'($urandom_range(0, 1));
    mm_wr_ready <= 1'($urandom_range(0, 1));
  end
  initial forever begin
    @(posedge clk);
    if (mm_rd_valid && mm_rd_ready) begin
      repeat (19) @(posedge clk);
      mm_rd_done <= 1;
      @(posedge clk);
      mm_rd_done <= 0;
    end
  end
  always @(posedge clk) if (mm_wr_valid && mm_wr_ready) mm_writes.push_back(mm_wr_addr);

  // ---- mechanism counters
  int n_src[4], n_dec[4], n_dec_core[NC][4];
  int n_ins = 0, n_upd = 0, n_drop = 0, n_victim = 0, n_fifo, n_sector;
  int n_rd_to_sllc = 0, n_sllc_wb = 0, n_mmw = 0;
  int n_l1_hit = 0, n_l2_hit = 0, n_l1_wb = 0, n_inval_dirty = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (rd_dec_valid[c]) begin
      n_dec[rd_dec[c]]++;
      n_dec_core[c][rd_dec[c]]++;
    end
    for (int c = 0; c < NC; c++) if (core_done[c]) n_src[core_done_src]++;
    if (dut.u_sllc.accept && dut.u_sllc.req.op == SLLC_WBACK) begin
      n_sllc_wb++;
      if (!dut.u_sllc.hit)         n_ins++;
      else if (dut.u_sllc.req.dirty) n_upd++;
      else                           n_drop++;
      if (dut.u_sllc.victim_dirty) n_victim++;
    end
    for (int c = 0; c < NC; c++) if (dut.rd_sllc_valid[c] && dut.rd_sllc_ready[c]) n_rd_to_sllc++;
    if (mm_wr_valid && mm_wr_ready) n_mmw++;
    if (dut.l1_req_op == PC_LOOKUP && |(dut.l1_req_valid & dut.l1_rsp_hit)) n_l1_hit++;
    if (dut.pc_req_op == PC_LOOKUP && |(dut.pc_req_valid & dut.pc_rsp_hit)) n_l2_hit++;
    if (dut.pc_req_op == PC_WBACK && |dut.pc_req_valid) n_l1_wb++;
    for (int c = 0; c < NC; c++)
      if (dut.l1_req_op == PC_INVAL && dut.l1_req_valid[c] && dut.l1_victim_valid[c] &&
          dut.l1_victim[c].dirty) n_inval_dirty++;
  end

  // Reuse Detector FIFO replacement: a new entry written over a valid one
  int n_fifo_c[NC], n_sector_c[NC];
  for (genvar c = 0; c < NC; c++) begin : g_fifo
    always @(posedge clk)
      if (rst_n && dut.g_core[c].u_rd.u_buf.req_valid && !dut.g_core[c].u_rd.u_buf.hit &&
          !dut.g_core[c].u_rd.u_buf.smatch &&
          dut.g_core[c].u_rd.u_buf.row[dut.g_core[c].u_rd.u_buf.victim].v) n_fifo_c[c]++;
    always @(posedge clk)
      if (rst_n && dut.g_core[c].u_rd.u_buf.req_valid && !dut.g_core[c].u_rd.u_buf.hit &&
          dut.g_core[c].u_rd.u_buf.smatch) n_sector_c[c]++;
  end
  always_comb begin
    n_fifo = 0;
    n_sector = 0;
    for (int c = 0; c < NC; c++) begin
      n_fifo += n_fifo_c[c];
      n_sector += n_sector_c[c];
    end
  end

  // ---- one blocking request; last_lat = cycles from acceptance to done
  int last_lat;
  task automatic access(input int c, input baddr_t a, input bit w, input int exp_src = -1);
    int lat = 1;
    @(negedge clk);
    core_req_valid[c] = 1; core_req_addr[c] = a; core_req_write[c] = w;
    #1;   // let the combinational grant settle
    while (!core_req_ready[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 core_req_valid[c] = 0;
    while (!core_done[c] && lat < 500) begin @(posedge clk); #1; lat++; end
    last_lat = lat;
    checks++;
    if (!core_done[c]) fail($sformatf("core %0d request %h never completed", c, a));
    else if (exp_src >= 0 && int'(core_done_src) != exp_src)
      fail($sformatf("core %0d %h came from %0d, expected %0d", c, a, core_done_src, exp_src));
  endtask

  task automatic quiet(input int n = 60);
    repeat (n) @(posedge clk);
  endtask

  function automatic baddr_t blk(input int hi, input logic [11:0] lo);
    return {30'(hi), 12'(lo)};
  endfunction

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d0[4], issued, done;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (ready);

    // ---------- part 1: walk-through on set 0x0A5
    access(0, blk(1, 12'h0A5), 0, 3);                 // A from memory
    access(1, blk(1, 12'h0A5), 0, 2);                 // A from core 0: reuse bits set
    // private hit latencies: L1 2 cycles, L2 2 + 5 cycles
    access(0, blk(1, 12'h0A5), 0, 0);                 // L1 hit
    checks++;
    if (last_lat != 2) fail($sformatf("L1 hit took %0d cycles, expected 2", last_lat));
    for (int k = 0; k < 8; k++) access(0, blk(50 + k, 12'h065), 0, 3);  // same L1 set, other L2 set
    access(0, blk(1, 12'h0A5), 0, 0);                 // A left the L1, still in the L2
    checks++;
    if (last_lat != 7) fail($sformatf("L2 hit took %0d cycles, expected 7", last_lat));
    d0 = n_dec_core[1];
    // F0 and 15 fillers: same L2 set, fillers in another Reuse Detector set
    access(1, blk(100, 12'h0A5), 0, 3);
    for (int k = 1; k < 16; k++) access(1, blk(100 + k, 12'h1A5), 0, 3);  // 16th fill evicts A
    quiet();
    checks++;
    if (n_dec_core[1][RD_REUSED_BIT] - d0[RD_REUSED_BIT] != 1) fail("A not sent to the SLLC by its reuse bit");
    access(2, blk(1, 12'h0A5), 0, 1);                 // A now hits in the SLLC
    d0 = n_dec_core[1];
    access(1, blk(116, 12'h2A5), 0, 3);               // evicts F0 (blk 100), clean, unseen
    quiet();
    checks++;
    if (n_dec_core[1][RD_DISCARD] - d0[RD_DISCARD] != 1) fail("first eviction of F0 not dropped");
    access(1, blk(100, 12'h0A5), 0, 3);               // F0 again, from memory (it bypassed the SLLC)
    quiet();
    d0 = n_dec_core[1];
    // fillers in the same L2 set but another Reuse Detector set, so that
    // F0's record is not pushed out of its FIFO set
    for (int k = 0; k < 16; k++) access(1, blk(200 + k, 12'h3A5), 0, 3);  // last one evicts F0
    quiet();
    checks++;
    if (n_dec_core[1][RD_REUSED_BUF] - d0[RD_REUSED_BUF] != 1) fail("second eviction of F0 not found in the buffer");
    checks++;
    if (n_dec_core[1][RD_DISCARD] - d0[RD_DISCARD] != 15) fail($sformatf("%0d clean unseen blocks dropped, expected 15", n_dec_core[1][RD_DISCARD] - d0[RD_DISCARD]));
    access(3, blk(100, 12'h0A5), 0, 1);               // F0 now hits in the SLLC
    // dirty, never reused: bypasses the SLLC to memory
    mm_writes.delete();
    access(3, blk(7, 12'h3C3), 1, 3);
    for (int k = 0; k < 16; k++) access(3, blk(300 + k, 12'h3C3), 0, 3);
    quiet();
    checks++;
    if (mm_writes.size() != 1 || mm_writes[0] != blk(7, 12'h3C3)) fail("dirty unreused block not written to memory");
    access(0, blk(7, 12'h3C3), 0, 3);                 // and it is not in the SLLC
    // compressed-tag aliasing: X1 (tag 0x001) and X2 (tag 0x400) share the
    // compressed tag 0x001 and the set; X2's first eviction is a false hit
    access(2, blk(0, 12'h8C7), 0, 3);                 // X1
    for (int k = 0; k < 16; k++) access(2, blk(500 + k, 12'h1C7), 0, 3);  // evicts X1: recorded
    access(2, blk(32'h200, 12'h0C7), 0, 3);           // X2, never seen before
    quiet();
    d0 = n_dec_core[2];
    for (int k = 0; k < 16; k++) access(2, blk(600 + k, 12'h1C7), 0, 3);  // evicts X2
    quiet();
    checks++;
    if (n_dec_core[2][RD_REUSED_BUF] - d0[RD_REUSED_BUF] != 1) fail("aliased tag not reported as found");

    // ---------- part 2: all cores at once, two hot sets
    issued = 0; done = 0;
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        for (int n = 0; n < 1500; n++) begin
          baddr_t a;
          case ($urandom_range(0, 2))
            0:       a = blk($urandom_range(0, 47), 12'h111);
            1:       a = blk($urandom_range(0, 47), 12'h110);   // same sector as 0x111
            default: a = blk($urandom_range(0, 47), 12'h222);
          endcase
          issued++;
          access(cc, a, 1'($urandom_range(0, 2) == 0));
          done++;
        end
      join_none
    end
    wait fork;
    quiet(200);
    checks++;
    if (done != issued) fail($sformatf("%0d of %0d requests completed", done, issued));
    checks++;
    if (n_rd_to_sllc != n_sllc_wb) fail($sformatf("%0d blocks sent to the SLLC, %0d taken", n_rd_to_sllc, n_sllc_wb));
    checks++;
    if (n_mmw != n_dec[RD_TO_MM] + n_victim)
      fail($sformatf("%0d memory writes, %0d bypasses + %0d victims", n_mmw, n_dec[RD_TO_MM], n_victim));

    // ---------- every mechanism happened
    $display("sources: private %0d SLLC %0d other-core %0d memory %0d", n_src[0], n_src[1], n_src[2], n_src[3]);
    $display("private levels: L1 hits %0d, L2 hits %0d, L1 write-backs %0d, dirty L1 copies invalidated %0d",
             n_l1_hit, n_l2_hit, n_l1_wb, n_inval_dirty);
    $display("reuse detector: reuse-bit %0d buffer-hit %0d bypass-to-memory %0d dropped %0d",
             n_dec[0], n_dec[1], n_dec[2], n_dec[3]);
    $display("sllc: insert %0d update %0d clean-drop %0d dirty-victim %0d; rd fifo replacements %0d; sector presence-bit merges %0d",
             n_ins, n_upd, n_drop, n_victim, n_fifo, n_sector);
    for (int k = 0; k < 4; k++) begin
      checks++; if (n_src[k] == 0) fail($sformatf("request source %0d never happened", k));
      checks++; if (n_dec[k] == 0) fail($sformatf("reuse detector outcome %0d never happened", k));
    end
    checks++; if (n_l1_hit == 0)      fail("no L1 hit");
    checks++; if (n_l2_hit == 0)      fail("no L2 hit");
    checks++; if (n_l1_wb == 0)       fail("no L1 write-back");
    checks++; if (n_inval_dirty == 0) fail("no dirty L1 copy invalidated on an L2 eviction");
    checks++; if (n_ins == 0)     fail("no SLLC insertion");
    checks++; if (n_upd == 0)     fail("no SLLC update");
    checks++; if (n_drop == 0)    fail("no SLLC clean drop");
    checks++; if (n_victim == 0)  fail("no dirty SLLC victim");
    checks++; if (n_fifo == 0)    fail("no Reuse Detector FIFO replacement");
    checks++; if (n_sector == 0)  fail("no sector presence-bit merge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
