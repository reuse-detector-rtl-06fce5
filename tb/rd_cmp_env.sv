// rd_cmp_env: test environment for one configuration of rd_cmp_top, used
// by tb_rd_cmp_scaled to run other systems of the evaluation (8 cores with
// a 16K-entry Reuse Detector, a single core, the two-level hierarchy with no
// L1). It has its own clock
// and main memory model (fetches take 20 cycles, write-backs are accepted
// with random delays) and reports through its ports: finished rises when the
// run is over, with the number of checks and failures.
//
// Each core runs a synthetic stream with the two kinds of traffic the Reuse
// Detector must tell apart, each folded onto a single L2 set so that the
// private levels keep evicting:
//   loop   - LOOP private blocks revisited over and over (more than the 16
//            L2 ways, spread over several SLLC sets): they come back from memory,
//            are found in the Reuse Detector on a later eviction and then
//            live in the SLLC, where they hit and get updated;
//   stream - blocks touched once and never again;
//   shared - a small pool read and written by all cores (coherence source).
// Checks: every request completes; every block a Reuse Detector sends to
// the SLLC is taken; every memory write is a Reuse Detector bypass or a
// dirty SLLC victim; a streamed block always leaves the L2 with its reuse
// bit clear; a block a core wrote leaves that core's private levels dirty;
// all request sources (the other-core one only with several cores), all
// four Reuse Detector outcomes and the SLLC insert, update, clean drop and
// dirty victim occur; fewer blocks are written into the STT-RAM than leave
// the L2s. It prints the mechanism counts.
module rd_cmp_env
  import rd_pkg::*;
#(
  parameter int NC      = 8,
  parameter int RD_SETS = 2048,
  parameter int N_REQ   = 700,     // requests per core
  parameter int LOOP    = 24,      // loop blocks per core (multiple of 4)
  parameter int PRIV_LEVELS = 2,
  parameter int L2_SETS = 256,
  parameter int L2_WAYS = 16,
  parameter int L2_LAT  = 5
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam logic [11:0] LO_LOOP = 12'h0A5, LO_STREAM = 12'h1B6, LO_SHARED = 12'h2C7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin finished = 0; checks = 0; failures = 0; end

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

  rd_cmp_top #(
    .NCORES(NC), .RD_SETS(RD_SETS), .PRIV_LEVELS(PRIV_LEVELS),
    .L2_SETS(L2_SETS), .L2_WAYS(L2_WAYS), .L2_LAT(L2_LAT)
  ) dut (.*);

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // ---- main memory model: fetches take 20 cycles
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

  // ---- counters and per-eviction checks
  int n_src[4], n_dec[4];
  int n_ins = 0, n_upd = 0, n_drop = 0, n_victim = 0;
  int n_rd_to_sllc = 0, n_sllc_wb = 0, n_mmw = 0, n_l2_ev = 0, n_stt_wr = 0;
  int n_stream_ev = 0, n_stream_bad = 0, n_wr_ev = 0;
  bit wrote [logic [47:0]];   // {core, block} written by that core since it last left
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (rd_dec_valid[c]) n_dec[rd_dec[c]]++;
    for (int c = 0; c < NC; c++) if (core_done[c]) n_src[core_done_src]++;
    if (dut.u_sllc.accept && dut.u_sllc.req.op == SLLC_WBACK) begin
      n_sllc_wb++;
      if (!dut.u_sllc.hit)           n_ins++;
      else if (dut.u_sllc.req.dirty) n_upd++;
      else                           n_drop++;
      if (dut.u_sllc.victim_dirty) n_victim++;
    end
    if (stt_write) n_stt_wr++;
    for (int c = 0; c < NC; c++) begin
      if (dut.rd_sllc_valid[c] && dut.rd_sllc_ready[c]) n_rd_to_sllc++;
      if (dut.ev_valid[c] && dut.ev_ready[c]) begin
        n_l2_ev++;
        if (wrote.exists({6'(c), dut.ev.addr})) begin
          n_wr_ev++;
          if (!dut.ev.dirty) fail($sformatf("block %h written by core %0d evicted clean", dut.ev.addr, c));
          wrote.delete({6'(c), dut.ev.addr});
        end
        if (dut.ev.addr[11:0] == LO_STREAM) begin
          n_stream_ev++;
          if (dut.ev.reuse) begin
            n_stream_bad++;
            fail($sformatf("streamed block %h evicted with its reuse bit set", dut.ev.addr));
          end
        end
      end
    end
    if (mm_wr_valid && mm_wr_ready) n_mmw++;
  end

  // ---- one blocking request
  task automatic access(input int c, input baddr_t a, input bit w);
    int lat = 0;
    @(negedge clk);
    core_req_valid[c] = 1; core_req_addr[c] = a; core_req_write[c] = w;
    #1;
    while (!core_req_ready[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 core_req_valid[c] = 0;
    while (!core_done[c] && lat < 2000) begin @(posedge clk); #1; lat++; end
    checks++;
    if (!core_done[c]) fail($sformatf("core %0d request %h never completed", c, a));
    if (w) wrote[{6'(c), a}] = 1'b1;
  endtask

  function automatic baddr_t blk(input int hi, input logic [11:0] lo);
    return {30'(hi), lo};
  endfunction


  initial begin
    int issued, done;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (ready);
    issued = 0; done = 0;
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        automatic int stream_n = 0;
        for (int n = 0; n < N_REQ; n++) begin
          automatic baddr_t a;
          automatic int k = $urandom_range(0, 7);
          automatic int x = $urandom_range(0, LOOP - 1);
          if (k < 5)       a = blk(cc * 64 + x / 4, {2'b00, 2'(x % 4), LO_LOOP[7:0]});
          else if (k < 7)  begin a = blk((cc + 1) * 65536 + stream_n, LO_STREAM); stream_n++; end
          else             a = blk($urandom_range(0, 7), LO_SHARED);
          issued++;
          access(cc, a, 1'($urandom_range(0, 3) == 0));
          done++;
        end
      join_none
    end
    wait fork;
    repeat (300) @(posedge clk);

    checks++;
    if (done != issued) fail($sformatf("%0d of %0d requests completed", done, issued));
    checks++;
    if (n_rd_to_sllc != n_sllc_wb) fail($sformatf("%0d blocks sent to the SLLC, %0d taken", n_rd_to_sllc, n_sllc_wb));
    checks++;
    if (n_mmw != n_dec[RD_TO_MM] + n_victim)
      fail($sformatf("%0d memory writes, %0d bypasses + %0d victims", n_mmw, n_dec[RD_TO_MM], n_victim));
    checks += n_stream_ev;
    checks++;
    if (n_stream_ev == 0) fail("no streamed block was evicted");
    checks += n_wr_ev;
    checks++;
    if (n_wr_ev == 0) fail("no written block was evicted");

    $display("[%0d cores, %0d private level(s), %0d RD sets] sources: private %0d SLLC %0d other-core %0d memory %0d", NC, PRIV_LEVELS, RD_SETS, n_src[0], n_src[1], n_src[2], n_src[3]);
    $display("reuse detector: reuse-bit %0d buffer-hit %0d bypass-to-memory %0d dropped %0d",
             n_dec[0], n_dec[1], n_dec[2], n_dec[3]);
    $display("sllc: insert %0d update %0d clean-drop %0d dirty-victim %0d",
             n_ins, n_upd, n_drop, n_victim);
    $display("L2 evictions %0d (streamed %0d, written %0d), STT-RAM writes %0d", n_l2_ev, n_stream_ev, n_wr_ev, n_stt_wr);
    for (int k = 0; k < 4; k++) begin
      if (k != 2 || NC > 1) begin
        checks++; if (n_src[k] == 0) fail($sformatf("request source %0d never happened", k));
      end
      checks++; if (n_dec[k] == 0) fail($sformatf("reuse detector outcome %0d never happened", k));
    end
    checks++; if (n_ins == 0)    fail("no SLLC insertion");
    checks++; if (n_upd == 0)    fail("no SLLC update");
    checks++; if (n_drop == 0)   fail("no SLLC clean drop");
    checks++; if (n_victim == 0) fail("no dirty SLLC victim");
    checks++; if (n_stt_wr >= n_l2_ev) fail("every L2 eviction became an SLLC write");
    finished = 1;
  end
endmodule
