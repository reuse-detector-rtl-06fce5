// rd_cmp_top: memory hierarchy of a chip multiprocessor with one Reuse
// Detector per core in front of a shared STT-RAM last-level cache.
//
// Blocks and connections:
//   cores --(core_req_*, round-robin, xbar_arb LAT 0)--> hier_ctrl
//   hier_ctrl <--> private_cache[c] u_l1   (L1, inclusive in the L2)
//   hier_ctrl <--> private_cache[c] u_l2   (last private level, reuse bit)
//   hier_ctrl --evicted blocks--> reuse_detector[c]
//   reuse_detector[c] --reused blocks----\
//   hier_ctrl --demand lookups------------+-- xbar_arb (LAT XBAR_LAT) --> sllc
//   reuse_detector[c] --dirty bypasses---\
//   sllc --dirty victims------------------+-- xbar_arb (LAT 0) --> mm_wr_*
//   hier_ctrl --block fetches--------------------------------------> mm_rd_*
// Main memory (DRAM) is outside: mm_rd_* fetches a block (mm_rd_done when
// it has arrived), mm_wr_* writes one back. Cores are outside too: they
// present block requests on core_req_* and see core_done pulses.
// Statistics outputs: each Reuse Detector's decisions (rd_dec_valid/rd_dec)
// and the SLLC's STT-RAM data-array writes and reads.
//
// Defaults: 4 cores, 32 KB 8-way L1 and 256 KB 16-way L2 per core with
// 2- and 5-cycle access latencies (one L1
// per core stands for the paper's separate L1 I and D caches, which behave
// alike towards the L2), 1 MB per core 16-way SLLC
// with 6/17-cycle read/write, 3-cycle crossbar, and per core a Reuse Detector
// of 1024 sets x 16 ways, 2-block sectors and 10-bit compressed tags.
// PRIV_LEVELS = 1 removes the L1s: the L2 parameters then describe the
// only private level (the two-level system of the evaluation uses 64 sets,
// 8 ways, 2 cycles), and its evictions feed the Reuse Detectors.
// ready rises after all tag arrays have been cleared (the largest sweep,
// the SLLC's, takes SLLC_SETS cycles). Reset synchronous, active low.
module rd_cmp_top
  import rd_pkg::*;
#(
  parameter int unsigned NCORES      = 4,
  parameter int unsigned PRIV_LEVELS = 2,   // 1: no L1, the L2 parameters describe the only private level
  parameter int unsigned L1_SETS     = 64,
  parameter int unsigned L1_WAYS     = 8,
  parameter int unsigned L1_LAT      = 2,
  parameter int unsigned L2_SETS     = 256,
  parameter int unsigned L2_WAYS     = 16,
  parameter int unsigned L2_LAT      = 5,
  parameter int unsigned RD_SETS     = 1024,
  parameter int unsigned RD_WAYS     = 16,
  parameter int unsigned SECTOR_BLKS = 2,
  parameter int unsigned CTAG_W      = 10,
  parameter int unsigned SLLC_SETS   = NCORES * 1024,
  parameter int unsigned SLLC_WAYS   = 16,
  parameter int unsigned SLLC_RD_LAT = 6,
  parameter int unsigned SLLC_WR_LAT = 17,
  parameter int unsigned XBAR_LAT    = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      ready,
  // cores
  input  logic    [NCORES-1:0]      core_req_valid,
  output logic    [NCORES-1:0]      core_req_ready,
  input  baddr_t  [NCORES-1:0]      core_req_addr,
  input  logic    [NCORES-1:0]      core_req_write,
  output logic    [NCORES-1:0]      core_done,
  output logic    [1:0]             core_done_src,
  // main memory
  output logic                      mm_rd_valid,
  input  logic                      mm_rd_ready,
  output baddr_t                    mm_rd_addr,
  input  logic                      mm_rd_done,
  output logic                      mm_wr_valid,
  input  logic                      mm_wr_ready,
  output baddr_t                    mm_wr_addr,
  // statistics
  output logic    [NCORES-1:0]      rd_dec_valid,
  output rd_dec_e [NCORES-1:0]      rd_dec,
  output logic                      stt_write,
  output logic                      stt_read
);
  localparam int unsigned CORE_W = $clog2(NCORES > 1 ? NCORES : 2);
  localparam int unsigned CREQ_W = BADDR_W + 1;
  localparam int unsigned SREQ_W = $bits(sllc_req_t);

  // ---- core request selection
  logic [NCORES-1:0][CREQ_W-1:0] creq_data;
  logic                          hreq_valid, hreq_ready;
  logic [CREQ_W-1:0]             hreq_data;
  logic [CORE_W-1:0]             hreq_core;
  logic                          done_valid;
  logic [CORE_W-1:0]             done_core;

  always_comb
    for (int c = 0; c < NCORES; c++) creq_data[c] = {core_req_addr[c], core_req_write[c]};

  xbar_arb #(.N(NCORES), .W(CREQ_W), .LAT(0)) u_core_arb (
    .clk, .rst_n,
    .in_valid (core_req_valid), .in_ready (core_req_ready), .in_data (creq_data),
    .out_valid(hreq_valid),     .out_ready(hreq_ready),     .out_data(hreq_data),
    .out_src  (hreq_core)
  );

  always_comb begin
    core_done = '0;
    core_done[done_core] = done_valid;
  end

  // ---- private caches
  logic   [NCORES-1:0] pc_ready, pc_req_valid, pc_rsp_hit, pc_victim_valid;
  pc_op_e              pc_req_op;
  baddr_t              pc_req_addr;
  logic                pc_req_reuse;
  evict_t [NCORES-1:0] pc_victim;
  logic   [NCORES-1:0] l1_ready, l1_req_valid, l1_rsp_hit, l1_victim_valid;
  pc_op_e              l1_req_op;
  baddr_t              l1_req_addr;
  logic                l1_req_write;
  logic                pc_req_write;
  evict_t [NCORES-1:0] l1_victim;

  // ---- Reuse Detectors
  logic   [NCORES-1:0] rd_ready, ev_valid, ev_ready;
  evict_t              ev;
  logic   [NCORES-1:0] rd_sllc_valid, rd_sllc_ready, rd_sllc_dirty;
  baddr_t [NCORES-1:0] rd_sllc_addr;
  logic   [NCORES-1:0] rd_mm_valid, rd_mm_ready;
  baddr_t [NCORES-1:0] rd_mm_addr;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    if (PRIV_LEVELS == 1) begin : g_no_l1
      assign l1_ready[c]        = 1'b1;
      assign l1_rsp_hit[c]      = 1'b0;
      assign l1_victim_valid[c] = 1'b0;
      assign l1_victim[c]       = '0;
    end else begin : g_l1
      private_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS)) u_l1 (
        .clk, .rst_n,
        .ready       (l1_ready[c]),
        .req_valid   (l1_req_valid[c]),
        .req_op      (l1_req_op),
        .req_addr    (l1_req_addr),
        .req_write   (l1_req_write),
        .req_reuse   (1'b0),
        .rsp_hit     (l1_rsp_hit[c]),
        .victim_valid(l1_victim_valid[c]),
        .victim      (l1_victim[c])
      );
    end

    private_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS)) u_l2 (
      .clk, .rst_n,
      .ready       (pc_ready[c]),
      .req_valid   (pc_req_valid[c]),
      .req_op      (pc_req_op),
      .req_addr    (pc_req_addr),
      .req_write   (pc_req_write),   // with an L1, lines turn dirty by PC_WBACK or invalidation
      .req_reuse   (pc_req_reuse),
      .rsp_hit     (pc_rsp_hit[c]),
      .victim_valid(pc_victim_valid[c]),
      .victim      (pc_victim[c])
    );

    reuse_detector #(
      .SETS(RD_SETS), .WAYS(RD_WAYS), .SECTOR_BLKS(SECTOR_BLKS), .CTAG_W(CTAG_W)
    ) u_rd (
      .clk, .rst_n,
      .ready     (rd_ready[c]),
      .ev_valid  (ev_valid[c]),
      .ev_ready  (ev_ready[c]),
      .ev        (ev),
      .sllc_valid(rd_sllc_valid[c]),
      .sllc_ready(rd_sllc_ready[c]),
      .sllc_addr (rd_sllc_addr[c]),
      .sllc_dirty(rd_sllc_dirty[c]),
      .mm_valid  (rd_mm_valid[c]),
      .mm_ready  (rd_mm_ready[c]),
      .mm_addr   (rd_mm_addr[c]),
      .dec_valid (rd_dec_valid[c]),
      .dec       (rd_dec[c])
    );
  end

  // ---- request flow controller
  logic   sllc_rd_valid, sllc_rd_ready;
  baddr_t sllc_rd_addr;
  logic   sllc_rsp_valid, sllc_rsp_hit;
  sllc_op_e sllc_rsp_op;

  hier_ctrl #(
    .NCORES(NCORES), .PRIV_LEVELS(PRIV_LEVELS), .L1_LAT(L1_LAT), .L2_LAT(L2_LAT)
  ) u_ctrl (
    .clk, .rst_n,
    .req_valid      (hreq_valid),
    .req_ready      (hreq_ready),
    .req_core       (hreq_core),
    .req_addr       (hreq_data[CREQ_W-1:1]),
    .req_write      (hreq_data[0]),
    .done_valid     (done_valid),
    .done_core      (done_core),
    .done_src       (core_done_src),
    .l1_ready, .l1_req_valid, .l1_req_op, .l1_req_addr, .l1_req_write,
    .l1_rsp_hit, .l1_victim_valid, .l1_victim,
    .pc_ready, .pc_req_valid, .pc_req_op, .pc_req_addr, .pc_req_write, .pc_req_reuse,
    .pc_rsp_hit, .pc_victim_valid, .pc_victim,
    .sllc_rd_valid, .sllc_rd_ready, .sllc_rd_addr,
    .sllc_rsp_valid (sllc_rsp_valid && sllc_rsp_op == SLLC_READ),
    .sllc_rsp_hit,
    .mm_rd_valid, .mm_rd_ready, .mm_rd_addr, .mm_rd_done,
    .ev_valid, .ev_ready, .ev
  );

  // ---- crossbar port of the SLLC: Reuse Detectors 0..NCORES-1, demand lookups NCORES
  logic      [NCORES:0]             sx_valid, sx_ready;
  sllc_req_t [NCORES:0]             sx_data;
  logic                             sllc_req_valid, sllc_req_ready;
  sllc_req_t                        sllc_req;

  always_comb begin
    for (int c = 0; c < NCORES; c++) begin
      sx_valid[c] = rd_sllc_valid[c];
      sx_data[c]  = '{op: SLLC_WBACK, addr: rd_sllc_addr[c], dirty: rd_sllc_dirty[c]};
    end
    sx_valid[NCORES] = sllc_rd_valid;
    sx_data[NCORES]  = '{op: SLLC_READ, addr: sllc_rd_addr, dirty: 1'b0};
  end
  assign rd_sllc_ready = sx_ready[NCORES-1:0];
  assign sllc_rd_ready = sx_ready[NCORES];

  xbar_arb #(.N(NCORES + 1), .W(SREQ_W), .LAT(XBAR_LAT)) u_sllc_xbar (
    .clk, .rst_n,
    .in_valid (sx_valid), .in_ready (sx_ready), .in_data (sx_data),
    .out_valid(sllc_req_valid), .out_ready(sllc_req_ready), .out_data(sllc_req),
    .out_src  ()   // answers are routed by operation, not by source
  );

  logic   sllc_ready, sllc_mm_valid, sllc_mm_ready;
  baddr_t sllc_mm_addr;

  sllc #(
    .NCORES(NCORES), .SETS(SLLC_SETS), .WAYS(SLLC_WAYS),
    .RD_LAT(SLLC_RD_LAT), .WR_LAT(SLLC_WR_LAT)
  ) u_sllc (
    .clk, .rst_n,
    .ready    (sllc_ready),
    .req_valid(sllc_req_valid),
    .req_ready(sllc_req_ready),
    .req      (sllc_req),
    .rsp_valid(sllc_rsp_valid),
    .rsp_op   (sllc_rsp_op),
    .rsp_hit  (sllc_rsp_hit),
    .mm_valid (sllc_mm_valid),
    .mm_ready (sllc_mm_ready),
    .mm_addr  (sllc_mm_addr),
    .stt_write,
    .stt_read
  );

  // ---- memory write port: Reuse Detector bypasses 0..NCORES-1, SLLC victims NCORES
  logic   [NCORES:0]  mx_valid, mx_ready;
  baddr_t [NCORES:0]  mx_data;

  assign mx_valid      = {sllc_mm_valid, rd_mm_valid};
  assign mx_data       = {sllc_mm_addr, rd_mm_addr};
  assign rd_mm_ready   = mx_ready[NCORES-1:0];
  assign sllc_mm_ready = mx_ready[NCORES];

  xbar_arb #(.N(NCORES + 1), .W(BADDR_W), .LAT(0)) u_mm_arb (
    .clk, .rst_n,
    .in_valid (mx_valid), .in_ready (mx_ready), .in_data (mx_data),
    .out_valid(mm_wr_valid), .out_ready(mm_wr_ready), .out_data(mm_wr_addr),
    .out_src  ()
  );

  assign ready = (&l1_ready) && (&pc_ready) && (&rd_ready) && sllc_ready;

endmodule
