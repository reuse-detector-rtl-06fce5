// private_cache: tag store of one private cache level of a core, extended
// with the reuse bit of the Reuse Detector scheme. The same module serves as
// the L2 (the last private level, whose reuse bits the Reuse Detector reads)
// and as the L1 above it.
//
// A write-back, write-allocate, set-associative cache with true LRU
// replacement (SETS x WAYS; defaults 256 x 16 = 256 KB of 64-byte blocks,
// the evaluated L2; the L1 is 64 x 8 = 32 KB). Each line holds tag, valid,
// dirty, the reuse bit and an LRU age (0 = most recent). Only tags and state
// are kept: the data array is not part of this model.
//
// Operations (req_op, one per cycle, answered combinationally in the same
// cycle, state updated at the clock edge):
//   PC_LOOKUP  demand access of the own core. rsp_hit tells hit/miss. On a hit
//              the line becomes most recent and, for a write, dirty. The reuse
//              bit is left alone.
//   PC_PROBE   coherence query on behalf of another core's miss. rsp_hit
//              tells whether the block is here; if it is, its reuse bit is
//              set, because the other core's copy counts as a reuse. LRU state
//              is not changed (own choice).
//   PC_FILL    allocate a block that missed: first invalid way, else the LRU
//              way. The new line takes dirty = req_write and reuse = req_reuse.
//              victim_valid/victim describe the block replaced, if any; it is
//              what goes to the Reuse Detector.
//   PC_INVAL   back-invalidation, used on the L1 when the L2 evicts a block
//              (L1 and L2 are inclusive). If the block is here it is dropped;
//              rsp_hit, victim_valid and victim report it with its dirty bit,
//              which the L2's evicted copy must take over. LRU untouched.
//   PC_WBACK   write-back of a dirty line replaced in the L1: marks the L2
//              line dirty. LRU is not changed, so that L2 replacement keeps
//              following the L1 misses (own choice).
// ready rises after the SETS-cycle clearing sweep that follows reset
// (synchronous, active low).
module private_cache
  import rd_pkg::*;
#(
  parameter int unsigned SETS = 256,
  parameter int unsigned WAYS = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   ready,
  input  logic   req_valid,
  input  pc_op_e req_op,
  input  baddr_t req_addr,
  input  logic   req_write,
  input  logic   req_reuse,
  output logic   rsp_hit,
  output logic   victim_valid,
  output evict_t victim
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = BADDR_W - IDX_W;
  localparam int unsigned AGE_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             v;
    logic             d;
    logic             r;
    logic [AGE_W-1:0] age;
  } line_t;

  typedef line_t [WAYS-1:0] row_t;

  row_t mem [SETS];

  // ---- clearing sweep
  logic             init_busy;
  logic [IDX_W-1:0] init_idx;
  row_t             init_row;

  always_comb
    for (int w = 0; w < WAYS; w++) begin
      init_row[w]     = '0;
      init_row[w].age = AGE_W'(w);
    end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_idx  <= '0;
    end else if (init_busy) begin
      init_idx <= init_idx + 1'b1;
      if (init_idx == IDX_W'(SETS - 1)) init_busy <= 1'b0;
    end
  end

  assign ready = !init_busy;

  // ---- access
  logic [IDX_W-1:0] set_idx;
  logic [TAG_W-1:0] tag;
  row_t             row, new_row;
  logic [AGE_W-1:0] hit_way, fill_way, acc_way;
  logic             hit, have_inv;

  assign set_idx = req_addr[IDX_W-1:0];
  assign tag     = req_addr[BADDR_W-1:IDX_W];

  always_comb begin
    row      = mem[set_idx];
    hit      = 1'b0;
    hit_way  = '0;
    have_inv = 1'b0;
    fill_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (row[w].v && row[w].tag == tag) begin
        hit     = 1'b1;
        hit_way = AGE_W'(w);
      end
    end
    // victim: lowest invalid way, else the least recently used one
    for (int w = WAYS - 1; w >= 0; w--)
      if (!row[w].v) begin
        have_inv = 1'b1;
        fill_way = AGE_W'(w);
      end
    if (!have_inv)
      for (int w = 0; w < WAYS; w++)
        if (row[w].age == AGE_W'(WAYS - 1)) fill_way = AGE_W'(w);

    rsp_hit      = hit;
    acc_way = (req_op == PC_FILL) ? fill_way : hit_way;
    victim_valid = (req_op == PC_FILL)  ? row[fill_way].v :
                   (req_op == PC_INVAL) ? hit : 1'b0;
    victim.addr  = {row[acc_way].tag, set_idx};
    victim.dirty = row[acc_way].d;
    victim.reuse = row[acc_way].r;

    new_row = row;
    unique case (req_op)
      PC_LOOKUP: if (hit && req_write) new_row[hit_way].d = 1'b1;
      PC_PROBE:  if (hit)              new_row[hit_way].r = 1'b1;
      PC_FILL: begin
        new_row[fill_way].tag = tag;
        new_row[fill_way].v   = 1'b1;
        new_row[fill_way].d   = req_write;
        new_row[fill_way].r   = req_reuse;
      end
      PC_WBACK: if (hit) new_row[hit_way].d = 1'b1;
      PC_INVAL: if (hit) begin
        new_row[hit_way].v = 1'b0;
        new_row[hit_way].d = 1'b0;
      end
      default: ;
    endcase
    // LRU: the accessed line becomes age 0, younger lines age by one
    if ((req_op == PC_LOOKUP && hit) || req_op == PC_FILL) begin
      for (int w = 0; w < WAYS; w++)
        if (row[w].age < row[acc_way].age) new_row[w].age = row[w].age + 1'b1;
      new_row[acc_way].age = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy)
      mem[init_idx] <= init_row;
    else if (req_valid)
      mem[set_idx] <= new_row;
  end

  assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> ready)
    else $error("private_cache: request before ready");
  assert property (@(posedge clk) disable iff (!rst_n) req_valid && req_op == PC_FILL |-> !hit)
    else $error("private_cache: fill of a block already present");

endmodule
