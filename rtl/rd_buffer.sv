// rd_buffer: the tag store of a Reuse Detector.
//
// Remembers which blocks have recently left the private caches of one core
// without having shown reuse. It is a set-associative array of SETS x WAYS
// entries. Each entry covers a sector of SECTOR_BLKS consecutive, aligned
// blocks and holds (entry layout, bit 13 down to bit 0 at the defaults):
//   [13:4] compressed sector tag   [3] S1   [2] S0   [1] RPL   [0] V
// S0/S1 are the per-block presence bits of the sector, V the valid bit and
// RPL the single replacement bit of the 1-bit FIFO. The field order and the
// 10/2/1/1 split follow the published entry format; 1024 sets, 16 ways and
// 2-block sectors are the evaluated configuration (8K entries, 14 KB).
//
// Block address split (low to high): sector offset, set index, full tag.
// The full tag is XOR-folded to CTAG_W bits by rd_tag_compress.
//
// One operation, "check and store", matching the eviction flow: if the
// block's presence bit is found set in a valid entry with the same
// compressed tag, the answer is hit and nothing changes. Otherwise the block
// is recorded: if an entry for its sector already exists, its presence bit is
// set; if not, a new entry is written into the FIFO victim way.
//
// 1-bit FIFO (this design's reading of "1-bit FIFO"): in each set exactly one
// entry, the oldest, carries RPL = 1; it is the next victim. Allocating into
// it clears its RPL and sets RPL of the following way (modulo WAYS), so the
// RPL bits form a one-hot pointer that advances only on insertion, never on
// hits. A set with no RPL bit (right after initialisation) uses way 0.
//
// Reset is synchronous and active low. Timing: after reset the array is cleared one set per cycle (SETS cycles);
// ready rises when that is done. Then one request per cycle is accepted
// (req_valid while ready); rsp_valid/rsp_hit follow one cycle later. The
// array is read combinationally and written at the clock edge, so
// back-to-back requests to one set see each other's updates.
module rd_buffer
  import rd_pkg::*;
#(
  parameter int unsigned SETS        = 1024,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned SECTOR_BLKS = 2,
  parameter int unsigned CTAG_W      = 10
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   ready,
  input  logic   req_valid,
  input  baddr_t req_addr,
  output logic   rsp_valid,
  output logic   rsp_hit
);
  localparam int unsigned SEC_W = $clog2(SECTOR_BLKS);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = BADDR_W - SEC_W - IDX_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic [CTAG_W-1:0]      ctag;
    logic [SECTOR_BLKS-1:0] s;
    logic                   rpl;
    logic                   v;
  } entry_t;

  typedef entry_t [WAYS-1:0] row_t;

  row_t mem [SETS];

  // ---- address split and compression
  logic [IDX_W-1:0]  set_idx;
  logic [TAG_W-1:0]  full_tag;
  logic [CTAG_W-1:0] ctag;
  logic [SEC_W-1:0]  blk;

  always_comb begin
    set_idx  = req_addr[SEC_W +: IDX_W];
    full_tag = req_addr[BADDR_W-1 -: TAG_W];
    blk      = '0;
    if (SECTOR_BLKS > 1) blk = req_addr[SEC_W-1:0];
  end

  rd_tag_compress #(.T_W(TAG_W), .C_W(CTAG_W)) u_cmp (.tag(full_tag), .ctag(ctag));

  // ---- initialisation sweep
  logic             init_busy;
  logic [IDX_W-1:0] init_idx;

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

  // ---- lookup and update
  row_t             row, new_row;
  logic             hit, smatch;
  logic [WAY_W-1:0] smatch_way, victim, next_way;

  always_comb begin
    row        = mem[set_idx];
    hit        = 1'b0;
    smatch     = 1'b0;
    smatch_way = '0;
    victim     = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (row[w].v && row[w].ctag == ctag) begin
        smatch     = 1'b1;
        smatch_way = WAY_W'(w);
        if (row[w].s[blk]) hit = 1'b1;
      end
      if (row[w].rpl) victim = WAY_W'(w);
    end
    next_way = (victim == WAY_W'(WAYS - 1)) ? '0 : victim + 1'b1;

    new_row = row;
    if (!hit) begin
      if (smatch) begin
        new_row[smatch_way].s[blk] = 1'b1;
      end else begin
        new_row[victim].ctag = ctag;
        new_row[victim].s    = '0;
        new_row[victim].s[blk] = 1'b1;
        new_row[victim].v    = 1'b1;
        new_row[victim].rpl  = 1'b0;
        new_row[next_way].rpl = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy)
      mem[init_idx] <= '0;
    else if (req_valid)
      mem[set_idx] <= new_row;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_hit   <= 1'b0;
    end else begin
      rsp_valid <= req_valid && ready;
      rsp_hit   <= hit;
    end
  end

  // A request must not arrive while the array is being cleared.
  assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> ready)
    else $error("rd_buffer: request before ready");

endmodule
