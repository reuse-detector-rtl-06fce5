// sllc: controller and tag store of the shared STT-RAM last-level cache.
//
// Set-associative, write-back, true LRU, 1 MB of 64-byte blocks per core
// (SETS = NCORES * 1024 sets of WAYS = 16 ways). It is non-inclusive: it is
// never filled from main memory, only by blocks evicted from the private L2
// caches that a Reuse Detector passed on. Only tags and state are kept; the
// STT-RAM data array is represented by its access times, RD_LAT = 6 and
// WR_LAT = 17 cycles, during which the controller is busy.
//
// Requests (req_*, valid/ready, one at a time):
//   SLLC_READ   demand lookup after a private-cache miss. A hit makes the
//               line most recent; the block stays in the SLLC (it is copied to
//               the private caches, not moved). Takes RD_LAT cycles.
//   SLLC_WBACK  block from a Reuse Detector:
//                 present and dirty -> update in place (STT-RAM write, WR_LAT)
//                 present and clean -> dropped, nothing written (RD_LAT for
//                                      the tag check, own choice)
//                 absent            -> inserted, dirty = req.dirty (WR_LAT);
//                                      the victim (first invalid way, else
//                                      LRU) is written back to memory if dirty.
// The tag array is updated in the cycle the request is accepted. rsp_valid
// pulses exactly LAT cycles after acceptance with rsp_op/rsp_hit. A dirty
// victim is then offered on mm_* until accepted, and only after that is the
// next request taken. stt_write / stt_read pulse once per data-array write /
// read, for energy accounting. Reset is synchronous, active low; ready rises
// after a SETS-cycle clearing sweep.
module sllc
  import rd_pkg::*;
#(
  parameter int unsigned NCORES = 4,
  parameter int unsigned SETS   = NCORES * 1024,
  parameter int unsigned WAYS   = 16,
  parameter int unsigned RD_LAT = 6,
  parameter int unsigned WR_LAT = 17
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      ready,
  input  logic      req_valid,
  output logic      req_ready,
  input  sllc_req_t req,
  output logic      rsp_valid,
  output sllc_op_e  rsp_op,
  output logic      rsp_hit,
  output logic      mm_valid,
  input  logic      mm_ready,
  output baddr_t    mm_addr,
  output logic      stt_write,
  output logic      stt_read
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = BADDR_W - IDX_W;
  localparam int unsigned AGE_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned CNT_W = $clog2(((RD_LAT > WR_LAT) ? RD_LAT : WR_LAT) + 1);

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             v;
    logic             d;
    logic [AGE_W-1:0] age;
  } line_t;

  typedef line_t [WAYS-1:0] row_t;

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_WB} state_e;

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

  // ---- tag access (combinational on the incoming request)
  state_e           state;
  logic [CNT_W-1:0] cnt;
  logic             accept;
  logic [IDX_W-1:0] set_idx;
  logic [TAG_W-1:0] tag;
  row_t             row, new_row;
  logic             hit, have_inv, is_write, do_read, victim_dirty;
  logic [AGE_W-1:0] hit_way, fill_way, acc_way;
  baddr_t           victim_addr;

  assign req_ready = ready && (state == S_IDLE);
  assign accept    = req_valid && req_ready;
  assign set_idx   = req.addr[IDX_W-1:0];
  assign tag       = req.addr[BADDR_W-1:IDX_W];

  always_comb begin
    row      = mem[set_idx];
    hit      = 1'b0;
    hit_way  = '0;
    have_inv = 1'b0;
    fill_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (row[w].v && row[w].tag == tag) begin
        hit     = 1'b1;
        hit_way = AGE_W'(w);
      end
    for (int w = WAYS - 1; w >= 0; w--)
      if (!row[w].v) begin
        have_inv = 1'b1;
        fill_way = AGE_W'(w);
      end
    if (!have_inv)
      for (int w = 0; w < WAYS; w++)
        if (row[w].age == AGE_W'(WAYS - 1)) fill_way = AGE_W'(w);

    victim_addr  = {row[fill_way].tag, set_idx};
    victim_dirty = 1'b0;
    is_write     = 1'b0;
    do_read      = 1'b0;
    new_row      = row;
    acc_way      = hit_way;
    if (req.op == SLLC_READ) begin
      do_read = hit;
    end else if (hit) begin
      if (req.dirty) begin            // update in place
        is_write           = 1'b1;
        new_row[hit_way].d = 1'b1;
      end
    end else begin                    // insertion
      is_write      = 1'b1;
      acc_way       = fill_way;
      victim_dirty  = row[fill_way].v && row[fill_way].d;
      new_row[fill_way].tag = tag;
      new_row[fill_way].v   = 1'b1;
      new_row[fill_way].d   = req.dirty;
    end
    // LRU update on read hits, updates and insertions
    if ((req.op == SLLC_READ && hit) || is_write) begin
      for (int w = 0; w < WAYS; w++)
        if (row[w].age < row[acc_way].age) new_row[w].age = row[w].age + 1'b1;
      new_row[acc_way].age = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy)
      mem[init_idx] <= init_row;
    else if (accept)
      mem[set_idx] <= new_row;
  end

  // ---- timing
  logic wb_pend;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      rsp_op  <= SLLC_READ;
      rsp_hit <= 1'b0;
      wb_pend <= 1'b0;
      mm_addr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (accept) begin
          state   <= S_BUSY;
          cnt     <= CNT_W'((is_write ? WR_LAT : RD_LAT) - 1);
          rsp_op  <= req.op;
          rsp_hit <= hit;
          wb_pend <= victim_dirty;
          mm_addr <= victim_addr;
        end
        S_BUSY: if (cnt == '0) state <= wb_pend ? S_WB : S_IDLE;
                else           cnt   <= cnt - 1'b1;
        S_WB:   if (mm_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rsp_valid = (state == S_BUSY) && (cnt == '0);
  assign mm_valid  = (state == S_WB);
  assign stt_write = accept && is_write;
  assign stt_read  = accept && do_read;

  initial assert (RD_LAT >= 1 && WR_LAT >= 1) else $error("sllc: latencies must be >= 1");

  assert property (@(posedge clk) disable iff (!rst_n)
                   mm_valid && !mm_ready |=> mm_valid && $stable(mm_addr))
    else $error("sllc: victim write-back dropped before acceptance");

endmodule
