// hier_ctrl: block request flow of the two private cache levels (L1, L2)
// of every core and the SLLC, including the reuse bit management of the
// Reuse Detector scheme.
//
// A request of a core (read or write of one block) is served as follows:
//   1. look it up in the core's L1; on a hit the request is done (a write
//      marks the L1 line dirty; the L1 is write-back);
//   2. otherwise look it up in the core's L2; on a hit the reuse bit is not
//      touched and the block is copied into the L1;
//   3. otherwise ask the SLLC; on a hit the block is copied into L2 and L1
//      with its reuse bit set (it stays in the SLLC);
//   4. otherwise query the other cores' L2s (the coherence step); if one
//      holds the block it supplies it, both copies get the reuse bit set
//      (the holder's is set by the probe itself);
//   5. otherwise read it from main memory and fill L2 and L1 with the reuse
//      bit clear.
// A fill of the L2 may replace a block. Because L1 and L2 are inclusive,
// that block is first invalidated in the L1, and if the L1 copy was dirty
// the evicted block leaves as dirty; then it is handed to the core's Reuse
// Detector. A fill of the L1 may replace a line; a dirty one is written back
// into the L2 (which holds it, by inclusion); that marks the L2 line dirty
// without changing its LRU position.
// The order of the steps, the reuse bit values and the L1 invalidation
// follow the scheme; the serial, one-request-at-a-time sequencing is this
// design's simplification. Coherence states (MOESI) are not kept: step 4 is
// a broadcast probe of the other L2s, and other copies are not invalidated
// on a write. Only the L2's reuse bit is ever read, so L1 lines are filled
// with reuse clear.
// PRIV_LEVELS = 1 gives the two-level hierarchy the scheme was also
// evaluated on: the L1 steps are skipped, the L2 tag stores are the only
// private level, a core write dirties them directly (pc_req_write) and their
// victims go straight to the Reuse Detector.
//
// Interface: req_* (valid/ready) takes a request with its core number;
// done_valid pulses when it is served, with done_src telling where the block
// came from. l1_* and pc_* drive the NCORES L1 and L2 tag stores (one shared
// op/address bus per level, one valid per cache, answers in the same cycle).
// sllc_rd_* sends a demand lookup towards the SLLC; sllc_rsp_* is the
// SLLC's answer. mm_rd_* asks main memory for a block; mm_rd_done says it
// has arrived. ev_* hands a replaced L2 block to the Reuse Detector of the
// requesting core. NCORES may be 1 (the core number is then a single,
// always-zero bit and the probe finds no other cache).
// Timing: the L1 and L2 access latencies of the evaluated system (L1_LAT =
// 2, L2_LAT = 5 cycles) are modelled by waiting before the tag store is
// asked. An L1 hit is done L1_LAT cycles after acceptance, an L2 hit
// L1_LAT + L2_LAT cycles (one more when the L1 writes back a dirty line);
// misses add L1_LAT + L2_LAT and then the SLLC, memory and Reuse Detector
// handshake times. Reset synchronous, active low.
module hier_ctrl
  import rd_pkg::*;
#(
  parameter int unsigned NCORES = 4,
  parameter int unsigned PRIV_LEVELS = 2,  // 2: L1 + L2; 1: the L2 tag stores are the only private level
  parameter int unsigned L1_LAT = 2,
  parameter int unsigned L2_LAT = 5
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // core requests
  input  logic                         req_valid,
  output logic                         req_ready,
  input  logic [$clog2(NCORES > 1 ? NCORES : 2)-1:0] req_core,
  input  baddr_t                       req_addr,
  input  logic                         req_write,
  output logic                         done_valid,
  output logic [$clog2(NCORES > 1 ? NCORES : 2)-1:0] done_core,
  output logic [1:0]                   done_src,   // 0 private, 1 SLLC, 2 other core, 3 memory
  // L1 caches
  input  logic [NCORES-1:0]            l1_ready,
  output logic [NCORES-1:0]            l1_req_valid,
  output pc_op_e                       l1_req_op,
  output baddr_t                       l1_req_addr,
  output logic                         l1_req_write,
  input  logic [NCORES-1:0]            l1_rsp_hit,
  input  logic [NCORES-1:0]            l1_victim_valid,
  input  evict_t [NCORES-1:0]          l1_victim,
  // L2 caches
  input  logic [NCORES-1:0]            pc_ready,
  output logic [NCORES-1:0]            pc_req_valid,
  output pc_op_e                       pc_req_op,
  output baddr_t                       pc_req_addr,
  output logic                         pc_req_reuse,
  output logic                        pc_req_write,
  input  logic [NCORES-1:0]            pc_rsp_hit,
  input  logic [NCORES-1:0]            pc_victim_valid,
  input  evict_t [NCORES-1:0]          pc_victim,
  // SLLC demand lookup
  output logic                         sllc_rd_valid,
  input  logic                         sllc_rd_ready,
  output baddr_t                       sllc_rd_addr,
  input  logic                         sllc_rsp_valid,
  input  logic                         sllc_rsp_hit,
  // main memory read
  output logic                         mm_rd_valid,
  input  logic                         mm_rd_ready,
  output baddr_t                       mm_rd_addr,
  input  logic                         mm_rd_done,
  // evictions to the Reuse Detectors
  output logic [NCORES-1:0]            ev_valid,
  input  logic [NCORES-1:0]            ev_ready,
  output evict_t                       ev
);
  localparam int unsigned CORE_W = $clog2(NCORES > 1 ? NCORES : 2);
  localparam bit          ONE    = (PRIV_LEVELS == 1);

  typedef enum logic [3:0] {
    S_IDLE, S_L1, S_LOOKUP, S_SLLC_REQ, S_SLLC_WAIT, S_PROBE,
    S_MM_REQ, S_MM_WAIT, S_FILL, S_INVAL, S_EVICT, S_L1_FILL, S_L1_WB, S_DONE
  } state_e;

  state_e             state;
  logic [CORE_W-1:0]  core;
  baddr_t             addr;
  logic               wr, reuse;
  logic [1:0]         src;
  logic [NCORES-1:0]  others;
  baddr_t             wb_addr;
  evict_t             victim_q;
  logic [7:0]         cnt;          // cycles spent in S_L1 / S_LOOKUP
  logic               l1_go, l2_go; // last cycle of the access latency

  assign l1_go = (state == S_L1)     && (cnt == 8'(L1_LAT - 2));
  assign l2_go = (state == S_LOOKUP) && (cnt == 8'(L2_LAT - 2));

  assign req_ready = (state == S_IDLE) && (&pc_ready) && (&l1_ready);

  always_comb begin
    others       = '1;
    others[core] = 1'b0;
  end

  always_comb begin
    pc_req_valid = '0;
    pc_req_op    = PC_LOOKUP;
    unique case (state)
      S_LOOKUP: pc_req_valid[core] = l2_go;
      S_PROBE: begin
        pc_req_valid = others;
        pc_req_op    = PC_PROBE;
      end
      S_FILL: begin
        pc_req_valid[core] = 1'b1;
        pc_req_op          = PC_FILL;
      end
      S_L1_WB: begin
        pc_req_valid[core] = 1'b1;
        pc_req_op          = PC_WBACK;
      end
      default: ;
    endcase
  end

  always_comb begin
    l1_req_valid = '0;
    l1_req_op    = PC_LOOKUP;
    unique case (state)
      S_L1: l1_req_valid[core] = l1_go;
      S_INVAL: begin
        l1_req_valid[core] = 1'b1;
        l1_req_op          = PC_INVAL;
      end
      S_L1_FILL: begin
        l1_req_valid[core] = 1'b1;
        l1_req_op          = PC_FILL;
      end
      default: ;
    endcase
  end

  // the core's write goes to the L1; the L2 line becomes dirty only through
  // an L1 write-back (PC_WBACK) or when its dirty L1 copy is invalidated.
  // With a single private level the write goes to that level directly.
  assign pc_req_write  = ONE ? wr : 1'b0;
  assign pc_req_addr   = (state == S_L1_WB) ? wb_addr : addr;
  assign pc_req_reuse  = reuse;
  assign l1_req_addr   = (state == S_INVAL) ? victim_q.addr : addr;
  assign l1_req_write  = wr;
  assign sllc_rd_valid = (state == S_SLLC_REQ);
  assign sllc_rd_addr  = addr;
  assign mm_rd_valid   = (state == S_MM_REQ);
  assign mm_rd_addr    = addr;

  assign ev = victim_q;
  always_comb begin
    ev_valid = '0;
    ev_valid[core] = (state == S_EVICT);
  end

  assign done_valid = (state == S_DONE);
  assign done_core  = core;
  assign done_src   = src;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      core     <= '0;
      addr     <= '0;
      wr       <= 1'b0;
      reuse    <= 1'b0;
      src      <= 2'd0;
      victim_q <= '0;
      wb_addr  <= '0;
      cnt      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid && req_ready) begin
          core  <= req_core;
          addr  <= req_addr;
          wr    <= req_write;
          src   <= 2'd0;
          cnt   <= '0;
          state <= ONE ? S_LOOKUP : S_L1;
        end
        S_L1:
          if (!l1_go) cnt <= cnt + 1'b1;
          else begin
            cnt   <= '0;
            state <= l1_rsp_hit[core] ? S_DONE : S_LOOKUP;
          end
        S_LOOKUP:
          if (!l2_go) begin
            cnt <= cnt + 1'b1;
          end else if (pc_rsp_hit[core]) begin
            state <= ONE ? S_DONE : S_L1_FILL;
          end else begin
            state <= S_SLLC_REQ;
          end
        S_SLLC_REQ:  if (sllc_rd_ready) state <= S_SLLC_WAIT;
        S_SLLC_WAIT: if (sllc_rsp_valid) begin
          if (sllc_rsp_hit) begin
            reuse <= 1'b1;
            src   <= 2'd1;
            state <= S_FILL;
          end else begin
            state <= S_PROBE;
          end
        end
        S_PROBE:
          if (|(pc_rsp_hit & others)) begin
            reuse <= 1'b1;
            src   <= 2'd2;
            state <= S_FILL;
          end else begin
            state <= S_MM_REQ;
          end
        S_MM_REQ:  if (mm_rd_ready) state <= S_MM_WAIT;
        S_MM_WAIT: if (mm_rd_done) begin
          reuse <= 1'b0;
          src   <= 2'd3;
          state <= S_FILL;
        end
        S_FILL: begin
          victim_q <= pc_victim[core];
          if (pc_victim_valid[core]) state <= ONE ? S_EVICT : S_INVAL;
          else                       state <= ONE ? S_DONE  : S_L1_FILL;
        end
        S_INVAL: begin
          if (l1_victim_valid[core] && l1_victim[core].dirty) victim_q.dirty <= 1'b1;
          state <= S_EVICT;
        end
        S_EVICT: if (ev_ready[core]) state <= ONE ? S_DONE : S_L1_FILL;
        S_L1_FILL: begin
          wb_addr <= l1_victim[core].addr;
          state   <= (l1_victim_valid[core] && l1_victim[core].dirty) ? S_L1_WB : S_DONE;
        end
        S_L1_WB: state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) state == S_L1_WB |-> pc_rsp_hit[core])
    else $error("hier_ctrl: L1 line written back is not in the L2 (inclusion broken)");

  initial assert (PRIV_LEVELS == 1 || PRIV_LEVELS == 2)
    else $error("hier_ctrl: PRIV_LEVELS must be 1 or 2");

  initial assert (L1_LAT >= 2 && L1_LAT <= 257 && L2_LAT >= 2 && L2_LAT <= 257)
    else $error("hier_ctrl: L1_LAT and L2_LAT must be 2..257");


endmodule
