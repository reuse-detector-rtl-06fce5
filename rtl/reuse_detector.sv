// reuse_detector: the per-core filter between the last private cache level
// (L2) and the shared STT-RAM last-level cache (SLLC).
//
// Every block evicted from the core's L2 passes through it. The decision
// follows the eviction flow of the Reuse Detector scheme:
//   * reuse bit set (block came from the SLLC or from another private cache)
//       -> reused: send to the SLLC, which inserts it, updates it (dirty) or
//          drops it (clean and already present). The buffer is not touched.
//   * reuse bit clear, block found in the buffer (it left the private levels
//     before and came back from memory)
//       -> reused: send to the SLLC.
//   * reuse bit clear, not found -> record it in the buffer, then bypass the
//     SLLC: write it to main memory if dirty, drop it if clean.
// The buffer (rd_buffer) does the "found? else record" step in one access.
//
// Interface: valid/ready handshakes. ev_* takes one evicted block; sllc_*
// and mm_* hold a request until accepted. dec_valid pulses for one cycle with
// the decision in dec (for statistics; the two "reused" outcomes are told
// apart). ready is low while the buffer is
// being cleared after reset.
//
// Timing: one block in flight. A block with its reuse bit set is offered to
// the SLLC the cycle after it is accepted; a block that needs the buffer is
// offered (or dropped) two cycles after acceptance. The unit accepts the next
// block the cycle after its output handshake completes.
// Reset is synchronous and active low.
module reuse_detector
  import rd_pkg::*;
#(
  parameter int unsigned SETS        = 1024,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned SECTOR_BLKS = 2,
  parameter int unsigned CTAG_W      = 10
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    ready,
  // block evicted from L2
  input  logic    ev_valid,
  output logic    ev_ready,
  input  evict_t  ev,
  // towards the SLLC (insert / update)
  output logic    sllc_valid,
  input  logic    sllc_ready,
  output baddr_t  sllc_addr,
  output logic    sllc_dirty,
  // towards main memory (bypass of a dirty block)
  output logic    mm_valid,
  input  logic    mm_ready,
  output baddr_t  mm_addr,
  // decision, for statistics
  output logic    dec_valid,
  output rd_dec_e dec
);
  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_SLLC, S_MM} state_e;

  state_e state;
  baddr_t cur_addr;     // block in flight (its reuse bit is used on arrival only)
  logic   cur_dirty;
  logic   buf_ready, buf_req, buf_rsp_valid, buf_rsp_hit;

  rd_buffer #(
    .SETS(SETS), .WAYS(WAYS), .SECTOR_BLKS(SECTOR_BLKS), .CTAG_W(CTAG_W)
  ) u_buf (
    .clk, .rst_n,
    .ready     (buf_ready),
    .req_valid (buf_req),
    .req_addr  (ev.addr),
    .rsp_valid (buf_rsp_valid),
    .rsp_hit   (buf_rsp_hit)
  );

  assign ready    = buf_ready;
  assign ev_ready = (state == S_IDLE) && buf_ready;
  assign buf_req  = ev_valid && ev_ready && !ev.reuse;

  assign sllc_valid = (state == S_SLLC);
  assign sllc_addr  = cur_addr;
  assign sllc_dirty = cur_dirty;
  assign mm_valid   = (state == S_MM);
  assign mm_addr    = cur_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_addr  <= '0;
      cur_dirty <= 1'b0;
      dec_valid <= 1'b0;
      dec       <= RD_DISCARD;
    end else begin
      dec_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (ev_valid && ev_ready) begin
          cur_addr  <= ev.addr;
          cur_dirty <= ev.dirty;
          if (ev.reuse) begin
            state     <= S_SLLC;
            dec_valid <= 1'b1;
            dec       <= RD_REUSED_BIT;
          end else begin
            state <= S_LOOKUP;
          end
        end
        S_LOOKUP: if (buf_rsp_valid) begin
          dec_valid <= 1'b1;
          if (buf_rsp_hit) begin
            state <= S_SLLC;
            dec   <= RD_REUSED_BUF;
          end else if (cur_dirty) begin
            state <= S_MM;
            dec   <= RD_TO_MM;
          end else begin
            state <= S_IDLE;
            dec   <= RD_DISCARD;
          end
        end
        S_SLLC: if (sllc_ready) state <= S_IDLE;
        S_MM:   if (mm_ready)   state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   sllc_valid && !sllc_ready |=> sllc_valid && $stable(sllc_addr))
    else $error("reuse_detector: SLLC request dropped before acceptance");
  assert property (@(posedge clk) disable iff (!rst_n)
                   mm_valid && !mm_ready |=> mm_valid && $stable(mm_addr))
    else $error("reuse_detector: memory request dropped before acceptance");

endmodule
