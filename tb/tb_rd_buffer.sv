// tb_rd_buffer: checks the Reuse Detector buffer at its default size
// (1024 sets, 16 ways, 2-block sectors, 10-bit compressed tags).
// Directed parts: clearing time, first-reference miss then hit, sector
// sharing (second block of a sector uses the same entry), FIFO order that
// ignores hits, and a false positive through tag aliasing. Random part:
// back-to-back requests compared with a reference model kept in the
// testbench (per set a FIFO pointer and WAYS entries). Latency: each answer
// must come exactly one cycle after its request.
module tb_rd_buffer;
  import rd_pkg::*;
  localparam int unsigned SETS = 1024, WAYS = 16, SB = 2, CW = 10;
  localparam int unsigned TW = BADDR_W - 1 - 10;   // 31

  logic   clk = 0, rst_n = 0, ready, req_valid = 0, rsp_valid, rsp_hit;
  baddr_t req_addr = '0;
  int checks = 0, failures = 0;

  rd_buffer #(.SETS(SETS), .WAYS(WAYS), .SECTOR_BLKS(SB), .CTAG_W(CW)) dut (.*);

  always #5 clk = ~clk;

  // ---- reference model
  int unsigned    m_ptr [SETS];
  logic [CW-1:0]  m_tag [SETS][WAYS];
  logic [SB-1:0]  m_s   [SETS][WAYS];
  bit             m_v   [SETS][WAYS];

  function automatic logic [CW-1:0] fold(input logic [TW-1:0] t);
    logic [CW-1:0] r = '0;
    for (int i = 0; i < TW; i++) r[i % CW] ^= t[i];
    return r;
  endfunction

  function automatic bit model(input baddr_t a);
    int unsigned st = a[10:1];
    int unsigned b  = a[0];
    logic [CW-1:0] ct = fold(a[BADDR_W-1:11]);
    for (int w = 0; w < WAYS; w++)
      if (m_v[st][w] && m_tag[st][w] == ct) begin
        if (m_s[st][w][b]) return 1;
        m_s[st][w][b] = 1'b1;
        return 0;
      end
    m_tag[st][m_ptr[st]] = ct;
    m_s[st][m_ptr[st]]   = '0;
    m_s[st][m_ptr[st]][b] = 1'b1;
    m_v[st][m_ptr[st]]   = 1;
    m_ptr[st] = (m_ptr[st] + 1) % WAYS;
    return 0;
  endfunction

  function automatic baddr_t mk(input logic [TW-1:0] t, input int unsigned st, input bit b);
    return {t, 10'(st), b};
  endfunction

  // one request, answer checked against the model and against 'expect_hit'
  task automatic access(input baddr_t a, input int expect_hit = -1);
    bit e;
    e = model(a);
    @(negedge clk);
    req_valid = 1; req_addr = a;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!rsp_valid || rsp_hit !== e || (expect_hit >= 0 && e != bit'(expect_hit))) begin
      failures++;
      $display("FAIL addr=%h rsp_valid=%0b hit=%0b model=%0b expected=%0d", a, rsp_valid, rsp_hit, e, expect_hit);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    foreach (m_ptr[i]) m_ptr[i] = 0;
    foreach (m_v[i, j]) m_v[i][j] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); cyc++; #1; end
    checks++;
    if (cyc != SETS) begin failures++; $display("FAIL clear took %0d cycles", cyc); end

    // first reference misses, second hits
    access(mk(31'h1234567, 5, 0), 0);
    access(mk(31'h1234567, 5, 0), 1);
    // other block of the sector: miss, then hit; no new entry used
    access(mk(31'h1234567, 5, 1), 0);
    access(mk(31'h1234567, 5, 1), 1);
    // FIFO: 15 more sectors fill set 5, the 17th sector evicts the first
    for (int i = 1; i < 16; i++) access(mk(31'(i * 3), 5, 0), 0);
    access(mk(31'h1234567, 5, 0), 1);          // still there, set is full
    access(mk(31'h0AAAAAA, 5, 0), 0);          // evicts the oldest entry
    access(mk(31'h1234567, 5, 0), 0);          // gone (and re-recorded)
    // hits do not refresh: sector 3*2 is now oldest; hit it, then insert
    access(mk(31'(6), 5, 0), 1);
    access(mk(31'h0BBBBBB, 5, 0), 0);
    access(mk(31'(6), 5, 0), 0);               // evicted despite the hit
    // aliasing: two tags with the same compressed value share an entry
    access(mk(31'h0000001, 9, 0), 0);
    access(mk(31'h0000400, 9, 0), 1);          // 0x400 folds to 0x001 too
    // random traffic, back to back, against the model
    for (int n = 0; n < 4000; n++) begin
      baddr_t a;
      bit e;
      a = mk(31'($urandom_range(0, 40) * 7919), $urandom_range(0, 3), 1'($urandom()));
      e = model(a);
      @(negedge clk);
      req_valid = 1; req_addr = a;
      @(posedge clk); #1;
      checks++;
      if (!rsp_valid || rsp_hit !== e) begin
        failures++;
        $display("FAIL random addr=%h hit=%0b model=%0b", a, rsp_hit, e);
      end
    end
    @(negedge clk) req_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
