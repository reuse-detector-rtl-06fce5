// tb_rd_tag_compress: checks the XOR folding of full tags into compressed
// tags at the default sizes (31 -> 10 bits). The reference folds bit by bit:
// compressed bit j is the XOR of all tag bits i with i mod 10 == j. A few
// hand-worked values are checked too.
module tb_rd_tag_compress;
  localparam int unsigned T_W = 31;
  localparam int unsigned C_W = 10;

  logic [T_W-1:0] tag;
  logic [C_W-1:0] ctag, expct;
  int checks = 0, failures = 0;

  rd_tag_compress #(.T_W(T_W), .C_W(C_W)) dut (.tag, .ctag);

  function automatic logic [C_W-1:0] ref_fold(input logic [T_W-1:0] t);
    logic [C_W-1:0] r = '0;
    for (int i = 0; i < T_W; i++) r[i % C_W] ^= t[i];
    return r;
  endfunction

  task automatic check(input logic [T_W-1:0] t, input logic [C_W-1:0] e);
    tag = t;
    #1;
    checks++;
    if (ctag !== e) begin
      failures++;
      $display("FAIL tag=%h ctag=%h expected=%h", t, ctag, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-worked: pieces 0x3FF, 0x000, 0x3FF, pad -> 0
    check(31'h3FF003FF, 10'h000);
    // bit 30 lands in piece 3 bit 0
    check(31'h40000000, 10'h001);
    check(31'h00000001, 10'h001);
    // 0x155 ^ 0x2AA = 0x3FF
    check({1'b0, 10'h000, 10'h2AA, 10'h155}, 10'h3FF);
    for (int n = 0; n < 2000; n++) begin
      logic [T_W-1:0] t;
      t = T_W'({$urandom(), $urandom()});
      check(t, ref_fold(t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
