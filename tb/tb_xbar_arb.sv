// tb_xbar_arb: checks the crossbar port with its default 3-cycle latency and
// a combinational (LAT = 0) instance. Each of 4 sources sends numbered
// payloads with random gaps; the destination takes them with random
// back-pressure. Checked: every payload arrives once, in order per source,
// tagged with the right source; a payload accepted in cycle t is offered in
// cycle t + 3 when the destination does not stall; with all sources
// requesting, grants rotate 0,1,2,3.
module tb_xbar_arb;
  localparam int N = 4, W = 8, NPKT = 300;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- two instances driven by identical traffic generators
  logic [1:0][N-1:0]        iv, ir;
  logic [1:0][N-1:0][W-1:0] id;
  logic [1:0]               ov, ordy;
  logic [1:0][W-1:0]        od;
  logic [1:0][1:0]          os;

  xbar_arb #(.N(N), .W(W))         dut3 (.clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
                                         .out_valid(ov[0]), .out_ready(ordy[0]), .out_data(od[0]), .out_src(os[0]));
  xbar_arb #(.N(N), .W(W), .LAT(0)) dut0 (.clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
                                         .out_valid(ov[1]), .out_ready(ordy[1]), .out_data(od[1]), .out_src(os[1]));

  int sent [2][N], rcvd [2][N];
  int acc_cycle [2][N][$];
  int cyc = 0;
  bit stall_free = 0, check_lat = 0;
  always @(posedge clk) cyc++;

  for (genvar k = 0; k < 2; k++) begin : g_k
    // sources hold valid until accepted, then maybe pause; destination checks
    always @(posedge clk) begin
      int s, t0;
      if (!rst_n) iv[k] <= '0;
      else begin
        for (int i = 0; i < N; i++) begin
          if (iv[k][i] && ir[k][i]) begin
            acc_cycle[k][i].push_back(cyc);
            sent[k][i]++;
            iv[k][i] <= (sent[k][i] < NPKT) && (stall_free || ($urandom_range(0, 2) != 0));
          end else if (!iv[k][i])
            iv[k][i] <= (sent[k][i] < NPKT) && (stall_free || $urandom_range(0, 1) == 1);
        end
        if (ov[k] && ordy[k]) begin
          s  = int'(os[k]);
          t0 = acc_cycle[k][s].pop_front();
          checks++;
          if (od[k] != W'(rcvd[k][s] * N + s)) fail($sformatf("inst %0d src %0d data %0d expected %0d", k, s, od[k], rcvd[k][s] * N + s));
          if (check_lat) begin
            checks++;
            if (cyc - t0 != (k == 0 ? 3 : 0)) fail($sformatf("inst %0d latency %0d", k, cyc - t0));
          end
          rcvd[k][s]++;
        end
      end
    end
    always_comb for (int i = 0; i < N; i++) id[k][i] = W'(sent[k][i] * N + i);
    always @(posedge clk) ordy[k] <= stall_free || ($urandom_range(0, 3) != 0);
  end

  initial begin
    int order[$];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // phase 1: random traffic and back-pressure
    repeat (600) @(posedge clk);
    // phase 2: stall-free, everyone requests: latency and rotation
    stall_free = 1;
    repeat (20) @(posedge clk);
    check_lat = 1;
    repeat (8) begin
      @(posedge clk); #1;
      for (int s = 0; s < N; s++) if (iv[0][s] && ir[0][s]) order.push_back(s);
    end
    checks++;
    if (order.size() < 8) fail($sformatf("only %0d grants in 8 busy cycles", order.size()));
    else for (int i = 1; i < 8; i++)
      if (order[i] != (order[i-1] + 1) % N) begin fail("grants not round-robin"); break; end
    repeat (2000) @(posedge clk);
    for (int k = 0; k < 2; k++)
      for (int s = 0; s < N; s++) begin
        checks++;
        if (rcvd[k][s] != NPKT || sent[k][s] != NPKT) fail($sformatf("inst %0d src %0d sent %0d received %0d", k, s, sent[k][s], rcvd[k][s]));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
