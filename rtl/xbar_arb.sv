// xbar_arb: one output port of the on-chip crossbar.
//
// N requesters compete for one destination (the SLLC, or the memory
// controller). A round-robin arbiter picks one valid requester per cycle;
// the winner's payload then travels through LAT pipeline stages, modelling
// the fixed crossbar latency (3 cycles in the evaluated system). The
// round-robin order and the pipeline are this design's choices; only the
// crossbar and its latency are given.
//
// Interface: in_valid/in_ready/in_data per requester, out_valid/out_ready/
// out_data/out_src at the destination (out_src = index of the requester).
// Timing: a payload accepted in cycle t is offered at the output in cycle
// t + LAT when the pipeline does not stall. With LAT = 0 the port is purely
// combinational. The pipeline stalls as a whole while its last stage holds
// a payload that the destination does not take. Reset is synchronous,
// active low.
module xbar_arb #(
  parameter int unsigned N   = 4,
  parameter int unsigned W   = 8,
  parameter int unsigned LAT = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         in_valid,
  output logic [N-1:0]         in_ready,
  input  logic [N-1:0][W-1:0]  in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [W-1:0]         out_data,
  output logic [$clog2(N > 1 ? N : 2)-1:0] out_src
);
  localparam int unsigned SRC_W = $clog2(N > 1 ? N : 2);

  logic [SRC_W-1:0] ptr, gnt;
  logic             any, take;

  // round-robin choice, starting from ptr
  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int k = N - 1; k >= 0; k--) begin
      logic [SRC_W-1:0] idx;
      idx = SRC_W'((int'(ptr) + k) % N);
      if (in_valid[idx]) begin
        any = 1'b1;
        gnt = SRC_W'(idx);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)    ptr <= '0;
    else if (take) ptr <= (gnt == SRC_W'(N - 1)) ? '0 : gnt + 1'b1;
  end

  generate
    if (LAT == 0) begin : g_comb
      assign take      = any && out_ready;
      assign out_valid = any;
      assign out_data  = in_data[gnt];
      assign out_src   = gnt;
    end else begin : g_pipe
      logic [LAT-1:0]            sv;
      logic [LAT-1:0][W-1:0]     sd;
      logic [LAT-1:0][SRC_W-1:0] ss;
      logic                      adv;

      assign adv  = !sv[LAT-1] || out_ready;
      assign take = any && adv;

      always_ff @(posedge clk) begin
        if (!rst_n) begin
          sv <= '0;
          sd <= '0;
          ss <= '0;
        end else if (adv) begin
          sv[0] <= any;
          sd[0] <= in_data[gnt];
          ss[0] <= gnt;
          for (int s = 1; s < LAT; s++) begin
            sv[s] <= sv[s-1];
            sd[s] <= sd[s-1];
            ss[s] <= ss[s-1];
          end
        end
      end

      assign out_valid = sv[LAT-1];
      assign out_data  = sd[LAT-1];
      assign out_src   = ss[LAT-1];
    end
  endgenerate

  always_comb begin
    in_ready = '0;
    in_ready[gnt] = take;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready))
    else $error("xbar_arb: more than one grant");

endmodule
