// noc_switch: one output port of an on-chip network router.
//
// N input ports compete for one output. Switch allocation uses the
// priority-based round-robin arbiter: the request with the highest
// transaction priority wins, ties rotate. The winner is moved into a one-entry
// output register in the cycle it is granted, which needs the register to be
// empty or emptying (out_ready). The port thus adds one cycle of latency and
// sustains one transaction per cycle.
//
// Handshakes are valid/ready on both sides. Priority-based switch allocation
// is the paper's; the single output register is this design's choice.
module noc_switch
  import sara_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   in_valid,
  output logic [N-1:0]   in_ready,
  input  mem_req_t       in_req [N],
  output logic           out_valid,
  input  logic           out_ready,
  output mem_req_t       out_req
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  prio_t         prio [N];
  logic          gnt_valid, take;
  logic [N-1:0]  gnt;
  logic [IW-1:0] gnt_idx;

  always_comb
    for (int i = 0; i < N; i++) prio[i] = in_req[i].prio;

  prio_rr_arbiter #(.N(N)) u_arb (
    .clk, .rst_n,
    .req     (in_valid),
    .prio    (prio),
    .advance (take),
    .gnt_valid,
    .gnt,
    .gnt_idx
  );

  assign take     = gnt_valid && (!out_valid || out_ready);
  assign in_ready = take ? gnt : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_req   <= '0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_req   <= in_req[gnt_idx];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_req));
endmodule
