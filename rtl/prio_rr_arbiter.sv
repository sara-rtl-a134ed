// prio_rr_arbiter: priority-based round-robin arbiter (the paper's Policy 1).
//
// Among the requesting inputs the one with the highest priority wins; inputs
// that tie on the highest priority are served in round-robin order. The
// grant is combinational from `req`/`prio`. The round-robin pointer moves to
// the input after the winner when `advance` is high (the grant was used), so
// an input that keeps requesting at the top priority cannot shut out an
// equal-priority neighbour. A 3-bit magnitude compare per input is the only
// cost beyond a plain round-robin arbiter.
//
// Policy 1 is the paper's; the pointer-update rule is the usual one for
// round-robin arbiters and is this design's choice.
module prio_rr_arbiter
  import sara_pkg::*;
#(
  parameter int unsigned N   = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  prio_t         prio [N],
  input  logic          advance,
  output logic          gnt_valid,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx
);
  logic [IW-1:0] ptr_q;
  prio_t         maxp;
  logic [N-1:0]  cand;

  always_comb begin
    maxp = '0;
    for (int i = 0; i < N; i++)
      if (req[i] && prio[i] > maxp) maxp = prio[i];
    for (int i = 0; i < N; i++)
      cand[i] = req[i] && (prio[i] == maxp);

    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int k = N - 1; k >= 0; k--) begin
      // candidate k places after the pointer; the nearest one wins
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (cand[i]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(i);
      end
    end
    gnt = '0;
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (advance && gnt_valid)
      ptr_q <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + 1'b1;
  end
endmodule
