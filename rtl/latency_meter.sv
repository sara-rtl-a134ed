// latency_meter: performance meter of a latency-bound DMA (the DSP, audio).
//
// The target is an average memory latency below a maximum limit, and the
// indicator is NPI = limit / average latency (>= 1 while the target is met).
// On each `txn_done` pulse the measured round-trip latency `txn_lat` of the
// completed transaction enters an exponential moving average with weight
// 2^-AVG_SHIFT; the average is kept scaled by 2^AVG_SHIFT, so the meter
// presents num = limit << AVG_SHIFT and den = scaled average to the NPI
// divider. Both outputs are registered and change the cycle after a sample.
// Before the first sample den is 0, which the divider reads as "healthy".
//
// The ratio follows the paper's Eqn. 1. The paper does not say how the
// average is formed; the moving average and its weight are this design's.
module latency_meter #(
  parameter int unsigned MW        = 48,
  parameter int unsigned LAT_W     = 16,
  parameter int unsigned AVG_SHIFT = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [31:0]      limit,
  input  logic             txn_done,
  input  logic [LAT_W-1:0] txn_lat,
  output logic [MW-1:0]    num,
  output logic [MW-1:0]    den
);
  localparam int unsigned AW = LAT_W + AVG_SHIFT + 1;
  logic [AW-1:0] avg_q;   // average * 2^AVG_SHIFT

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avg_q <= '0;
    end else if (txn_done) begin
      avg_q <= avg_q + AW'(txn_lat) - (avg_q >> AVG_SHIFT);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num <= '0;
      den <= '0;
    end else begin
      num <= MW'(limit) << AVG_SHIFT;
      den <= MW'(avg_q);
    end
  end
endmodule
