// progress_meter: performance meter of a rate-bound DMA, used for frame-rate
// cores (GPU, image processor, video codec, rotator, JPEG), for the
// processing-time cores (GPS, modem) and for bandwidth cores (WiFi, USB).
//
// The indicator is NPI = progress / reference progress, where the reference
// grows in proportion to time since the start of the frame (or measurement
// window). Both terms are kept as running sums, so no multiplier is needed:
// each completed transaction adds `num_inc` to the progress sum and every
// cycle adds `den_inc` to the reference sum. For a frame of F transactions
// and P cycles, num_inc = P and den_inc = F give
//   NPI = (done/F) / (elapsed/P),
// the frame progress against the x1 reference line. For a bandwidth target of
// r transactions per cycle, num_inc = 2^16 and den_inc = r * 2^16 give
// average over target bandwidth. Both sums clear every `period` cycles
// (period = 0: never) and on `restart`. Outputs are registered.
//
// The ratio follows the paper's Eqn. 2; running sums, the shared form for
// bandwidth and processing time, and the window restart are this design's.
module progress_meter #(
  parameter int unsigned MW = 48
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [31:0]   num_inc,
  input  logic [31:0]   den_inc,
  input  logic [31:0]   period,
  input  logic          restart,
  input  logic          txn_done,
  output logic [MW-1:0] num,
  output logic [MW-1:0] den,
  output logic          frame_start   // pulses when a new window begins
);
  logic [31:0]   tick_q;
  logic [MW-1:0] prog_q, ref_q;
  logic          wrap;

  assign wrap = restart || ((period != '0) && (tick_q >= period - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick_q      <= '0;
      prog_q      <= '0;
      ref_q       <= '0;
      frame_start <= 1'b0;
    end else begin
      frame_start <= wrap;
      if (wrap) begin
        tick_q <= '0;
        prog_q <= '0;
        ref_q  <= '0;
      end else begin
        tick_q <= tick_q + 1'b1;
        ref_q  <= ref_q + MW'(den_inc);
        if (txn_done) prog_q <= prog_q + MW'(num_inc);
      end
    end
  end

  assign num = prog_q;
  assign den = ref_q;
endmodule
