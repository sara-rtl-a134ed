// occupancy_meter: performance meter of a stream-buffer DMA.
//
// For the display (READ_BUFFER = 1) the LCD drains a read buffer at a
// constant rate and the DMA refills it; the indicator is
//   NPI = R_refill / R_read = 1 + d_occ / (R_read * time),
// where d_occ is the buffer level minus a reference level (e.g. half full)
// and R_read * time is the number of entries drained since the window began.
// The meter therefore presents num = drained + d_occ and den = drained.
// For the camera (READ_BUFFER = 0) the sensor fills a write buffer at a
// constant rate and the DMA empties it, so a rising level is the bad case:
// num = filled - d_occ, den = filled. A negative numerator is clamped to 0.
// Both counts start at 1 instead of 0, so that the ratio exists from the
// first cycle of a window (a buffer already below its reference level then
// reads as unhealthy at once); the bias fades as events accumulate.
// `stream_evt` marks one constant-rate event (an LCD read or sensor write
// request, counted whether or not the buffer could serve it); the count
// clears every `period` cycles (0: never). Outputs are registered.
//
// The display form follows the paper's Eqn. 3 and Fig. 4(c). The camera form
// mirrors it; the paper lists the camera as "buffer occupancy" without a formula.
module occupancy_meter #(
  parameter int unsigned MW          = 48,
  parameter int unsigned OCC_W       = 16,
  parameter bit          READ_BUFFER = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [15:0]      init_level,
  input  logic [31:0]      period,
  input  logic [OCC_W-1:0] occupancy,
  input  logic             stream_evt,
  output logic [MW-1:0]    num,
  output logic [MW-1:0]    den
);
  logic [31:0]       tick_q;
  logic [MW-1:0]     cnt_q;
  logic signed [MW:0] delta, total;
  logic              wrap;

  assign wrap  = (period != '0) && (tick_q >= period - 1);
  assign delta = $signed({1'b0, MW'(occupancy)}) - $signed({1'b0, MW'(init_level)});
  assign total = READ_BUFFER ? $signed({1'b0, cnt_q}) + 1 + delta
                             : $signed({1'b0, cnt_q}) + 1 - delta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick_q <= '0;
      cnt_q  <= '0;
      num    <= '0;
      den    <= '0;
    end else begin
      if (wrap) begin
        tick_q <= '0;
        cnt_q  <= '0;
      end else begin
        tick_q <= tick_q + 1'b1;
        if (stream_evt) cnt_q <= cnt_q + 1'b1;
      end
      num <= total[MW] ? '0 : total[MW-1:0];
      den <= cnt_q + 1'b1;
    end
  end
endmodule
