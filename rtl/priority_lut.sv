// priority_lut: translation of a core's NPI into a 3-bit transaction priority.
//
// The table has one register per priority level p holding the lowest NPI
// still allowed at that level (entry p = u when priority p covers NPI in
// [u, v); v is then the entry of level p-1). Eight comparators test the
// current NPI against all entries in parallel; every level whose bound is not
// above the NPI is asserted, and the lowest asserted level is adopted. If no
// level is asserted (the NPI is below every bound) the highest level is used.
// Entries are written through a small port (we, idx, val) and reset to the
// default thresholds below. The priority output is registered: it follows
// `npi` one cycle later.
//
// The structure (2^k entries, one comparator each, lowest asserted level
// wins) is the paper's. The reset thresholds and the "nothing asserted"
// rule are this design's choice: level p is allowed down to NPI = 1.0 - p/8,
// so an NPI of 1.0 or more gives priority 0 and an NPI near 0 gives 7.
module priority_lut
  import sara_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lut_we,
  input  logic [PRIO_W-1:0] lut_idx,
  input  npi_t              lut_val,
  input  npi_t              npi,
  output prio_t             prio
);
  npi_t                  bound_q [NUM_LEVELS];
  logic [NUM_LEVELS-1:0] asserted;
  prio_t                 sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_LEVELS; p++)
        bound_q[p] <= NPI_ONE - npi_t'((p * NPI_ONE) / NUM_LEVELS);
    end else if (lut_we) begin
      bound_q[lut_idx] <= lut_val;
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_LEVELS; p++)
      asserted[p] = (npi >= bound_q[p]);
    sel = prio_t'(NUM_LEVELS - 1);
    for (int p = NUM_LEVELS - 1; p >= 0; p--)
      if (asserted[p]) sel = prio_t'(p);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prio <= '0;
    else        prio <= sel;
  end
endmodule
