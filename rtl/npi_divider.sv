// npi_divider: the divider that each performance meter needs to turn a
// measurement into a Normalized Performance Indicator (NPI).
//
// It computes npi = floor(num * 2^NPI_FRAC / den) as an unsigned Q8.8 number,
// saturating at NPI_MAX when the quotient would not fit or when den is zero
// (no reference yet means no evidence of a shortfall). It is a restoring
// radix-2 divider producing one quotient bit per cycle: a pulse on `start`
// samples num/den; `done` pulses with the result NPI_W+2 cycles later, or
// one cycle later when the result saturates. `busy` is high in between and
// `start` is ignored while busy. The last result is held on `npi`.
//
// The paper asks only for "a divider at the performance meter for each DMA";
// the sequential radix-2 structure and the Q8.8 format are this design's choice.
module npi_divider
  import sara_pkg::*;
#(
  parameter int unsigned MW = 48       // width of the operands
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [MW-1:0] num,
  input  logic [MW-1:0] den,
  output logic          busy,
  output logic          done,
  output npi_t          npi
);
  localparam int unsigned RW = MW + NPI_W;   // width of remainder / shifted divisor
  localparam int unsigned CW = $clog2(NPI_W + 1);

  logic [RW-1:0] rem_q, dsh_q;
  npi_t          quo_q;
  logic [CW-1:0] cnt_q;
  logic          overflow;

  // Quotient >= 2^(NPI_W-NPI_FRAC) <=> num >= den << (NPI_W-NPI_FRAC)
  assign overflow = (den == '0) ||
                    ({{NPI_W{1'b0}}, num} >= ({{NPI_W{1'b0}}, den} << (NPI_W - NPI_FRAC)));

  logic [RW-1:0] rem_sub;
  logic          fits;
  assign fits    = rem_q >= dsh_q;
  assign rem_sub = rem_q - dsh_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0;
      dsh_q <= '0;
      quo_q <= '0;
      cnt_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      npi   <= NPI_MAX;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          if (overflow) begin
            npi  <= NPI_MAX;
            done <= 1'b1;
          end else begin
            rem_q <= {{NPI_W{1'b0}}, num} << NPI_FRAC;
            dsh_q <= {{NPI_W{1'b0}}, den} << (NPI_W - 1);
            quo_q <= '0;
            cnt_q <= CW'(NPI_W);
            busy  <= 1'b1;
          end
        end
      end else begin
        if (cnt_q != '0) begin
          quo_q <= {quo_q[NPI_W-2:0], fits};
          if (fits) rem_q <= rem_sub;
          dsh_q <= dsh_q >> 1;
          cnt_q <= cnt_q - 1'b1;
        end else begin
          npi  <= quo_q;
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
