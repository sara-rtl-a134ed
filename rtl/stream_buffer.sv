// stream_buffer: the buffer between a streaming core and its DMA whose fill
// level the occupancy meter watches - the display's read buffer, refilled by
// the DMA and drained by the LCD panel, or the camera's write buffer, filled
// by the image sensor and drained by the DMA.
//
// A synchronous FIFO of DEPTH words with first-word-fall-through output: a
// push stores wdata (ignored when full), a pop removes rdata (ignored when
// empty), both may happen in one cycle. `occupancy` is the registered count
// of stored words. The paper names the buffer and its occupancy; the FIFO
// form and depth are this design's choice.
module stream_buffer #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned W     = 64,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  wdata,
  input  logic          pop,
  output logic [W-1:0]  rdata,
  output logic          empty,
  output logic          full,
  output logic [CW-1:0] occupancy
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem_q [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic          do_push, do_pop;

  assign empty   = (occupancy == '0);
  assign full    = (occupancy == CW'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rdata   = mem_q[rd_q];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem_q[wr_q] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q      <= '0;
      wr_q      <= '0;
      occupancy <= '0;
    end else begin
      if (do_push) wr_q <= incr(wr_q);
      if (do_pop)  rd_q <= incr(rd_q);
      occupancy <= occupancy + CW'(do_push) - CW'(do_pop);
    end
  end
endmodule
