// dma_engine: the DMA of one core, the unit that owns a performance meter and
// stamps every memory transaction with its current priority.
//
// A job (base address, number of 64-byte transactions, read or write) starts
// with a pulse on `job_start` and runs until every transaction has been
// answered. One request may be issued per cycle, when the core allows it
// (`issue_en`) and fewer than MAX_OUT transactions are outstanding. Each
// request carries the `prio` input of that cycle, the DMA's source id and
// its controller queue. Tags are handed out in sequence and each tag's
// issue cycle is recorded, so that a response yields `txn_done` with the
// round-trip latency `txn_lat` in cycles (from the request handshake to the
// response cycle) in the cycle after it arrives. Since the network and the
// controller may answer out of order, responses are also kept in a small
// reorder buffer indexed by tag and retired in issue order, one per cycle:
// read data leaves on `rd_valid`/`rd_data` in address order, which a stream
// buffer needs. A tag is reused only after it retires.
// A write takes its data from `wdata` and pulses `wdata_pop` when issued.
//
// Request handshake: valid/ready, payload held stable while valid is high.
// Responses are never back-pressured.
//
// The paper gives the DMA's role (one meter per DMA, priority attached to
// its transactions); the job descriptor, tags and linear addressing are this
// design's choice.
module dma_engine
  import sara_pkg::*;
#(
  parameter int unsigned MAX_OUT = 8,
  parameter int unsigned LAT_W   = 16,
  parameter int unsigned CNT_W   = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SRC_W-1:0]  src_id,
  input  qid_e              qid,
  // job descriptor
  input  logic              job_start,
  input  logic [ADDR_W-1:0] job_base,
  input  logic [CNT_W-1:0]  job_count,
  input  logic              job_write,
  output logic              job_busy,
  // core side
  input  logic              issue_en,
  input  logic [DATA_W-1:0] wdata,
  output logic              wdata_pop,
  input  prio_t             prio,
  // memory side
  output logic              req_valid,
  input  logic              req_ready,
  output mem_req_t          req,
  input  logic              rsp_valid,
  input  mem_rsp_t          rsp,
  // meter side
  output logic              txn_done,
  output logic [LAT_W-1:0]  txn_lat,
  output logic              rd_valid,
  output logic [DATA_W-1:0] rd_data
);
  localparam int unsigned NT  = (MAX_OUT < (1 << TAG_W)) ? MAX_OUT : (1 << TAG_W);
  localparam int unsigned TIW = (NT > 1) ? $clog2(NT) : 1;

  logic [LAT_W-1:0]  now_q;
  logic [LAT_W-1:0]  stamp_q [NT];
  logic [DATA_W-1:0] data_q  [NT];
  logic [NT-1:0]     busy_tag_q, done_tag_q, wr_tag_q;
  logic [TIW-1:0]    alloc_q, head_q;
  logic [ADDR_W-1:0] addr_q;
  logic [CNT_W-1:0]  left_q;     // transactions not yet issued
  logic              write_q;
  logic              have_tag, fire, rsp_hit, retire;
  logic [TAG_W-1:0]  free_tag;
  logic [TIW-1:0]    rsp_idx;

  function automatic logic [TIW-1:0] next_tag(logic [TIW-1:0] t);
    return (t == TIW'(NT - 1)) ? '0 : t + 1'b1;
  endfunction

  assign have_tag  = !busy_tag_q[alloc_q];
  assign free_tag  = TAG_W'(alloc_q);
  assign req_valid = (left_q != '0) && issue_en && have_tag;
  assign fire      = req_valid && req_ready;
  assign wdata_pop = fire && write_q;
  assign rsp_hit   = rsp_valid && (rsp.src == src_id);
  assign rsp_idx   = rsp.tag[TIW-1:0];
  assign retire    = busy_tag_q[head_q] && done_tag_q[head_q];
  assign job_busy  = (left_q != '0) || (busy_tag_q != '0);

  always_comb begin
    req       = '0;
    req.addr  = addr_q;
    req.write = write_q;
    req.wdata = wdata;
    req.prio  = prio;
    req.qid   = qid;
    req.src   = src_id;
    req.tag   = free_tag;
  end

  always_ff @(posedge clk) begin
    if (fire)    stamp_q[alloc_q] <= now_q;
    if (rsp_hit) data_q[rsp_idx]  <= rsp.rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now_q      <= '0;
      busy_tag_q <= '0;
      done_tag_q <= '0;
      wr_tag_q   <= '0;
      alloc_q    <= '0;
      head_q     <= '0;
      addr_q     <= '0;
      left_q     <= '0;
      write_q    <= 1'b0;
      txn_done   <= 1'b0;
      txn_lat    <= '0;
      rd_valid   <= 1'b0;
      rd_data    <= '0;
    end else begin
      now_q    <= now_q + 1'b1;
      txn_done <= 1'b0;
      rd_valid <= 1'b0;
      if (job_start && !job_busy) begin
        addr_q  <= job_base;
        left_q  <= job_count;
        write_q <= job_write;
      end else if (fire) begin
        addr_q <= addr_q + ADDR_W'(TXN_BYTES);
        left_q <= left_q - 1'b1;
      end
      if (fire) begin
        busy_tag_q[alloc_q] <= 1'b1;
        done_tag_q[alloc_q] <= 1'b0;
        wr_tag_q[alloc_q]   <= write_q;
        alloc_q             <= next_tag(alloc_q);
      end
      if (rsp_hit) begin
        txn_done            <= 1'b1;
        txn_lat             <= now_q - stamp_q[rsp_idx];
        done_tag_q[rsp_idx] <= 1'b1;
      end
      if (retire) begin
        busy_tag_q[head_q] <= 1'b0;
        head_q             <= next_tag(head_q);
        rd_valid           <= !wr_tag_q[head_q];
        rd_data            <= data_q[head_q];
      end
    end
  end

  // A response must answer an outstanding tag of this DMA.
  a_rsp_known: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_hit |-> (rsp.tag < TAG_W'(NT)) && busy_tag_q[rsp_idx] && !done_tag_q[rsp_idx]);
  // Payload is held while a request waits.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> $stable(req.addr) && $stable(req.write));
endmodule
