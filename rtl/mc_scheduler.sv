// mc_scheduler: the priority-based transaction scheduler of the memory
// controller (the paper's Policy 1 and Policy 2, with aging).
//
// Each cycle it chooses, among the entries whose next DRAM command is legal
// now (`ready`), the one to serve. Every candidate gets a sort key:
//   * aged entries (waited age_limit cycles or more) go first, oldest first
//     whatever their priority, so that low priorities cannot starve;
//   * Policy 1 (rb_en = 0): the higher transaction priority wins;
//   * Policy 2 (rb_en = 1): with delta the threshold, a candidate below delta
//     keys as {0, row_hit, prio} and one at or above delta as {1, prio,
//     row_hit}. Comparing keys gives exactly the pairwise rule: a row hit A
//     beats a miss B when both priorities are below delta or they are equal,
//     otherwise the higher priority wins.
// Among non-aged candidates, those that tie on the best key are served round-robin across the five
// transaction queues, starting after the queue of the last
// transaction completed; within a queue
// the oldest entry wins. The choice is combinational; the round-robin pointer
// moves when `advance` is high (a transaction was completed).
// `sel_below_max` flags a choice whose priority is below the best ready
// priority, i.e. a row hit that Policy 2 let pass an urgent miss.
//
// Policy 1, Policy 2 and the aging rule are the paper's. Reading "clears the
// backlog of transactions that have waited at least T cycles" as "aged
// entries go first", and oldest-first inside a queue, are this design's.
module mc_scheduler
  import sara_pkg::*;
#(
  parameter int unsigned NE    = 42,
  parameter int unsigned AGE_W = 14,
  localparam int unsigned EW   = $clog2(NE)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rb_en,
  input  prio_t            delta,
  input  logic [AGE_W-1:0] age_limit,
  input  logic [NE-1:0]    ready,
  input  logic [NE-1:0]    row_hit,
  input  prio_t            prio [NE],
  input  qid_e             qid  [NE],
  input  logic [AGE_W-1:0] age  [NE],
  input  logic             advance,
  output logic             sel_valid,
  output logic [EW-1:0]    sel_idx,
  output logic             sel_aged,
  output logic             sel_below_max
);
  localparam int unsigned KW = PRIO_W + 3;   // {aged, policy key}

  typedef logic [KW-1:0] key_t;

  key_t                  key [NE];
  key_t                  best;
  prio_t                 maxp;
  logic [NE-1:0]         top;
  logic [NUM_QUEUES-1:0] q_has;
  logic [EW-1:0]         q_pick [NUM_QUEUES];
  logic [QID_W-1:0]      ptr_q, qsel;

  function automatic key_t make_key(logic aged, logic hit, prio_t p, logic rb, prio_t d);
    logic [PRIO_W+1:0] k;
    if (!rb)         k = {2'b00, p};
    else if (p < d)  k = {1'b0, hit, p};
    else             k = {1'b1, p, hit};
    return {aged, k};
  endfunction

  always_comb begin
    best = '0;
    maxp = '0;
    for (int e = 0; e < NE; e++) begin
      key[e] = make_key(age[e] >= age_limit, row_hit[e], prio[e], rb_en, delta);
      if (ready[e] && key[e] > best)  best = key[e];
      if (ready[e] && prio[e] > maxp) maxp = prio[e];
    end
    for (int e = 0; e < NE; e++)
      top[e] = ready[e] && (key[e] == best);

    // oldest top candidate of each queue
    for (int q = 0; q < NUM_QUEUES; q++) begin
      logic [AGE_W-1:0] oldest;
      q_has[q]  = 1'b0;
      q_pick[q] = '0;
      oldest    = '0;
      for (int e = 0; e < NE; e++)
        if (top[e] && qid[e] == qid_e'(q) && (!q_has[q] || age[e] > oldest)) begin
          q_has[q]  = 1'b1;
          q_pick[q] = EW'(e);
          oldest    = age[e];
        end
    end

    // round-robin over the queues, starting at the pointer
    sel_valid = 1'b0;
    qsel      = '0;
    for (int k = NUM_QUEUES - 1; k >= 0; k--) begin
      int unsigned q;
      q = (int'(ptr_q) + k) % NUM_QUEUES;
      if (q_has[q]) begin
        sel_valid = 1'b1;
        qsel      = QID_W'(q);
      end
    end
    sel_idx       = q_pick[qsel];

    // aged candidates are cleared oldest first, whatever their priority
    begin
      logic             any_aged;
      logic [AGE_W-1:0] oldest;
      logic [EW-1:0]    pick;
      any_aged = 1'b0;
      oldest   = '0;
      pick     = '0;
      for (int e = 0; e < NE; e++)
        if (ready[e] && key[e][KW-1] && (!any_aged || age[e] > oldest)) begin
          any_aged = 1'b1;
          oldest   = age[e];
          pick     = EW'(e);
        end
      if (any_aged) sel_idx = pick;
    end
    sel_aged      = sel_valid && key[sel_idx][KW-1];
    sel_below_max = sel_valid && (prio[sel_idx] < maxp);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (advance && sel_valid)
      ptr_q <= (qid[sel_idx] == qid_e'(NUM_QUEUES - 1)) ? '0 : QID_W'(qid[sel_idx]) + 1'b1;
  end
endmodule
