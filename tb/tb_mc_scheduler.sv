// tb_mc_scheduler: random candidate sets against a reference written from
// the pairwise policy rules. For each pair it applies Policy 1 (higher
// priority wins) or Policy 2 (a row hit A beats a miss B if both priorities
// are below delta or they are equal, otherwise the higher priority wins);
// the winners are the candidates no other candidate beats, served round-robin
// over the queues starting after the last served queue, oldest first within
// a queue. Aged candidates, if any, go first, oldest first. Also checks the
// "hit passed an urgent miss" and "aged" flags, and that both policies and
// aging were exercised.
module tb_mc_scheduler;
  import sara_pkg::*;
  localparam int NE = 12, AGE_W = 8;
  logic clk = 0, rst_n = 0;
  logic rb_en = 0;
  prio_t delta = 3'd6;
  logic [AGE_W-1:0] age_limit = 8'd200;
  logic [NE-1:0] ready = '0, row_hit = '0;
  prio_t prio [NE];
  qid_e qid [NE];
  logic [AGE_W-1:0] age [NE];
  logic advance = 0;
  logic sel_valid, sel_aged, sel_below_max;
  logic [$clog2(NE)-1:0] sel_idx;
  int checks = 0, failures = 0;
  int ptr = 0, n_p2_hit_wins = 0, n_aged = 0, n_bypass = 0;

  mc_scheduler #(.NE(NE), .AGE_W(AGE_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // does candidate a beat candidate b?
  function automatic bit beats(int a, int b);
    if (rb_en && row_hit[a] != row_hit[b]) begin
      if (row_hit[a] && ((prio[a] < delta && prio[b] < delta) || prio[a] == prio[b])) return 1;
      if (row_hit[b] && ((prio[a] < delta && prio[b] < delta) || prio[a] == prio[b])) return 0;
    end
    return prio[a] > prio[b];
  endfunction

  function automatic int ref_pick();
    bit win [NE];
    int best, any, oldest;
    any = 0;
    for (int e = 0; e < NE; e++) any |= ready[e];
    if (!any) return -1;
    // aged first
    best = -1;
    for (int e = 0; e < NE; e++)
      if (ready[e] && age[e] >= age_limit && (best < 0 || age[e] > age[best])) best = e;
    if (best >= 0) return best;
    for (int e = 0; e < NE; e++) begin
      win[e] = ready[e];
      for (int f = 0; f < NE; f++) if (ready[e] && ready[f] && f != e && beats(f, e)) win[e] = 0;
    end
    for (int k = 0; k < NUM_QUEUES; k++) begin
      int q;
      q = (ptr + k) % NUM_QUEUES;
      best = -1;
      for (int e = 0; e < NE; e++)
        if (win[e] && qid[e] == qid_e'(q) && (best < 0 || age[e] > age[best])) best = e;
      if (best >= 0) return best;
    end
    return -1;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int exp_i, maxp;
      rb_en = (t / 500) % 2;
      delta = (t < 2000) ? 3'd6 : prio_t'($urandom % 8);
      for (int e = 0; e < NE; e++) begin
        ready[e]   = ($urandom % 3) != 0;
        row_hit[e] = ($urandom % 2) != 0;
        prio[e]    = prio_t'($urandom % 8);
        qid[e]     = qid_e'($urandom % NUM_QUEUES);
        age[e]     = AGE_W'($urandom % 220);
      end
      advance = ($urandom % 2) != 0;
      #1;
      exp_i = ref_pick();
      maxp = 0;
      for (int e = 0; e < NE; e++) if (ready[e] && prio[e] > maxp) maxp = prio[e];
      checks++;
      if ((exp_i < 0) ? sel_valid : (!sel_valid || sel_idx != exp_i)) begin
        failures++;
        $display("FAIL t=%0d rb=%0d sel=%0d/%0d expected %0d", t, rb_en, sel_valid, sel_idx, exp_i);
      end else if (exp_i >= 0) begin
        checks++;
        if (sel_aged != (age[exp_i] >= age_limit) || sel_below_max != (prio[exp_i] < maxp)) begin
          failures++; $display("FAIL flags t=%0d", t);
        end
        if (sel_aged) n_aged++;
        if (sel_below_max && !sel_aged) n_bypass++;
      end
      @(posedge clk);
      if (advance && exp_i >= 0) ptr = (int'(qid[exp_i]) + 1) % NUM_QUEUES;
      @(negedge clk);
    end
    checks++;
    if (n_aged == 0 || n_bypass == 0) begin failures++; $display("FAIL not exercised: aged %0d bypass %0d", n_aged, n_bypass); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
