// tb_mem_ctrl: the memory controller against the behavioural LPDDR4 model.
//   1. Writes 60 distinct addresses, reads them back with 20 never-written
//      ones and checks every read's data, every response's tag and the
//      read latency (exactly CL + tBURST cycles from READ to response).
//   2. Priority: eight priority-0 reads to different rows of one bank, then
//      one priority-7 read to another row; the urgent one must be among the
//      first two answered (Policy 1).
//   3. Aging: with a short age limit, a priority-0 read competing with a
//      stream of priority-7 reads to other rows of its bank must be served,
//      through the aging rule.
//   4. The same mixed stream of 300 requests under Policy 1 and Policy 2
//      (delta = 6, priorities 0..5): Policy 2 must produce more row hits and
//      must sometimes serve a row hit ahead of a higher-priority miss;
//      Policy 1 never does.
// The DRAM model checks all timing independently; any violation fails.
module tb_mem_ctrl;
  import sara_pkg::*;
  localparam int RD_LAT = 36 + 8;
  logic clk = 0, rst_n = 0;
  logic rb_en = 0;
  prio_t delta = 3'd6;
  logic [13:0] age_limit = 14'd10000;
  logic in_valid = 0, in_ready;
  mem_req_t in_req = '0;
  logic rsp_valid;
  mem_rsp_t rsp;
  dram_cmd_t dram_cmd;
  logic dram_rvalid;
  logic [DATA_W-1:0] dram_rdata;
  logic ev_act, ev_col, ev_row_hit, ev_aged, ev_rb_bypass, ev_queue_full;
  int violations, n_act, n_rd, n_wr;
  int checks = 0, failures = 0;

  mem_ctrl dut (.*);
  lpddr4_model u_dram (.clk, .rst_n, .cmd(dram_cmd), .rvalid(dram_rvalid), .rdata(dram_rdata),
                       .violations, .n_act, .n_rd, .n_wr);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outstanding, in_valid=%0d in_ready=%0d qid=%0d valid=%b", outst.size(), in_valid, in_ready, in_req.qid, dut.valid_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- bookkeeping of outstanding requests, keyed by {src, tag}
  typedef struct { logic write; logic [DATA_W-1:0] exp_data; logic check_data; } out_t;
  out_t outst [int];
  int order [$];      // src of responses in arrival order
  int n_hits = 0, n_aged = 0, n_bypass = 0, n_full = 0;
  longint cyc = 0;
  longint rd_issue [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_row_hit) n_hits++;
    if (ev_aged) n_aged++;
    if (ev_rb_bypass) n_bypass++;
    if (ev_queue_full) n_full++;
    if (dram_cmd.cmd == CMD_RD || dram_cmd.cmd == CMD_WR) rd_issue.push_back(cyc);
    if (rsp_valid) begin
      int key;
      longint t0;
      key = {rsp.src, rsp.tag};
      t0 = rd_issue.pop_front();
      checks++;
      if (cyc - t0 != RD_LAT) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      checks++;
      if (!outst.exists(key) || outst[key].write != rsp.write) begin
        failures++; $display("FAIL unexpected response src %0d tag %0d", rsp.src, rsp.tag);
      end else begin
        if (outst[key].check_data) begin
          checks++;
          if (rsp.rdata != outst[key].exp_data) begin
            failures++; $display("FAIL data %h expected %h", rsp.rdata, outst[key].exp_data);
          end
        end
        outst.delete(key);
      end
      order.push_back(rsp.src);
    end
  end

  function automatic int pos_of(int src);
    foreach (order[i]) if (order[i] == src) return i;
    return -1;
  endfunction

  function automatic logic [DATA_W-1:0] init_word(logic [ADDR_W-1:0] a);
    dram_addr_t d;
    longint key;
    d = decode_addr(a);
    key = {d.ch, d.rank, d.bank, d.row, d.col};
    return {32'hc0de_0000 ^ 32'(key >> 8), 32'(key)};
  endfunction

  function automatic logic [ADDR_W-1:0] mk_addr(int row, int bank, int col, int ch = 0, int rank = 0);
    return {ROW_W'(row), RANK_W'(rank), BANK_W'(bank), CH_W'(ch), COL_W'(col), OFF_W'(0)};
  endfunction

  int tag_ctr [32];
  task automatic send(logic [ADDR_W-1:0] a, logic wr, logic [DATA_W-1:0] d, prio_t p, qid_e q,
                      int src, logic chk, logic [DATA_W-1:0] exp_d);
    out_t o;
    int key;
    @(negedge clk);
    in_req = '0;
    in_req.addr = a; in_req.write = wr; in_req.wdata = d; in_req.prio = p; in_req.qid = q;
    in_req.src = SRC_W'(src); in_req.tag = TAG_W'(tag_ctr[src]);
    key = {in_req.src, in_req.tag};
    while (outst.exists(key)) @(negedge clk);
    o.write = wr; o.exp_data = exp_d; o.check_data = chk;
    outst[key] = o;
    tag_ctr[src] = (tag_ctr[src] + 1) % 16;
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic drain();
    while (outst.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  typedef struct { logic [ADDR_W-1:0] a; logic wr; prio_t p; qid_e q; } stim_t;
  stim_t mix [300];

  initial begin
    logic [ADDR_W-1:0] wa [60];
    logic [DATA_W-1:0] wd [60];
    int hits_p1, hits_p2, byp_p1, byp_p2;
    for (int i = 0; i < 32; i++) tag_ctr[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. write then read back
    for (int i = 0; i < 60; i++) begin
      wa[i] = mk_addr(i % 7 + 100, i % 8, i, (i / 8) % 2, (i / 16) % 2);
      wd[i] = {$urandom, $urandom};
      send(wa[i], 1, wd[i], prio_t'($urandom % 8), qid_e'($urandom % 5), i % 16, 0, '0);
    end
    drain();
    for (int i = 0; i < 80; i++) begin
      if (i < 60) send(wa[59 - i], 0, '0, prio_t'($urandom % 8), qid_e'($urandom % 5), i % 16, 1, wd[59 - i]);
      else begin
        logic [ADDR_W-1:0] a;
        a = mk_addr(2000 + i, i % 8, i % 32, 1, 1);
        send(a, 0, '0, prio_t'($urandom % 8), qid_e'($urandom % 5), i % 16, 1, init_word(a));
      end
    end
    drain();

    // ---- 2. an urgent read overtakes eight waiting ones
    order.delete();
    for (int i = 0; i < 8; i++) send(mk_addr(300 + i, 2, 0), 0, '0, 3'd0, Q_MEDIA, 1, 0, '0);
    send(mk_addr(400, 2, 0), 0, '0, 3'd7, Q_MEDIA, 9, 0, '0);
    drain();
    checks++;
    if (!(order[0] == 9 || order[1] == 9)) begin
      failures++; $display("FAIL urgent read answered at position %0d", pos_of(9));
    end

    // ---- 3. aging rescues a priority-0 read
    age_limit = 14'd300;
    n_aged = 0;
    order.delete();
    send(mk_addr(500, 3, 0), 0, '0, 3'd0, Q_SYSTEM, 20, 0, '0);
    for (int i = 0; i < 30; i++) send(mk_addr(600 + i, 3, 0), 0, '0, 3'd7, Q_GPU, 21, 0, '0);
    drain();
    checks++;
    if (n_aged == 0 || pos_of(20) == 30) begin
      failures++; $display("FAIL aging did not serve the old read (aged=%0d)", n_aged);
    end
    age_limit = 14'd10000;

    // ---- 4. Policy 1 against Policy 2 on the same stream
    for (int i = 0; i < 300; i++) begin
      mix[i].a  = mk_addr(700 + $urandom % 3, $urandom % 2, $urandom % 32, 0, 0);
      mix[i].wr = ($urandom % 4) == 0;
      mix[i].p  = prio_t'($urandom % 6);
      mix[i].q  = qid_e'($urandom % 5);
    end
    for (int pass = 0; pass < 2; pass++) begin
      rb_en = (pass == 1);
      n_hits = 0; n_bypass = 0;
      for (int i = 0; i < 300; i++) send(mix[i].a, mix[i].wr, 64'(i), mix[i].p, mix[i].q, i % 8, 0, '0);
      drain();
      if (pass == 0) begin hits_p1 = n_hits; byp_p1 = n_bypass; end
      else           begin hits_p2 = n_hits; byp_p2 = n_bypass; end
    end
    $display("row hits: Policy 1 %0d, Policy 2 %0d; hit-over-urgent choices %0d / %0d; queue-full cycles %0d",
             hits_p1, hits_p2, byp_p1, byp_p2, n_full);
    checks++;
    if (!(hits_p2 > hits_p1)) begin failures++; $display("FAIL Policy 2 gave no more row hits"); end
    checks++;
    if (byp_p1 != 0 || byp_p2 == 0) begin failures++; $display("FAIL bypass counts %0d %0d", byp_p1, byp_p2); end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL a queue never filled"); end
    checks++;
    if (violations != 0) begin failures++; $display("FAIL %0d DRAM timing violations", violations); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
