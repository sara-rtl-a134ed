// tb_noc: six requesters send numbered requests with random queue classes
// and priorities through the two-level network into a randomly stalling
// memory-controller port. Checks that each request arrives exactly once,
// unchanged and in order per source, and that responses reach the
// requesters one cycle after the controller sends them. Also checks that a
// priority-7 request from a crowded class overtakes waiting priority-0 ones.
module tb_noc;
  import sara_pkg::*;
  localparam int N = 6, PER = 150;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid = '0, in_ready;
  mem_req_t in_req [N];
  logic rsp_valid;
  mem_rsp_t rsp;
  logic mc_valid, mc_ready = 0, mc_rsp_valid = 0;
  mem_req_t mc_req;
  mem_rsp_t mc_rsp = '0;
  int checks = 0, failures = 0;
  int sent [N], got [N];
  bit directed = 0;

  noc #(.N_IN(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the request that source i sends as its k-th: addr = k, priority a hash of (i, k)
  function automatic mem_req_t mk(int i, int k);
    mem_req_t r;
    r = '0;
    r.src = SRC_W'(i); r.addr = ADDR_W'(k); r.tag = TAG_W'(k);
    r.qid = qid_e'(i % NUM_QUEUES);        // one class per source, as for a DMA
    r.prio = prio_t'((i * 5 + k * 11) % 8);
    r.wdata = {32'(i), 32'(k)};
    return r;
  endfunction

  always @(negedge clk) if (rst_n && !directed) begin
    for (int i = 0; i < N; i++)
      if (!in_valid[i] && sent[i] < PER && ($urandom % 2)) begin
        in_valid[i] = 1; in_req[i] = mk(i, sent[i]);
      end
    mc_ready = ($urandom % 3) != 0;
    mc_rsp_valid = ($urandom % 4) == 0;
    mc_rsp.src = SRC_W'($urandom % N); mc_rsp.tag = TAG_W'($urandom); mc_rsp.rdata = {$urandom, $urandom};
  end

  mem_rsp_t last_rsp;
  logic last_v = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) begin
      sent[i]++;
      #0 ;
    end
    if (mc_valid && mc_ready && !directed) begin
      int s;
      s = mc_req.src;
      checks++;
      if (mc_req != mk(s, got[s])) begin failures++; $display("FAIL src %0d item %0d", s, got[s]); end
      got[s]++;
    end
    if (last_v) begin
      checks++;
      if (!rsp_valid || rsp != last_rsp) begin failures++; $display("FAIL response path"); end
    end else begin
      checks++;
      if (rsp_valid) begin failures++; $display("FAIL spurious response"); end
    end
    last_v = mc_rsp_valid; last_rsp = mc_rsp;
  end
  always @(posedge clk) #1 for (int i = 0; i < N; i++)
    if (in_valid[i] && in_req[i].addr == ADDR_W'(sent[i] - 1)) in_valid[i] = 0;

  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; got[i] = 0; in_req[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got[0] == PER && got[1] == PER && got[2] == PER && got[3] == PER && got[4] == PER && got[5] == PER);
    // directed: sources 0..4 hold priority-0 media requests; source 5 a priority-7 one
    @(negedge clk);
    directed = 1; mc_ready = 0; mc_rsp_valid = 0;
    for (int i = 0; i < N; i++) begin
      in_valid[i] = 1; in_req[i] = '0; in_req[i].src = SRC_W'(i); in_req[i].qid = Q_MEDIA;
      in_req[i].prio = (i == 5) ? 3'd7 : 3'd0; in_req[i].addr = ADDR_W'(sent[i]);
    end
    repeat (3) @(negedge clk);  // fill the pipeline registers with whatever wins first
    mc_ready = 1;
    begin
      int pos, n;
      pos = -1; n = 0;
      for (int t = 0; t < 20 && pos < 0; t++) begin
        @(posedge clk);
        if (mc_valid) begin if (mc_req.src == 5) pos = n; n++; end
      end
      checks++;
      if (pos < 0 || pos > 1) begin failures++; $display("FAIL urgent request arrived at position %0d", pos); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
