// tb_dma_engine: runs a read job and a write job through the DMA against a
// memory responder here that answers out of order after random delays.
// Checks the request addresses and count, the priority and source tags, the
// outstanding limit, the latency reported for each response, in-order read
// data delivery, write-data pops and the job's busy flag.
module tb_dma_engine;
  import sara_pkg::*;
  localparam int unsigned MAX_OUT = 4;
  logic clk = 0, rst_n = 0;
  logic [SRC_W-1:0] src_id = 5'd3;
  qid_e qid = Q_MEDIA;
  logic job_start = 0;
  logic [ADDR_W-1:0] job_base = '0;
  logic [23:0] job_count = '0;
  logic job_write = 0, job_busy;
  logic issue_en = 1;
  logic [DATA_W-1:0] wdata = '0;
  logic wdata_pop;
  prio_t prio = 3'd5;
  logic req_valid, req_ready = 0;
  mem_req_t req;
  logic rsp_valid = 0;
  mem_rsp_t rsp = '0;
  logic txn_done;
  logic [15:0] txn_lat;
  logic rd_valid;
  logic [DATA_W-1:0] rd_data;
  int checks = 0, failures = 0;

  dma_engine #(.MAX_OUT(MAX_OUT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // responder: keeps accepted requests, answers a random one after a delay
  typedef struct { logic [TAG_W-1:0] tag; logic write; logic [ADDR_W-1:0] addr; int t_issue; } pend_t;
  pend_t pend [$];
  int issued = 0, answered = 0, pops = 0, outstanding = 0, max_outstanding = 0;
  logic [ADDR_W-1:0] exp_addr;
  int exp_lat = -1;
  logic exp_rd = 0;
  logic [DATA_W-1:0] exp_data;

  always @(negedge clk) if (rst_n) begin
    // check the previous cycle's response effects
    if (exp_lat >= 0) begin
      checks++;
      if (!txn_done || txn_lat != 16'(exp_lat)) begin
        failures++;
        $display("FAIL response: done=%0d lat=%0d exp %0d rd=%0d", txn_done, txn_lat, exp_lat, rd_valid);
      end
    end else begin
      checks++;
      if (txn_done) begin failures++; $display("FAIL spurious txn_done"); end
    end
    exp_lat = -1;
    rsp_valid = 0;
    if (pend.size() > 0 && ($urandom % 3) == 0) begin
      int k;
      k = $urandom % pend.size();
      rsp_valid = 1;
      rsp.src = src_id; rsp.tag = pend[k].tag; rsp.write = pend[k].write;
      rsp.rdata = {32'hd0d0_0000, pend[k].addr[31:0]};
      exp_lat = cyc - pend[k].t_issue;
      exp_rd = !pend[k].write; exp_data = rsp.rdata;
      pend.delete(k);
      answered++;
      outstanding--;
    end
    req_ready = ($urandom % 2) == 0;
  end

  always @(posedge clk) if (rst_n && req_valid && req_ready) begin
    pend_t p;
    checks++;
    if (req.addr != exp_addr || req.prio != prio || req.src != src_id || req.qid != Q_MEDIA || req.write != job_write) begin
      failures++;
      $display("FAIL request addr=%h exp %h prio=%0d", req.addr, exp_addr, req.prio);
    end
    foreach (pend[i]) if (pend[i].tag == req.tag) begin failures++; $display("FAIL tag reused while outstanding"); end
    p.tag = req.tag; p.write = req.write; p.addr = req.addr; p.t_issue = cyc;
    pend.push_back(p);
    exp_addr = exp_addr + ADDR_W'(TXN_BYTES);
    issued++;
    outstanding++;
    if (outstanding > max_outstanding) max_outstanding = outstanding;
  end
  always @(posedge clk) if (wdata_pop) pops++;

  // read data must leave in address order even though answers come out of order
  logic [ADDR_W-1:0] rd_next;
  int rd_seen = 0;
  always @(negedge clk) if (rst_n && rd_valid) begin
    checks++;
    if (rd_data != {32'hd0d0_0000, 32'(rd_next)}) begin
      failures++; $display("FAIL read data %h expected address %h", rd_data, rd_next);
    end
    rd_next = rd_next + ADDR_W'(TXN_BYTES);
    rd_seen++;
  end

  task automatic run_job(logic [ADDR_W-1:0] base, int n, logic wr);
    @(negedge clk);
    job_base = base; job_count = 24'(n); job_write = wr; job_start = 1;
    exp_addr = base; rd_next = base; issued = 0; answered = 0; pops = 0; rd_seen = 0;
    @(negedge clk);
    job_start = 0;
    while (job_busy) begin
      @(negedge clk);
      if ($urandom % 50 == 0) prio = prio_t'($urandom);
      issue_en = ($urandom % 8) != 0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (rd_seen != (wr ? 0 : n)) begin failures++; $display("FAIL %0d read words delivered", rd_seen); end
    checks++;
    if (issued != n || answered != n) begin failures++; $display("FAIL job: issued %0d answered %0d of %0d", issued, answered, n); end
    checks++;
    if (pops != (wr ? n : 0)) begin failures++; $display("FAIL write pops %0d", pops); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(31'h0001_0000, 40, 0);
    run_job(31'h0200_0040, 25, 1);
    checks++;
    if (max_outstanding != MAX_OUT) begin failures++; $display("FAIL outstanding peak %0d", max_outstanding); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
