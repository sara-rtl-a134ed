// tb_sara_client: two SARA clients, each against an in-order memory
// responder with an adjustable delay.
//   * A latency client (DSP type, limit 100 cycles): with a 30-cycle memory
//     its NPI must settle near 100/30 (saturating the table at priority 0),
//     with a 400-cycle memory near 0.25, giving priority 6 with the reset
//     table. Every request must carry the priority the client shows.
//   * A display client: the LCD drains the read buffer every 6 cycles. With a
//     fast memory the buffer stays near its reference level and priority
//     stays low; with a slow memory it drains, the NPI falls below 1 and the
//     priority rises. The LCD must receive the words in address order.
module tb_sara_client;
  import sara_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int delay_a = 30, delay_b = 10;

  // ---------------- client A: latency meter ----------------
  logic a_busy, a_rv, a_txn, a_rspv = 0;
  mem_req_t a_req;
  mem_rsp_t a_rsp = '0;
  npi_t a_npi;
  prio_t a_prio;
  logic a_start = 0;
  logic [DATA_W-1:0] a_sr;
  logic a_se;
  meter_cfg_t a_cfg;

  sara_client #(.KIND(METER_LATENCY), .SRC_ID(1), .QID(Q_DSP)) u_a (
    .clk, .rst_n,
    .job_start(a_start), .job_base(31'h100000), .job_count(24'hffffff), .job_write(1'b0),
    .job_busy(a_busy), .issue_en(1'b1), .core_wdata('0),
    .strm_evt(1'b0), .strm_wdata('0), .strm_rdata(a_sr), .strm_empty(a_se),
    .cfg(a_cfg), .lut_we(1'b0), .lut_idx('0), .lut_val('0),
    .req_valid(a_rv), .req_ready(1'b1), .req(a_req), .rsp_valid(a_rspv), .rsp(a_rsp),
    .npi(a_npi), .prio(a_prio), .txn_done(a_txn));

  // ---------------- client B: display read buffer ----------------
  logic b_busy, b_rv, b_txn, b_rspv = 0;
  mem_req_t b_req;
  mem_rsp_t b_rsp = '0;
  npi_t b_npi;
  prio_t b_prio;
  logic b_start = 0, lcd = 0;
  logic [DATA_W-1:0] b_sr;
  logic b_se;
  meter_cfg_t b_cfg;

  sara_client #(.KIND(METER_OCC_READ), .SRC_ID(2), .QID(Q_MEDIA), .BUF_DEPTH(64)) u_b (
    .clk, .rst_n,
    .job_start(b_start), .job_base(31'h0), .job_count(24'hffffff), .job_write(1'b0),
    .job_busy(b_busy), .issue_en(1'b1), .core_wdata('0),
    .strm_evt(lcd), .strm_wdata('0), .strm_rdata(b_sr), .strm_empty(b_se),
    .cfg(b_cfg), .lut_we(1'b0), .lut_idx('0), .lut_val('0),
    .req_valid(b_rv), .req_ready(1'b1), .req(b_req), .rsp_valid(b_rspv), .rsp(b_rsp),
    .npi(b_npi), .prio(b_prio), .txn_done(b_txn));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // in-order responders: each accepted request answered `delay` cycles later
  typedef struct { longint due; mem_rsp_t r; } slot_t;
  slot_t qa [$], qb [$];
  longint cyc = 0;
  int prio_mismatch = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (a_rv) begin
      slot_t s;
      s.due = cyc + delay_a; s.r = '0; s.r.src = a_req.src; s.r.tag = a_req.tag;
      qa.push_back(s);
      if (a_req.prio != a_prio) prio_mismatch++;
    end
    if (b_rv) begin
      slot_t s;
      s.due = cyc + delay_b; s.r = '0; s.r.src = b_req.src; s.r.tag = b_req.tag;
      s.r.rdata = 64'(b_req.addr);
      qb.push_back(s);
    end
  end
  always @(negedge clk) begin
    a_rspv = 0; b_rspv = 0;
    if (qa.size() > 0 && qa[0].due <= cyc) begin a_rspv = 1; a_rsp = qa.pop_front().r; end
    if (qb.size() > 0 && qb[0].due <= cyc) begin b_rspv = 1; b_rsp = qb.pop_front().r; end
  end

  // LCD: one read every 6 cycles once started; words must arrive in order
  bit lcd_on = 0;
  longint lcd_next = 0;
  int lcd_under = 0;
  always @(negedge clk) begin
    lcd = lcd_on && (cyc % 6 == 0);
    if (lcd) begin
      if (b_se) lcd_under++;
      else begin
        checks++;
        if (b_sr != 64'(lcd_next)) begin failures++; $display("FAIL LCD word %h expected %h", b_sr, lcd_next); end
        lcd_next += TXN_BYTES;
      end
    end
  end

  function automatic prio_t lut_rule(npi_t v);
    for (int p = 0; p < 8; p++) if (v >= npi_t'(256 - 32 * p)) return prio_t'(p);
    return 3'd7;
  endfunction

  task automatic expect_near(string what, npi_t v, real target, real tol);
    real got;
    got = real'(v) / 256.0;
    checks++;
    if (got < target * (1.0 - tol) || got > target * (1.0 + tol)) begin
      failures++; $display("FAIL %s NPI %f expected about %f", what, got, target);
    end
  endtask

  initial begin
    a_cfg = '0; a_cfg.limit = 32'd100;
    b_cfg = '0; b_cfg.init_level = 16'd32; b_cfg.period = 32'd600;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    a_start = 1; b_start = 1;
    @(negedge clk);
    a_start = 0; b_start = 0;
    // let the display buffer fill to its reference level, then start the LCD
    wait (u_b.g_buf.occ >= 32);
    lcd_on = 1;

    repeat (3000) @(negedge clk);
    expect_near("latency, fast memory", a_npi, 100.0 / 31.0, 0.15);
    checks++;
    if (a_prio != 0 || b_prio > 1) begin failures++; $display("FAIL fast memory priorities %0d %0d", a_prio, b_prio); end
    checks++;
    if (b_npi < 16'h00f0) begin failures++; $display("FAIL display NPI %h with fast memory", b_npi); end

    delay_a = 400; delay_b = 200;
    repeat (6000) @(negedge clk);
    expect_near("latency, slow memory", a_npi, 100.0 / 401.0, 0.15);
    checks++;
    if (a_prio != lut_rule(a_npi) || a_prio < 5) begin failures++; $display("FAIL slow latency priority %0d (npi %h)", a_prio, a_npi); end
    checks++;
    if (b_npi >= 16'h0100 || b_prio < 2 || b_prio != lut_rule(b_npi)) begin
      failures++; $display("FAIL slow display: npi %h prio %0d", b_npi, b_prio);
    end
    checks++;
    if (prio_mismatch != 0) begin failures++; $display("FAIL %0d requests without the current priority", prio_mismatch); end
    $display("display: NPI %f priority %0d, LCD underruns %0d", real'(b_npi) / 256.0, b_prio, lcd_under);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
