// tb_sara_soc: end-to-end run of the whole fabric at its default size
// (14 clients, CPU port, two-level network, 42-entry controller) against the
// behavioural LPDDR4 model, with a camcorder-like load scaled to one
// 30000-cycle frame:
//   frame-rate cores (GPU, image processor, video codec, rotator read and
//   write, JPEG) and processing-time cores (GPS, modem) each run one job per
//   frame, bursting from the start of the frame; WiFi and USB stream at a
//   target bandwidth; the DSP and audio issue sparse latency-critical reads;
//   the LCD drains the display buffer and the sensor fills the camera buffer
//   at constant rates; the CPU writes and reads back a block of words.
// The frame is run three times: first with Policy 1 and the published aging
// limit (10000 cycles); then with Policy 2 (delta = 6) and a short aging
// limit (400 cycles) so that aging is exercised; last as the lighter of the
// two published test cases, with GPS, camera, rotator and JPEG idle, under
// Policy 2 and the published aging limit.
// Checks: every job completes within its frame, the CPU reads back what it
// wrote, the DRAM model sees no timing violation, the LCD receives the
// display's words in address order, and every mechanism of the design
// happens at least once: priorities rising and falling, a request waiting
// in the network, a full controller queue, row hits, Policy 2 serving a row
// hit ahead of a more urgent miss, and aged transactions being cleared.
// In the last frame the idle cores must issue nothing (the camera at most
// the words left in its buffer) while the others still finish their jobs.
module tb_sara_soc;
  import sara_pkg::*;
  localparam int NC = 14, FRAME = 30000;
  localparam int GPU = 0, DSP = 1, IMG = 2, VID = 3, ROTR = 4, ROTW = 5, JPEG = 6,
                 CAM = 7, DISP = 8, GPS = 9, WIFI = 10, USB = 11, MODEM = 12, AUDIO = 13;
  logic clk = 0, rst_n = 0;
  logic rb_en = 0;
  prio_t delta = 3'd6;
  logic [13:0] age_limit = 14'd10000;
  meter_cfg_t cfg [NC];
  logic [NC-1:0] lut_we = '0;
  logic [PRIO_W-1:0] lut_idx = '0;
  npi_t lut_val = '0;
  logic [NC-1:0] job_start = '0, job_write = '0, job_busy, issue_en = '0, strm_evt = '0, strm_empty, txn_done;
  logic [ADDR_W-1:0] job_base [NC];
  logic [23:0] job_count [NC];
  logic [DATA_W-1:0] core_wdata [NC], strm_wdata [NC], strm_rdata [NC];
  npi_t npi [NC];
  prio_t prio [NC];
  logic cpu_req_valid = 0, cpu_req_ready, cpu_rsp_valid;
  mem_req_t cpu_req = '0;
  mem_rsp_t cpu_rsp;
  dram_cmd_t dram_cmd;
  logic dram_rvalid;
  logic [DATA_W-1:0] dram_rdata;
  logic [5:0] mc_ev;
  int violations, n_act, n_rd, n_wr;
  int checks = 0, failures = 0;

  sara_soc dut (.*);
  lpddr4_model u_dram (.clk, .rst_n, .cmd(dram_cmd), .rvalid(dram_rvalid), .rdata(dram_rdata),
                       .violations, .n_act, .n_rd, .n_wr);
  always #5 clk = ~clk;

  initial begin
    repeat (4 * FRAME) @(posedge clk);
    failures++;
    $display("watchdog: busy=%b", job_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- per-frame job sizes (transactions of 64 bytes)
  int job_n [NC];
  initial begin
    job_n = '{400, 0, 300, 250, 150, 150, 100, 0, 0, 50, 0, 0, 50, 0};
  end

  // ---- mechanism counters
  longint cyc = 0;
  int n_prio_up = 0, n_prio_down = 0, n_noc_wait = 0, n_qfull = 0, n_hit = 0, n_aged = 0, n_bypass = 0;
  int max_prio [NC];
  prio_t last_prio [NC];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    for (int i = 0; i < NC; i++) begin
      if (prio[i] > last_prio[i]) n_prio_up++;
      if (prio[i] < last_prio[i]) n_prio_down++;
      if (prio[i] > max_prio[i]) max_prio[i] = prio[i];
      last_prio[i] = prio[i];
      if (dut.n_valid[i] && !dut.n_ready[i]) n_noc_wait++;
    end
    if (mc_ev[5]) n_qfull++;
    if (mc_ev[2]) n_hit++;
    if (mc_ev[3]) n_aged++;
    if (mc_ev[4]) n_bypass++;
  end

  // ---- constant-rate streams and sparse issuers
  bit run = 0, case_b = 0;
  int n_idle_txn = 0, n_cam_txn_b = 0;
  always @(posedge clk) if (case_b) begin
    if (txn_done[GPS] || txn_done[ROTR] || txn_done[ROTW] || txn_done[JPEG]) n_idle_txn++;
    if (txn_done[CAM]) n_cam_txn_b++;
  end
  always @(negedge clk) begin
    strm_evt = '0;
    if (run) begin
      strm_evt[DISP] = (cyc % 64 == 0);
      strm_evt[CAM]  = !case_b && (cyc % 64 == 32);
      strm_wdata[CAM] = 64'(cyc);
      issue_en = '1;
      issue_en[DSP]   = ($urandom % 60) == 0;
      issue_en[AUDIO] = ($urandom % 150) == 0;
    end else issue_en = '0;
  end

  // LCD: words arrive in address order (display job reads from its base)
  longint lcd_next = 64'h0;
  int lcd_words = 0;
  // the display reads locations nobody writes; the DRAM model returns a
  // fixed function of the address there, so the expected word is known
  function automatic logic [DATA_W-1:0] init_word(logic [ADDR_W-1:0] a);
    dram_addr_t d;
    longint key;
    d = decode_addr(a);
    key = {d.ch, d.rank, d.bank, d.row, d.col};
    return {32'hc0de_0000 ^ 32'(key >> 8), 32'(key)};
  endfunction
  int lcd_bad = 0;
  always @(negedge clk) if (strm_evt[DISP] && !strm_empty[DISP]) begin
    if (strm_rdata[DISP] != init_word((ADDR_W'(DISP) << 26) + ADDR_W'(lcd_next))) lcd_bad++;
    lcd_next += TXN_BYTES;
    lcd_words++;
  end

  // ---- CPU: write 32 words, read them back
  logic [DATA_W-1:0] cpu_data [32];
  int cpu_ok = 0, cpu_bad = 0;
  task automatic cpu_access(logic wr, int i);
    @(negedge clk);
    cpu_req = '0;
    cpu_req.addr = ADDR_W'(32'h7000_0000 + i * 64);
    cpu_req.write = wr; cpu_req.wdata = cpu_data[i]; cpu_req.prio = 3'd2; cpu_req.tag = TAG_W'(i);
    cpu_req_valid = 1;
    @(posedge clk);
    while (!cpu_req_ready) @(posedge clk);
    #1 cpu_req_valid = 0;
    while (!cpu_rsp_valid) @(posedge clk);
    if (!wr) begin
      if (cpu_rsp.rdata == cpu_data[i] && cpu_rsp.tag == TAG_W'(i)) cpu_ok++;
      else begin cpu_bad++; $display("FAIL CPU read %0d: %h expected %h", i, cpu_rsp.rdata, cpu_data[i]); end
    end
  endtask

  task automatic configure();
    for (int i = 0; i < NC; i++) begin
      cfg[i] = '0;
      cfg[i].num_inc = 32'(FRAME);
      cfg[i].den_inc = 32'(job_n[i] > 0 ? job_n[i] : 1);
      cfg[i].period  = 32'(FRAME);
      job_base[i]  = ADDR_W'(i) << 26;
      job_count[i] = 24'(job_n[i]);
      job_write[i] = (i == ROTW || i == VID || i == JPEG);
      core_wdata[i] = {32'(i), 32'hfeed_0000};
    end
    cfg[DSP].limit = 32'd250;
    cfg[AUDIO].limit = 32'd400;
    // bandwidth cores: target 1 transaction per 160 cycles, 4000-cycle windows
    foreach (cfg[i]) if (i == WIFI || i == USB) begin
      cfg[i].num_inc = 32'd65536; cfg[i].den_inc = 32'd65536 / 160; cfg[i].period = 32'd4000;
      job_count[i] = 24'hffffff;
    end
    // display and camera: reference level half of the 64-entry buffer, 2000-cycle windows
    cfg[DISP].init_level = 16'd32; cfg[DISP].period = 32'd2000; job_count[DISP] = 24'hffffff;
    cfg[CAM].init_level  = 16'd32; cfg[CAM].period  = 32'd2000; job_count[CAM]  = 24'hffffff; job_write[CAM] = 1;
    job_count[DSP] = 24'hffffff; job_count[AUDIO] = 24'hffffff;
  endtask

  task automatic run_frame(int f);
    int late;
    @(negedge clk);
    for (int i = 0; i < NC; i++) job_start[i] = (f == 0) || (job_n[i] > 0);
    for (int i = 0; i < NC; i++) if (job_n[i] > 0) job_base[i] = (ADDR_W'(i) << 26) + ADDR_W'(f) * (ADDR_W'(1) << 22);
    @(negedge clk);
    job_start = '0;
    fork
      begin
        for (int i = 0; i < 32; i++) cpu_access(1, i);
        for (int i = 0; i < 32; i++) cpu_access(0, i);
      end
      repeat (FRAME - 10) @(negedge clk);
    join
    late = 0;
    for (int i = 0; i < NC; i++) if (job_n[i] > 0 && job_busy[i]) begin
      late++; $display("FAIL frame %0d: client %0d did not finish its job", f, i);
    end
    checks++;
    if (late != 0) failures++;
  endtask

  initial begin
    for (int i = 0; i < NC; i++) begin max_prio[i] = 0; last_prio[i] = 0; strm_wdata[i] = '0; end
    for (int i = 0; i < 32; i++) cpu_data[i] = {$urandom, $urandom};
    configure();
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    run = 1;
    // frame 0: Policy 1, aging limit as published (10000 cycles)
    run_frame(0);
    $display("frame 0 (Policy 1): row hits %0d, aged %0d, queue-full cycles %0d", n_hit, n_aged, n_qfull);
    // frame 1: Policy 2 with delta 6, short aging limit
    rb_en = 1; age_limit = 14'd400;
    for (int i = 0; i < 32; i++) cpu_data[i] = {$urandom, $urandom};
    run_frame(1);
    $display("frame 1 (Policy 2): row hits %0d, aged %0d, Policy-2 bypasses %0d", n_hit, n_aged, n_bypass);
    // frame 2: GPS, camera, rotator and JPEG idle, Policy 2, aging at 10000
    age_limit = 14'd10000;
    job_n[GPS] = 0; job_n[ROTR] = 0; job_n[ROTW] = 0; job_n[JPEG] = 0;
    case_b = 1;
    for (int i = 0; i < 32; i++) cpu_data[i] = {$urandom, $urandom};
    run_frame(2);
    case_b = 0;
    checks++; if (n_idle_txn != 0) begin failures++; $display("FAIL idle cores issued %0d transactions", n_idle_txn); end
    checks++; if (n_cam_txn_b > 64) begin failures++; $display("FAIL idle camera wrote %0d transactions", n_cam_txn_b); end
    run = 0;
    $display("totals: prio up %0d down %0d, network waits %0d, queue-full %0d, row hits %0d of %0d column commands,",
             n_prio_up, n_prio_down, n_noc_wait, n_qfull, n_hit, n_rd + n_wr);
    $display("        Policy-2 hit-over-urgent %0d, aged %0d, ACTs %0d, LCD words %0d", n_bypass, n_aged, n_act, lcd_words);
    for (int i = 0; i < NC; i++) $display("  client %2d: max priority %0d, final NPI %f", i, max_prio[i], real'(npi[i]) / 256.0);
    checks++; if (cpu_bad != 0 || cpu_ok != 96) begin failures++; $display("FAIL CPU readback %0d ok %0d bad", cpu_ok, cpu_bad); end
    checks++; if (violations != 0) begin failures++; $display("FAIL %0d DRAM violations", violations); end
    checks++; if (n_prio_up == 0)   begin failures++; $display("FAIL no priority rise"); end
    checks++; if (n_prio_down == 0) begin failures++; $display("FAIL no priority fall"); end
    checks++; if (n_noc_wait == 0)  begin failures++; $display("FAIL no network contention"); end
    checks++; if (n_qfull == 0)     begin failures++; $display("FAIL no full controller queue"); end
    checks++; if (n_hit == 0)       begin failures++; $display("FAIL no row hits"); end
    checks++; if (n_bypass == 0)    begin failures++; $display("FAIL Policy 2 never let a hit pass"); end
    checks++; if (n_aged == 0)      begin failures++; $display("FAIL aging never used"); end
    checks++; if (lcd_words == 0 || lcd_bad != 0) begin failures++; $display("FAIL LCD words %0d, %0d wrong", lcd_words, lcd_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
