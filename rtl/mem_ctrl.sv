// mem_ctrl: the memory controller, the last place where SARA priorities are
// honoured before DRAM.
//
// It holds NUM_ENTRIES = 42 transactions in five transaction queues (CPU,
// GPU, DSP, media cores, system cores); each of the 42 entry slots belongs to
// one queue, QUEUE_DEPTH slots per queue. A request is accepted (in_ready)
// when its queue, named in the request, has a free slot. Every cycle each
// waiting entry works out the next DRAM command it needs - READ/WRITE if its
// row is open (a row-buffer hit), PRECHARGE if another row is open in its
// bank, ACTIVATE if the bank is closed - and whether that command is legal
// now (mc_bank_timing). A PRECHARGE is held back while another waiting
// entry at least as urgent (aged before not aged, then age among aged
// entries, priority among the others) hits the open row. The scheduler (mc_scheduler) picks one ready entry
// with Policy 1 or Policy 2 and aging, and its command goes out on `dram_cmd`;
// at most one command is issued per cycle. A READ or WRITE completes the
// entry: the slot is freed and the response appears on `rsp_valid`/`rsp`
// exactly RD_LAT = CL + tBURST cycles later, carrying `dram_rdata` for a read,
// which the DRAM must return in that cycle (`dram_rvalid`). Writes are
// acknowledged after the same delay. Responses are never back-pressured.
//
// Configuration: `rb_en` selects Policy 2 (row-buffer-hit aware) over
// Policy 1, `delta` is Policy 2's threshold (6 in the paper) and `age_limit`
// the aging threshold T (10000 cycles in the paper).
// Event outputs pulse once per occurrence, for statistics.
//
// The entry count, the five queues, the policies and the timing values are
// the paper's; the split of entries among the queues, the single command per
// cycle, the fixed read latency and the write acknowledge are this design's.
module mem_ctrl
  import sara_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES = 42,
  parameter int unsigned QUEUE_DEPTH [NUM_QUEUES] = '{10, 8, 8, 8, 8},
  parameter int unsigned AGE_W   = 14,
  parameter int unsigned T_CL    = 36,
  parameter int unsigned T_RCD   = 34,
  parameter int unsigned T_RP    = 34,
  parameter int unsigned T_RTP   = 14,
  parameter int unsigned T_WR    = 34,
  parameter int unsigned T_WTR   = 19,
  parameter int unsigned T_RRD   = 19,
  parameter int unsigned T_FAW   = 75,
  parameter int unsigned T_BURST = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic             rb_en,
  input  prio_t            delta,
  input  logic [AGE_W-1:0] age_limit,
  // requests from the network
  input  logic             in_valid,
  output logic             in_ready,
  input  mem_req_t         in_req,
  // responses to the network
  output logic             rsp_valid,
  output mem_rsp_t         rsp,
  // DRAM
  output dram_cmd_t        dram_cmd,
  input  logic             dram_rvalid,
  input  logic [DATA_W-1:0] dram_rdata,
  // events
  output logic             ev_act,
  output logic             ev_col,
  output logic             ev_row_hit,
  output logic             ev_aged,
  output logic             ev_rb_bypass,
  output logic             ev_queue_full
);
  localparam int unsigned EW     = $clog2(NUM_ENTRIES);
  localparam int unsigned RD_LAT = T_CL + T_BURST;

  // queue owning each slot: the first QUEUE_DEPTH[0] slots are queue 0, ...
  function automatic qid_e slot_queue(int unsigned s);
    int unsigned acc;
    acc = 0;
    for (int q = 0; q < NUM_QUEUES; q++) begin
      acc += QUEUE_DEPTH[q];
      if (s < acc) return qid_e'(q);
    end
    return qid_e'(NUM_QUEUES - 1);
  endfunction

  // ---- entries -------------------------------------------------------------
  logic [NUM_ENTRIES-1:0] valid_q;
  mem_req_t               req_q    [NUM_ENTRIES];
  logic [AGE_W-1:0]       age_q    [NUM_ENTRIES];
  logic [NUM_ENTRIES-1:0] touched_q;   // entry has needed an ACT or PRE

  // ---- bank state ------------------------------------------------------------
  logic [NUM_GBANKS-1:0] bank_open, act_ok, pre_ok, rd_ok, wr_ok;
  logic [ROW_W-1:0]      open_row [NUM_GBANKS];
  dram_cmd_t             cmd;

  mc_bank_timing #(
    .T_RCD(T_RCD), .T_RP(T_RP), .T_RTP(T_RTP), .T_WR(T_WR), .T_WTR(T_WTR),
    .T_RRD(T_RRD), .T_FAW(T_FAW), .T_BURST(T_BURST)
  ) u_timing (
    .clk, .rst_n, .cmd, .bank_open, .open_row, .act_ok, .pre_ok, .rd_ok, .wr_ok
  );

  // ---- per-entry next command -------------------------------------------------
  logic [NUM_ENTRIES-1:0] e_ready, e_hit;
  dram_cmd_e              e_cmd  [NUM_ENTRIES];
  prio_t                  e_prio [NUM_ENTRIES];
  qid_e                   e_qid  [NUM_ENTRIES];

  logic [GBANK_W-1:0]     e_bank  [NUM_ENTRIES];
  logic [NUM_ENTRIES-1:0] e_aged;
  logic [NUM_ENTRIES-1:0] e_guard;                 // PRE held back for a pending hit

  // f is at least as urgent as e in the scheduler's order: aged before
  // not aged, older first among aged, higher priority first otherwise
  function automatic logic outranks(int unsigned f, int unsigned e);
    if (e_aged[f] != e_aged[e]) return e_aged[f];
    if (e_aged[f])              return age_q[f] >= age_q[e];
    return req_q[f].prio >= req_q[e].prio;
  endfunction

  always_comb begin
    for (int e = 0; e < NUM_ENTRIES; e++) begin
      dram_addr_t d;
      d = decode_addr(req_q[e].addr);
      e_bank[e] = gbank_of(d);
      e_prio[e] = req_q[e].prio;
      e_qid[e]  = slot_queue(e);
      e_aged[e] = age_q[e] >= age_limit;
      e_hit[e]  = bank_open[e_bank[e]] && open_row[e_bank[e]] == d.row;
      if (e_hit[e])                 e_cmd[e] = req_q[e].write ? CMD_WR : CMD_RD;
      else if (bank_open[e_bank[e]]) e_cmd[e] = CMD_PRE;
      else                          e_cmd[e] = CMD_ACT;
    end
    // An open row is not closed under a waiting hit that is at least as
    // urgent as the entry asking to close it; otherwise two entries of equal
    // priority could take turns re-opening the bank for ever.
    for (int e = 0; e < NUM_ENTRIES; e++) begin
      e_guard[e] = 1'b0;
      for (int f = 0; f < NUM_ENTRIES; f++)
        if (valid_q[f] && e_hit[f] && e_bank[f] == e_bank[e] && outranks(f, e))
          e_guard[e] = 1'b1;
    end
    for (int e = 0; e < NUM_ENTRIES; e++) begin
      unique case (e_cmd[e])
        CMD_RD:  e_ready[e] = valid_q[e] && rd_ok[e_bank[e]];
        CMD_WR:  e_ready[e] = valid_q[e] && wr_ok[e_bank[e]];
        CMD_PRE: e_ready[e] = valid_q[e] && pre_ok[e_bank[e]] && !e_guard[e];
        default: e_ready[e] = valid_q[e] && act_ok[e_bank[e]];
      endcase
    end
  end

  // ---- scheduler -----------------------------------------------------------------
  logic          sel_valid, sel_aged, sel_below_max, sel_col;
  logic [EW-1:0] sel_idx;

  mc_scheduler #(.NE(NUM_ENTRIES), .AGE_W(AGE_W)) u_sched (
    .clk, .rst_n,
    .rb_en, .delta, .age_limit,
    .ready   (e_ready),
    .row_hit (e_hit),
    .prio    (e_prio),
    .qid     (e_qid),
    .age     (age_q),
    .advance (sel_col),
    .sel_valid, .sel_idx, .sel_aged, .sel_below_max
  );

  assign sel_col = sel_valid && (e_cmd[sel_idx] == CMD_RD || e_cmd[sel_idx] == CMD_WR);

  always_comb begin
    dram_addr_t d;
    d   = decode_addr(req_q[sel_idx].addr);
    cmd = '0;
    if (sel_valid) begin
      cmd.cmd   = e_cmd[sel_idx];
      cmd.ch    = d.ch;
      cmd.rank  = d.rank;
      cmd.bank  = d.bank;
      cmd.row   = d.row;
      cmd.col   = d.col;
      cmd.wdata = req_q[sel_idx].wdata;
    end
  end
  assign dram_cmd = cmd;

  // ---- admission ---------------------------------------------------------------
  logic                   have_slot;
  logic [EW-1:0]          free_slot;
  logic                   accept;

  always_comb begin
    have_slot = 1'b0;
    free_slot = '0;
    for (int e = NUM_ENTRIES - 1; e >= 0; e--)
      if (!valid_q[e] && slot_queue(e) == in_req.qid) begin
        have_slot = 1'b1;
        free_slot = EW'(e);
      end
  end
  assign in_ready = have_slot;
  assign accept   = in_valid && have_slot;

  always_ff @(posedge clk) begin
    if (accept) req_q[free_slot] <= in_req;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q   <= '0;
      touched_q <= '0;
      for (int e = 0; e < NUM_ENTRIES; e++) age_q[e] <= '0;
    end else begin
      for (int e = 0; e < NUM_ENTRIES; e++)
        if (valid_q[e] && age_q[e] != '1) age_q[e] <= age_q[e] + 1'b1;
      if (sel_valid && !sel_col) touched_q[sel_idx] <= 1'b1;
      if (sel_col) valid_q[sel_idx] <= 1'b0;
      if (accept) begin
        valid_q[free_slot]   <= 1'b1;
        touched_q[free_slot] <= 1'b0;
        age_q[free_slot]     <= '0;
      end
    end
  end

  // ---- response pipeline ----------------------------------------------------------
  typedef struct packed {
    logic             valid;
    logic [SRC_W-1:0] src;
    logic [TAG_W-1:0] tag;
    logic             write;
  } inflight_t;

  inflight_t pipe_q [RD_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RD_LAT; i++) pipe_q[i] <= '0;
    end else begin
      pipe_q[0].valid <= sel_col;
      pipe_q[0].src   <= req_q[sel_idx].src;
      pipe_q[0].tag   <= req_q[sel_idx].tag;
      pipe_q[0].write <= req_q[sel_idx].write;
      for (int i = 1; i < RD_LAT; i++) pipe_q[i] <= pipe_q[i-1];
    end
  end

  always_comb begin
    inflight_t h;
    h         = pipe_q[RD_LAT-1];
    rsp_valid = h.valid;
    rsp.src   = h.src;
    rsp.tag   = h.tag;
    rsp.write = h.write;
    rsp.rdata = h.write ? '0 : dram_rdata;
  end

  // ---- events ---------------------------------------------------------------------
  assign ev_act        = sel_valid && e_cmd[sel_idx] == CMD_ACT;
  assign ev_col        = sel_col;
  assign ev_row_hit    = sel_col && !touched_q[sel_idx];
  assign ev_aged       = sel_valid && sel_aged;
  assign ev_rb_bypass  = sel_valid && sel_below_max && !sel_aged;
  assign ev_queue_full = in_valid && !have_slot;

  // A read's data must arrive exactly when its response leaves.
  a_rdata_on_time: assert property (@(posedge clk) disable iff (!rst_n)
    (rsp_valid && !rsp.write) |-> dram_rvalid);
endmodule
