// sara_soc: the SARA quality-of-service fabric of a heterogeneous MPSoC -
// fourteen self-monitoring DMA front ends, a host CPU port, the on-chip
// network and the memory controller in front of a 2-channel LPDDR4 DRAM.
//
// Each client (sara_client) measures its own core's health with a meter
// suited to the core, turns it into an NPI and a 3-bit priority and tags its
// requests with it. The network (noc) and the memory controller (mem_ctrl)
// then allocate their shared, non-partitionable resources - switch slots,
// controller entries, DRAM commands - by that priority, with round-robin
// among equals, Policy 2's row-hit preference below delta, and aging.
//
// Default clients, one per DMA of the paper's camcorder system:
//   0 GPU (frame progress)      7 camera (write-buffer occupancy)
//   1 DSP (latency)             8 display (read-buffer occupancy)
//   2 image processor (frame)   9 GPS (processing time, as progress)
//   3 video codec (frame)      10 WiFi (bandwidth)
//   4 rotator read DMA (frame) 11 USB (bandwidth)
//   5 rotator write DMA (frame)12 modem (processing time, as progress)
//   6 JPEG (frame)             13 audio (latency)
// The CPU, which has no meter, is requester NUM_CLIENTS and brings its own
// priority on `cpu_req.prio`. The cores themselves and the DRAM devices are
// outside this module: the cores drive the job, flow-control and stream
// ports; the DRAM receives `dram_cmd` and must return read data RD_LAT =
// CL + tBURST cycles after a READ on `dram_rvalid`/`dram_rdata`.
//
// Source id of client i is i, of the CPU NUM_CLIENTS. Responses come back on
// `cpu_rsp` (CPU) or inside the clients. `mc_ev` counts nothing itself: it
// exposes the controller's per-cycle event pulses.
//
// The client list follows the paper's table of cores and their performance
// types; the assignment of cores to controller queues (GPU, DSP, media,
// system, CPU) follows its description of the five queues, with audio and
// the modem taken as system cores.
module sara_soc
  import sara_pkg::*;
#(
  parameter int unsigned NUM_CLIENTS = 14,
  parameter meter_kind_e CLIENT_KIND [NUM_CLIENTS] = '{
    METER_PROGRESS, METER_LATENCY, METER_PROGRESS, METER_PROGRESS,
    METER_PROGRESS, METER_PROGRESS, METER_PROGRESS, METER_OCC_WRITE,
    METER_OCC_READ, METER_PROGRESS, METER_PROGRESS, METER_PROGRESS,
    METER_PROGRESS, METER_LATENCY},
  parameter qid_e CLIENT_QID [NUM_CLIENTS] = '{
    Q_GPU, Q_DSP, Q_MEDIA, Q_MEDIA, Q_MEDIA, Q_MEDIA, Q_MEDIA, Q_MEDIA,
    Q_MEDIA, Q_SYSTEM, Q_SYSTEM, Q_SYSTEM, Q_SYSTEM, Q_SYSTEM},
  parameter int unsigned MAX_OUT     = 8,
  parameter int unsigned BUF_DEPTH   = 64,
  parameter int unsigned NUM_ENTRIES = 42,
  parameter int unsigned AGE_W       = 14,
  localparam int unsigned NC = NUM_CLIENTS
) (
  input  logic              clk,
  input  logic              rst_n,
  // memory-system configuration
  input  logic              rb_en,
  input  prio_t             delta,
  input  logic [AGE_W-1:0]  age_limit,
  // per-client configuration
  input  meter_cfg_t        cfg        [NC],
  input  logic [NC-1:0]     lut_we,
  input  logic [PRIO_W-1:0] lut_idx,
  input  npi_t              lut_val,
  // per-client core side
  input  logic [NC-1:0]     job_start,
  input  logic [ADDR_W-1:0] job_base   [NC],
  input  logic [23:0]       job_count  [NC],
  input  logic [NC-1:0]     job_write,
  output logic [NC-1:0]     job_busy,
  input  logic [NC-1:0]     issue_en,
  input  logic [DATA_W-1:0] core_wdata [NC],
  input  logic [NC-1:0]     strm_evt,
  input  logic [DATA_W-1:0] strm_wdata [NC],
  output logic [DATA_W-1:0] strm_rdata [NC],
  output logic [NC-1:0]     strm_empty,
  output npi_t              npi        [NC],
  output prio_t             prio       [NC],
  output logic [NC-1:0]     txn_done,
  // host CPU port
  input  logic              cpu_req_valid,
  output logic              cpu_req_ready,
  input  mem_req_t          cpu_req,
  output logic              cpu_rsp_valid,
  output mem_rsp_t          cpu_rsp,
  // DRAM
  output dram_cmd_t         dram_cmd,
  input  logic              dram_rvalid,
  input  logic [DATA_W-1:0] dram_rdata,
  // memory-controller events
  output logic [5:0]        mc_ev      // {queue_full, rb_bypass, aged, row_hit, col, act}
);
  localparam int unsigned NI = NC + 1;

  logic [NI-1:0] n_valid, n_ready;
  mem_req_t      n_req [NI];
  logic          rsp_valid;
  mem_rsp_t      rsp;
  logic          mc_valid, mc_ready, mc_rsp_valid;
  mem_req_t      mc_req;
  mem_rsp_t      mc_rsp;

  for (genvar i = 0; i < NC; i++) begin : g_client
    sara_client #(
      .KIND      (CLIENT_KIND[i]),
      .SRC_ID    (i),
      .QID       (CLIENT_QID[i]),
      .MAX_OUT   (MAX_OUT),
      .BUF_DEPTH (BUF_DEPTH)
    ) u_client (
      .clk, .rst_n,
      .job_start  (job_start[i]),
      .job_base   (job_base[i]),
      .job_count  (job_count[i]),
      .job_write  (job_write[i]),
      .job_busy   (job_busy[i]),
      .issue_en   (issue_en[i]),
      .core_wdata (core_wdata[i]),
      .strm_evt   (strm_evt[i]),
      .strm_wdata (strm_wdata[i]),
      .strm_rdata (strm_rdata[i]),
      .strm_empty (strm_empty[i]),
      .cfg        (cfg[i]),
      .lut_we     (lut_we[i]),
      .lut_idx, .lut_val,
      .req_valid  (n_valid[i]),
      .req_ready  (n_ready[i]),
      .req        (n_req[i]),
      .rsp_valid, .rsp,
      .npi        (npi[i]),
      .prio       (prio[i]),
      .txn_done   (txn_done[i])
    );
  end

  // host CPU: its source id and queue are fixed here
  always_comb begin
    n_valid[NC]   = cpu_req_valid;
    n_req[NC]     = cpu_req;
    n_req[NC].src = SRC_W'(NC);
    n_req[NC].qid = Q_CPU;
  end
  assign cpu_req_ready = n_ready[NC];
  assign cpu_rsp_valid = rsp_valid && rsp.src == SRC_W'(NC);
  assign cpu_rsp       = rsp;

  noc #(.N_IN(NI)) u_noc (
    .clk, .rst_n,
    .in_valid (n_valid),
    .in_ready (n_ready),
    .in_req   (n_req),
    .rsp_valid, .rsp,
    .mc_valid, .mc_ready, .mc_req,
    .mc_rsp_valid, .mc_rsp
  );

  mem_ctrl #(.NUM_ENTRIES(NUM_ENTRIES), .AGE_W(AGE_W)) u_mc (
    .clk, .rst_n,
    .rb_en, .delta, .age_limit,
    .in_valid  (mc_valid),
    .in_ready  (mc_ready),
    .in_req    (mc_req),
    .rsp_valid (mc_rsp_valid),
    .rsp       (mc_rsp),
    .dram_cmd, .dram_rvalid, .dram_rdata,
    .ev_act        (mc_ev[0]),
    .ev_col        (mc_ev[1]),
    .ev_row_hit    (mc_ev[2]),
    .ev_aged       (mc_ev[3]),
    .ev_rb_bypass  (mc_ev[4]),
    .ev_queue_full (mc_ev[5])
  );
endmodule
