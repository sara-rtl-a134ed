// sara_client: the SARA front end of one DMA - its performance meter, NPI
// divider, NPI-to-priority look-up table and the DMA itself, plus the stream
// buffer for cores measured by buffer occupancy.
//
// The meter chosen by KIND measures the core's own notion of health:
//   METER_LATENCY   average latency against a limit (DSP, audio)
//   METER_PROGRESS  progress against a linear reference (frame-rate cores,
//                   bandwidth cores, processing-time cores)
//   METER_OCC_READ  display read buffer: DMA refills, LCD (strm_evt) drains
//   METER_OCC_WRITE camera write buffer: sensor (strm_evt) fills, DMA drains
// The divider runs back to back, so a new NPI is ready about every 18
// cycles; the look-up table turns it into the priority that the DMA attaches
// to every request it issues from then on. A progress meter restarts its
// frame when a job starts. The read buffer asks the DMA for data only while
// it has room for every transaction that may be outstanding, so it cannot
// overflow; the write buffer lets the DMA write only while it holds data.
//
// The chain meter -> divider -> look-up table -> priority-tagged DMA is the
// paper's (its Fig. 3); the meter details are described in each meter.
module sara_client
  import sara_pkg::*;
#(
  parameter meter_kind_e KIND      = METER_PROGRESS,
  parameter int unsigned SRC_ID    = 0,
  parameter qid_e        QID       = Q_MEDIA,
  parameter int unsigned MAX_OUT   = 8,
  parameter int unsigned BUF_DEPTH = 64,
  parameter int unsigned MW        = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  // core: jobs and flow control
  input  logic              job_start,
  input  logic [ADDR_W-1:0] job_base,
  input  logic [23:0]       job_count,
  input  logic              job_write,
  output logic              job_busy,
  input  logic              issue_en,
  input  logic [DATA_W-1:0] core_wdata,
  // constant-rate stream side (LCD read or sensor write)
  input  logic              strm_evt,
  input  logic [DATA_W-1:0] strm_wdata,
  output logic [DATA_W-1:0] strm_rdata,
  output logic              strm_empty,
  // configuration
  input  meter_cfg_t        cfg,
  input  logic              lut_we,
  input  logic [PRIO_W-1:0] lut_idx,
  input  npi_t              lut_val,
  // network
  output logic              req_valid,
  input  logic              req_ready,
  output mem_req_t          req,
  input  logic              rsp_valid,
  input  mem_rsp_t          rsp,
  // observation
  output npi_t              npi,
  output prio_t             prio,
  output logic              txn_done
);
  localparam bit HAS_BUF = (KIND == METER_OCC_READ) || (KIND == METER_OCC_WRITE);
  localparam int unsigned OW = $clog2(BUF_DEPTH + 1);

  logic [15:0]       txn_lat;
  logic              rd_valid, wdata_pop, dma_issue_en;
  logic [DATA_W-1:0] rd_data, dma_wdata;
  logic [MW-1:0]     num, den;
  logic              div_busy, div_done;

  // ---- DMA ----------------------------------------------------------------
  dma_engine #(.MAX_OUT(MAX_OUT)) u_dma (
    .clk, .rst_n,
    .src_id    (SRC_W'(SRC_ID)),
    .qid       (QID),
    .job_start, .job_base,
    .job_count (job_count),
    .job_write, .job_busy,
    .issue_en  (dma_issue_en),
    .wdata     (dma_wdata),
    .wdata_pop,
    .prio,
    .req_valid, .req_ready, .req,
    .rsp_valid, .rsp,
    .txn_done, .txn_lat, .rd_valid, .rd_data
  );

  // ---- meter and stream buffer ---------------------------------------------
  if (KIND == METER_LATENCY) begin : g_lat
    latency_meter #(.MW(MW)) u_meter (
      .clk, .rst_n, .limit(cfg.limit), .txn_done, .txn_lat, .num, .den
    );
  end else if (KIND == METER_PROGRESS) begin : g_prog
    logic frame_start;
    progress_meter #(.MW(MW)) u_meter (
      .clk, .rst_n,
      .num_inc (cfg.num_inc),
      .den_inc (cfg.den_inc),
      .period  (cfg.period),
      .restart (job_start && !job_busy),
      .txn_done,
      .num, .den, .frame_start
    );
  end

  if (HAS_BUF) begin : g_buf
    localparam bit RD = (KIND == METER_OCC_READ);
    logic [OW-1:0]     occ;
    logic              empty, full;
    logic [DATA_W-1:0] bdata;

    stream_buffer #(.DEPTH(BUF_DEPTH), .W(DATA_W)) u_buf (
      .clk, .rst_n,
      .push      (RD ? rd_valid : strm_evt),
      .wdata     (RD ? rd_data  : strm_wdata),
      .pop       (RD ? strm_evt : wdata_pop),
      .rdata     (bdata),
      .empty, .full,
      .occupancy (occ)
    );

    occupancy_meter #(.MW(MW), .OCC_W(OW), .READ_BUFFER(RD)) u_meter (
      .clk, .rst_n,
      .init_level (cfg.init_level),
      .period     (cfg.period),
      .occupancy  (occ),
      .stream_evt (strm_evt),
      .num, .den
    );

    assign dma_issue_en = RD ? (issue_en && (occ < OW'(BUF_DEPTH - MAX_OUT)))
                             : (issue_en && !empty);
    assign dma_wdata    = RD ? core_wdata : bdata;
    assign strm_rdata   = bdata;
    assign strm_empty   = empty;
  end else begin : g_nobuf
    assign dma_issue_en = issue_en;
    assign dma_wdata    = core_wdata;
    assign strm_rdata   = rd_data;
    assign strm_empty   = 1'b1;
  end

  // ---- NPI and priority ---------------------------------------------------------
  npi_divider #(.MW(MW)) u_div (
    .clk, .rst_n,
    .start (!div_busy),
    .num, .den,
    .busy  (div_busy),
    .done  (div_done),
    .npi
  );

  priority_lut u_lut (
    .clk, .rst_n, .lut_we, .lut_idx, .lut_val, .npi, .prio
  );
endmodule
