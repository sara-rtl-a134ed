// sara_pkg: types and constants shared by the SARA quality-of-service fabric.
//
// Every memory transaction in the system carries a 3-bit priority (0..7), the
// level the issuing DMA derived from its own Normalized Performance Indicator
// (NPI). The NPI is an unsigned fixed-point number with NPI_FRAC fraction bits
// (1.0 = target met exactly). The address map, transaction width and the
// request/response structs below are choices of this design; the priority
// width, the five controller queues and the DRAM organisation (2 channels,
// 2 ranks, 8 banks) follow the published configuration.
package sara_pkg;

  // ---- priority and NPI ----------------------------------------------------
  localparam int unsigned PRIO_W     = 3;              // k = 3 bits, 8 levels
  localparam int unsigned NUM_LEVELS = 1 << PRIO_W;
  localparam int unsigned NPI_W      = 16;             // Q8.8 unsigned
  localparam int unsigned NPI_FRAC   = 8;
  localparam logic [NPI_W-1:0] NPI_ONE = NPI_W'(1) << NPI_FRAC;
  localparam logic [NPI_W-1:0] NPI_MAX = '1;

  typedef logic [PRIO_W-1:0] prio_t;
  typedef logic [NPI_W-1:0]  npi_t;

  // ---- transactions --------------------------------------------------------
  localparam int unsigned ADDR_W   = 31;               // 2 GB of DRAM
  localparam int unsigned DATA_W   = 64;               // data token per transaction
  localparam int unsigned SRC_W    = 5;                // up to 32 requesters
  localparam int unsigned TAG_W    = 4;                // up to 16 outstanding per DMA
  localparam int unsigned TXN_BYTES = 64;              // one DRAM burst per transaction

  // Controller transaction queues: CPU, GPU, DSP, media cores, system cores.
  localparam int unsigned NUM_QUEUES = 5;
  localparam int unsigned QID_W      = 3;
  typedef enum logic [QID_W-1:0] {
    Q_CPU    = 3'd0,
    Q_GPU    = 3'd1,
    Q_DSP    = 3'd2,
    Q_MEDIA  = 3'd3,
    Q_SYSTEM = 3'd4
  } qid_e;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              write;
    logic [DATA_W-1:0] wdata;
    prio_t             prio;
    qid_e              qid;
    logic [SRC_W-1:0]  src;
    logic [TAG_W-1:0]  tag;
  } mem_req_t;

  typedef struct packed {
    logic [SRC_W-1:0]  src;
    logic [TAG_W-1:0]  tag;
    logic              write;     // 1: write acknowledge, 0: read data
    logic [DATA_W-1:0] rdata;
  } mem_rsp_t;

  // ---- DRAM organisation (2 channels, 2 ranks, 8 banks) ---------------------
  localparam int unsigned CH_W    = 1;
  localparam int unsigned RANK_W  = 1;
  localparam int unsigned BANK_W  = 3;
  localparam int unsigned COL_W   = 5;   // 64-byte columns in a 2 KB row
  localparam int unsigned OFF_W   = 6;
  localparam int unsigned ROW_W   = ADDR_W - OFF_W - COL_W - CH_W - BANK_W - RANK_W; // 15
  localparam int unsigned NUM_CH    = 1 << CH_W;
  localparam int unsigned NUM_RANKS = NUM_CH << RANK_W;             // ranks in the system
  localparam int unsigned GBANK_W   = CH_W + RANK_W + BANK_W;       // global bank index
  localparam int unsigned NUM_GBANKS = 1 << GBANK_W;                // 32

  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [RANK_W-1:0] rank;
    logic [BANK_W-1:0] bank;
    logic [CH_W-1:0]   ch;
    logic [COL_W-1:0]  col;
  } dram_addr_t;

  // addr = {row, rank, bank, channel, column, byte offset}
  function automatic dram_addr_t decode_addr(logic [ADDR_W-1:0] a);
    dram_addr_t d;
    {d.row, d.rank, d.bank, d.ch, d.col} = a[ADDR_W-1:OFF_W];
    return d;
  endfunction

  // global bank index {channel, rank, bank}
  function automatic logic [GBANK_W-1:0] gbank_of(dram_addr_t d);
    return {d.ch, d.rank, d.bank};
  endfunction

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e         cmd;
    logic [CH_W-1:0]   ch;
    logic [RANK_W-1:0] rank;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    logic [DATA_W-1:0] wdata;
  } dram_cmd_t;

  // ---- performance meter kinds ------------------------------------------------
  typedef enum logic [1:0] {
    METER_LATENCY   = 2'd0,  // Eqn. 1: limit / average latency
    METER_PROGRESS  = 2'd1,  // Eqn. 2: progress / reference progress (also bandwidth)
    METER_OCC_READ  = 2'd2,  // Eqn. 3: read buffer drained at a constant rate (display)
    METER_OCC_WRITE = 2'd3   // mirror of Eqn. 3: write buffer filled at a constant rate (camera)
  } meter_kind_e;

  // Static configuration of one client's meter.
  typedef struct packed {
    logic [31:0] limit;        // latency meter: maximum latency limit (cycles)
    logic [31:0] num_inc;      // progress meter: added to progress per completed transaction
    logic [31:0] den_inc;      // progress meter: added to reference per cycle
    logic [31:0] period;       // progress/occupancy meter: window (frame) length in cycles
    logic [15:0] init_level;   // occupancy meter: reference occupancy (entries)
  } meter_cfg_t;

endpackage
