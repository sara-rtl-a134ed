// mc_bank_timing: open-row and timing bookkeeping of the memory controller
// for every bank of both channels and ranks (2 x 2 x 8 = 32 banks).
//
// For each bank it remembers whether a row is open and which, and tells the
// scheduler, for the present cycle, whether an ACTIVATE, PRECHARGE, READ or
// WRITE to that bank would respect the DRAM timing. It learns from the
// command the controller issues (`cmd`, at most one per cycle, taking effect
// from the next cycle). Every constraint is a down-counter that is loaded
// when a command starts it and allows the command again when it reaches 0:
//   bank:    ACT->RD/WR tRCD, PRE->ACT tRP, RD->PRE tRTP, WR->PRE tBURST+tWR
//   rank:    ACT->ACT tRRD, at most four ACTs within tFAW, WR->RD tBURST+tWTR
//   channel: RD/WR->RD/WR tBURST (one data burst at a time on the data bus)
// Timing values are in controller clock cycles.
//
// The timing values are the published LPDDR4 settings (CL-tRCD-tRP 36-34-34,
// tWTR-tRTP-tWR 19-14-34, tRRD-tFAW 19-75). The burst length (8 clocks), the
// absence of tRAS, refresh, write latency and read/write turnaround, and
// folding the write latency into tWR/tWTR, are this design's simplifications.
module mc_bank_timing
  import sara_pkg::*;
#(
  parameter int unsigned T_RCD   = 34,
  parameter int unsigned T_RP    = 34,
  parameter int unsigned T_RTP   = 14,
  parameter int unsigned T_WR    = 34,
  parameter int unsigned T_WTR   = 19,
  parameter int unsigned T_RRD   = 19,
  parameter int unsigned T_FAW   = 75,
  parameter int unsigned T_BURST = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  dram_cmd_t             cmd,
  output logic [NUM_GBANKS-1:0] bank_open,
  output logic [ROW_W-1:0]      open_row [NUM_GBANKS],
  output logic [NUM_GBANKS-1:0] act_ok,
  output logic [NUM_GBANKS-1:0] pre_ok,
  output logic [NUM_GBANKS-1:0] rd_ok,
  output logic [NUM_GBANKS-1:0] wr_ok
);
  localparam int unsigned CW = 8;
  localparam int unsigned RIW = CH_W + RANK_W;   // global rank index {ch, rank}

  typedef logic [CW-1:0] cnt_t;

  cnt_t col_wait [NUM_GBANKS];
  cnt_t act_wait [NUM_GBANKS];
  cnt_t pre_wait [NUM_GBANKS];
  cnt_t rrd_wait [NUM_RANKS];
  cnt_t wtr_wait [NUM_RANKS];
  cnt_t faw_win  [NUM_RANKS][4];
  cnt_t bus_wait [NUM_CH];

  logic [GBANK_W-1:0] cb;
  logic [RIW-1:0]     cr;
  assign cb = {cmd.ch, cmd.rank, cmd.bank};
  assign cr = {cmd.ch, cmd.rank};

  function automatic cnt_t dec(cnt_t c);
    return (c == '0) ? '0 : c - 1'b1;
  endfunction
  function automatic cnt_t maxc(cnt_t a, cnt_t b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    for (int b = 0; b < NUM_GBANKS; b++) begin
      logic [RIW-1:0] r;
      logic           faw_free;
      logic [CH_W-1:0] c;
      r = RIW'(b >> BANK_W);
      c = CH_W'(b >> (BANK_W + RANK_W));
      faw_free = 1'b0;
      for (int k = 0; k < 4; k++) if (faw_win[r][k] == '0) faw_free = 1'b1;
      act_ok[b] = !bank_open[b] && act_wait[b] == '0 && rrd_wait[r] == '0 && faw_free;
      pre_ok[b] = bank_open[b] && pre_wait[b] == '0;
      wr_ok[b]  = bank_open[b] && col_wait[b] == '0 && bus_wait[c] == '0;
      rd_ok[b]  = wr_ok[b] && wtr_wait[r] == '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_open <= '0;
      for (int b = 0; b < NUM_GBANKS; b++) begin
        open_row[b] <= '0;
        col_wait[b] <= '0;
        act_wait[b] <= '0;
        pre_wait[b] <= '0;
      end
      for (int r = 0; r < NUM_RANKS; r++) begin
        rrd_wait[r] <= '0;
        wtr_wait[r] <= '0;
        for (int k = 0; k < 4; k++) faw_win[r][k] <= '0;
      end
      for (int c = 0; c < NUM_CH; c++) bus_wait[c] <= '0;
    end else begin
      // count every constraint down
      for (int b = 0; b < NUM_GBANKS; b++) begin
        col_wait[b] <= dec(col_wait[b]);
        act_wait[b] <= dec(act_wait[b]);
        pre_wait[b] <= dec(pre_wait[b]);
      end
      for (int r = 0; r < NUM_RANKS; r++) begin
        rrd_wait[r] <= dec(rrd_wait[r]);
        wtr_wait[r] <= dec(wtr_wait[r]);
        for (int k = 0; k < 4; k++) faw_win[r][k] <= dec(faw_win[r][k]);
      end
      for (int c = 0; c < NUM_CH; c++) bus_wait[c] <= dec(bus_wait[c]);

      // then load the ones the issued command starts
      // (a counter loaded with n allows the command n cycles later)
      unique case (cmd.cmd)
        CMD_ACT: begin
          bank_open[cb] <= 1'b1;
          open_row[cb]  <= cmd.row;
          col_wait[cb]  <= cnt_t'(T_RCD - 1);
          rrd_wait[cr]  <= cnt_t'(T_RRD - 1);
          begin : faw_load
            logic done;
            done = 1'b0;
            for (int k = 0; k < 4; k++)
              if (!done && faw_win[cr][k] == '0) begin
                faw_win[cr][k] <= cnt_t'(T_FAW - 1);
                done = 1'b1;
              end
          end
        end
        CMD_PRE: begin
          bank_open[cb] <= 1'b0;
          act_wait[cb]  <= cnt_t'(T_RP - 1);
        end
        CMD_RD: begin
          pre_wait[cb]    <= maxc(dec(pre_wait[cb]), cnt_t'(T_RTP - 1));
          bus_wait[cmd.ch] <= cnt_t'(T_BURST - 1);
        end
        CMD_WR: begin
          pre_wait[cb]    <= maxc(dec(pre_wait[cb]), cnt_t'(T_BURST + T_WR - 1));
          wtr_wait[cr]    <= cnt_t'(T_BURST + T_WTR - 1);
          bus_wait[cmd.ch] <= cnt_t'(T_BURST - 1);
        end
        default: ;
      endcase
    end
  end

  // Commands must only be issued when legal.
  a_act_legal: assert property (@(posedge clk) disable iff (!rst_n) cmd.cmd == CMD_ACT |-> act_ok[cb]);
  a_pre_legal: assert property (@(posedge clk) disable iff (!rst_n) cmd.cmd == CMD_PRE |-> pre_ok[cb]);
  a_rd_legal:  assert property (@(posedge clk) disable iff (!rst_n) cmd.cmd == CMD_RD  |-> rd_ok[cb] && open_row[cb] == cmd.row);
  a_wr_legal:  assert property (@(posedge clk) disable iff (!rst_n) cmd.cmd == CMD_WR  |-> wr_ok[cb] && open_row[cb] == cmd.row);
endmodule
