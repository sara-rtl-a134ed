// lpddr4_model: behavioural model of the two-channel LPDDR4 memory behind the
// controller, for simulation only (not synthesizable).
//
// It accepts the controller's command bus, keeps the written data of every
// address, and returns read data RD_LAT = CL + tBURST cycles after each READ
// on rvalid/rdata. A location never written reads as a fixed function of its
// address. It also checks the commands independently of the controller: a
// READ/WRITE to a closed bank or to a row that is not open, an ACTIVATE to an
// open bank, and violations of tRCD, tRP, tRTP, tWR, tWTR, tRRD, tFAW and of
// the one-burst-at-a-time data bus are counted in `violations` and printed.
module lpddr4_model
  import sara_pkg::*;
#(
  parameter int T_CL = 36, T_RCD = 34, T_RP = 34, T_RTP = 14, T_WR = 34,
  parameter int T_WTR = 19, T_RRD = 19, T_FAW = 75, T_BURST = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dram_cmd_t         cmd,
  output logic              rvalid,
  output logic [DATA_W-1:0] rdata,
  output int                violations,
  output int                n_act,
  output int                n_rd,
  output int                n_wr
);
  localparam int RD_LAT = T_CL + T_BURST;
  longint cyc;
  logic [DATA_W-1:0] mem [longint];
  logic   open_b   [NUM_GBANKS];
  logic [ROW_W-1:0] row_b [NUM_GBANKS];
  longint t_act [NUM_GBANKS], t_pre [NUM_GBANKS], t_rd [NUM_GBANKS], t_wr [NUM_GBANKS];
  longint t_act_rank [NUM_RANKS][$];
  longint t_wr_rank [NUM_RANKS];
  longint t_col_ch [NUM_CH];
  logic              pipe_v [RD_LAT];
  logic [DATA_W-1:0] pipe_d [RD_LAT];

  function automatic logic [DATA_W-1:0] init_word(longint key);
    return {32'hc0de_0000 ^ 32'(key >> 8), 32'(key)};
  endfunction

  task automatic bad(string what);
    violations++;
    $display("DRAM VIOLATION at %0d: %s (cmd %s bank %0d)", cyc, what, cmd.cmd.name(), {cmd.ch, cmd.rank, cmd.bank});
  endtask

  assign rvalid = pipe_v[RD_LAT-1];
  assign rdata  = pipe_d[RD_LAT-1];

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc = 0; violations = 0; n_act = 0; n_rd = 0; n_wr = 0;
      for (int b = 0; b < NUM_GBANKS; b++) begin
        open_b[b] = 0; row_b[b] = '0;
        t_act[b] = -1000; t_pre[b] = -1000; t_rd[b] = -1000; t_wr[b] = -1000;
      end
      for (int r = 0; r < NUM_RANKS; r++) begin t_act_rank[r].delete(); t_wr_rank[r] = -1000; end
      for (int c = 0; c < NUM_CH; c++) t_col_ch[c] = -1000;
      for (int i = 0; i < RD_LAT; i++) begin pipe_v[i] <= 0; pipe_d[i] <= '0; end
    end else begin
      int b, r;
      longint key;
      logic              v0;
      logic [DATA_W-1:0] d0;
      b = {cmd.ch, cmd.rank, cmd.bank};
      r = {cmd.ch, cmd.rank};
      key = {cmd.ch, cmd.rank, cmd.bank, cmd.row, cmd.col};
      v0 = 0; d0 = '0;
      case (cmd.cmd)
        CMD_ACT: begin
          n_act++;
          if (open_b[b]) bad("ACT to open bank");
          if (cyc - t_pre[b] < T_RP) bad("tRP");
          if (t_act_rank[r].size() > 0 && cyc - t_act_rank[r][$] < T_RRD) bad("tRRD");
          if (t_act_rank[r].size() >= 4 && cyc - t_act_rank[r][$-3] < T_FAW) bad("tFAW");
          t_act_rank[r].push_back(cyc);
          if (t_act_rank[r].size() > 4) void'(t_act_rank[r].pop_front());
          open_b[b] = 1; row_b[b] = cmd.row; t_act[b] = cyc;
        end
        CMD_PRE: begin
          if (!open_b[b]) bad("PRE to closed bank");
          if (cyc - t_rd[b] < T_RTP) bad("tRTP");
          if (cyc - t_wr[b] < T_BURST + T_WR) bad("tWR");
          open_b[b] = 0; t_pre[b] = cyc;
        end
        CMD_RD, CMD_WR: begin
          if (!open_b[b] || row_b[b] != cmd.row) bad("column command to a row that is not open");
          if (cyc - t_act[b] < T_RCD) bad("tRCD");
          if (cyc - t_col_ch[cmd.ch] < T_BURST) bad("data bus busy");
          t_col_ch[cmd.ch] = cyc;
          if (cmd.cmd == CMD_RD) begin
            n_rd++;
            if (cyc - t_wr_rank[r] < T_BURST + T_WTR) bad("tWTR");
            t_rd[b] = cyc;
            v0 = 1;
            d0 = mem.exists(key) ? mem[key] : init_word(key);
          end else begin
            n_wr++;
            t_wr[b] = cyc; t_wr_rank[r] = cyc;
            mem[key] = cmd.wdata;
          end
        end
        default: ;
      endcase
      pipe_v[0] <= v0;
      pipe_d[0] <= d0;
      for (int i = 1; i < RD_LAT; i++) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
      cyc++;
    end
  end
endmodule
