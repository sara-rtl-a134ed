// tb_mc_bank_timing: drives random legal command sequences into the bank
// timing tracker and compares, every cycle and for all 32 banks, its
// ACT/PRE/READ/WRITE permissions and open rows with a timestamp-based
// reference of the same LPDDR4 rules (tRCD, tRP, tRTP, tWR, tWTR, tRRD,
// tFAW, one burst per channel at a time).
module tb_mc_bank_timing;
  import sara_pkg::*;
  localparam int T_RCD = 34, T_RP = 34, T_RTP = 14, T_WR = 34, T_WTR = 19, T_RRD = 19, T_FAW = 75, T_BURST = 8;
  logic clk = 0, rst_n = 0;
  dram_cmd_t cmd = '0;
  logic [NUM_GBANKS-1:0] bank_open, act_ok, pre_ok, rd_ok, wr_ok;
  logic [ROW_W-1:0] open_row [NUM_GBANKS];
  int checks = 0, failures = 0;

  mc_bank_timing dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0;
  bit o [NUM_GBANKS];
  logic [ROW_W-1:0] r_row [NUM_GBANKS];
  longint t_act [NUM_GBANKS], t_pre [NUM_GBANKS], t_rd [NUM_GBANKS], t_wr [NUM_GBANKS];
  longint acts [NUM_RANKS][$];
  longint t_wr_rank [NUM_RANKS], t_col [NUM_CH];
  bit e_act [NUM_GBANKS], e_pre [NUM_GBANKS], e_rd [NUM_GBANKS], e_wr [NUM_GBANKS];
  int n_cmd [5];

  task automatic expect_flags();
    for (int b = 0; b < NUM_GBANKS; b++) begin
      int r, c;
      r = b >> BANK_W; c = b >> (BANK_W + RANK_W);
      e_act[b] = !o[b] && cyc - t_pre[b] >= T_RP && (acts[r].size() == 0 || cyc - acts[r][$] >= T_RRD) &&
                 (acts[r].size() < 4 || cyc - acts[r][$-3] >= T_FAW);
      e_pre[b] = o[b] && cyc - t_rd[b] >= T_RTP && cyc - t_wr[b] >= T_BURST + T_WR;
      e_wr[b]  = o[b] && cyc - t_act[b] >= T_RCD && cyc - t_col[c] >= T_BURST;
      e_rd[b]  = e_wr[b] && cyc - t_wr_rank[r] >= T_BURST + T_WTR;
    end
  endtask

  initial begin
    for (int b = 0; b < NUM_GBANKS; b++) begin o[b] = 0; t_act[b] = -999; t_pre[b] = -999; t_rd[b] = -999; t_wr[b] = -999; end
    for (int r = 0; r < NUM_RANKS; r++) t_wr_rank[r] = -999;
    for (int c = 0; c < NUM_CH; c++) t_col[c] = -999;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      int b, kind, tries;
      expect_flags();
      for (int bb = 0; bb < NUM_GBANKS; bb++) begin
        checks++;
        if (act_ok[bb] != e_act[bb] || pre_ok[bb] != e_pre[bb] || rd_ok[bb] != e_rd[bb] || wr_ok[bb] != e_wr[bb] ||
            bank_open[bb] != o[bb] || (o[bb] && open_row[bb] != r_row[bb])) begin
          failures++;
          $display("FAIL cyc %0d bank %0d: act %0d/%0d pre %0d/%0d rd %0d/%0d wr %0d/%0d", cyc, bb,
                   act_ok[bb], e_act[bb], pre_ok[bb], e_pre[bb], rd_ok[bb], e_rd[bb], wr_ok[bb], e_wr[bb]);
        end
      end
      // pick a random legal command (often none); concentrate on few banks
      cmd = '0;
      if ($urandom % 2 == 0) begin
        b = ($urandom % 2) ? $urandom % 4 : $urandom % NUM_GBANKS;
        kind = 1 + $urandom % 4;
        if ((kind == 1 && e_act[b]) || (kind == 2 && e_pre[b]) || (kind == 3 && e_rd[b]) || (kind == 4 && e_wr[b])) begin
          cmd.cmd = dram_cmd_e'(kind);
          {cmd.ch, cmd.rank, cmd.bank} = GBANK_W'(b);
          cmd.row = (kind == 1) ? ROW_W'($urandom) : r_row[b];
          n_cmd[kind]++;
          case (kind)
            1: begin
                 int r;
                 r = b >> BANK_W;
                 o[b] = 1; r_row[b] = cmd.row; t_act[b] = cyc;
                 acts[r].push_back(cyc);
                 if (acts[r].size() > 4) void'(acts[r].pop_front());
               end
            2: begin o[b] = 0; t_pre[b] = cyc; end
            3: begin t_rd[b] = cyc; t_col[b >> (BANK_W + RANK_W)] = cyc; end
            default: begin t_wr[b] = cyc; t_wr_rank[b >> BANK_W] = cyc; t_col[b >> (BANK_W + RANK_W)] = cyc; end
          endcase
        end
      end
      @(posedge clk);
      cyc++;
      @(negedge clk);
    end
    checks++;
    if (n_cmd[1] < 20 || n_cmd[2] < 20 || n_cmd[3] < 20 || n_cmd[4] < 20) begin
      failures++; $display("FAIL too few commands %0d %0d %0d %0d", n_cmd[1], n_cmd[2], n_cmd[3], n_cmd[4]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
