// tb_prio_rr_arbiter: random requests and priorities against a reference of
// Policy 1 (highest priority wins, round-robin among equals starting after
// the last winner). Also checks that two equal top requesters alternate.
module tb_prio_rr_arbiter;
  import sara_pkg::*;
  localparam int unsigned N = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req = '0;
  prio_t prio [N];
  logic advance = 0;
  logic gnt_valid;
  logic [N-1:0] gnt;
  logic [$clog2(N)-1:0] gnt_idx;
  int checks = 0, failures = 0;
  int ptr = 0;

  prio_rr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_pick();
    int best;
    best = -1;
    for (int i = 0; i < N; i++) if (req[i] && (best < 0 || prio[i] > prio[best])) best = i;
    if (best < 0) return -1;
    for (int k = 0; k < N; k++) begin
      int i;
      i = (ptr + k) % N;
      if (req[i] && prio[i] == prio[best]) return i;
    end
    return -1;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) prio[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int exp_i;
      req = N'($urandom);
      for (int i = 0; i < N; i++) prio[i] = prio_t'($urandom % (t < 1000 ? 2 : 8));
      advance = ($urandom % 4) != 0;
      #1;
      exp_i = ref_pick();
      checks++;
      if ((exp_i < 0 && gnt_valid) || (exp_i >= 0 && (!gnt_valid || gnt_idx != exp_i || gnt != (N'(1) << exp_i)))) begin
        failures++;
        $display("FAIL t=%0d req=%b gnt=%b idx=%0d expected %0d", t, req, gnt, gnt_idx, exp_i);
      end
      @(posedge clk);
      if (advance && exp_i >= 0) ptr = (exp_i + 1) % N;
      @(negedge clk);
    end
    // equal top priority: inputs 1 and 4 alternate, low-priority 2 waits
    req = 6'b010110; prio[1] = 5; prio[4] = 5; prio[2] = 1; advance = 1;
    begin
      int seen1, seen4;
      seen1 = 0; seen4 = 0;
      for (int t = 0; t < 10; t++) begin
        #1;
        if (gnt_idx == 1) seen1++;
        if (gnt_idx == 4) seen4++;
        checks++;
        if (gnt_idx == 2) begin failures++; $display("FAIL low priority granted"); end
        @(negedge clk);
      end
      checks++;
      if (seen1 != 5 || seen4 != 5) begin failures++; $display("FAIL no alternation %0d %0d", seen1, seen4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
