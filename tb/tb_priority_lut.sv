// tb_priority_lut: checks the NPI-to-priority translation with the reset
// thresholds (1 - p/8), after rewriting the table through its write port,
// and the one-cycle output latency.
module tb_priority_lut;
  import sara_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [PRIO_W-1:0] lut_idx = '0;
  npi_t lut_val = '0, npi = '0;
  prio_t prio;
  int checks = 0, failures = 0;
  npi_t table_m [8];

  priority_lut dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // lowest level whose bound the NPI reaches; 7 if none
  function automatic prio_t ref_prio(npi_t v);
    for (int p = 0; p < 8; p++) if (v >= table_m[p]) return prio_t'(p);
    return 3'd7;
  endfunction

  task automatic check(npi_t v, prio_t exp_p);
    @(negedge clk);
    npi = v;
    @(negedge clk);
    checks++;
    if (prio !== exp_p) begin
      failures++;
      $display("FAIL npi=%h prio=%0d expected %0d", v, prio, exp_p);
    end
  endtask

  initial begin
    for (int p = 0; p < 8; p++) table_m[p] = npi_t'(256 - 32 * p);
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(16'h0100, 0);   // 1.0: target met
    check(16'h0200, 0);
    check(16'h00ff, 1);   // just below 1.0
    check(16'h00e0, 1);   // 0.875
    check(16'h00c0, 2);   // 0.75
    check(16'h0080, 4);   // 0.5
    check(16'h0040, 6);
    check(16'h003f, 7);
    check(16'h0020, 7);   // 0.125: level 7's own bound
    check(16'h0000, 7);
    // a table with irregular bounds; level 7 never asserted -> default 7
    @(negedge clk);
    for (int p = 0; p < 8; p++) begin
      table_m[p] = npi_t'(16'h0400 - 16'h0090 * p);
      lut_we = 1; lut_idx = 3'(p); lut_val = table_m[p];
      @(negedge clk);
    end
    lut_we = 0;
    for (int i = 0; i < 300; i++) begin
      npi_t v;
      v = npi_t'($urandom % 16'h0500);
      check(v, ref_prio(v));
    end
    // one-cycle latency: the change shows on the next edge, not the same one
    @(negedge clk);
    npi = 16'h0000;
    @(negedge clk);
    npi = 16'hffff;
    #1;
    checks++;
    if (prio !== 3'd7) begin failures++; $display("FAIL output not registered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
