// tb_npi_divider: checks the NPI divider against an integer reference on
// directed and random operands, including saturation (quotient too large,
// zero divisor), and checks the latency: NPI_W+2 cycles from start to done,
// one cycle when saturated.
module tb_npi_divider;
  import sara_pkg::*;
  localparam int unsigned MW = 48;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [MW-1:0] num = '0, den = '0;
  logic busy, done;
  npi_t npi;
  int checks = 0, failures = 0;

  npi_divider #(.MW(MW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic npi_t ref_npi(logic [MW-1:0] n, logic [MW-1:0] d);
    logic [MW+NPI_FRAC-1:0] q;
    if (d == 0) return NPI_MAX;
    q = ({{NPI_FRAC{1'b0}}, n} << NPI_FRAC) / {{NPI_FRAC{1'b0}}, d};
    return (q > NPI_MAX) ? NPI_MAX : npi_t'(q);
  endfunction

  task automatic run(logic [MW-1:0] n, logic [MW-1:0] d);
    int cyc;
    npi_t exp_v;
    logic sat;
    exp_v = ref_npi(n, d);
    sat   = (d == 0) || ((({{NPI_FRAC{1'b0}}, n} << NPI_FRAC) / {{NPI_FRAC{1'b0}}, d}) > NPI_MAX);
    @(negedge clk);
    num = n; den = d; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (npi !== exp_v) begin
      failures++;
      $display("FAIL %0d/%0d: npi=%h expected %h", n, d, npi, exp_v);
    end
    checks++;
    if (cyc != (sat ? 1 : NPI_W + 2)) begin
      failures++;
      $display("FAIL latency %0d for %0d/%0d (sat=%0d)", cyc, n, d, sat);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(100, 100);    // 1.0
    run(3, 4);        // 0.75
    run(1, 2);        // 0.5
    run(13, 100);     // 0.13
    run(5, 0);        // saturate
    run(256, 1);      // exactly 256 -> saturate
    run(255, 1);      // 255.0
    run(0, 77);       // 0
    for (int i = 0; i < 300; i++) begin
      logic [MW-1:0] n, d;
      n = MW'({$urandom, $urandom}) >> ($urandom % MW);
      d = MW'({$urandom, $urandom}) >> ($urandom % MW);
      run(n, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
