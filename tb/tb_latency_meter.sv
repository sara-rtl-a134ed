// tb_latency_meter: feeds completed-transaction latencies into the latency
// meter and compares its numerator (limit scaled) and denominator (scaled
// moving average) with a reference moving average computed here.
module tb_latency_meter;
  localparam int unsigned MW = 48, S = 4;
  logic clk = 0, rst_n = 0;
  logic [31:0] limit = 32'd200;
  logic txn_done = 0;
  logic [15:0] txn_lat = '0;
  logic [MW-1:0] num, den;
  int checks = 0, failures = 0;
  longint avg = 0;

  latency_meter #(.MW(MW), .AVG_SHIFT(S)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (den != 0) begin failures++; $display("FAIL den not 0 after reset"); end
    for (int i = 0; i < 500; i++) begin
      int l;
      l = (i < 250) ? 50 + $urandom % 100 : 300 + $urandom % 200;
      @(negedge clk);
      txn_done = ($urandom % 3) != 0;
      txn_lat  = 16'(l);
      if (txn_done) avg = avg + l - (avg >> S);
      @(negedge clk);
      txn_done = 0;
      @(negedge clk);   // outputs are registered behind the average
      checks++;
      if (den != MW'(avg) || num != (MW'(limit) << S)) begin
        failures++;
        $display("FAIL step %0d: num=%0d den=%0d expected %0d/%0d", i, num, den, limit << S, avg);
      end
    end
    // after the slow phase the average exceeds the limit: NPI below 1
    checks++;
    if (!(den > num)) begin failures++; $display("FAIL average should exceed the limit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
