// tb_stream_buffer: random pushes and pops against a queue model; checks
// data order, empty/full flags and the occupancy count.
module tb_stream_buffer;
  localparam int unsigned DEPTH = 16, W = 32;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic empty, full;
  logic [$clog2(DEPTH+1)-1:0] occupancy;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  stream_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      // phases: mostly fill, mostly drain, mixed
      int pp;
      pp = (i % 600 < 200) ? 80 : (i % 600 < 400) ? 20 : 50;
      push  = ($urandom % 100) < pp;
      pop   = ($urandom % 100) < (100 - pp);
      wdata = $urandom;
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
          occupancy != model.size()) begin
        failures++;
        $display("FAIL flags: occ=%0d model=%0d empty=%0d full=%0d", occupancy, model.size(), empty, full);
      end
      if (pop && model.size() > 0) begin
        checks++;
        if (rdata !== model[0]) begin failures++; $display("FAIL data %h expected %h", rdata, model[0]); end
      end
      @(posedge clk);
      begin
        int sz;
        sz = model.size();
        if (pop && sz > 0) void'(model.pop_front());
        if (push && sz < DEPTH) model.push_back(wdata);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
