// tb_progress_meter: checks the running progress and reference sums of the
// progress meter against counts kept here, across a frame wrap after
// `period` cycles and an explicit restart.
module tb_progress_meter;
  localparam int unsigned MW = 48;
  logic clk = 0, rst_n = 0;
  logic [31:0] num_inc = 32'd1000, den_inc = 32'd7, period = 32'd300;
  logic restart = 0, txn_done = 0;
  logic [MW-1:0] num, den;
  logic frame_start;
  int checks = 0, failures = 0;
  longint exp_num = 0, exp_den = 0, tick = 0;
  int wraps = 0;

  progress_meter #(.MW(MW)) dut (.*);
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
    for (int i = 0; i < 1000; i++) begin
      txn_done = ($urandom % 4) == 0;
      restart  = (i == 700);
      @(posedge clk);
      if (restart || tick >= period - 1) begin
        tick = 0; exp_num = 0; exp_den = 0; wraps++;
      end else begin
        tick++;
        exp_den += den_inc;
        if (txn_done) exp_num += num_inc;
      end
      @(negedge clk);
      checks++;
      if (num != MW'(exp_num) || den != MW'(exp_den)) begin
        failures++;
        $display("FAIL cycle %0d: %0d/%0d expected %0d/%0d", i, num, den, exp_num, exp_den);
      end
    end
    checks++;
    if (wraps != 3) begin failures++; $display("FAIL wraps=%0d", wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
