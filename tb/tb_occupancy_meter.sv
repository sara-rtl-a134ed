// tb_occupancy_meter: drives a buffer level and constant-rate events into a
// read-buffer (display) and a write-buffer (camera) occupancy meter and
// checks num = events + 1 +/- (level - reference), clamped at 0, and
// den = events + 1.
module tb_occupancy_meter;
  localparam int unsigned MW = 48;
  logic clk = 0, rst_n = 0;
  logic [15:0] init_level = 16'd32, occupancy = 16'd32;
  logic [31:0] period = 32'd400;
  logic stream_evt = 0;
  logic [MW-1:0] num_r, den_r, num_w, den_w;
  int checks = 0, failures = 0;
  longint cnt = 0, tick = 0;

  occupancy_meter #(.MW(MW), .READ_BUFFER(1'b1)) dut_r (
    .clk, .rst_n, .init_level, .period, .occupancy, .stream_evt, .num(num_r), .den(den_r));
  occupancy_meter #(.MW(MW), .READ_BUFFER(1'b0)) dut_w (
    .clk, .rst_n, .init_level, .period, .occupancy, .stream_evt, .num(num_w), .den(den_w));
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
      longint d, er, ew, cnt_before;
      stream_evt = ($urandom % 2) == 0;
      if ($urandom % 4 == 0) occupancy = 16'($urandom % 64);
      d = longint'(occupancy) - longint'(init_level);
      cnt_before = cnt;
      @(posedge clk);
      if (tick >= period - 1) begin tick = 0; cnt = 0; end
      else begin tick++; if (stream_evt) cnt++; end
      @(negedge clk);
      er = cnt_before + 1 + d; if (er < 0) er = 0;
      ew = cnt_before + 1 - d; if (ew < 0) ew = 0;
      checks++;
      if (num_r != MW'(er) || den_r != MW'(cnt_before + 1) || num_w != MW'(ew) || den_w != MW'(cnt_before + 1)) begin
        failures++;
        $display("FAIL %0d: r %0d/%0d w %0d/%0d expected %0d %0d /%0d", i, num_r, den_r, num_w, den_w, er, ew, cnt_before);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
