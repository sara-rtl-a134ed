// tb_noc_switch: four inputs stream numbered requests into one switch whose
// output is randomly stalled. Checks that every request arrives once and in
// order per input, that a granted request is the highest-priority one waiting
// (held against the inputs' state when it was taken), and that the output
// holds still while stalled.
module tb_noc_switch;
  import sara_pkg::*;
  localparam int unsigned N = 4, PER = 200;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid = '0, in_ready;
  mem_req_t in_req [N];
  logic out_valid, out_ready = 0;
  mem_req_t out_req;
  int checks = 0, failures = 0;
  int sent [N], got [N];

  noc_switch #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender i: request k carries src=i, tag-stream number in addr
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (!in_valid[i] && sent[i] < PER && ($urandom % 3) != 0) begin
        in_valid[i] = 1;
        in_req[i] = '0;
        in_req[i].src = SRC_W'(i);
        in_req[i].addr = ADDR_W'(sent[i]);
        in_req[i].prio = prio_t'($urandom % 8);
      end
    end
    out_ready = ($urandom % 3) != 0;
  end

  mem_req_t held;
  logic held_v = 0;
  always @(posedge clk) if (rst_n) begin
    int win;
    win = -1;
    for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) begin
      if (win >= 0) begin failures++; $display("FAIL two grants"); end
      win = i;
    end
    if (win >= 0) begin
      checks++;
      for (int i = 0; i < N; i++)
        if (in_valid[i] && in_req[i].prio > in_req[win].prio) begin
          failures++; $display("FAIL grant %0d prio %0d over %0d prio %0d", win, in_req[win].prio, i, in_req[i].prio);
        end
      sent[win]++;
    end
    if (out_valid && out_ready) begin
      int s;
      s = out_req.src;
      checks++;
      if (out_req.addr != ADDR_W'(got[s])) begin failures++; $display("FAIL order src %0d got %0d exp %0d", s, out_req.addr, got[s]); end
      got[s]++;
    end
    if (held_v) begin
      checks++;
      if (!out_valid || out_req != held) begin failures++; $display("FAIL output changed while stalled"); end
    end
    held_v = out_valid && !out_ready;
    held = out_req;
  end
  always @(posedge clk) #1 for (int i = 0; i < N; i++) if (in_valid[i] && sent[i] > 0 && in_req[i].addr == ADDR_W'(sent[i] - 1)) in_valid[i] = 0;

  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; got[i] = 0; in_req[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got[0] == PER && got[1] == PER && got[2] == PER && got[3] == PER);
    checks++;
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
