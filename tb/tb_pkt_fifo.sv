// tb_pkt_fifo: random push/pop against a reference queue, full-depth fill,
// flush, and the first-word-fall-through timing (a word written in one cycle
// is visible at the output in the next).
`timescale 1ns/1ps
module tb_pkt_fifo;
  localparam int W = 16, DEPTH = 65;
  logic clk = 0, rst_n = 0, flush = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_q [$];

  pkt_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard at each rising edge
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(ref_q.size() != 0 && out_data == ref_q[0], "pop data order");
      if (ref_q.size() != 0) void'(ref_q.pop_front());
    end
    if (in_valid && in_ready) ref_q.push_back(in_data);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill to full with no pops
    for (int i = 0; i < DEPTH + 3; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = W'(i);
    end
    @(negedge clk); in_valid = 0;
    check(count == DEPTH, "count at full");
    check(!in_ready, "not ready when full");
    // fall-through latency: empty it, then push one word
    out_ready = 1;
    while (out_valid) @(negedge clk);
    out_ready = 0;
    @(negedge clk); in_valid = 1; in_data = 16'hABCD;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 16'hABCD, "word visible one cycle after write");
    out_ready = 1; @(negedge clk); out_ready = 0;
    // random traffic
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      in_data   = W'($urandom);
      out_ready = ($urandom % 3) != 0;
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(ref_q.size() == 0 && !out_valid && count == 0, "drained");
    // flush
    out_ready = 0;
    for (int i = 0; i < 10; i++) begin @(negedge clk); in_valid = 1; in_data = W'(i); end
    @(negedge clk); in_valid = 0; flush = 1;
    @(negedge clk); flush = 0;
    ref_q.delete();
    check(count == 0 && !out_valid, "flush empties the queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
