// tb_pkt_splitter: random packets with the four request opcodes and some
// unknown opcodes. Each packet must appear whole on the output chosen by its
// header opcode; unknown ones are dropped (and counted). Outputs stall at
// random.
`timescale 1ns/1ps
module tb_pkt_splitter;
  import tdmem_pkg::*;
  localparam int N = 4, PKTS = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready;
  beat_t in_beat = '0;
  logic [N-1:0] out_valid, out_ready = '0;
  beat_t out_beat;
  logic drop_pulse;
  int checks = 0, failures = 0;

  pkt_splitter #(.N(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  opcode_e opc [4] = '{OP_STORE_REQ, OP_LOAD_REQ, OP_INV_PAGE, OP_INV_AREA};
  word_t exp_q [N][$];
  int drops = 0, exp_drops = 0, got = 0;

  always @(negedge clk) out_ready = N'($urandom);
  always @(posedge clk) if (rst_n) begin
    if (drop_pulse) drops++;
    for (int k = 0; k < N; k++) if (out_valid[k] && out_ready[k]) begin
      check($countones(out_valid) == 1, "one output at a time");
      check(exp_q[k].size() != 0 && out_beat.data == exp_q[k][0], "beat on the right output in order");
      if (exp_q[k].size() != 0) void'(exp_q[k].pop_front());
      got++;
    end
  end

  task automatic send(input beat_t b);
    @(negedge clk);
    in_valid = 1; in_beat = b;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  initial begin
    int total;
    total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < PKTS; p++) begin
      int k, len;
      bit bad;
      cmd_hdr_t h;
      bad = ($urandom % 8) == 0;
      k   = $urandom % 4;
      len = (k == 0) ? 65 : 1;
      h = '0;
      h.opcode = bad ? opcode_e'(8'h40 + ($urandom % 8)) : opc[k];
      h.remote_addr = 64'(p);
      if (bad) exp_drops++;
      for (int b = 0; b < len; b++) begin
        word_t d;
        d = (b == 0) ? word_t'(h) : word_t'({p, b});
        if (!bad) begin exp_q[k].push_back(d); total++; end
        send('{last: (b == len - 1), data: d});
      end
    end
    repeat (50) @(posedge clk);
    check(got == total, "every beat delivered");
    check(drops == exp_drops, "unknown opcodes dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
