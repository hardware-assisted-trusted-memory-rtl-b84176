// tb_pkt_merger: four sources send random-length packets (1 to 65 beats)
// under random output back-pressure. Checks that packets come out whole (no
// interleaving), in order per source, that no source is starved while others
// are busy (round-robin), and that one beat per cycle passes when the output
// is always ready.
`timescale 1ns/1ps
module tb_pkt_merger;
  import tdmem_pkg::*;
  localparam int N = 4, PKTS = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] in_valid, in_ready;
  beat_t in_beat [N];
  logic out_valid, out_ready;
  beat_t out_beat;
  int checks = 0, failures = 0;
  bit random_stall = 1;

  pkt_merger #(.N(N)) dut (.*);

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

  // beat payload: {source, packet, beat index}
  int len [N][PKTS];
  int pk [N], bt [N];
  initial for (int s = 0; s < N; s++) for (int p = 0; p < PKTS; p++) len[s][p] = 1 + $urandom % 65;

  always_comb for (int s = 0; s < N; s++) begin
    in_valid[s] = rst_n && pk[s] < PKTS;
    in_beat[s]  = '{last: (pk[s] < PKTS) && (bt[s] == len[s][pk[s] % PKTS] - 1),
                    data: word_t'({8'(s), 16'(pk[s]), 16'(bt[s])})};
  end
  always @(negedge clk) out_ready = random_stall ? (($urandom % 4) != 0) : 1'b1;

  int cur_src = -1, exp_pk [N], exp_bt [N], beats = 0, cycles_busy = 0, pkts_out = 0;
  int wait_cnt [N];
  int max_wait = 0;
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) if (in_valid[s] && in_ready[s]) begin
      if (in_beat[s].last) begin pk[s] <= pk[s] + 1; bt[s] <= 0; end
      else bt[s] <= bt[s] + 1;
    end
    for (int s = 0; s < N; s++) begin
      if (in_valid[s] && bt[s] == 0 && !in_ready[s]) wait_cnt[s]++;
      else wait_cnt[s] = 0;
      if (wait_cnt[s] > max_wait) max_wait = wait_cnt[s];
    end
    if (out_valid && out_ready) begin
      int s, p, b;
      s = int'(out_beat.data[39:32]); p = int'(out_beat.data[31:16]); b = int'(out_beat.data[15:0]);
      beats++;
      if (cur_src >= 0) check(s == cur_src, "no interleaving inside a packet");
      check(p == exp_pk[s] && b == exp_bt[s], "per-source order");
      check(out_beat.last == (b == len[s][p % PKTS] - 1), "last flag kept");
      if (out_beat.last) begin cur_src = -1; exp_pk[s]++; exp_bt[s] = 0; pkts_out++; end
      else begin cur_src = s; exp_bt[s]++; end
    end
  end

  initial begin
    for (int s = 0; s < N; s++) begin pk[s] = 0; bt[s] = 0; exp_pk[s] = 0; exp_bt[s] = 0; wait_cnt[s] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (pkts_out < N * PKTS / 2) @(posedge clk);
    // throughput: no stalls, one beat per cycle
    random_stall = 0;
    repeat (2) @(posedge clk);
    begin
      int b0;
      b0 = beats;
      repeat (200) @(posedge clk);
      check(beats - b0 >= 200 - 2, "one beat per cycle with no back-pressure");
    end
    while (pkts_out < N * PKTS) @(posedge clk);
    check(pkts_out == N * PKTS, "all packets delivered");
    // a waiting packet gets the output after at most the other three packets
    check(max_wait <= 3 * 65 * 4 + 8, "round-robin: no source starved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
