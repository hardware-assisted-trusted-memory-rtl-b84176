// tb_donor_page_alloc: owner-table allocator at 512 pages (8 table words).
// Checks: start-up clear time; reservations are distinct and never an owned
// page; commit records the owner; check passes only for the owner; free works
// only for the owner and only once; invalidate area frees exactly the pages of
// one MID; reservations are spread over the table (not sequential).
`timescale 1ns/1ps
module tb_donor_page_alloc;
  import tdmem_pkg::*;
  localparam int PAGES = 512, NW = PAGES / 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic busy;
  logic [9:0] free_pages;
  logic rsv_valid, rsv_ready = 0;
  logic [8:0] rsv_page;
  logic commit_valid = 0, commit_ready; logic [8:0] commit_page = '0; logic [7:0] commit_mid = '0;
  logic chk_valid = 0, chk_ready;       logic [8:0] chk_page = '0;    logic [7:0] chk_mid = '0;
  logic chk_done, chk_ok;
  logic free_valid = 0, free_ready;     logic [8:0] free_page = '0;   logic [7:0] free_mid = '0;
  logic free_done, free_ok;
  logic area_valid = 0, area_ready;     logic [7:0] area_mid = '0;
  logic area_done;
  int checks = 0, failures = 0;

  donor_page_alloc #(.PAGES(PAGES)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] owner [PAGES];   // 0 free, FF reserved
  initial for (int p = 0; p < PAGES; p++) owner[p] = 0;

  // free pages by the reference table; a page offered on rsv_* is reserved
  function automatic int n_free();
    int n;
    n = 0;
    for (int q = 0; q < PAGES; q++) if (owner[q] == 8'h00) n++;
    return n;
  endfunction

  task automatic reserve(output int p);
    @(negedge clk); rsv_ready = 1;
    #1; while (!rsv_valid) begin @(negedge clk); #1; end
    p = int'(rsv_page);
    @(posedge clk); #1; rsv_ready = 0;
    check(owner[p] == 8'h00, "reserved page was free");
    owner[p] = 8'hFF;
  endtask

  task automatic commit(input int p, input logic [7:0] mid);
    @(negedge clk); commit_valid = 1; commit_page = 9'(p); commit_mid = mid;
    #1; while (!commit_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; commit_valid = 0;
    owner[p] = mid;
  endtask

  task automatic chk(input int p, input logic [7:0] mid, output bit ok);
    @(negedge clk); chk_valid = 1; chk_page = 9'(p); chk_mid = mid;
    #1; while (!chk_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; chk_valid = 0;
    while (!chk_done) @(posedge clk);
    #1; ok = chk_ok;
  endtask

  task automatic free(input int p, input logic [7:0] mid, output bit ok);
    @(negedge clk); free_valid = 1; free_page = 9'(p); free_mid = mid;
    #1; while (!free_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; free_valid = 0;
    while (!free_done) @(posedge clk);
    #1; ok = free_ok;
    if (ok) owner[p] = 0;
  endtask

  initial begin
    int t0, p, prev, jumps, n1;
    bit ok;
    int pages_of_1 [$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = 0;
    @(posedge clk);
    while (busy) begin @(posedge clk); t0++; end
    check(t0 >= NW - 2 && t0 <= NW + 2, "start-up clear takes one cycle per table word");
    check(free_pages == PAGES, "all pages free after start-up");
    // reserve and commit 100 pages to MIDs 1 and 2
    prev = -1; jumps = 0;
    for (int i = 0; i < 100; i++) begin
      reserve(p);
      if (prev >= 0 && p != prev + 1) jumps++;
      prev = p;
      commit(p, (i % 2) ? 8'd2 : 8'd1);
      if (i % 2 == 0) pages_of_1.push_back(p);
    end
    check(jumps > 50, "reservations are spread over the table");
    check(free_pages == PAGES - 100, "free count after reservations");
    // ownership checks
    for (int i = 0; i < 40; i++) begin
      int q;
      q = $urandom % PAGES;
      chk(q, 8'd1, ok);
      check(ok == (owner[q] == 8'd1), "check matches owner");
    end
    // free: wrong owner refused, right owner accepted once
    p = pages_of_1[0];
    free(p, 8'd2, ok);  check(!ok, "free by another MID refused");
    free(p, 8'd1, ok);  check(ok, "free by owner accepted");
    free(p, 8'd1, ok);  check(!ok, "second free refused");
    chk(p, 8'd1, ok);   check(!ok, "freed page no longer owned");
    check(int'(free_pages) == n_free() - int'(rsv_valid), "free count after free");
    // invalidate area of MID 1
    n1 = 0;
    for (int q = 0; q < PAGES; q++) if (owner[q] == 8'd1) n1++;
    @(negedge clk); area_valid = 1; area_mid = 8'd1;
    #1; while (!area_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; area_valid = 0;
    t0 = 0;
    while (!area_done) begin @(posedge clk); t0++; end
    check(t0 <= 2 * NW + 3, "area sweep takes two cycles per table word");
    for (int q = 0; q < PAGES; q++) if (owner[q] == 8'd1) owner[q] = 0;
    @(posedge clk);
    check(int'(free_pages) == n_free() - int'(rsv_valid), "area freed exactly the pages of the MID");
    for (int i = 0; i < 60; i++) begin
      int q;
      q = $urandom % PAGES;
      chk(q, 8'd2, ok);
      check(ok == (owner[q] == 8'd2), "MID 2 pages kept after area of MID 1");
      chk(q, 8'd1, ok);
      check(!ok, "no MID 1 page after area");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
