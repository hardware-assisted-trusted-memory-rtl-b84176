// tb_donee_hbm_alloc: bitmap allocator at 256 pages. Checks the start-up
// clear time (one bitmap word per cycle), that every page is handed out once
// until all are used, that no page is given while none is free, that freed
// pages come back, that clear releases everything, and the allocation rate
// from a fresh bitmap.
`timescale 1ns/1ps
module tb_donee_hbm_alloc;
  localparam int PAGES = 256, BITS = 32, NW = PAGES / BITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic busy, alloc_valid, alloc_ready = 0, free_valid = 0, free_ready, clear_valid = 0, clear_ready;
  logic [7:0] alloc_page, free_page = '0;
  logic [8:0] used_pages;
  int checks = 0, failures = 0;

  donee_hbm_alloc #(.PAGES(PAGES), .BITS(BITS)) dut (.*);

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

  bit taken [PAGES];
  int n_alloc = 0;
  always @(posedge clk) if (rst_n && alloc_valid && alloc_ready) begin
    check(!taken[alloc_page], "page handed out twice");
    taken[alloc_page] = 1;
    n_alloc++;
  end

  task automatic free1(input int p);
    @(negedge clk);
    free_valid = 1; free_page = 8'(p);
    #1;
    while (!free_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    free_valid = 0;
    taken[p] = 0;
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = 0;
    @(posedge clk);
    while (busy) begin @(posedge clk); t0++; end
    check(t0 >= NW - 2 && t0 <= NW + 2, "start-up clear takes one cycle per bitmap word");
    // take everything
    @(negedge clk); alloc_ready = 1;
    t1 = 0;
    while (n_alloc < PAGES && t1 < 10000) begin @(posedge clk); t1++; end
    check(n_alloc == PAGES, "every page allocated");
    // one page per three cycles: read, update, hand-over
    check(t1 <= 3 * PAGES + 2 * NW + 8, "allocation rate");
    repeat (50) @(posedge clk);
    check(!alloc_valid && n_alloc == PAGES, "nothing handed out when full");
    check(used_pages == PAGES, "used count at full");
    // free some pages; they come back
    for (int i = 0; i < 20; i++) free1(($urandom % 8) * 32 + i);
    repeat (100) @(posedge clk);
    check(n_alloc == PAGES + 20, "freed pages allocated again");
    // freeing a free page is harmless: free while held, then clear
    @(negedge clk); alloc_ready = 0;
    free1(5); free1(77);
    repeat (10) @(posedge clk);
    @(negedge clk); clear_valid = 1;
    #1; while (!clear_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1; clear_valid = 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    check(used_pages <= 1, "clear releases every page");
    for (int p = 0; p < PAGES; p++) taken[p] = 0;
    if (alloc_valid) taken[alloc_page] = 1;
    @(negedge clk); alloc_ready = 1;
    repeat (3 * PAGES + 4 * NW + 20) @(posedge clk);
    check(used_pages == PAGES, "all pages usable after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
