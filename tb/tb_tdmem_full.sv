// tb_tdmem_full: end-to-end test of the two-node system (donee engine + donor
// engine joined by their link), with every parameter at its default (8 GB donee
// HBM, 8,138 MB donor HBM, 64 GB donor DRAM).
//
// The testbench plays the donee host: it pushes commands (and page data) into
// the donee engine's host-to-card stream by queue ID, and records every
// card-to-host write in a sparse host memory, where it polls for completions.
// HBM stacks and the donor's host DRAM are behavioural models with fixed read
// latencies (HBM 88 cycles, DRAM 235 cycles, chosen so that a 64-word page
// read lasts about as long as the measured on-FPGA page reads at 250 MHz).
// Expected results are worked out in the testbench: page contents follow a
// fixed pattern, tiers and statuses follow the documented rules.
//
// Mechanisms checked and counted: local HBM store and load; store and load
// through the donor in HBM and in DRAM; a new remote address for a re-stored
// slot after invalidation; refused loads (page of nobody, address outside the
// donated region); invalidate page; invalidate area in both engines; filling a tier is left to the
// reduced-size test.
`timescale 1ns/1ps
module tb_tdmem_full;
  import tdmem_pkg::*;

  localparam int unsigned HBM_LAT  = 88;
  localparam int unsigned DRAM_LAT = 235;
  localparam logic [63:0] DH_BASE  = 64'h0000_0000_0360_0000;
  localparam logic [63:0] DD_BASE  = 64'h0000_0010_0000_0000;
  localparam int unsigned DN_PAGES = 2097152;
  localparam int unsigned DH_PAGES = 2083328;
  localparam int unsigned DD_PAGES = 16777216;
  localparam bit          SMALL    = 1'b0;
  localparam int unsigned WATCHDOG = 3000000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- DUT and models ----
  logic        h2c_valid = 1'b0, h2c_ready;
  word_t       h2c_data = '0;
  logic [10:0] h2c_qid = '0;
  logic        c2h_valid, c2h_ready = 1'b1;
  logic [63:0] c2h_addr;
  word_t       c2h_data;
  logic        dn_rv, dn_rr, dn_pv, dn_pr, dh_rv, dh_rr, dh_pv, dh_pr, dd_rv, dd_rr, dd_pv, dd_pr;
  mem_req_t    dn_req, dh_req, dd_req;
  word_t       dn_pd, dh_pd, dd_pd;
  logic        busy;
  logic        ev_local_store, ev_redirect, ev_local_load, ev_store_cpl, ev_load_cpl;
  logic        ev_nospace, ev_denied, ev_free_ok, ev_free_refused, ev_area_done;
  int unsigned dn_w, dn_r, dh_w, dh_r, dd_w, dd_r;

  tdmem_top dut (
    .clk, .rst_n,
    .donee_h2c_valid(h2c_valid), .donee_h2c_ready(h2c_ready),
    .donee_h2c_data(h2c_data), .donee_h2c_qid(h2c_qid),
    .donee_c2h_valid(c2h_valid), .donee_c2h_ready(c2h_ready),
    .donee_c2h_addr(c2h_addr), .donee_c2h_data(c2h_data),
    .donee_hbm_req_valid(dn_rv), .donee_hbm_req_ready(dn_rr), .donee_hbm_req(dn_req),
    .donee_hbm_rsp_valid(dn_pv), .donee_hbm_rsp_ready(dn_pr), .donee_hbm_rsp_data(dn_pd),
    .donor_hbm_req_valid(dh_rv), .donor_hbm_req_ready(dh_rr), .donor_hbm_req(dh_req),
    .donor_hbm_rsp_valid(dh_pv), .donor_hbm_rsp_ready(dh_pr), .donor_hbm_rsp_data(dh_pd),
    .donor_dram_req_valid(dd_rv), .donor_dram_req_ready(dd_rr), .donor_dram_req(dd_req),
    .donor_dram_rsp_valid(dd_pv), .donor_dram_rsp_ready(dd_pr), .donor_dram_rsp_data(dd_pd),
    .busy, .ev_local_store, .ev_redirect, .ev_local_load, .ev_store_cpl, .ev_load_cpl,
    .ev_nospace, .ev_denied, .ev_free_ok, .ev_free_refused, .ev_area_done
  );

  mem_model #(.LAT(HBM_LAT)) m_dn (.clk, .rst_n, .req_valid(dn_rv), .req_ready(dn_rr), .req(dn_req),
    .rsp_valid(dn_pv), .rsp_ready(dn_pr), .rsp_data(dn_pd), .n_writes(dn_w), .n_reads(dn_r));
  mem_model #(.LAT(HBM_LAT)) m_dh (.clk, .rst_n, .req_valid(dh_rv), .req_ready(dh_rr), .req(dh_req),
    .rsp_valid(dh_pv), .rsp_ready(dh_pr), .rsp_data(dh_pd), .n_writes(dh_w), .n_reads(dh_r));
  mem_model #(.LAT(DRAM_LAT)) m_dd (.clk, .rst_n, .req_valid(dd_rv), .req_ready(dd_rr), .req(dd_req),
    .rsp_valid(dd_pv), .rsp_ready(dd_pr), .rsp_data(dd_pd), .n_writes(dd_w), .n_reads(dd_r));

  // ---- donee host memory ----
  word_t host [longint unsigned];
  always @(posedge clk) if (rst_n && c2h_valid && c2h_ready) host[c2h_addr >> 6] = c2h_data;
  always @(negedge clk) c2h_ready = SMALL ? (($urandom % 4) != 0) : 1'b1;

  // ---- event counters ----
  int n_local_store = 0, n_redirect = 0, n_local_load = 0, n_store_cpl = 0, n_load_cpl = 0;
  int n_nospace = 0, n_denied = 0, n_free_ok = 0, n_free_refused = 0, n_area = 0;
  int n_remote_hbm = 0, n_remote_dram = 0, n_new_addr = 0, n_swap = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_local_store)  n_local_store++;
    if (ev_redirect)     n_redirect++;
    if (ev_local_load)   n_local_load++;
    if (ev_store_cpl)    n_store_cpl++;
    if (ev_load_cpl)     n_load_cpl++;
    if (ev_nospace)      n_nospace++;
    if (ev_denied)       n_denied++;
    if (ev_free_ok)      n_free_ok++;
    if (ev_free_refused) n_free_refused++;
    if (ev_area_done)    n_area++;
  end

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host-side helpers ----
  localparam logic [10:0] Q_STORE = 11'd0, Q_STORE1 = 11'd1, Q_LOAD = 11'd8,
                          Q_INVP = 11'd9, Q_INVA = 11'd10;
  int unsigned ncmd = 0;

  function automatic word_t pg(input int unsigned seed, input int unsigned i);
    return {16{32'(seed * 32'h9E37_79B9 + i)}};
  endfunction

  function automatic word_t mkhdr(input opcode_e op, input logic [7:0] tier, input logic [7:0] tgt,
                                  input logic [63:0] raddr, input logic [63:0] pdma,
                                  input logic [63:0] poll);
    cmd_hdr_t h;
    h = '0;
    h.opcode = op;  h.src_mid = 8'd1;  h.dst_mid = 8'd2;
    h.tier = tier;  h.target_tier = tgt;  h.remote_addr = raddr;
    h.page_dma_addr = pdma;  h.poll_dma_addr = poll;
    return word_t'(h);
  endfunction

  task automatic send(input logic [10:0] qid, input word_t d);
    @(negedge clk);
    h2c_valid = 1'b1;  h2c_data = d;  h2c_qid = qid;
    #1;
    while (!h2c_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    h2c_valid = 1'b0;
  endtask

  function automatic logic [7:0] st_of(input word_t w);
    cmd_hdr_t h;
    h = cmd_hdr_t'(w);
    return h.status;
  endfunction

  task automatic wait_cpl(input logic [63:0] poll, output cmd_hdr_t c, output longint t);
    int guard;
    guard = 0;
    while (!(host.exists(poll >> 6) && st_of(host[poll >> 6]) != ST_PENDING) && guard < 20000) begin
      @(posedge clk); guard++;
    end
    if (guard >= 20000) $display("[%0d] completion timeout poll=%h exists=%0d", cycle, poll, host.exists(poll >> 6));
    c = host.exists(poll >> 6) ? cmd_hdr_t'(host[poll >> 6]) : '0;
    t = cycle;
  endtask

  task automatic store(input logic [7:0] tgt, input int unsigned seed, output cmd_hdr_t c);
    logic [63:0] poll;
    longint t;
    ncmd++;
    poll = 64'h1000_0000 + 64'(ncmd) * 64;
    send(Q_STORE, mkhdr(OP_STORE_REQ, 8'd0, tgt, 64'd0, 64'd0, poll));
    for (int i = 0; i < 64; i++) send(Q_STORE, pg(seed, i));
    wait_cpl(poll, c, t);
  endtask

  task automatic load(input logic [7:0] tier, input logic [63:0] raddr, input int unsigned seed,
                      input bit expect_ok, input string what, output longint lat);
    logic [63:0] poll, pdma;
    cmd_hdr_t c;
    longint t0, t1;
    bit same;
    ncmd++;
    poll = 64'h1000_0000 + 64'(ncmd) * 64;
    pdma = 64'h2000_0000 + 64'(ncmd) * 4096;
    send(Q_LOAD, mkhdr(OP_LOAD_REQ, tier, 8'd0, raddr, pdma, poll));
    t0 = cycle;
    wait_cpl(poll, c, t1);
    lat = t1 - t0;
    check(c.opcode == OP_LOAD_RSP, {what, ": load completion written"});
    check(c.status == (expect_ok ? ST_OK : ST_DENIED), {what, ": load status"});
    if (expect_ok) begin
      same = 1'b1;
      for (int i = 0; i < 64; i++) begin
        longint unsigned a;
        a = (pdma >> 6) + longint'(i);
        if (!host.exists(a) || host[a] != pg(seed, i)) same = 1'b0;
      end
      check(same, {what, ": page contents"});
    end else begin
      check(!host.exists(pdma >> 6), {what, ": no page data written"});
    end
  endtask

  task automatic inv_page(input logic [7:0] tier, input logic [63:0] raddr);
    send(Q_INVP, mkhdr(OP_INV_PAGE, tier, 8'd0, raddr, 64'd0, 64'd0));
  endtask

  // ---- scenario ----
  cmd_hdr_t c, c2;
  longint   lat;
  int       used0;
  logic [63:0] a_loc, a_dh, a_dd;
  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    while (busy) @(posedge clk);
    // wait for the free lists and pre-allocation cache to fill
    repeat (200) @(posedge clk);

    // 1. store to and load from the donee's own HBM
    store(TIER_DONEE_HBM, 1, c);
    check(c.status == ST_OK && c.tier == TIER_DONEE_HBM, "local store completion");
    a_loc = c.remote_addr;
    check(a_loc[11:0] == 0 && (a_loc >> 12) < DN_PAGES, "local address inside donee HBM");
    load(TIER_DONEE_HBM, a_loc, 1, 1'b1, "local load", lat);
    check(lat >= HBM_LAT + 64 && lat <= HBM_LAT + 64 + 40, "local load latency");
    $display("local 4KB load: %0d cycles (memory latency %0d)", lat, HBM_LAT);

    // 2. store to and load from donor HBM
    store(TIER_DONOR_HBM, 2, c);
    check(c.status == ST_OK && c.tier == TIER_DONOR_HBM, "donor HBM store completion");
    a_dh = c.remote_addr;
    check(a_dh >= DH_BASE && a_dh[11:0] == 0 && ((a_dh - DH_BASE) >> 12) < DH_PAGES,
          "donor HBM address inside the donated region");
    load(TIER_DONOR_HBM, a_dh, 2, 1'b1, "donor HBM load", lat);
    check(m_dh.peek(a_dh) == pg(2, 0), "page is in donor HBM");
    $display("donor HBM 4KB load: %0d cycles", lat);
    n_remote_hbm++;

    // 3. store to and load from donor DRAM
    store(TIER_DONOR_DRAM, 3, c);
    check(c.status == ST_OK && c.tier == TIER_DONOR_DRAM, "donor DRAM store completion");
    a_dd = c.remote_addr;
    check(a_dd >= DD_BASE && a_dd[11:0] == 0 && ((a_dd - DD_BASE) >> 12) < DD_PAGES,
          "donor DRAM address inside the donated region");
    load(TIER_DONOR_DRAM, a_dd, 3, 1'b1, "donor DRAM load", lat);
    check(m_dd.peek(a_dd + 64 * 63) == pg(3, 63), "page is in donor DRAM");
    $display("donor DRAM 4KB load: %0d cycles", lat);
    n_remote_dram++;

    // 4. refused loads: a page nobody owns, and an address outside the region
    load(TIER_DONOR_HBM, a_dh + 4096 * ((((a_dh - DH_BASE) >> 12) + 1 < DH_PAGES) ? 1 : -1),
         0, 1'b0, "load of a page not owned", lat);
    load(TIER_DONOR_DRAM, DD_BASE - 4096, 0, 1'b0, "load below the donated region", lat);
    load(TIER_DONOR_HBM, a_dh + 64, 0, 1'b0, "misaligned load", lat);

    // 5. invalidate, then store the same slot again: a new remote page
    inv_page(TIER_DONOR_HBM, a_dh);
    repeat (20) @(posedge clk);
    check(n_free_ok == 1, "invalidate page released the page");
    load(TIER_DONOR_HBM, a_dh, 2, 1'b0, "load after invalidate", lat);
    store(TIER_DONOR_HBM, 2, c);
    check(c.status == ST_OK && c.remote_addr != a_dh, "re-store gets a different page");
    if (c.remote_addr != a_dh) n_new_addr++;
    a_dh = c.remote_addr;
    load(TIER_DONOR_HBM, a_dh, 2, 1'b1, "load of re-stored page", lat);
    // invalidating an already released page is refused
    inv_page(TIER_DONOR_HBM, a_dh);
    inv_page(TIER_DONOR_HBM, a_dh);
    repeat (20) @(posedge clk);
    check(n_free_refused == 1, "second invalidate of a page is refused");
    // local invalidate returns the page to the donee allocator
    used0 = int'(dut.u_donee.hbm_used_pages);
    inv_page(TIER_DONEE_HBM, a_loc);
    repeat (20) @(posedge clk);
    check(int'(dut.u_donee.hbm_used_pages) == used0 - 1, "local page released");



    // 7. invalidate area: both engines release everything of this donee
    store(TIER_DONOR_DRAM, 7, c);
    a_dd = c.remote_addr;
    store(TIER_DONOR_HBM, 8, c);
    a_dh = c.remote_addr;
    send(Q_INVA, mkhdr(OP_INV_AREA, 8'd0, 8'd0, 64'd0, 64'd0, 64'd0));
    while (n_area < 1) @(posedge clk);
    repeat (10) @(posedge clk);
    while (busy) @(posedge clk);
    // only the refilled pre-allocation cache (8 pages + 1 staged) stays in use
    check(dut.u_donee.hbm_used_pages <= 9, "donee HBM cleared");
    $display("after invalidate area: donee used %0d, donor HBM free %0d, donor DRAM free %0d",
             dut.u_donee.hbm_used_pages, dut.u_donor.hbm_free_pages, dut.u_donor.dram_free_pages);
    // pages still reserved: up to 16 in each free list and one waiting to enter it
    check(dut.u_donor.hbm_free_pages + 17 >= DH_PAGES, "donor HBM pages released");
    check(dut.u_donor.dram_free_pages + 17 >= DD_PAGES, "donor DRAM pages released");
    load(TIER_DONOR_DRAM, a_dd, 7, 1'b0, "load after invalidate area", lat);
    load(TIER_DONOR_HBM, a_dh, 8, 1'b0, "load after invalidate area (HBM)", lat);
    store(TIER_DONOR_DRAM, 9, c);
    check(c.status == ST_OK, "store after invalidate area");
    load(TIER_DONOR_DRAM, c.remote_addr, 9, 1'b1, "load after re-store", lat);

    // every mechanism happened at least once
    check(n_local_store > 0,  "mechanism: local store");
    check(n_local_load > 0,   "mechanism: local load");
    check(n_remote_hbm > 0,   "mechanism: donor HBM store/load");
    check(n_remote_dram > 0,  "mechanism: donor DRAM store/load");
    check(n_new_addr > 0,     "mechanism: new address on re-store");
    check(n_denied >= 3,      "mechanism: refused load");
    check(n_free_ok > 0,      "mechanism: invalidate page");
    check(n_free_refused > 0, "mechanism: refused invalidate");
    check(n_area >= 1,        "mechanism: invalidate area");
    check(n_store_cpl > 0 && n_load_cpl > 0, "mechanism: completions");

    $display("events: local_store=%0d redirect=%0d local_load=%0d store_cpl=%0d load_cpl=%0d nospace=%0d denied=%0d free_ok=%0d free_refused=%0d area=%0d swap=%0d",
             n_local_store, n_redirect, n_local_load, n_store_cpl, n_load_cpl, n_nospace,
             n_denied, n_free_ok, n_free_refused, n_area, n_swap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
