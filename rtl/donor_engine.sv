// donor_engine: the FPGA engine of a node that lends memory (the donor).
//
// Requests arrive only from the network. The request splitter routes each
// packet by its opcode to one response generator per command. The store and
// load generators use two page allocators (donated on-board HBM and donated
// host DRAM); both keep, per 4 KB page, the MID of its owner, so every load
// and every invalidation is checked against the sender. Pages are written to
// and read from HBM through one interconnect, and from host DRAM through the
// DMA engine's port with a second one. Store and load responses leave through
// the response merger to the network; invalidations produce no response.
//
// The structure follows the paper's donor block diagram. The donated HBM
// starts after the 54 MB of allocator metadata of the paper's HBM memory map;
// host DRAM starts at DRAM_BASE, a boot-time reservation whose address the
// paper does not give.
//
// Interfaces: rx_*/tx_* are network streams; hbm_* and dram_* are memory
// ports (byte address of a 64 B word, in-order read data, valid/ready).
module donor_engine
  import tdmem_pkg::*;
#(
  parameter logic [7:0]  MY_MID     = 8'd2,
  parameter int unsigned HBM_PAGES  = 2083328,    // 8,138 MB donated HBM
  parameter int unsigned DRAM_PAGES = 16777216,   // 64 GB donated DRAM
  parameter logic [63:0] HBM_BASE   = 64'h0000_0000_0360_0000,
  parameter logic [63:0] DRAM_BASE  = 64'h0000_0010_0000_0000,
  parameter int unsigned FL_DEPTH   = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // network
  input  logic     rx_valid,
  output logic     rx_ready,
  input  beat_t    rx_beat,
  output logic     tx_valid,
  input  logic     tx_ready,
  output beat_t    tx_beat,
  // on-board HBM
  output logic     hbm_req_valid,
  input  logic     hbm_req_ready,
  output mem_req_t hbm_req,
  input  logic     hbm_rsp_valid,
  output logic     hbm_rsp_ready,
  input  word_t    hbm_rsp_data,
  // host DRAM through the DMA engine
  output logic     dram_req_valid,
  input  logic     dram_req_ready,
  output mem_req_t dram_req,
  input  logic     dram_rsp_valid,
  output logic     dram_rsp_ready,
  input  word_t    dram_rsp_data,
  // status and events
  output logic     busy,
  output logic [$clog2(HBM_PAGES):0]  hbm_free_pages,
  output logic [$clog2(DRAM_PAGES):0] dram_free_pages,
  output logic     ev_nospace,
  output logic     ev_denied,
  output logic     ev_bad_inv,
  output logic     ev_free_ok,
  output logic     ev_free_refused,
  output logic     ev_area_done
);
  localparam int unsigned HP_W = $clog2(HBM_PAGES);
  localparam int unsigned DP_W = $clog2(DRAM_PAGES);

  // ---- request splitter ----
  logic [3:0] sp_v, sp_r;
  beat_t      sp_b;
  logic       sp_drop;

  pkt_splitter #(.N(4), .OPC({OP_INV_AREA, OP_INV_PAGE, OP_LOAD_REQ, OP_STORE_REQ})) u_req_splitter (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_beat(rx_beat),
    .out_valid(sp_v), .out_ready(sp_r), .out_beat(sp_b), .drop_pulse(sp_drop)
  );

  // ---- allocators ----
  logic            h_rsv_v, h_rsv_r, h_cm_v, h_cm_r, h_ck_v, h_ck_r, h_ck_done, h_ck_ok;
  logic            h_fr_v, h_fr_r, h_fr_done, h_fr_ok, h_ar_v, h_ar_r, h_ar_done, h_busy;
  logic [HP_W-1:0] h_rsv_page, h_cm_page, h_ck_page, h_fr_page;
  logic [7:0]      h_cm_mid, h_ck_mid, h_fr_mid;
  logic            d_rsv_v, d_rsv_r, d_cm_v, d_cm_r, d_ck_v, d_ck_r, d_ck_done, d_ck_ok;
  logic            d_fr_v, d_fr_r, d_fr_done, d_fr_ok, d_ar_v, d_ar_r, d_ar_done, d_busy;
  logic [DP_W-1:0] d_rsv_page, d_cm_page, d_ck_page, d_fr_page;
  logic [7:0]      d_cm_mid, d_ck_mid, d_fr_mid, area_mid;

  donor_page_alloc #(.PAGES(HBM_PAGES), .SEED(32'h1D87_2A55)) u_hbm_alloc (
    .clk, .rst_n, .busy(h_busy), .free_pages(hbm_free_pages),
    .rsv_valid(h_rsv_v), .rsv_ready(h_rsv_r), .rsv_page(h_rsv_page),
    .commit_valid(h_cm_v), .commit_ready(h_cm_r), .commit_page(h_cm_page), .commit_mid(h_cm_mid),
    .chk_valid(h_ck_v), .chk_ready(h_ck_r), .chk_page(h_ck_page), .chk_mid(h_ck_mid),
    .chk_done(h_ck_done), .chk_ok(h_ck_ok),
    .free_valid(h_fr_v), .free_ready(h_fr_r), .free_page(h_fr_page), .free_mid(h_fr_mid),
    .free_done(h_fr_done), .free_ok(h_fr_ok),
    .area_valid(h_ar_v), .area_ready(h_ar_r), .area_mid, .area_done(h_ar_done)
  );

  donor_page_alloc #(.PAGES(DRAM_PAGES), .SEED(32'h6B3C_90E1)) u_dram_alloc (
    .clk, .rst_n, .busy(d_busy), .free_pages(dram_free_pages),
    .rsv_valid(d_rsv_v), .rsv_ready(d_rsv_r), .rsv_page(d_rsv_page),
    .commit_valid(d_cm_v), .commit_ready(d_cm_r), .commit_page(d_cm_page), .commit_mid(d_cm_mid),
    .chk_valid(d_ck_v), .chk_ready(d_ck_r), .chk_page(d_ck_page), .chk_mid(d_ck_mid),
    .chk_done(d_ck_done), .chk_ok(d_ck_ok),
    .free_valid(d_fr_v), .free_ready(d_fr_r), .free_page(d_fr_page), .free_mid(d_fr_mid),
    .free_done(d_fr_done), .free_ok(d_fr_ok),
    .area_valid(d_ar_v), .area_ready(d_ar_r), .area_mid, .area_done(d_ar_done)
  );

  assign busy            = h_busy || d_busy;
  assign ev_free_ok      = (h_fr_done && h_fr_ok) || (d_fr_done && d_fr_ok);
  assign ev_free_refused = (h_fr_done && !h_fr_ok) || (d_fr_done && !d_fr_ok);
  assign ev_area_done    = h_ar_done || d_ar_done;

  // ---- memory interconnects: client 0 = store (writes), 1 = load (reads) ----
  logic [1:0] hm_v, hm_r, hr_v, hr_r, dm_v, dm_r, dr_v, dr_r;
  mem_req_t   hm_req [2], dm_req [2];
  word_t      hr_data, dr_data;

  mem_ic #(.N(2)) u_hbm_ic (
    .clk, .rst_n,
    .c_req_valid(hm_v), .c_req_ready(hm_r), .c_req(hm_req),
    .c_rsp_valid(hr_v), .c_rsp_ready(hr_r), .c_rsp_data(hr_data),
    .m_req_valid(hbm_req_valid), .m_req_ready(hbm_req_ready), .m_req(hbm_req),
    .m_rsp_valid(hbm_rsp_valid), .m_rsp_ready(hbm_rsp_ready), .m_rsp_data(hbm_rsp_data)
  );

  mem_ic #(.N(2)) u_dram_ic (
    .clk, .rst_n,
    .c_req_valid(dm_v), .c_req_ready(dm_r), .c_req(dm_req),
    .c_rsp_valid(dr_v), .c_rsp_ready(dr_r), .c_rsp_data(dr_data),
    .m_req_valid(dram_req_valid), .m_req_ready(dram_req_ready), .m_req(dram_req),
    .m_rsp_valid(dram_rsp_valid), .m_rsp_ready(dram_rsp_ready), .m_rsp_data(dram_rsp_data)
  );
  assign hr_r[0] = 1'b1;
  assign dr_r[0] = 1'b1;

  // ---- response generators ----
  logic [1:0] rm_v, rm_r;
  beat_t      rm_b [2];

  store_rsp_gen #(.HBM_PAGES(HBM_PAGES), .DRAM_PAGES(DRAM_PAGES), .HBM_BASE(HBM_BASE),
                  .DRAM_BASE(DRAM_BASE), .MY_MID(MY_MID), .FL_DEPTH(FL_DEPTH)) u_store (
    .clk, .rst_n,
    .in_valid(sp_v[0]), .in_ready(sp_r[0]), .in_beat(sp_b),
    .h_rsv_valid(h_rsv_v), .h_rsv_ready(h_rsv_r), .h_rsv_page(h_rsv_page),
    .h_commit_valid(h_cm_v), .h_commit_ready(h_cm_r), .h_commit_page(h_cm_page), .h_commit_mid(h_cm_mid),
    .d_rsv_valid(d_rsv_v), .d_rsv_ready(d_rsv_r), .d_rsv_page(d_rsv_page),
    .d_commit_valid(d_cm_v), .d_commit_ready(d_cm_r), .d_commit_page(d_cm_page), .d_commit_mid(d_cm_mid),
    .h_mem_valid(hm_v[0]), .h_mem_ready(hm_r[0]), .h_mem_req(hm_req[0]),
    .d_mem_valid(dm_v[0]), .d_mem_ready(dm_r[0]), .d_mem_req(dm_req[0]),
    .out_valid(rm_v[0]), .out_ready(rm_r[0]), .out_beat(rm_b[0]),
    .ev_nospace
  );

  load_rsp_gen #(.HBM_PAGES(HBM_PAGES), .DRAM_PAGES(DRAM_PAGES), .HBM_BASE(HBM_BASE),
                 .DRAM_BASE(DRAM_BASE), .MY_MID(MY_MID)) u_load (
    .clk, .rst_n,
    .in_valid(sp_v[1]), .in_ready(sp_r[1]), .in_beat(sp_b),
    .h_chk_valid(h_ck_v), .h_chk_ready(h_ck_r), .h_chk_page(h_ck_page), .h_chk_mid(h_ck_mid),
    .h_chk_done(h_ck_done), .h_chk_ok(h_ck_ok),
    .d_chk_valid(d_ck_v), .d_chk_ready(d_ck_r), .d_chk_page(d_ck_page), .d_chk_mid(d_ck_mid),
    .d_chk_done(d_ck_done), .d_chk_ok(d_ck_ok),
    .h_mem_valid(hm_v[1]), .h_mem_ready(hm_r[1]), .h_mem_req(hm_req[1]),
    .h_rsp_valid(hr_v[1]), .h_rsp_ready(hr_r[1]), .h_rsp_data(hr_data),
    .d_mem_valid(dm_v[1]), .d_mem_ready(dm_r[1]), .d_mem_req(dm_req[1]),
    .d_rsp_valid(dr_v[1]), .d_rsp_ready(dr_r[1]), .d_rsp_data(dr_data),
    .out_valid(rm_v[1]), .out_ready(rm_r[1]), .out_beat(rm_b[1]),
    .ev_denied
  );

  inv_page_rsp_gen #(.HBM_PAGES(HBM_PAGES), .DRAM_PAGES(DRAM_PAGES), .HBM_BASE(HBM_BASE),
                     .DRAM_BASE(DRAM_BASE)) u_invp (
    .clk, .rst_n,
    .in_valid(sp_v[2]), .in_ready(sp_r[2]), .in_beat(sp_b),
    .h_free_valid(h_fr_v), .h_free_ready(h_fr_r), .h_free_page(h_fr_page), .h_free_mid(h_fr_mid),
    .d_free_valid(d_fr_v), .d_free_ready(d_fr_r), .d_free_page(d_fr_page), .d_free_mid(d_fr_mid),
    .ev_bad(ev_bad_inv)
  );

  inv_area_rsp_gen u_inva (
    .clk, .rst_n,
    .in_valid(sp_v[3]), .in_ready(sp_r[3]), .in_beat(sp_b),
    .h_area_valid(h_ar_v), .h_area_ready(h_ar_r),
    .d_area_valid(d_ar_v), .d_area_ready(d_ar_r),
    .area_mid
  );

  // ---- response merger ----
  pkt_merger #(.N(2)) u_rsp_merger (
    .clk, .rst_n,
    .in_valid(rm_v), .in_ready(rm_r), .in_beat(rm_b),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_beat(tx_beat)
  );
endmodule
