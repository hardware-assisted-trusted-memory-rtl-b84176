// donee_engine: the FPGA engine of a node that swaps pages out (the donee).
//
// The host kernel's swap path sends commands (store, load, invalidate page,
// invalidate area) through the DMA engine's host-to-card queues. The command
// parser routes them by queue ID to one request generator per command. Store
// and load may be served by the donee's own HBM (pages allocated by the
// bitmap allocator, accessed through the HBM interconnect) or forwarded,
// through the request merger, to the network and a donor engine. Responses
// from the network and responses produced locally meet in the response
// merger; the response splitter separates store from load responses; the
// response handler writes completions and loaded pages back to host memory.
//
// Every header sent to the network gets src_mid replaced by this engine's own
// MID (MY_MID), so the MID the donor checks ownership against cannot be
// chosen by host software. That stamping is this design's choice; the block
// structure follows the paper's donee block diagram.
//
// Interfaces: h2c_* is the host-to-card stream (one 64 B word per beat, with
// its queue ID); c2h_* are card-to-host word writes; hbm_* is the HBM port
// (byte address of a 64 B word; in-order read data); tx_*/rx_* are the
// network streams to and from the donor.
module donee_engine
  import tdmem_pkg::*;
#(
  parameter logic [7:0]  MY_MID    = 8'd1,
  parameter int unsigned PAGES     = 2097152,   // 8 GB of HBM in 4 KB pages
  parameter int unsigned PREALLOC  = 8,
  parameter int unsigned N_STORE_Q = 2,
  parameter logic [63:0] HBM_BASE  = 64'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  // host DMA
  input  logic        h2c_valid,
  output logic        h2c_ready,
  input  word_t       h2c_data,
  input  logic [10:0] h2c_qid,
  output logic        c2h_valid,
  input  logic        c2h_ready,
  output logic [63:0] c2h_addr,
  output word_t       c2h_data,
  // on-board HBM
  output logic        hbm_req_valid,
  input  logic        hbm_req_ready,
  output mem_req_t    hbm_req,
  input  logic        hbm_rsp_valid,
  output logic        hbm_rsp_ready,
  input  word_t       hbm_rsp_data,
  // network
  output logic        tx_valid,
  input  logic        tx_ready,
  output beat_t       tx_beat,
  input  logic        rx_valid,
  output logic        rx_ready,
  input  beat_t       rx_beat,
  // status and events
  output logic        busy,
  output logic [$clog2(PAGES):0] hbm_used_pages,
  output logic        ev_local_store,
  output logic        ev_redirect,
  output logic        ev_local_load,
  output logic        ev_store_cpl,
  output logic        ev_load_cpl
);
  localparam int unsigned PAGE_W = $clog2(PAGES);

  // ---- command parser ----
  logic  st_v, st_r, ld_v, ld_r, ip_v, ip_r, ia_v, ia_r;
  beat_t st_b, ld_b, ip_b, ia_b;

  cmd_parser #(.N_STORE_Q(N_STORE_Q)) u_parser (
    .clk, .rst_n,
    .h2c_valid, .h2c_ready, .h2c_data, .h2c_qid,
    .store_valid(st_v), .store_ready(st_r), .store_beat(st_b),
    .load_valid (ld_v), .load_ready (ld_r), .load_beat (ld_b),
    .invp_valid (ip_v), .invp_ready (ip_r), .invp_beat (ip_b),
    .inva_valid (ia_v), .inva_ready (ia_r), .inva_beat (ia_b)
  );

  // ---- HBM allocator ----
  logic              al_v, al_r, fr_v, fr_r, cl_v, cl_r, flush;
  logic [PAGE_W-1:0] al_page, fr_page;

  donee_hbm_alloc #(.PAGES(PAGES)) u_alloc (
    .clk, .rst_n, .busy,
    .alloc_valid(al_v), .alloc_ready(al_r), .alloc_page(al_page),
    .free_valid (fr_v), .free_ready (fr_r), .free_page (fr_page),
    .clear_valid(cl_v), .clear_ready(cl_r),
    .used_pages (hbm_used_pages)
  );

  // ---- request generators ----
  logic [3:0] tx_v, tx_r;
  beat_t      tx_b [4];
  logic       lst_v, lst_r, lld_v, lld_r;
  beat_t      lst_b, lld_b;
  logic [1:0] mc_v, mc_r, mr_v, mr_r;
  mem_req_t   mc_req [2];
  word_t      mr_data;

  store_req_gen #(.PAGES(PAGES), .PREALLOC(PREALLOC), .HBM_BASE(HBM_BASE)) u_store (
    .clk, .rst_n,
    .in_valid(st_v), .in_ready(st_r), .in_beat(st_b),
    .alloc_valid(al_v), .alloc_ready(al_r), .alloc_page(al_page), .flush,
    .tx_valid(tx_v[0]), .tx_ready(tx_r[0]), .tx_beat(tx_b[0]),
    .lrsp_valid(lst_v), .lrsp_ready(lst_r), .lrsp_beat(lst_b),
    .mem_valid(mc_v[0]), .mem_ready(mc_r[0]), .mem_req(mc_req[0]),
    .ev_local(ev_local_store), .ev_redirect
  );

  load_req_gen u_load (
    .clk, .rst_n,
    .in_valid(ld_v), .in_ready(ld_r), .in_beat(ld_b),
    .tx_valid(tx_v[1]), .tx_ready(tx_r[1]), .tx_beat(tx_b[1]),
    .lrsp_valid(lld_v), .lrsp_ready(lld_r), .lrsp_beat(lld_b),
    .mem_valid(mc_v[1]), .mem_ready(mc_r[1]), .mem_req(mc_req[1]),
    .mem_rsp_valid(mr_v[1]), .mem_rsp_ready(mr_r[1]), .mem_rsp_data(mr_data),
    .ev_local(ev_local_load)
  );
  assign mr_r[0] = 1'b1;   // the store side never reads

  inv_page_req_gen #(.PAGES(PAGES), .HBM_BASE(HBM_BASE)) u_invp (
    .clk, .rst_n,
    .in_valid(ip_v), .in_ready(ip_r), .in_beat(ip_b),
    .free_valid(fr_v), .free_ready(fr_r), .free_page(fr_page),
    .tx_valid(tx_v[2]), .tx_ready(tx_r[2]), .tx_beat(tx_b[2])
  );

  inv_area_req_gen u_inva (
    .clk, .rst_n,
    .in_valid(ia_v), .in_ready(ia_r), .in_beat(ia_b),
    .clear_valid(cl_v), .clear_ready(cl_r), .cache_flush(flush),
    .tx_valid(tx_v[3]), .tx_ready(tx_r[3]), .tx_beat(tx_b[3])
  );

  // ---- HBM interconnect ----
  mem_ic #(.N(2)) u_hbm_ic (
    .clk, .rst_n,
    .c_req_valid(mc_v), .c_req_ready(mc_r), .c_req(mc_req),
    .c_rsp_valid(mr_v), .c_rsp_ready(mr_r), .c_rsp_data(mr_data),
    .m_req_valid(hbm_req_valid), .m_req_ready(hbm_req_ready), .m_req(hbm_req),
    .m_rsp_valid(hbm_rsp_valid), .m_rsp_ready(hbm_rsp_ready), .m_rsp_data(hbm_rsp_data)
  );

  // ---- request merger, with src_mid stamping ----
  beat_t    txm_b;
  cmd_hdr_t txm_hdr;
  logic     tx_in_pkt;

  pkt_merger #(.N(4)) u_req_merger (
    .clk, .rst_n,
    .in_valid(tx_v), .in_ready(tx_r), .in_beat(tx_b),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_beat(txm_b)
  );

  always_comb begin
    txm_hdr         = cmd_hdr_t'(txm_b.data);
    txm_hdr.src_mid = MY_MID;
    tx_beat         = tx_in_pkt ? txm_b : '{last: txm_b.last, data: word_t'(txm_hdr)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_in_pkt <= 1'b0;
    else if (tx_valid && tx_ready) tx_in_pkt <= !tx_beat.last;
  end

  // ---- response path ----
  logic [2:0] rm_v, rm_r;
  beat_t      rm_b [3];
  logic       rsp_v, rsp_r, sp_drop;
  beat_t      rsp_b, sp_b;
  logic [1:0] sp_v, sp_r;

  assign rm_v = {lld_v, lst_v, rx_valid};
  assign rm_b = '{rx_beat, lst_b, lld_b};
  assign {lld_r, lst_r, rx_ready} = rm_r;

  pkt_merger #(.N(3)) u_rsp_merger (
    .clk, .rst_n,
    .in_valid(rm_v), .in_ready(rm_r), .in_beat(rm_b),
    .out_valid(rsp_v), .out_ready(rsp_r), .out_beat(rsp_b)
  );

  pkt_splitter #(.N(2), .OPC({OP_LOAD_RSP, OP_STORE_RSP})) u_rsp_splitter (
    .clk, .rst_n,
    .in_valid(rsp_v), .in_ready(rsp_r), .in_beat(rsp_b),
    .out_valid(sp_v), .out_ready(sp_r), .out_beat(sp_b), .drop_pulse(sp_drop)
  );

  rsp_handler u_rsp_handler (
    .clk, .rst_n,
    .st_valid(sp_v[0]), .st_ready(sp_r[0]), .st_beat(sp_b),
    .ld_valid(sp_v[1]), .ld_ready(sp_r[1]), .ld_beat(sp_b),
    .c2h_valid, .c2h_ready, .c2h_addr, .c2h_data,
    .ev_store_cpl, .ev_load_cpl
  );
endmodule
