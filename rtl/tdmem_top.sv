// tdmem_top: a two-node trusted disaggregated-memory system: the FPGA engine
// of a donee node and the FPGA engine of a donor node, joined by their own
// network, which bypasses both hosts' operating systems.
//
// The donee's host issues store / load / invalidate commands; pages go to the
// donee's own HBM or, over the link, to the donor's HBM or host DRAM, where
// the donor engine allocates them at random among free pages, records the
// donee as owner and checks ownership on every later access. The 100 Gb/s
// Ethernet subsystem between the two engines is taken as an ideal lossless
// link here: the donee's transmit stream feeds the donor's receive stream and
// vice versa. The DMA engine, the HBM stacks and the donor's host DRAM are
// outside this module; their ports are brought out.
//
// Ports: donee_h2c_*/donee_c2h_* are the donee host's command stream and
// memory writes; donee_hbm_*, donor_hbm_* and donor_dram_* are memory ports
// (byte address of a 64 B word, in-order read data). The ev_* outputs pulse
// once per event and let a test count what happened.
module tdmem_top
  import tdmem_pkg::*;
#(
  parameter logic [7:0]  DONEE_MID        = 8'd1,
  parameter logic [7:0]  DONOR_MID        = 8'd2,
  parameter int unsigned DONEE_HBM_PAGES  = 2097152,
  parameter int unsigned DONOR_HBM_PAGES  = 2083328,
  parameter int unsigned DONOR_DRAM_PAGES = 16777216,
  parameter logic [63:0] DONOR_HBM_BASE   = 64'h0000_0000_0360_0000,
  parameter logic [63:0] DONOR_DRAM_BASE  = 64'h0000_0010_0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // donee host DMA
  input  logic        donee_h2c_valid,
  output logic        donee_h2c_ready,
  input  word_t       donee_h2c_data,
  input  logic [10:0] donee_h2c_qid,
  output logic        donee_c2h_valid,
  input  logic        donee_c2h_ready,
  output logic [63:0] donee_c2h_addr,
  output word_t       donee_c2h_data,
  // donee HBM
  output logic        donee_hbm_req_valid,
  input  logic        donee_hbm_req_ready,
  output mem_req_t    donee_hbm_req,
  input  logic        donee_hbm_rsp_valid,
  output logic        donee_hbm_rsp_ready,
  input  word_t       donee_hbm_rsp_data,
  // donor HBM
  output logic        donor_hbm_req_valid,
  input  logic        donor_hbm_req_ready,
  output mem_req_t    donor_hbm_req,
  input  logic        donor_hbm_rsp_valid,
  output logic        donor_hbm_rsp_ready,
  input  word_t       donor_hbm_rsp_data,
  // donor host DRAM
  output logic        donor_dram_req_valid,
  input  logic        donor_dram_req_ready,
  output mem_req_t    donor_dram_req,
  input  logic        donor_dram_rsp_valid,
  output logic        donor_dram_rsp_ready,
  input  word_t       donor_dram_rsp_data,
  // status and events
  output logic        busy,
  output logic        ev_local_store,
  output logic        ev_redirect,
  output logic        ev_local_load,
  output logic        ev_store_cpl,
  output logic        ev_load_cpl,
  output logic        ev_nospace,
  output logic        ev_denied,
  output logic        ev_free_ok,
  output logic        ev_free_refused,
  output logic        ev_area_done
);
  logic  n2d_valid, n2d_ready, d2n_valid, d2n_ready;
  beat_t n2d_beat, d2n_beat;
  logic  donee_busy, donor_busy, ev_bad_inv;
  logic [$clog2(DONEE_HBM_PAGES):0]  donee_used;
  logic [$clog2(DONOR_HBM_PAGES):0]  donor_hbm_free;
  logic [$clog2(DONOR_DRAM_PAGES):0] donor_dram_free;

  donee_engine #(.MY_MID(DONEE_MID), .PAGES(DONEE_HBM_PAGES)) u_donee (
    .clk, .rst_n,
    .h2c_valid(donee_h2c_valid), .h2c_ready(donee_h2c_ready),
    .h2c_data(donee_h2c_data), .h2c_qid(donee_h2c_qid),
    .c2h_valid(donee_c2h_valid), .c2h_ready(donee_c2h_ready),
    .c2h_addr(donee_c2h_addr), .c2h_data(donee_c2h_data),
    .hbm_req_valid(donee_hbm_req_valid), .hbm_req_ready(donee_hbm_req_ready), .hbm_req(donee_hbm_req),
    .hbm_rsp_valid(donee_hbm_rsp_valid), .hbm_rsp_ready(donee_hbm_rsp_ready), .hbm_rsp_data(donee_hbm_rsp_data),
    .tx_valid(n2d_valid), .tx_ready(n2d_ready), .tx_beat(n2d_beat),
    .rx_valid(d2n_valid), .rx_ready(d2n_ready), .rx_beat(d2n_beat),
    .busy(donee_busy), .hbm_used_pages(donee_used),
    .ev_local_store, .ev_redirect, .ev_local_load, .ev_store_cpl, .ev_load_cpl
  );

  donor_engine #(.MY_MID(DONOR_MID), .HBM_PAGES(DONOR_HBM_PAGES), .DRAM_PAGES(DONOR_DRAM_PAGES),
                 .HBM_BASE(DONOR_HBM_BASE), .DRAM_BASE(DONOR_DRAM_BASE)) u_donor (
    .clk, .rst_n,
    .rx_valid(n2d_valid), .rx_ready(n2d_ready), .rx_beat(n2d_beat),
    .tx_valid(d2n_valid), .tx_ready(d2n_ready), .tx_beat(d2n_beat),
    .hbm_req_valid(donor_hbm_req_valid), .hbm_req_ready(donor_hbm_req_ready), .hbm_req(donor_hbm_req),
    .hbm_rsp_valid(donor_hbm_rsp_valid), .hbm_rsp_ready(donor_hbm_rsp_ready), .hbm_rsp_data(donor_hbm_rsp_data),
    .dram_req_valid(donor_dram_req_valid), .dram_req_ready(donor_dram_req_ready), .dram_req(donor_dram_req),
    .dram_rsp_valid(donor_dram_rsp_valid), .dram_rsp_ready(donor_dram_rsp_ready), .dram_rsp_data(donor_dram_rsp_data),
    .busy(donor_busy), .hbm_free_pages(donor_hbm_free), .dram_free_pages(donor_dram_free),
    .ev_nospace, .ev_denied, .ev_bad_inv, .ev_free_ok, .ev_free_refused, .ev_area_done
  );

  assign busy = donee_busy || donor_busy;
endmodule
