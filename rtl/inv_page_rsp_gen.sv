// inv_page_rsp_gen: the donor engine's invalidate-page response generator.
//
// Releases the page named by a one-word invalidate-page request. The tier and
// address are decoded as for a load (inside the donated region, page
// aligned); the allocator then frees the page only if its recorded owner is
// the request's src_mid, so one donee cannot release another's page. No
// response packet is produced (the paper does not acknowledge invalidations).
// A request with an address outside the donated regions is dropped and
// flagged on ev_bad.
module inv_page_rsp_gen
  import tdmem_pkg::*;
#(
  parameter int unsigned HBM_PAGES  = 2083328,
  parameter int unsigned DRAM_PAGES = 16777216,
  parameter logic [63:0] HBM_BASE   = 64'h0000_0000_0360_0000,
  parameter logic [63:0] DRAM_BASE  = 64'h0000_0010_0000_0000,
  localparam int unsigned HP_W      = $clog2(HBM_PAGES),
  localparam int unsigned DP_W      = $clog2(DRAM_PAGES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  beat_t           in_beat,
  output logic            h_free_valid,
  input  logic            h_free_ready,
  output logic [HP_W-1:0] h_free_page,
  output logic [7:0]      h_free_mid,
  output logic            d_free_valid,
  input  logic            d_free_ready,
  output logic [DP_W-1:0] d_free_page,
  output logic [7:0]      d_free_mid,
  output logic            ev_bad
);
  cmd_hdr_t    hdr;
  logic [63:0] off_h, off_d;
  logic        in_h, in_d;

  assign hdr   = cmd_hdr_t'(in_beat.data);
  assign off_h = hdr.remote_addr - HBM_BASE;
  assign off_d = hdr.remote_addr - DRAM_BASE;
  assign in_h  = (hdr.tier == TIER_DONOR_HBM) && (hdr.remote_addr >= HBM_BASE) &&
                 (off_h[11:0] == '0) && ((off_h >> 12) < 64'(HBM_PAGES));
  assign in_d  = (hdr.tier == TIER_DONOR_DRAM) && (hdr.remote_addr >= DRAM_BASE) &&
                 (off_d[11:0] == '0) && ((off_d >> 12) < 64'(DRAM_PAGES));

  assign h_free_valid = in_valid && in_h;
  assign d_free_valid = in_valid && in_d;
  assign h_free_page  = HP_W'(off_h >> 12);
  assign d_free_page  = DP_W'(off_d >> 12);
  assign h_free_mid   = hdr.src_mid;
  assign d_free_mid   = hdr.src_mid;
  assign in_ready     = in_h ? h_free_ready : (in_d ? d_free_ready : 1'b1);
  assign ev_bad       = in_valid && !in_h && !in_d;

  a_one_word: assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid |-> in_beat.last);
endmodule
