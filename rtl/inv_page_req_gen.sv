// inv_page_req_gen: the donee engine's invalidate-page request generator.
//
// Takes one-word invalidate-page commands. A page held in the donee's own HBM
// is released in the HBM allocator (its page number is the remote address
// minus the HBM base, divided by 4 KB); a page held by a donor is released by
// passing the command on to the donor over the network. No response is
// produced in either case: the paper drops completions for invalidations to
// save hardware and network bandwidth. A command is accepted in the cycle the
// allocator or the network accepts it.
module inv_page_req_gen
  import tdmem_pkg::*;
#(
  parameter int unsigned PAGES    = 2097152,
  parameter logic [63:0] HBM_BASE = 64'h0,
  localparam int unsigned PAGE_W  = $clog2(PAGES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  output logic              free_valid,
  input  logic              free_ready,
  output logic [PAGE_W-1:0] free_page,
  output logic              tx_valid,
  input  logic              tx_ready,
  output beat_t             tx_beat
);
  cmd_hdr_t hdr;
  logic     local_pg;
  logic [63:0] off;

  assign hdr      = cmd_hdr_t'(in_beat.data);
  assign local_pg = (hdr.tier == TIER_DONEE_HBM);
  assign off      = hdr.remote_addr - HBM_BASE;
  assign free_page  = PAGE_W'(off >> 12);
  assign free_valid = in_valid && local_pg;
  assign tx_valid   = in_valid && !local_pg;
  assign tx_beat    = in_beat;
  assign in_ready   = local_pg ? free_ready : tx_ready;

  a_one_word: assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid |-> in_beat.last);
endmodule
