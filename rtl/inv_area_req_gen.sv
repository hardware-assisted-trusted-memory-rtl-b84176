// inv_area_req_gen: the donee engine's invalidate-area request generator.
//
// An invalidate-area command is issued when the donee shuts its swap area
// down; every page it has stored anywhere is to be released. The generator
// first asks the donee HBM allocator to clear its whole bitmap (the handshake
// cycle also flushes the store generator's pre-allocation cache, whose pages
// become free again), then passes the command to the donor, which releases
// every page owned by this donee. No response is produced.
// The order (local clear first, then the network) is this design's choice.
module inv_area_req_gen
  import tdmem_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_beat,
  output logic  clear_valid,
  input  logic  clear_ready,
  output logic  cache_flush,
  output logic  tx_valid,
  input  logic  tx_ready,
  output beat_t tx_beat
);
  logic  fwd;        // local clear done, command waiting for the network
  beat_t beat_q;

  assign clear_valid = in_valid && !fwd;
  assign cache_flush = clear_valid && clear_ready;
  assign in_ready    = !fwd && clear_ready;
  assign tx_valid    = fwd;
  assign tx_beat     = beat_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd    <= 1'b0;
      beat_q <= '0;
    end else if (!fwd) begin
      if (in_valid && clear_ready) begin
        fwd    <= 1'b1;
        beat_q <= '{last: 1'b1, data: in_beat.data};
      end
    end else if (tx_ready) begin
      fwd <= 1'b0;
    end
  end
endmodule
