// pkt_merger: merges N packet streams into one, a whole packet at a time.
//
// Serves as the request merger in front of the donee's network transmitter,
// and as the response mergers of both engines. When idle it grants the first
// valid input after the one granted last (round robin), then stays locked on
// that input until the beat with last set has been passed. The output is
// combinational from the granted input (no added latency); in_ready is only
// raised towards the granted input. Round-robin order is this design's choice:
// the merging policy is not specified beyond "merger".
module pkt_merger
  import tdmem_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic  [N-1:0]   in_valid,
  output logic  [N-1:0]   in_ready,
  input  beat_t           in_beat [N],
  output logic            out_valid,
  input  logic            out_ready,
  output beat_t           out_beat
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          locked;
  logic [IW-1:0] lock_sel, last_sel, pick, sel;
  logic          pick_any;

  // Round-robin choice among valid inputs, starting after last_sel.
  always_comb begin
    pick     = '0;
    pick_any = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_sel) + k) % N;
      if (!pick_any && in_valid[idx]) begin
        pick     = IW'(idx);
        pick_any = 1'b1;
      end
    end
  end

  assign sel       = locked ? lock_sel : pick;
  assign out_valid = locked ? in_valid[lock_sel] : pick_any;
  assign out_beat  = in_beat[sel];

  always_comb begin
    in_ready = '0;
    if (locked || pick_any) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked   <= 1'b0;
      lock_sel <= '0;
      last_sel <= IW'(N - 1);
    end else if (out_valid && out_ready) begin
      if (out_beat.last) begin
        locked   <= 1'b0;
        last_sel <= sel;
      end else begin
        locked   <= 1'b1;
        lock_sel <= sel;
      end
    end
  end
endmodule
