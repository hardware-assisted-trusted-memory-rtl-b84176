// pkt_fifo: first-word-fall-through FIFO for packet beats (or any W-bit word).
//
// A circular buffer of DEPTH entries with a valid/ready handshake on both
// sides. The head entry is shown on out_data while out_valid is high; it is
// removed in a cycle with out_valid && out_ready. in_ready is low when full.
// count gives the occupancy. flush empties the FIFO in one cycle.
// Used by the command parser to stack the words of a store command
// until the packet is complete, and as the pre-allocation and free-page caches.
module pkt_fifo #(
  parameter int unsigned W     = 513,
  parameter int unsigned DEPTH = 65
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  logic push, pop;
  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  // A stalled head must hold still (valid/ready stream rule).
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  push |-> count <= DEPTH[$clog2(DEPTH+1)-1:0]);
endmodule
