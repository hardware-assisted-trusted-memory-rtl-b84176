// pkt_splitter: routes each packet of one stream to one of N outputs by the
// opcode in its header word.
//
// Serves as the donor's request splitter (store / load / invalidate page /
// invalidate area) and the donee's response splitter (store / load
// responses). Output k takes packets whose opcode equals OPC[k]. The route is
// chosen from the header beat and held until the beat with last set.
// A packet whose opcode matches no output is consumed and dropped, and counted
// on drop_pulse. Pass-through is combinational.
module pkt_splitter
  import tdmem_pkg::*;
#(
  parameter int unsigned N = 4,
  parameter logic [N*8-1:0] OPC = {OP_INV_AREA, OP_INV_PAGE, OP_LOAD_REQ, OP_STORE_REQ}
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  beat_t         in_beat,
  output logic [N-1:0]  out_valid,
  input  logic [N-1:0]  out_ready,
  output beat_t         out_beat,
  output logic          drop_pulse
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  cmd_hdr_t      hdr;
  logic          in_pkt;        // inside a packet (header already passed)
  logic          cur_drop, hdr_drop, sel_drop;
  logic [IW-1:0] cur_sel, hdr_sel, sel;

  assign hdr = cmd_hdr_t'(in_beat.data);

  always_comb begin
    hdr_sel  = '0;
    hdr_drop = 1'b1;
    for (int k = 0; k < N; k++) begin
      if (hdr_drop && hdr.opcode == OPC[k*8 +: 8]) begin
        hdr_sel  = IW'(k);
        hdr_drop = 1'b0;
      end
    end
  end

  assign sel      = in_pkt ? cur_sel : hdr_sel;
  assign sel_drop = in_pkt ? cur_drop : hdr_drop;
  assign out_beat = in_beat;

  always_comb begin
    out_valid = '0;
    if (!sel_drop) out_valid[sel] = in_valid;
  end
  assign in_ready   = sel_drop ? 1'b1 : out_ready[sel];
  assign drop_pulse = in_valid && !in_pkt && hdr_drop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt   <= 1'b0;
      cur_sel  <= '0;
      cur_drop <= 1'b0;
    end else if (in_valid && in_ready) begin
      if (in_beat.last) begin
        in_pkt <= 1'b0;
      end else if (!in_pkt) begin
        in_pkt   <= 1'b1;
        cur_sel  <= hdr_sel;
        cur_drop <= hdr_drop;
      end
    end
  end
endmodule
