// inv_area_rsp_gen: the donor engine's invalidate-area response generator.
//
// An invalidate-area request releases, in both donor tiers, every page owned
// by the request's src_mid. The request is offered to the HBM and the DRAM
// allocator at once; each accepts it when idle and then sweeps its whole
// owner table. The request is consumed once both have accepted. No response
// is produced.
module inv_area_rsp_gen
  import tdmem_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  beat_t      in_beat,
  output logic       h_area_valid,
  input  logic       h_area_ready,
  output logic       d_area_valid,
  input  logic       d_area_ready,
  output logic [7:0] area_mid
);
  cmd_hdr_t hdr;
  logic     h_done, d_done;   // allocator has taken the current request

  assign hdr          = cmd_hdr_t'(in_beat.data);
  assign area_mid     = hdr.src_mid;
  assign h_area_valid = in_valid && !h_done;
  assign d_area_valid = in_valid && !d_done;
  assign in_ready     = (h_done || h_area_ready) && (d_done || d_area_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_done <= 1'b0;
      d_done <= 1'b0;
    end else if (in_valid && in_ready) begin
      h_done <= 1'b0;
      d_done <= 1'b0;
    end else begin
      if (h_area_valid && h_area_ready) h_done <= 1'b1;
      if (d_area_valid && d_area_ready) d_done <= 1'b1;
    end
  end
endmodule
