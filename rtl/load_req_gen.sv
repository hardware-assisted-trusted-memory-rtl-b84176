// load_req_gen: the donee engine's load request generator.
//
// Takes one-word load commands. If the command's tier is the donee's own HBM,
// the page is read locally: a load response header is issued, then 64 word
// reads are sent to HBM back to back and the returning words follow the header
// as the 64 data beats of the response (65 beats in all, the same shape as a
// load response arriving from a donor). Any other tier: the command is passed
// on to the donor over the network. Reads are issued while the response path
// accepts data; the memory returns them in order.
//
// Following the paper: local HBM loads versus forwarding, and the 65-word
// load response. This design's own: the response header carries the host
// page address (page_dma_addr), which the paper's load response format omits;
// the response handler needs it to know where the page goes.
module load_req_gen
  import tdmem_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  beat_t    in_beat,
  output logic     tx_valid,
  input  logic     tx_ready,
  output beat_t    tx_beat,
  output logic     lrsp_valid,
  input  logic     lrsp_ready,
  output beat_t    lrsp_beat,
  output logic     mem_valid,
  input  logic     mem_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  output logic     mem_rsp_ready,
  input  word_t    mem_rsp_data,
  output logic     ev_local
);
  typedef enum logic [1:0] {S_HDR, S_LHDR, S_LDATA} state_e;
  state_e state;

  cmd_hdr_t hdr, hdr_q, rsp_hdr;
  logic [6:0] issued, recv;

  assign hdr = cmd_hdr_t'(in_beat.data);

  always_comb begin
    rsp_hdr               = '0;
    rsp_hdr.opcode        = OP_LOAD_RSP;
    rsp_hdr.src_mid       = hdr_q.src_mid;
    rsp_hdr.dst_mid       = hdr_q.src_mid;
    rsp_hdr.tier          = hdr_q.tier;
    rsp_hdr.status        = ST_OK;
    rsp_hdr.remote_addr   = hdr_q.remote_addr;
    rsp_hdr.page_dma_addr = hdr_q.page_dma_addr;
    rsp_hdr.poll_dma_addr = hdr_q.poll_dma_addr;
  end

  always_comb begin
    in_ready      = 1'b0;
    tx_valid      = 1'b0;
    tx_beat       = in_beat;
    lrsp_valid    = 1'b0;
    lrsp_beat     = '{last: 1'b0, data: word_t'(rsp_hdr)};
    mem_valid     = 1'b0;
    mem_req       = '{we: 1'b0, addr: hdr_q.remote_addr + {51'd0, issued, 6'd0}, wdata: '0};
    mem_rsp_ready = 1'b0;
    ev_local      = 1'b0;
    case (state)
      S_HDR: begin
        if (hdr.tier == TIER_DONEE_HBM) begin
          in_ready = 1'b1;
          ev_local = in_valid;
        end else begin
          tx_valid = in_valid;
          in_ready = tx_ready;
        end
      end
      S_LHDR: lrsp_valid = 1'b1;
      S_LDATA: begin
        mem_valid     = (issued != 7'd64);
        lrsp_valid    = mem_rsp_valid;
        lrsp_beat     = '{last: (recv == 7'd63), data: mem_rsp_data};
        mem_rsp_ready = lrsp_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_HDR;
      hdr_q  <= '0;
      issued <= '0;
      recv   <= '0;
    end else begin
      case (state)
        S_HDR: if (in_valid && in_ready && hdr.tier == TIER_DONEE_HBM) begin
          hdr_q  <= hdr;
          issued <= '0;
          recv   <= '0;
          state  <= S_LHDR;
        end
        S_LHDR: if (lrsp_ready) state <= S_LDATA;
        S_LDATA: begin
          if (mem_valid && mem_ready) issued <= issued + 1'b1;
          if (mem_rsp_valid && mem_rsp_ready) begin
            recv <= recv + 1'b1;
            if (recv == 7'd63) state <= S_HDR;
          end
        end
        default: state <= S_HDR;
      endcase
    end
  end
endmodule
