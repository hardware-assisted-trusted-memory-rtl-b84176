// store_req_gen: the donee engine's store request generator.
//
// Takes complete store packets (header + 64 page words) from the command
// parser. The header's target_tier, chosen by the host kernel, says where the
// page should go:
//   * donee HBM: a page address is taken from the pre-allocation cache, a
//     small FIFO that is kept filled with free pages by the HBM allocator so
//     that no allocation is on the critical path. The 64 words are written to
//     HBM and a one-word store response (tier, remote address) is handed to
//     the response path. If the cache is empty, the local HBM is full and the
//     store is silently redirected to the donor's HBM instead.
//   * a donor tier: the packet is passed on to the network unchanged.
// The word stream is passed on without extra buffering: one word per cycle
// when neither the memory nor the network stalls.
//
// Following the paper: the tier selection by target_tier, the pre-allocation
// of cached free blocks and the silent redirection to the donor. This design's
// own: the cache depth (PREALLOC), the choice of the donor HBM as the redirect
// tier, and flush, which empties the cache when all local pages are released.
module store_req_gen
  import tdmem_pkg::*;
#(
  parameter int unsigned PAGES    = 2097152,
  parameter int unsigned PREALLOC = 8,
  parameter logic [63:0] HBM_BASE = 64'h0,
  localparam int unsigned PAGE_W  = $clog2(PAGES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // store packets from the command parser
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  // free pages from the HBM allocator
  input  logic              alloc_valid,
  output logic              alloc_ready,
  input  logic [PAGE_W-1:0] alloc_page,
  input  logic              flush,
  // to the donor (network)
  output logic              tx_valid,
  input  logic              tx_ready,
  output beat_t             tx_beat,
  // local store response
  output logic              lrsp_valid,
  input  logic              lrsp_ready,
  output beat_t             lrsp_beat,
  // HBM writes
  output logic              mem_valid,
  input  logic              mem_ready,
  output mem_req_t          mem_req,
  // events
  output logic              ev_local,
  output logic              ev_redirect
);
  typedef enum logic [1:0] {S_HDR, S_WR, S_RSP, S_FWD} state_e;
  state_e state;

  cmd_hdr_t          hdr, hdr_q, fwd_hdr, rsp_hdr;
  logic [PAGE_W-1:0] page_q;
  logic [5:0]        wcnt;
  logic              c_valid, c_ready;
  logic [PAGE_W-1:0] c_page;
  logic [$clog2(PREALLOC+1)-1:0] c_count;

  pkt_fifo #(.W(PAGE_W), .DEPTH(PREALLOC)) u_cache (
    .clk, .rst_n, .flush,
    .in_valid (alloc_valid),
    .in_ready (alloc_ready),
    .in_data  (alloc_page),
    .out_valid(c_valid),
    .out_ready(c_ready),
    .out_data (c_page),
    .count    (c_count)
  );

  assign hdr = cmd_hdr_t'(in_beat.data);

  logic go_local;
  assign go_local = (hdr.target_tier == TIER_DONEE_HBM) && c_valid;

  always_comb begin
    fwd_hdr = hdr;
    if (hdr.target_tier == TIER_DONEE_HBM) fwd_hdr.target_tier = TIER_DONOR_HBM;
  end

  logic [63:0] page_addr;
  assign page_addr = HBM_BASE + (64'(page_q) << 12);

  always_comb begin
    rsp_hdr               = '0;
    rsp_hdr.opcode        = OP_STORE_RSP;
    rsp_hdr.src_mid       = hdr_q.src_mid;
    rsp_hdr.dst_mid       = hdr_q.src_mid;
    rsp_hdr.tier          = TIER_DONEE_HBM;
    rsp_hdr.status        = ST_OK;
    rsp_hdr.remote_addr   = page_addr;
    rsp_hdr.poll_dma_addr = hdr_q.poll_dma_addr;
  end

  always_comb begin
    in_ready    = 1'b0;
    c_ready     = 1'b0;
    tx_valid    = 1'b0;
    tx_beat     = in_beat;
    lrsp_valid  = 1'b0;
    lrsp_beat   = '{last: 1'b1, data: word_t'(rsp_hdr)};
    mem_valid   = 1'b0;
    mem_req     = '{we: 1'b1, addr: page_addr + {52'd0, wcnt, 6'd0}, wdata: in_beat.data};
    ev_local    = 1'b0;
    ev_redirect = 1'b0;
    case (state)
      S_HDR: begin
        if (go_local) begin
          in_ready = in_valid;
          c_ready  = in_valid;
          ev_local = in_valid;
        end else begin
          tx_valid    = in_valid;
          tx_beat     = '{last: in_beat.last, data: word_t'(fwd_hdr)};
          in_ready    = tx_ready;
          ev_redirect = in_valid && tx_ready && (hdr.target_tier == TIER_DONEE_HBM);
        end
      end
      S_WR: begin
        mem_valid = in_valid;
        in_ready  = mem_ready;
      end
      S_RSP: lrsp_valid = 1'b1;
      S_FWD: begin
        tx_valid = in_valid;
        in_ready = tx_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_HDR;
      hdr_q  <= '0;
      page_q <= '0;
      wcnt   <= '0;
    end else begin
      case (state)
        S_HDR: if (in_valid && in_ready) begin
          hdr_q <= hdr;
          wcnt  <= '0;
          if (go_local) begin
            page_q <= c_page;
            state  <= S_WR;
          end else if (!in_beat.last) begin
            state <= S_FWD;
          end
        end
        S_WR: if (in_valid && in_ready) begin
          wcnt <= wcnt + 1'b1;
          if (in_beat.last) state <= S_RSP;
        end
        S_RSP: if (lrsp_ready) state <= S_HDR;
        S_FWD: if (in_valid && in_ready && in_beat.last) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end

  a_page_len: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_WR && in_valid && in_ready && in_beat.last |-> wcnt == 6'd63);
endmodule
