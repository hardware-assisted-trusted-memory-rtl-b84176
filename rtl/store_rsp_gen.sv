// store_rsp_gen: the donor engine's store response generator.
//
// Receives store packets (header + 64 page words) from the request splitter.
// It keeps one free list per donor tier (donated HBM, donated host DRAM),
// small register arrays that the two allocators keep filled with reserved
// pages. For each store it:
//   1. picks the tier named by target_tier (donor DRAM, else donor HBM);
//   2. takes a page from that tier's free list at a pseudo-random position
//      (16-bit LFSR modulo the list length), so that even the same swap slot
//      stored twice lands on unrelated pages;
//   3. records the sender's MID as the page owner in the allocator (commit);
//   4. writes the 64 words to the tier's memory (HBM, or host DRAM through the
//      DMA engine) at base + page * 4 KB;
//   5. returns a one-word store response with the tier and remote address.
// If the free list is empty the page words are drained and the response
// reports ST_NOSPACE with tier TIER_SWAP, telling the donee kernel to use its
// local swap device.
//
// Following the paper: allocation on every store, random choice among free
// pages, ownership recording, the free lists in the store response generator,
// the response fields (tier, remote address). This design's own: list depth,
// the LFSR, the tier encoding and the no-space response.
module store_rsp_gen
  import tdmem_pkg::*;
#(
  parameter int unsigned HBM_PAGES  = 2083328,
  parameter int unsigned DRAM_PAGES = 16777216,
  parameter logic [63:0] HBM_BASE   = 64'h0000_0000_0360_0000,   // after 54 MB of metadata
  parameter logic [63:0] DRAM_BASE  = 64'h0000_0010_0000_0000,
  parameter logic [7:0]  MY_MID     = 8'd2,
  parameter int unsigned FL_DEPTH   = 16,
  parameter logic [15:0] SEED       = 16'hACE1,
  localparam int unsigned HP_W      = $clog2(HBM_PAGES),
  localparam int unsigned DP_W      = $clog2(DRAM_PAGES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  beat_t           in_beat,
  // HBM allocator
  input  logic            h_rsv_valid,
  output logic            h_rsv_ready,
  input  logic [HP_W-1:0] h_rsv_page,
  output logic            h_commit_valid,
  input  logic            h_commit_ready,
  output logic [HP_W-1:0] h_commit_page,
  output logic [7:0]      h_commit_mid,
  // DRAM allocator
  input  logic            d_rsv_valid,
  output logic            d_rsv_ready,
  input  logic [DP_W-1:0] d_rsv_page,
  output logic            d_commit_valid,
  input  logic            d_commit_ready,
  output logic [DP_W-1:0] d_commit_page,
  output logic [7:0]      d_commit_mid,
  // memory writes
  output logic            h_mem_valid,
  input  logic            h_mem_ready,
  output mem_req_t        h_mem_req,
  output logic            d_mem_valid,
  input  logic            d_mem_ready,
  output mem_req_t        d_mem_req,
  // store responses
  output logic            out_valid,
  input  logic            out_ready,
  output beat_t           out_beat,
  output logic            ev_nospace
);
  localparam int unsigned CW = $clog2(FL_DEPTH + 1);

  typedef enum logic [2:0] {S_HDR, S_COMMIT, S_WR, S_DRAIN, S_RSP} state_e;
  state_e state;

  cmd_hdr_t        hdr, hdr_q, rsp_hdr;
  logic            use_dram, dram_q, ok_q;
  logic [DP_W-1:0] page_q;          // wide enough for either tier
  logic [5:0]      wcnt;
  logic [15:0]     lfsr;

  logic [HP_W-1:0] fl_h [FL_DEPTH];
  logic [DP_W-1:0] fl_d [FL_DEPTH];
  logic [CW-1:0]   cnt_h, cnt_d;

  assign hdr      = cmd_hdr_t'(in_beat.data);
  assign use_dram = (hdr.target_tier == TIER_DONOR_DRAM);

  // random slot in the list about to be used
  logic [CW-1:0] cnt_sel, idx;
  logic          take;
  assign cnt_sel = use_dram ? cnt_d : cnt_h;
  assign idx     = (cnt_sel == '0) ? '0 : CW'(lfsr % 16'(cnt_sel));
  assign take    = (state == S_HDR) && in_valid && (cnt_sel != '0);

  // refill, but not in a cycle where that list is being taken from
  assign h_rsv_ready = (cnt_h < CW'(FL_DEPTH)) && !(take && !use_dram);
  assign d_rsv_ready = (cnt_d < CW'(FL_DEPTH)) && !(take &&  use_dram);

  logic [63:0] page_addr;
  assign page_addr = dram_q ? DRAM_BASE + (64'(page_q) << 12)
                            : HBM_BASE  + (64'(page_q) << 12);

  always_comb begin
    rsp_hdr               = '0;
    rsp_hdr.opcode        = OP_STORE_RSP;
    rsp_hdr.src_mid       = MY_MID;
    rsp_hdr.dst_mid       = hdr_q.src_mid;
    rsp_hdr.tier          = !ok_q ? TIER_SWAP : (dram_q ? TIER_DONOR_DRAM : TIER_DONOR_HBM);
    rsp_hdr.status        = ok_q ? ST_OK : ST_NOSPACE;
    rsp_hdr.remote_addr   = ok_q ? page_addr : 64'd0;
    rsp_hdr.poll_dma_addr = hdr_q.poll_dma_addr;
  end

  mem_req_t wreq;
  assign wreq = '{we: 1'b1, addr: page_addr + {52'd0, wcnt, 6'd0}, wdata: in_beat.data};

  always_comb begin
    in_ready       = 1'b0;
    h_commit_valid = 1'b0;
    d_commit_valid = 1'b0;
    h_commit_page  = HP_W'(page_q);
    d_commit_page  = page_q;
    h_commit_mid   = hdr_q.src_mid;
    d_commit_mid   = hdr_q.src_mid;
    h_mem_valid    = 1'b0;
    d_mem_valid    = 1'b0;
    h_mem_req      = wreq;
    d_mem_req      = wreq;
    out_valid      = 1'b0;
    out_beat       = '{last: 1'b1, data: word_t'(rsp_hdr)};
    ev_nospace     = 1'b0;
    case (state)
      S_HDR: begin
        in_ready   = 1'b1;
        ev_nospace = in_valid && (cnt_sel == '0);
      end
      S_COMMIT: begin
        h_commit_valid = !dram_q;
        d_commit_valid =  dram_q;
      end
      S_WR: begin
        h_mem_valid = in_valid && !dram_q;
        d_mem_valid = in_valid &&  dram_q;
        in_ready    = dram_q ? d_mem_ready : h_mem_ready;
      end
      S_DRAIN: in_ready  = 1'b1;
      S_RSP:   out_valid = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_HDR;
      hdr_q  <= '0;
      dram_q <= 1'b0;
      ok_q   <= 1'b0;
      page_q <= '0;
      wcnt   <= '0;
      cnt_h  <= '0;
      cnt_d  <= '0;
      lfsr   <= SEED;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      // free-list refill
      if (h_rsv_valid && h_rsv_ready) begin
        fl_h[cnt_h] <= h_rsv_page;
        cnt_h       <= cnt_h + 1'b1;
      end
      if (d_rsv_valid && d_rsv_ready) begin
        fl_d[cnt_d] <= d_rsv_page;
        cnt_d       <= cnt_d + 1'b1;
      end
      case (state)
        S_HDR: if (in_valid) begin
          hdr_q  <= hdr;
          dram_q <= use_dram;
          wcnt   <= '0;
          if (take) begin
            ok_q  <= 1'b1;
            state <= S_COMMIT;
            // remove entry idx: the last entry moves into its place
            if (use_dram) begin
              page_q    <= fl_d[idx];
              fl_d[idx] <= fl_d[cnt_d - 1'b1];
              cnt_d     <= cnt_d - 1'b1;
            end else begin
              page_q    <= DP_W'(fl_h[idx]);
              fl_h[idx] <= fl_h[cnt_h - 1'b1];
              cnt_h     <= cnt_h - 1'b1;
            end
          end else begin
            ok_q  <= 1'b0;
            state <= S_DRAIN;
          end
        end
        S_COMMIT: if (dram_q ? d_commit_ready : h_commit_ready) state <= S_WR;
        S_WR: if (in_valid && in_ready) begin
          wcnt <= wcnt + 1'b1;
          if (in_beat.last) state <= S_RSP;
        end
        S_DRAIN: if (in_valid && in_beat.last) state <= S_RSP;
        S_RSP: if (out_ready) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end
endmodule
