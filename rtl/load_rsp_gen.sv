// load_rsp_gen: the donor engine's load response generator, where the
// donor enforces page-granular access control.
//
// The donee names the page by tier and remote physical address, taken from its
// own translation table; the donor does not trust that address. For each
// one-word load request it:
//   1. checks that the address lies inside the donated region of the tier and
//      is page aligned;
//   2. asks that tier's allocator whether the page is owned by the request's
//      src_mid;
//   3. if so, sends a response header followed by the 64 page words, read
//      back to back from HBM or host DRAM (65 beats in all);
//   4. otherwise sends a single-beat response with status ST_DENIED and no
//      data.
// Following the paper: the ownership lookup on every load and the 65-word
// load response. This design's own: the range check, the denied response
// (the paper does not say what happens to a refused load), and carrying
// page_dma_addr in the response header.
module load_rsp_gen
  import tdmem_pkg::*;
#(
  parameter int unsigned HBM_PAGES  = 2083328,
  parameter int unsigned DRAM_PAGES = 16777216,
  parameter logic [63:0] HBM_BASE   = 64'h0000_0000_0360_0000,
  parameter logic [63:0] DRAM_BASE  = 64'h0000_0010_0000_0000,
  parameter logic [7:0]  MY_MID     = 8'd2,
  localparam int unsigned HP_W      = $clog2(HBM_PAGES),
  localparam int unsigned DP_W      = $clog2(DRAM_PAGES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  beat_t           in_beat,
  // ownership checks
  output logic            h_chk_valid,
  input  logic            h_chk_ready,
  output logic [HP_W-1:0] h_chk_page,
  output logic [7:0]      h_chk_mid,
  input  logic            h_chk_done,
  input  logic            h_chk_ok,
  output logic            d_chk_valid,
  input  logic            d_chk_ready,
  output logic [DP_W-1:0] d_chk_page,
  output logic [7:0]      d_chk_mid,
  input  logic            d_chk_done,
  input  logic            d_chk_ok,
  // memory reads
  output logic            h_mem_valid,
  input  logic            h_mem_ready,
  output mem_req_t        h_mem_req,
  input  logic            h_rsp_valid,
  output logic            h_rsp_ready,
  input  word_t           h_rsp_data,
  output logic            d_mem_valid,
  input  logic            d_mem_ready,
  output mem_req_t        d_mem_req,
  input  logic            d_rsp_valid,
  output logic            d_rsp_ready,
  input  word_t           d_rsp_data,
  // load responses
  output logic            out_valid,
  input  logic            out_ready,
  output beat_t           out_beat,
  output logic            ev_denied
);
  typedef enum logic [2:0] {S_HDR, S_CHK, S_WAIT, S_RHDR, S_DATA, S_DENY} state_e;
  state_e state;

  cmd_hdr_t    hdr, hdr_q, rsp_hdr;
  logic        dram_q;
  logic [63:0] off_h, off_d;
  logic        in_h, in_d;
  logic [DP_W-1:0] page_q;
  logic [6:0]  issued, recv;

  assign hdr   = cmd_hdr_t'(in_beat.data);
  assign off_h = hdr.remote_addr - HBM_BASE;
  assign off_d = hdr.remote_addr - DRAM_BASE;
  assign in_h  = (hdr.tier == TIER_DONOR_HBM) && (hdr.remote_addr >= HBM_BASE) &&
                 (off_h[11:0] == '0) && ((off_h >> 12) < 64'(HBM_PAGES));
  assign in_d  = (hdr.tier == TIER_DONOR_DRAM) && (hdr.remote_addr >= DRAM_BASE) &&
                 (off_d[11:0] == '0) && ((off_d >> 12) < 64'(DRAM_PAGES));

  always_comb begin
    rsp_hdr               = '0;
    rsp_hdr.opcode        = OP_LOAD_RSP;
    rsp_hdr.src_mid       = MY_MID;
    rsp_hdr.dst_mid       = hdr_q.src_mid;
    rsp_hdr.tier          = hdr_q.tier;
    rsp_hdr.status        = (state == S_DENY) ? ST_DENIED : ST_OK;
    rsp_hdr.remote_addr   = hdr_q.remote_addr;
    rsp_hdr.page_dma_addr = hdr_q.page_dma_addr;
    rsp_hdr.poll_dma_addr = hdr_q.poll_dma_addr;
  end

  mem_req_t rreq;
  assign rreq = '{we: 1'b0, addr: hdr_q.remote_addr + {51'd0, issued, 6'd0}, wdata: '0};

  always_comb begin
    in_ready    = (state == S_HDR);
    h_chk_valid = (state == S_CHK) && !dram_q;
    d_chk_valid = (state == S_CHK) &&  dram_q;
    h_chk_page  = HP_W'(page_q);
    d_chk_page  = page_q;
    h_chk_mid   = hdr_q.src_mid;
    d_chk_mid   = hdr_q.src_mid;
    h_mem_req   = rreq;
    d_mem_req   = rreq;
    h_mem_valid = (state == S_DATA) && !dram_q && (issued != 7'd64);
    d_mem_valid = (state == S_DATA) &&  dram_q && (issued != 7'd64);
    h_rsp_ready = 1'b0;
    d_rsp_ready = 1'b0;
    out_valid   = 1'b0;
    out_beat    = '{last: (state == S_DENY), data: word_t'(rsp_hdr)};
    ev_denied   = 1'b0;
    case (state)
      S_RHDR: out_valid = 1'b1;
      S_DENY: begin
        out_valid = 1'b1;
        ev_denied = out_ready;
      end
      S_DATA: begin
        out_valid   = dram_q ? d_rsp_valid : h_rsp_valid;
        out_beat    = '{last: (recv == 7'd63), data: dram_q ? d_rsp_data : h_rsp_data};
        h_rsp_ready = !dram_q && out_ready;
        d_rsp_ready =  dram_q && out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_HDR;
      hdr_q  <= '0;
      dram_q <= 1'b0;
      page_q <= '0;
      issued <= '0;
      recv   <= '0;
    end else begin
      case (state)
        S_HDR: if (in_valid) begin
          hdr_q  <= hdr;
          dram_q <= (hdr.tier == TIER_DONOR_DRAM);
          page_q <= (hdr.tier == TIER_DONOR_DRAM) ? DP_W'(off_d >> 12) : DP_W'(off_h >> 12);
          issued <= '0;
          recv   <= '0;
          state  <= (in_h || in_d) ? S_CHK : S_DENY;
        end
        S_CHK:  if (dram_q ? d_chk_ready : h_chk_ready) state <= S_WAIT;
        S_WAIT: begin
          if (dram_q ? d_chk_done : h_chk_done)
            state <= (dram_q ? d_chk_ok : h_chk_ok) ? S_RHDR : S_DENY;
        end
        S_RHDR: if (out_ready) state <= S_DATA;
        S_DATA: begin
          if ((h_mem_valid && h_mem_ready) || (d_mem_valid && d_mem_ready))
            issued <= issued + 1'b1;
          if (out_valid && out_ready) begin
            recv <= recv + 1'b1;
            if (recv == 7'd63) state <= S_HDR;
          end
        end
        S_DENY: if (out_ready) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end

  a_one_word: assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid |-> in_beat.last);
endmodule
