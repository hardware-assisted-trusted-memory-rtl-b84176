// rsp_handler: the donee engine's response handler.
//
// Turns responses into writes to donee host memory through the DMA engine
// (card-to-host writes of one 64-byte word each):
//   * a store response (one word) is written as the completion to the
//     command's poll_dma_addr; it carries the status, the tier and the remote
//     address that the kernel records in its translation table;
//   * a load response writes its 64 page words to page_dma_addr,
//     page_dma_addr + 64, ... and then the completion to poll_dma_addr, so
//     the host sees the completion only after the whole page; a refused load
//     (one-beat response) writes the completion only.
// The completion word is the response header itself. Store and load responses
// are taken in round-robin order, a whole response at a time, as in the paper.
module rsp_handler
  import tdmem_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        st_valid,
  output logic        st_ready,
  input  beat_t       st_beat,
  input  logic        ld_valid,
  output logic        ld_ready,
  input  beat_t       ld_beat,
  output logic        c2h_valid,
  input  logic        c2h_ready,
  output logic [63:0] c2h_addr,
  output word_t       c2h_data,
  output logic        ev_store_cpl,
  output logic        ev_load_cpl
);
  typedef enum logic [2:0] {S_IDLE, S_ST, S_LHDR, S_LDATA, S_LCPL} state_e;
  state_e state;

  cmd_hdr_t st_hdr, ld_hdr, hdr_q;
  logic     last_ld;          // the previous grant went to the load side
  logic [5:0] cnt;

  assign st_hdr = cmd_hdr_t'(st_beat.data);
  assign ld_hdr = cmd_hdr_t'(ld_beat.data);

  always_comb begin
    st_ready     = 1'b0;
    ld_ready     = 1'b0;
    c2h_valid    = 1'b0;
    c2h_addr     = st_hdr.poll_dma_addr;
    c2h_data     = st_beat.data;
    ev_store_cpl = 1'b0;
    ev_load_cpl  = 1'b0;
    case (state)
      S_ST: begin
        c2h_valid    = st_valid;
        st_ready     = c2h_ready;
        ev_store_cpl = st_valid && c2h_ready;
      end
      S_LHDR: ld_ready = 1'b1;
      S_LDATA: begin
        c2h_valid = ld_valid;
        c2h_addr  = hdr_q.page_dma_addr + {52'd0, cnt, 6'd0};
        c2h_data  = ld_beat.data;
        ld_ready  = c2h_ready;
      end
      S_LCPL: begin
        c2h_valid   = 1'b1;
        c2h_addr    = hdr_q.poll_dma_addr;
        c2h_data    = word_t'(hdr_q);
        ev_load_cpl = c2h_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      last_ld <= 1'b1;
      hdr_q   <= '0;
      cnt     <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (st_valid && (!ld_valid || last_ld)) begin
            state   <= S_ST;
            last_ld <= 1'b0;
          end else if (ld_valid) begin
            state   <= S_LHDR;
            last_ld <= 1'b1;
          end
        end
        S_ST: if (st_valid && c2h_ready) state <= S_IDLE;
        S_LHDR: if (ld_valid) begin
          hdr_q <= ld_hdr;
          cnt   <= '0;
          state <= ld_beat.last ? S_LCPL : S_LDATA;
        end
        S_LDATA: if (ld_valid && c2h_ready) begin
          cnt <= cnt + 1'b1;
          if (ld_beat.last) state <= S_LCPL;
        end
        S_LCPL: if (c2h_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
