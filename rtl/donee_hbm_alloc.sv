// donee_hbm_alloc: page allocator of the donee's on-board HBM.
//
// One bit per 4 KB page records whether the page is in use; with 8 GB of HBM
// that is 2,097,152 bits. The bitmap is kept in a memory of 32-bit words, one
// word per cycle, which matches the paper's partitioning of the table by a
// cyclic factor of 32. All work is done by one state machine, so requests are
// served one at a time:
//   * after reset, every word is cleared (PAGES/32 cycles, busy high);
//   * free: read the page's word, clear its bit (2 cycles);
//   * each scan step reads one word and writes it back (2 cycles);
//   * clear: invalidate-area, every word is cleared again;
//   * otherwise, while its one-entry output register is empty and a free page
//     exists, it scans words from a rotating pointer, takes the lowest clear
//     bit of the first word that is not all ones, sets it and offers that page
//     on alloc_valid/alloc_page. The store request generator takes these pages
//     ahead of time into its pre-allocation cache.
// The bitmap and the 4 KB granularity follow the paper; the next-fit scan,
// the free-page counter and the request priorities (clear, free, scan) are
// this design's own. A free of a page that is not allocated is ignored.
module donee_hbm_alloc #(
  parameter int unsigned PAGES     = 2097152,   // 8 GB / 4 KB
  parameter int unsigned BITS      = 32,        // bitmap word (cyclic factor)
  localparam int unsigned PAGE_W   = $clog2(PAGES),
  localparam int unsigned NWORDS   = PAGES / BITS,
  localparam int unsigned WA_W     = (NWORDS > 1) ? $clog2(NWORDS) : 1,
  localparam int unsigned BI_W     = $clog2(BITS)
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              busy,          // initial clear or area clear running
  // pre-allocated page offered to the store request generator
  output logic              alloc_valid,
  input  logic              alloc_ready,
  output logic [PAGE_W-1:0] alloc_page,
  // page release (invalidate page)
  input  logic              free_valid,
  output logic              free_ready,
  input  logic [PAGE_W-1:0] free_page,
  // release of all pages (invalidate area)
  input  logic              clear_valid,
  output logic              clear_ready,
  output logic [PAGE_W:0]   used_pages
);
  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_FREE_WR, S_SCAN_EV} state_e;
  state_e state;

  logic [BITS-1:0] bitmap [NWORDS];
  logic [BITS-1:0] rd_q;
  logic [WA_W-1:0] rd_addr, wr_addr, clr_ptr, scan_ptr;
  logic [BITS-1:0] wr_data;
  logic            wr_en;
  logic [PAGE_W-1:0] free_q;
  logic [PAGE_W:0]   used;           // pages marked in the bitmap

  // synchronous-read memory
  always_ff @(posedge clk) begin
    if (wr_en) bitmap[wr_addr] <= wr_data;
    rd_q <= bitmap[rd_addr];
  end

  // lowest clear bit of the word just read
  logic [BI_W-1:0] zbit;
  logic            zfound;
  always_comb begin
    zbit   = '0;
    zfound = 1'b0;
    for (int b = 0; b < BITS; b++) begin
      if (!zfound && !rd_q[b]) begin
        zbit   = BI_W'(b);
        zfound = 1'b1;
      end
    end
  end

  function automatic logic [WA_W-1:0] next_word(input logic [WA_W-1:0] p);
    return (p == WA_W'(NWORDS - 1)) ? '0 : p + 1'b1;
  endfunction

  assign busy        = (state == S_CLEAR);
  assign clear_ready = (state == S_IDLE);
  assign free_ready  = (state == S_IDLE) && !clear_valid;
  assign used_pages  = used;

  logic want_scan;
  assign want_scan = !alloc_valid && (used < (PAGE_W+1)'(PAGES));

  always_comb begin
    wr_en   = 1'b0;
    wr_addr = clr_ptr;
    wr_data = '0;
    rd_addr = scan_ptr;
    case (state)
      S_CLEAR: begin
        wr_en = 1'b1;
      end
      S_IDLE: begin
        if (clear_valid) ;
        else if (free_valid) rd_addr = WA_W'(free_page >> BI_W);
      end
      S_FREE_WR: begin
        wr_en   = 1'b1;
        wr_addr = WA_W'(free_q >> BI_W);
        wr_data = rd_q & ~(BITS'(1) << free_q[BI_W-1:0]);
      end
      S_SCAN_EV: begin
        wr_en   = zfound;
        wr_addr = scan_ptr;
        wr_data = rd_q | (BITS'(1) << zbit);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_CLEAR;
      clr_ptr     <= '0;
      scan_ptr    <= '0;
      used        <= '0;
      free_q      <= '0;
      alloc_valid <= 1'b0;
      alloc_page  <= '0;
    end else begin
      if (alloc_valid && alloc_ready) alloc_valid <= 1'b0;
      case (state)
        S_CLEAR: begin
          clr_ptr <= next_word(clr_ptr);
          if (clr_ptr == WA_W'(NWORDS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (clear_valid) begin
            clr_ptr     <= '0;
            used        <= '0;
            alloc_valid <= 1'b0;       // the offered page is freed as well
            state       <= S_CLEAR;
          end else if (free_valid) begin
            free_q <= free_page;
            state  <= S_FREE_WR;
          end else if (want_scan) begin
            state <= S_SCAN_EV;
          end
        end
        S_FREE_WR: begin
          if (rd_q[free_q[BI_W-1:0]]) used <= used - 1'b1;
          state <= S_IDLE;
        end
        S_SCAN_EV: begin
          if (zfound) begin
            alloc_valid <= 1'b1;
            alloc_page  <= PAGE_W'({scan_ptr, zbit});
            used        <= used + 1'b1;
          end else begin
            scan_ptr <= next_word(scan_ptr);
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_alloc_stable: assert property (@(posedge clk) disable iff (!rst_n)
    alloc_valid && !alloc_ready && !(clear_valid && clear_ready) |=>
      alloc_valid && $stable(alloc_page));
endmodule
