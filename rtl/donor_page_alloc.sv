// donor_page_alloc: page allocator and permission table of one donor memory
// tier (one instance for the donated HBM, one for the donated host DRAM).
//
// For every 4 KB page of the donated region the table holds one byte: the
// machine ID (MID) of the node that owns the page, MID_FREE (0x00) for a free
// page, or MID_RSVD (0xFF) for a page that sits in the store response
// generator's free list. Entries are packed 64 to a 512-bit word, the width of
// one HBM beat, so one memory access covers 64 pages. A single state machine
// serves one request at a time, each in two cycles (read the word, evaluate and
// write it back):
//   * reserve: while its output register is empty and free pages exist, scan
//     a word for a free entry; mark it reserved and offer the page on rsv_*.
//     After each find the scan pointer jumps to a pseudo-random word (32-bit
//     LFSR seeded with SEED), so pages are handed out in an order the donor
//     host cannot predict from the allocation history.
//   * commit: the store generator has used a reserved page; record its owner.
//   * check: does page chk_page belong to chk_mid? (load permission)
//   * free: release a page, only if it belongs to free_mid (invalidate page).
//   * area: release every page that belongs to area_mid, one word per two
//     cycles over the whole table (invalidate area).
// After reset the whole table is cleared (NWORDS cycles, busy high).
//
// From the paper: per-page ownership by 8-bit MID, ownership checks on loads,
// allocation/deallocation at 4 KB granularity, random choice among free pages.
// This design's own: the reserved code, packing, the state machine, request
// priorities (area, free, commit, check, reserve scan) and the random jump.
// The paper keeps this table in the low part of the HBM; here it is a memory
// inside the module with the same word layout.
module donor_page_alloc
  import tdmem_pkg::*;
#(
  parameter int unsigned PAGES = 2083328,        // 8,138 MB / 4 KB
  parameter logic [31:0] SEED  = 32'h1D87_2A55,
  localparam int unsigned PAGE_W = $clog2(PAGES),
  localparam int unsigned EPW    = 64,           // entries per word
  localparam int unsigned NWORDS = PAGES / EPW,
  localparam int unsigned WA_W   = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              busy,
  output logic [PAGE_W:0]   free_pages,
  // reserved page for the store free list
  output logic              rsv_valid,
  input  logic              rsv_ready,
  output logic [PAGE_W-1:0] rsv_page,
  // owner of a reserved page
  input  logic              commit_valid,
  output logic              commit_ready,
  input  logic [PAGE_W-1:0] commit_page,
  input  logic [7:0]        commit_mid,
  // ownership check
  input  logic              chk_valid,
  output logic              chk_ready,
  input  logic [PAGE_W-1:0] chk_page,
  input  logic [7:0]        chk_mid,
  output logic              chk_done,
  output logic              chk_ok,
  // page release
  input  logic              free_valid,
  output logic              free_ready,
  input  logic [PAGE_W-1:0] free_page,
  input  logic [7:0]        free_mid,
  output logic              free_done,
  output logic              free_ok,
  // release of all pages of one MID
  input  logic              area_valid,
  output logic              area_ready,
  input  logic [7:0]        area_mid,
  output logic              area_done
);
  typedef enum logic [2:0] {S_INIT, S_IDLE, S_SCAN, S_COMMIT, S_CHK, S_FREE,
                            S_AREA_RD, S_AREA_EV} state_e;
  state_e state;

  logic [EPW*8-1:0] meta [NWORDS];
  logic [EPW*8-1:0] rd_q, wr_data;
  logic [WA_W-1:0]  rd_addr, wr_addr, ptr, scan_ptr;
  logic             wr_en;
  logic [PAGE_W-1:0] op_page;
  logic [7:0]        op_mid;
  logic [PAGE_W:0]   nfree;
  logic [31:0]       lfsr;

  always_ff @(posedge clk) begin
    if (wr_en) meta[wr_addr] <= wr_data;
    rd_q <= meta[rd_addr];
  end

  // entry of the page under operation
  logic [5:0] op_idx;
  logic [7:0] op_entry;
  assign op_idx   = op_page[5:0];
  assign op_entry = rd_q[op_idx*8 +: 8];

  // first free entry of the word just read; entries of area_mid in it
  logic [5:0]       fidx;
  logic             ffound;
  logic [EPW*8-1:0] area_clean;
  logic [6:0]       area_cnt;
  always_comb begin
    fidx       = '0;
    ffound     = 1'b0;
    area_clean = rd_q;
    area_cnt   = '0;
    for (int e = 0; e < EPW; e++) begin
      if (!ffound && rd_q[e*8 +: 8] == MID_FREE) begin
        fidx   = 6'(e);
        ffound = 1'b1;
      end
      if (rd_q[e*8 +: 8] == op_mid) begin
        area_clean[e*8 +: 8] = MID_FREE;
        area_cnt             = area_cnt + 1'b1;
      end
    end
  end

  logic want_scan;
  assign want_scan = !rsv_valid && (nfree != '0);

  assign busy         = (state == S_INIT) || (state == S_AREA_RD) || (state == S_AREA_EV);
  assign free_pages   = nfree;
  assign area_ready   = (state == S_IDLE);
  assign free_ready   = (state == S_IDLE) && !area_valid;
  assign commit_ready = (state == S_IDLE) && !area_valid && !free_valid;
  assign chk_ready    = (state == S_IDLE) && !area_valid && !free_valid && !commit_valid;

  function automatic logic [WA_W-1:0] word_of(input logic [PAGE_W-1:0] p);
    return WA_W'(p >> 6);
  endfunction

  always_comb begin
    rd_addr = scan_ptr;
    wr_en   = 1'b0;
    wr_addr = word_of(op_page);
    wr_data = rd_q;
    case (state)
      S_INIT: begin
        wr_en   = 1'b1;
        wr_addr = ptr;
        wr_data = '0;
      end
      S_IDLE: begin
        if (area_valid)        rd_addr = scan_ptr;
        else if (free_valid)   rd_addr = word_of(free_page);
        else if (commit_valid) rd_addr = word_of(commit_page);
        else if (chk_valid)    rd_addr = word_of(chk_page);
      end
      S_SCAN: begin
        wr_en   = ffound;
        wr_addr = scan_ptr;
        wr_data[fidx*8 +: 8] = MID_RSVD;
      end
      S_COMMIT: begin
        wr_en = 1'b1;
        wr_data[op_idx*8 +: 8] = op_mid;
      end
      S_FREE: begin
        wr_en = (op_entry == op_mid);
        wr_data[op_idx*8 +: 8] = MID_FREE;
      end
      S_AREA_RD: rd_addr = ptr;
      S_AREA_EV: begin
        wr_en   = 1'b1;
        wr_addr = ptr;
        wr_data = area_clean;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      ptr       <= '0;
      scan_ptr  <= '0;
      nfree     <= '0;
      op_page   <= '0;
      op_mid    <= '0;
      rsv_valid <= 1'b0;
      rsv_page  <= '0;
      chk_done  <= 1'b0;
      chk_ok    <= 1'b0;
      free_done <= 1'b0;
      free_ok   <= 1'b0;
      area_done <= 1'b0;
      lfsr      <= SEED;
    end else begin
      chk_done  <= 1'b0;
      free_done <= 1'b0;
      area_done <= 1'b0;
      lfsr      <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
      if (rsv_valid && rsv_ready) rsv_valid <= 1'b0;
      case (state)
        S_INIT: begin
          ptr <= ptr + 1'b1;
          if (ptr == WA_W'(NWORDS - 1)) begin
            nfree <= (PAGE_W+1)'(PAGES);
            state <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (area_valid) begin
            op_mid <= area_mid;
            ptr    <= '0;
            state  <= S_AREA_RD;
          end else if (free_valid) begin
            op_page <= free_page;
            op_mid  <= free_mid;
            state   <= S_FREE;
          end else if (commit_valid) begin
            op_page <= commit_page;
            op_mid  <= commit_mid;
            state   <= S_COMMIT;
          end else if (chk_valid) begin
            op_page <= chk_page;
            op_mid  <= chk_mid;
            state   <= S_CHK;
          end else if (want_scan) begin
            state <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (ffound) begin
            rsv_valid <= 1'b1;
            rsv_page  <= PAGE_W'({scan_ptr, fidx});
            nfree     <= nfree - 1'b1;
            scan_ptr  <= WA_W'(lfsr % NWORDS);
          end else begin
            scan_ptr  <= (scan_ptr == WA_W'(NWORDS - 1)) ? '0 : scan_ptr + 1'b1;
          end
          state <= S_IDLE;
        end
        S_COMMIT: state <= S_IDLE;
        S_CHK: begin
          chk_done <= 1'b1;
          chk_ok   <= (op_entry == op_mid);
          state    <= S_IDLE;
        end
        S_FREE: begin
          free_done <= 1'b1;
          free_ok   <= (op_entry == op_mid);
          if (op_entry == op_mid) nfree <= nfree + 1'b1;
          state <= S_IDLE;
        end
        S_AREA_RD: state <= S_AREA_EV;
        S_AREA_EV: begin
          nfree <= nfree + (PAGE_W+1)'(area_cnt);
          if (ptr == WA_W'(NWORDS - 1)) begin
            area_done <= 1'b1;
            state     <= S_IDLE;
          end else begin
            ptr   <= ptr + 1'b1;
            state <= S_AREA_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A MID may not be one of the two reserved codes.
  a_commit_mid: assert property (@(posedge clk) disable iff (!rst_n)
    commit_valid |-> commit_mid != MID_FREE && commit_mid != MID_RSVD);
  a_area_mid: assert property (@(posedge clk) disable iff (!rst_n)
    area_valid |-> area_mid != MID_FREE && area_mid != MID_RSVD);
endmodule
