// cmd_parser: the donee engine's command parser.
//
// Words arrive from the host DMA engine together with the queue ID (QID) of
// the queue the host driver placed them in; the driver uses separate queues
// per operation, so the QID tells which request generator a word belongs to.
// Load, invalidate-page and invalidate-area commands are one 64-byte word each
// and are passed straight on as one-beat packets. A store command is a header
// word followed by the 64 words of the 4 KB page; words of different queues
// may be interleaved, so each store queue has its own FIFO, and a store packet
// is released to the store request generator only once all 65 of its words
// are stacked. Complete store packets are served in round-robin order across
// the store queues. Words on an unknown QID are consumed and dropped.
//
// Following the paper: QID-based routing and the per-queue store FIFOs that
// release whole packets. This design's own choices: the QID values, the
// number of store queues (N_STORE_Q) and their depth (one packet each).
module cmd_parser
  import tdmem_pkg::*;
#(
  parameter int unsigned QID_W          = 11,
  parameter int unsigned N_STORE_Q      = 2,
  parameter logic [10:0] QID_STORE_BASE = 11'd0,
  parameter logic [10:0] QID_LOAD       = 11'd8,
  parameter logic [10:0] QID_INV_PAGE   = 11'd9,
  parameter logic [10:0] QID_INV_AREA   = 11'd10
) (
  input  logic             clk,
  input  logic             rst_n,
  // host-to-card stream from the DMA engine
  input  logic             h2c_valid,
  output logic             h2c_ready,
  input  word_t            h2c_data,
  input  logic [QID_W-1:0] h2c_qid,
  // to the request generators
  output logic             store_valid,
  input  logic             store_ready,
  output beat_t            store_beat,
  output logic             load_valid,
  input  logic             load_ready,
  output beat_t            load_beat,
  output logic             invp_valid,
  input  logic             invp_ready,
  output beat_t            invp_beat,
  output logic             inva_valid,
  input  logic             inva_ready,
  output beat_t            inva_beat
);
  localparam int unsigned PKT = PAGE_WORDS + 1;        // 65 words
  localparam int unsigned CW  = $clog2(PKT + 1);
  localparam int unsigned QW  = (N_STORE_Q > 1) ? $clog2(N_STORE_Q) : 1;

  // ---- which queue does the incoming word belong to ----
  logic            is_load, is_invp, is_inva, is_store;
  logic [QW-1:0]   sq;
  always_comb begin
    is_load  = (h2c_qid == QID_W'(QID_LOAD));
    is_invp  = (h2c_qid == QID_W'(QID_INV_PAGE));
    is_inva  = (h2c_qid == QID_W'(QID_INV_AREA));
    is_store = (h2c_qid >= QID_W'(QID_STORE_BASE)) &&
               (h2c_qid <  QID_W'(QID_STORE_BASE) + QID_W'(N_STORE_Q));
    sq       = QW'(h2c_qid - QID_W'(QID_STORE_BASE));
  end

  // ---- store queues ----
  logic [N_STORE_Q-1:0] sq_in_ready, sq_out_valid, sq_out_ready;
  word_t                sq_out_data [N_STORE_Q];
  logic [CW-1:0]        sq_count    [N_STORE_Q];
  logic [CW-1:0]        sq_rx       [N_STORE_Q];  // words of the packet being received
  logic                 sq_full     [N_STORE_Q];  // a complete packet is stacked
  logic                 st_active;                // a packet is being sent
  logic [QW-1:0]        st_sel, st_last;
  logic [CW-1:0]        st_sent;

  for (genvar q = 0; q < N_STORE_Q; q++) begin : g_sq
    pkt_fifo #(.W(WORD_W), .DEPTH(PKT)) u_fifo (
      .clk, .rst_n, .flush(1'b0),
      .in_valid (h2c_valid && is_store && sq == QW'(q)),
      .in_ready (sq_in_ready[q]),
      .in_data  (h2c_data),
      .out_valid(sq_out_valid[q]),
      .out_ready(sq_out_ready[q]),
      .out_data (sq_out_data[q]),
      .count    (sq_count[q])
    );
  end

  always_comb begin
    h2c_ready = 1'b1;                     // unknown QID: drop
    if (is_store)     h2c_ready = sq_in_ready[sq];
    else if (is_load) h2c_ready = load_ready;
    else if (is_invp) h2c_ready = invp_ready;
    else if (is_inva) h2c_ready = inva_ready;
  end

  // Single-word commands pass straight through.
  assign load_valid = h2c_valid && is_load;
  assign invp_valid = h2c_valid && is_invp;
  assign inva_valid = h2c_valid && is_inva;
  assign load_beat  = '{last: 1'b1, data: h2c_data};
  assign invp_beat  = '{last: 1'b1, data: h2c_data};
  assign inva_beat  = '{last: 1'b1, data: h2c_data};

  // Round-robin pick among queues holding a complete packet.
  logic [QW-1:0] pick;
  logic          pick_any;
  always_comb begin
    pick     = '0;
    pick_any = 1'b0;
    for (int k = 1; k <= N_STORE_Q; k++) begin
      int unsigned idx;
      idx = (int'(st_last) + k) % N_STORE_Q;
      if (!pick_any && sq_full[idx]) begin
        pick     = QW'(idx);
        pick_any = 1'b1;
      end
    end
  end

  logic [QW-1:0] cur;
  assign cur         = st_active ? st_sel : pick;
  assign store_valid = (st_active || pick_any) && sq_out_valid[cur];
  assign store_beat  = '{last: (st_sent == CW'(PKT - 1)), data: sq_out_data[cur]};
  always_comb begin
    sq_out_ready = '0;
    if (st_active || pick_any) sq_out_ready[cur] = store_ready;
  end

  logic st_fire, st_done;
  assign st_fire = store_valid && store_ready;
  assign st_done = st_fire && store_beat.last;

  // A queue holds at most one packet, so a new packet on a queue can only
  // complete after the previous one has started to leave.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_active <= 1'b0;
      st_sel    <= '0;
      st_last   <= QW'(N_STORE_Q - 1);
      st_sent   <= '0;
      for (int q = 0; q < N_STORE_Q; q++) begin
        sq_rx[q]   <= '0;
        sq_full[q] <= 1'b0;
      end
    end else begin
      for (int q = 0; q < N_STORE_Q; q++) begin
        if (h2c_valid && h2c_ready && is_store && sq == QW'(q)) begin
          if (sq_rx[q] == CW'(PKT - 1)) begin
            sq_rx[q]   <= '0;
            sq_full[q] <= 1'b1;
          end else begin
            sq_rx[q] <= sq_rx[q] + 1'b1;
          end
        end
        // the packet stops counting as complete once its header has left
        if (st_fire && !st_active && cur == QW'(q)) sq_full[q] <= 1'b0;
      end
      if (st_fire) begin
        if (st_done) begin
          st_active <= 1'b0;
          st_sent   <= '0;
          st_last   <= cur;
        end else begin
          st_active <= 1'b1;
          st_sel    <= cur;
          st_sent   <= st_sent + 1'b1;
        end
      end
    end
  end
endmodule
