// mem_ic: connects N clients to one memory port (the HBM AXI interconnect of
// each engine, and the path from the donor's generators to host DRAM).
//
// Requests are granted word by word in round-robin order. For every read that
// is granted, the client's index is pushed into an in-order tag FIFO; read data
// returning from the memory (in order) is steered to the client at the head of
// that FIFO. A read is only granted while the tag FIFO has room, which bounds
// the reads in flight to OUTSTANDING. Writes return nothing. Read data uses a
// valid/ready handshake so a client can hold the memory back.
// The paper names this interconnect only in its resource breakdown; the
// arbitration and the tag FIFO are this design's own.
module mem_ic
  import tdmem_pkg::*;
#(
  parameter int unsigned N           = 2,
  parameter int unsigned OUTSTANDING = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  // client side
  input  logic [N-1:0]    c_req_valid,
  output logic [N-1:0]    c_req_ready,
  input  mem_req_t        c_req [N],
  output logic [N-1:0]    c_rsp_valid,
  input  logic [N-1:0]    c_rsp_ready,
  output word_t           c_rsp_data,
  // memory side
  output logic            m_req_valid,
  input  logic            m_req_ready,
  output mem_req_t        m_req,
  input  logic            m_rsp_valid,
  output logic            m_rsp_ready,
  input  word_t           m_rsp_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last_sel, pick;
  logic          pick_any;
  logic          tag_in_ready, tag_out_valid;
  logic [IW-1:0] tag_head;
  logic [$clog2(OUTSTANDING+1)-1:0] tag_count;
  logic [N-1:0]  eligible;

  // A read may only go when the tag FIFO can remember where it came from.
  always_comb begin
    for (int k = 0; k < N; k++)
      eligible[k] = c_req_valid[k] && (c_req[k].we || tag_in_ready);
  end

  always_comb begin
    pick     = '0;
    pick_any = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_sel) + k) % N;
      if (!pick_any && eligible[idx]) begin
        pick     = IW'(idx);
        pick_any = 1'b1;
      end
    end
  end

  assign m_req_valid = pick_any;
  assign m_req       = c_req[pick];

  always_comb begin
    c_req_ready = '0;
    if (pick_any) c_req_ready[pick] = m_req_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_sel <= IW'(N - 1);
    else if (m_req_valid && m_req_ready) last_sel <= pick;
  end

  pkt_fifo #(.W(IW), .DEPTH(OUTSTANDING)) u_tags (
    .clk, .rst_n, .flush(1'b0),
    .in_valid (m_req_valid && m_req_ready && !m_req.we),
    .in_ready (tag_in_ready),
    .in_data  (pick),
    .out_valid(tag_out_valid),
    .out_ready(m_rsp_valid && m_rsp_ready),
    .out_data (tag_head),
    .count    (tag_count)
  );

  assign c_rsp_data = m_rsp_data;
  always_comb begin
    c_rsp_valid = '0;
    if (tag_out_valid) c_rsp_valid[tag_head] = m_rsp_valid;
  end
  assign m_rsp_ready = tag_out_valid && c_rsp_ready[tag_head];

  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n)
                                  m_rsp_valid |-> tag_out_valid);
endmodule
