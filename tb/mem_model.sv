// mem_model: behavioural model of a memory reached by 64-byte words (HBM
// stack or, through the DMA engine, host DRAM). Not synthesizable.
//
// Storage is sparse (an associative array keyed by word address), so a model
// can stand for gigabytes. Writes take effect when accepted. Reads return in
// order, LAT cycles after they were accepted, and wait for rsp_ready. At most
// DEPTH reads are in flight; req_ready drops while that many are pending.
// Unwritten words read as FILL.
module mem_model
  import tdmem_pkg::*;
#(
  parameter int unsigned LAT   = 20,
  parameter int unsigned DEPTH = 128,
  parameter word_t       FILL  = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output word_t    rsp_data,
  output int unsigned n_writes,
  output int unsigned n_reads
);
  word_t       store [longint unsigned];
  word_t       q_data [$];
  longint      q_time [$];
  longint      now;

  assign req_ready = (q_data.size() < DEPTH);
  assign rsp_valid = (q_data.size() != 0) && (q_time[0] <= now);
  assign rsp_data  = (q_data.size() != 0) ? q_data[0] : '0;

  always @(posedge clk) begin
    if (!rst_n) begin
      now      <= 0;
      n_writes <= 0;
      n_reads  <= 0;
      q_data.delete();
      q_time.delete();
    end else begin
      now <= now + 1;
      if (rsp_valid && rsp_ready) begin
        void'(q_data.pop_front());
        void'(q_time.pop_front());
      end
      if (req_valid && req_ready) begin
        longint unsigned a;
        a = req.addr >> 6;
        if (req.we) begin
          store[a] = req.wdata;
          n_writes <= n_writes + 1;
        end else begin
          q_data.push_back(store.exists(a) ? store[a] : FILL);
          q_time.push_back(now + LAT);
          n_reads <= n_reads + 1;
        end
      end
    end
  end

  // read a word of the model by byte address, for testbench checks
  function automatic word_t peek(input longint unsigned byte_addr);
    longint unsigned a;
    a = byte_addr >> 6;
    return store.exists(a) ? store[a] : FILL;
  endfunction
endmodule
