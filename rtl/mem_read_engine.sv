// mem_read_engine: read-side memory access engine.
//
// Streams a contiguous region of global memory (num_beats memory words of
// W_MEM bits, starting at word address base_addr) to the PrePEs, one word
// per cycle. Requests are coalesced into bursts of up to BURST_LEN words,
// as the paper's memory access engine does; the burst length, the request
// interface and the flow control are this design's choices. A burst is only
// issued when the local FIFO has room for every word still in flight plus
// the new burst, so the memory side never needs a ready signal on returning
// data.
//
// Interface: start (one cycle) latches base_addr/num_beats. Memory request
// channel rd_req_* (valid/ready, word address, burst length); response
// channel rd_resp_* (valid only, in request order). Output channel out_*
// (valid/ready), one memory word per transfer. done is high from the moment
// the last word has left the engine until the next start.
// Timing: words appear on out_* the cycle after they arrive from memory.
module mem_read_engine #(
  parameter int W_MEM      = 512,
  parameter int ADDR_W     = 32,
  parameter int LEN_W      = 32,
  parameter int BURST_LEN  = 16,
  parameter int FIFO_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [LEN_W-1:0]  num_beats,
  output logic              busy,
  output logic              done,
  // memory read request
  output logic              rd_req_valid,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic [$clog2(BURST_LEN+1)-1:0] rd_req_len,
  input  logic              rd_req_ready,
  // memory read response
  input  logic              rd_resp_valid,
  input  logic [W_MEM-1:0]  rd_resp_data,
  // to PrePEs
  output logic              out_valid,
  output logic [W_MEM-1:0]  out_data,
  input  logic              out_ready
);
  localparam int PW = $clog2(FIFO_DEPTH);
  localparam int CW = $clog2(FIFO_DEPTH+1);
  localparam int BL = $clog2(BURST_LEN+1);

  logic [W_MEM-1:0]  fifo [FIFO_DEPTH];
  logic [PW-1:0]     wr_ptr, rd_ptr;
  logic [CW-1:0]     count;       // words held in the FIFO
  logic [CW-1:0]     inflight;    // words requested, not yet returned
  logic [LEN_W-1:0]  to_request;  // words not yet requested
  logic [ADDR_W-1:0] next_addr;
  logic              active;

  logic [BL-1:0]     burst;
  logic              issue, push, pop;

  always_comb begin
    if (to_request < LEN_W'(BURST_LEN)) burst = BL'(to_request);
    else                                burst = BL'(BURST_LEN);
  end

  assign rd_req_valid = active && (to_request != '0) &&
                        (32'(count) + 32'(inflight) + 32'(burst) <= 32'(FIFO_DEPTH));
  assign rd_req_addr  = next_addr;
  assign rd_req_len   = burst;
  assign issue        = rd_req_valid && rd_req_ready;
  assign push         = rd_resp_valid;
  assign out_valid    = count != '0;
  assign out_data     = fifo[rd_ptr];
  assign pop          = out_valid && out_ready;
  assign busy         = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      inflight   <= '0;
      to_request <= '0;
      next_addr  <= '0;
      active     <= 1'b0;
      done       <= 1'b0;
    end else begin
      if (start && !active) begin
        active     <= 1'b1;
        done       <= 1'b0;
        to_request <= num_beats;
        next_addr  <= base_addr;
      end else if (active && to_request == '0 && inflight == '0 && count == '0) begin
        active <= 1'b0;
        done   <= 1'b1;
      end
      if (issue) begin
        to_request <= to_request - LEN_W'(burst);
        next_addr  <= next_addr + ADDR_W'(burst);
      end
      inflight <= inflight + (issue ? CW'(burst) : '0) - (push ? CW'(1) : '0);
      count    <= count + CW'(push) - CW'(pop);
      if (push) wr_ptr <= (wr_ptr == PW'(FIFO_DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(FIFO_DEPTH-1)) ? '0 : rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= rd_resp_data;
  end

  // A response with nothing in flight would overflow the FIFO.
  assert property (@(posedge clk) disable iff (!rst_n) rd_resp_valid |-> inflight != '0);

endmodule
