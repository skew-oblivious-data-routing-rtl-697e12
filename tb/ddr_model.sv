// ddr_model: behavioural stand-in for the board's global memory and its
// controller (not synthesizable logic of the design; simulation only).
//
// Word-addressed memory of W_MEM-bit words. Read requests (address, burst
// length) are always accepted and queued; after LATENCY cycles the words
// of the oldest request return one per cycle on rd_resp_*, in order.
// Writes are accepted on every cycle wr_ready is high; wr_ready is low on
// one cycle in WR_STALL_EVERY to exercise back-pressure. The testbench
// fills and inspects mem[] directly.
module ddr_model #(
  parameter int W_MEM          = 512,
  parameter int ADDR_W         = 32,
  parameter int LEN_BITS       = 5,
  parameter int WORDS          = 4096,
  parameter int LATENCY        = 20,
  parameter int WR_STALL_EVERY = 3
) (
  input  logic                clk,
  input  logic                rd_req_valid,
  input  logic [ADDR_W-1:0]   rd_req_addr,
  input  logic [LEN_BITS-1:0] rd_req_len,
  output logic                rd_req_ready,
  output logic                rd_resp_valid,
  output logic [W_MEM-1:0]    rd_resp_data,
  input  logic                wr_valid,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [W_MEM-1:0]    wr_data,
  output logic                wr_ready
);
  logic [W_MEM-1:0] mem [WORDS];

  // queue of word addresses with the cycle they become available
  longint unsigned q_addr [$];
  longint unsigned q_time [$];
  longint unsigned now = 0;

  assign rd_req_ready = 1'b1;
  assign wr_ready     = (now % WR_STALL_EVERY) != 0;

  initial begin
    rd_resp_valid = 1'b0;
    rd_resp_data  = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (rd_req_valid && rd_req_ready)
      for (int i = 0; i < int'(rd_req_len); i++) begin
        q_addr.push_back(longint'(rd_req_addr) + i);
        q_time.push_back(now + LATENCY + i);
      end
    if (q_addr.size() > 0 && q_time[0] <= now) begin
      rd_resp_valid <= 1'b1;
      rd_resp_data  <= mem[q_addr[0] % WORDS];
      void'(q_addr.pop_front());
      void'(q_time.pop_front());
    end else begin
      rd_resp_valid <= 1'b0;
    end
    if (wr_valid && wr_ready) mem[wr_addr % WORDS] <= wr_data;
  end

endmodule
