// route_filter: per-destination filter of the data routing logic.
//
// Takes a decoded group (count c and lane positions) and fetches the c
// selected tuples, in lane order, into the channel FIFO that feeds its PE;
// up to N_PREPE tuples are written in one cycle. The PE drains the FIFO one
// tuple at a time, so a burst of tuples for one PE is absorbed here while
// the other filters keep going; this stands for the paper's concurrently
// running filter kernels and their channels. The FIFO depth is this
// design's choice and must be a power of two of at least N_PREPE.
//
// Interface: in_* from the decoder, in_ready = at least N_PREPE free slots
// (independent of in_valid). out_* to the PE (valid/ready, one tuple).
// empty is high when nothing is held. A tuple written in cycle t can leave
// in cycle t+1.
module route_filter
  import ditto_pkg::*;
#(
  parameter int N_PREPE = 8,
  parameter int DEPTH   = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [$clog2(N_PREPE+1)-1:0] in_count,
  input  logic [$clog2(N_PREPE)-1:0]   in_pos   [N_PREPE],
  input  tuple_t                       in_tuple [N_PREPE],
  output logic                         in_ready,
  output logic                         out_valid,
  output tuple_t                       out_tuple,
  input  logic                         out_ready,
  output logic                         empty
);
  localparam int PW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH + 1);

  tuple_t       fifo [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [CW-1:0] count;
  logic          push, pop;

  assign in_ready  = 32'(count) + N_PREPE <= DEPTH;
  assign push      = in_valid && in_ready;
  assign out_valid = count != '0;
  assign out_tuple = fifo[rd_ptr];
  assign pop       = out_valid && out_ready;
  assign empty     = count == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + PW'(in_count);
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (push ? CW'(in_count) : '0) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      for (int k = 0; k < N_PREPE; k++)
        if (k < 32'(in_count)) fifo[wr_ptr + PW'(k)] <= in_tuple[in_pos[k]];
    end
  end

  initial assert ((1 << PW) == DEPTH && DEPTH >= N_PREPE)
    else $error("route_filter: DEPTH must be a power of two >= N_PREPE");

endmodule
