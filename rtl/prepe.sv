// prepe: preprocessing PE for histogram building (HISTO).
//
// Turns one input tuple into the routed form <dst, tuple>, where dst is the
// PriPE that owns the tuple's bin. Following the paper's HISTO
// specification, dst is the low log2(M_PRIPE) bits of the key (the four
// least significant bits for 16 PriPEs). The tuple itself travels on so the
// PE can index its bin with the remaining key bits.
//
// N_PREPE copies run side by side, one per tuple lane of a memory word. All
// copies share the same valid/ready pair, so they stay in lock step;
// in_en marks whether the lane holds a tuple (the last word of a relation
// may be partly filled). One register stage: out_* is valid the cycle after
// the input is accepted; in_ready = !out_valid || out_ready.
module prepe
  import ditto_pkg::*;
#(
  parameter int M_PRIPE = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_en,
  input  tuple_t                     in_tuple,
  output logic                       in_ready,
  output logic                       out_valid,
  output logic                       out_en,
  output logic [$clog2(M_PRIPE)-1:0] out_dst,
  output tuple_t                     out_tuple,
  input  logic                       out_ready
);
  localparam int PW = $clog2(M_PRIPE);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_en    <= 1'b0;
      out_dst   <= '0;
      out_tuple <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_en    <= in_en;
        out_dst   <= in_tuple.key[PW-1:0];   // dst = key & (M-1)
        out_tuple <= in_tuple;
      end
    end
  end

endmodule
