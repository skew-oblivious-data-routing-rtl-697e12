// combiner: first stage of the data routing logic.
//
// Gathers the N_PREPE tuples of one cycle, each with its destination PE ID
// (a PriPE or, after mapping, a SecPE), into one register and broadcasts
// that group to the M_PRIPE+X_SECPE datapaths, one per destination PE.
// Because every datapath sees the same group, the group moves on only when
// all datapaths can take it: out_fire = out_valid && (&dp_ready). Each
// datapath's decoder is given out_fire as its input valid.
//
// Interface: in_* from the N mappers (shared valid/ready, per-lane enable,
// ID and tuple); out_* to the decoders; dp_ready one bit per datapath.
// One register stage; in_ready = !out_valid || out_fire.
module combiner
  import ditto_pkg::*;
#(
  parameter int N_PREPE = 8,
  parameter int N_DST   = 31,
  parameter int IDW     = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [N_PREPE-1:0] in_en,
  input  logic [IDW-1:0]     in_dst   [N_PREPE],
  input  tuple_t             in_tuple [N_PREPE],
  output logic               in_ready,
  output logic               out_valid,
  output logic               out_fire,
  output logic [N_PREPE-1:0] out_en,
  output logic [IDW-1:0]     out_dst   [N_PREPE],
  output tuple_t             out_tuple [N_PREPE],
  input  logic [N_DST-1:0]   dp_ready
);
  assign out_fire = out_valid && (&dp_ready);
  assign in_ready = !out_valid || out_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_en    <= '0;
      for (int i = 0; i < N_PREPE; i++) begin
        out_dst[i]   <= '0;
        out_tuple[i] <= '0;
      end
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_en <= in_en;
        for (int i = 0; i < N_PREPE; i++) begin
          out_dst[i]   <= in_dst[i];
          out_tuple[i] <= in_tuple[i];
        end
      end
    end
  end

endmodule
