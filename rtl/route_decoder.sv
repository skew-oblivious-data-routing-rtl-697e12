// route_decoder: per-destination decoder of the data routing logic.
//
// Compares the destination IDs of the N_PREPE broadcast tuples with its own
// PE ID (MY_ID) to form an N-bit mask of the tuples this PE must process,
// then looks the mask up in a preset table of 2^N entries that gives the
// number of selected tuples and their lane positions in order. This
// follows the paper, which enumerates the 2^N mask values in advance. The
// table is built at elaboration from ditto_pkg::count_set_bits and
// ditto_pkg::kth_set_bit: entry m = {popcount(m), lane of the 1st set bit,
// lane of the 2nd set bit, ...}.
//
// Interface: in_valid (the combiner's fire), in_en/in_dst/in_tuple the
// broadcast group; out_* the decoded group for the filter (count,
// positions, and the tuples themselves). One register stage; in_ready =
// !out_valid || out_ready. in_ready does not depend on in_valid.
module route_decoder
  import ditto_pkg::*;
#(
  parameter int N_PREPE = 8,
  parameter int IDW     = 5,
  parameter int MY_ID   = 0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [N_PREPE-1:0]           in_en,
  input  logic [IDW-1:0]               in_dst   [N_PREPE],
  input  tuple_t                       in_tuple [N_PREPE],
  output logic                         in_ready,
  output logic                         out_valid,
  output logic [$clog2(N_PREPE+1)-1:0] out_count,
  output logic [$clog2(N_PREPE)-1:0]   out_pos   [N_PREPE],
  output tuple_t                       out_tuple [N_PREPE],
  input  logic                         out_ready
);
  localparam int LW = $clog2(N_PREPE);
  localparam int NW = $clog2(N_PREPE + 1);
  localparam int EW = NW + N_PREPE * LW;       // one table entry
  localparam int NENT = 1 << N_PREPE;

  // Preset table: count in the top bits, position k in bits [k*LW +: LW].
  logic [EW-1:0] table_rom [NENT];
  for (genvar m = 0; m < NENT; m++) begin : g_rom
    for (genvar k = 0; k < N_PREPE; k++) begin : g_pos
      assign table_rom[m][k*LW +: LW] = LW'(kth_set_bit(32'(m), N_PREPE, k));
    end
    assign table_rom[m][EW-1 -: NW] = NW'(count_set_bits(32'(m), N_PREPE));
  end

  logic [N_PREPE-1:0] mask;
  logic [EW-1:0]      entry;

  always_comb begin
    for (int i = 0; i < N_PREPE; i++)
      mask[i] = in_en[i] && (in_dst[i] == IDW'(MY_ID));
  end
  assign entry    = table_rom[mask];
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_count <= '0;
      for (int k = 0; k < N_PREPE; k++) begin
        out_pos[k]   <= '0;
        out_tuple[k] <= '0;
      end
    end else if (in_ready) begin
      // A group with nothing for this PE is dropped here.
      out_valid <= in_valid && (mask != '0);
      if (in_valid) begin
        out_count <= entry[EW-1 -: NW];
        for (int k = 0; k < N_PREPE; k++) begin
          out_pos[k]   <= entry[k*LW +: LW];
          out_tuple[k] <= in_tuple[k];
        end
      end
    end
  end

endmodule
