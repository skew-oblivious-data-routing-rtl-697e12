// mapper: executes the SecPE scheduling plan for one tuple lane.
//
// Holds the paper's mapping table (M_PRIPE rows, X_SECPE+1 columns of PE
// IDs) and a counter per row giving how many entries of the row, from the
// left, are in use. Initially row r is filled with r and its counter is 1,
// so every tuple goes to its own PriPE. Each plan pair "SecPE s -> PriPE p"
// received on plan_* writes s at column counter[p] of row p and increments
// counter[p]; one pair per cycle, as in the paper.
//
// Redirecting: a tuple whose PriPE is p is sent to table[p][ptr[p]]. Each
// row has a round-robin pointer that steps once per clock cycle and wraps
// at the row's counter, which reproduces the paper's example sequences
// (PriPE 0 with one SecPE alternates every cycle; PriPE 2 with two SecPEs
// cycles through 2, 4, 5). Stepping per cycle rather than per tuple and
// starting every pointer at 0 are this design's reading of the example.
//
// tbl_reset (level) restores the initial table, which stops all routing to
// SecPEs; it is used when the runtime profiler asks for a reschedule.
// prof_valid/prof_pri report the original PriPE ID of every accepted tuple
// to the runtime profiler. One register stage, in_ready = !out_valid ||
// out_ready; all lanes share one valid/ready pair.
module mapper
  import ditto_pkg::*;
#(
  parameter int M_PRIPE = 16,
  parameter int X_SECPE = 15
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // from PrePE
  input  logic                               in_valid,
  input  logic                               in_en,
  input  logic [$clog2(M_PRIPE)-1:0]         in_dst,
  input  tuple_t                             in_tuple,
  output logic                               in_ready,
  // to combiner
  output logic                               out_valid,
  output logic                               out_en,
  output logic [$clog2(M_PRIPE+X_SECPE)-1:0] out_dst,
  output tuple_t                             out_tuple,
  input  logic                               out_ready,
  // scheduling plan from the runtime profiler
  input  logic                               plan_valid,
  input  logic [$clog2(M_PRIPE+X_SECPE)-1:0] plan_sec,
  input  logic [$clog2(M_PRIPE)-1:0]         plan_pri,
  input  logic                               tbl_reset,
  // workload report to the runtime profiler
  output logic                               prof_valid,
  output logic [$clog2(M_PRIPE)-1:0]         prof_pri
);
  localparam int IDW  = $clog2(M_PRIPE + X_SECPE);
  localparam int COLS = X_SECPE + 1;
  localparam int CW   = $clog2(COLS + 1);
  localparam int CIW  = $clog2(COLS);

  logic [IDW-1:0] tbl [M_PRIPE][COLS];
  logic [CW-1:0]  cnt [M_PRIPE];
  logic [CW-1:0]  ptr [M_PRIPE];

  assign in_ready = !out_valid || out_ready;

  // Mapping table and counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < M_PRIPE; r++) begin
        cnt[r] <= CW'(1);
        ptr[r] <= '0;
        for (int c = 0; c < COLS; c++) tbl[r][c] <= IDW'(r);
      end
    end else begin
      for (int r = 0; r < M_PRIPE; r++) begin
        // round-robin pointer, one step per cycle, bounded by the counter
        if (32'(ptr[r]) + 1 >= 32'(cnt[r])) ptr[r] <= '0;
        else                                 ptr[r] <= ptr[r] + 1'b1;
      end
      if (tbl_reset) begin
        for (int r = 0; r < M_PRIPE; r++) begin
          cnt[r] <= CW'(1);
          ptr[r] <= '0;
          for (int c = 0; c < COLS; c++) tbl[r][c] <= IDW'(r);
        end
      end else if (plan_valid && 32'(cnt[plan_pri]) < COLS) begin
        tbl[plan_pri][CIW'(cnt[plan_pri])] <= plan_sec;
        cnt[plan_pri]                <= cnt[plan_pri] + 1'b1;
      end
    end
  end

  // Redirecting stage.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_en     <= 1'b0;
      out_dst    <= '0;
      out_tuple  <= '0;
      prof_valid <= 1'b0;
      prof_pri   <= '0;
    end else begin
      prof_valid <= in_valid && in_ready && in_en;
      prof_pri   <= in_dst;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_en    <= in_en;
          out_dst   <= tbl[in_dst][CIW'(ptr[in_dst])];
          out_tuple <= in_tuple;
        end
      end
    end
  end

endmodule
