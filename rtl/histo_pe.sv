// histo_pe: a PriPE or SecPE for histogram building, with its private
// bin buffer.
//
// PriPEs and SecPEs have the same logic. For each tuple the PE reads the
// bin selected by the key from its buffer in one cycle and writes it back
// incremented by one in the next, so it takes one tuple every two cycles
// (II = 2), as the paper assumes when it sizes 16 PEs for 8 tuples per
// cycle. The bin index inside the PE is key[PW +: BIN_AW], the key bits
// just above the PriPE-select bits (a radix hash, this design's choice):
// PE p therefore holds global bin_mem p*2^BIN_AW .. p*2^BIN_AW + 2^BIN_AW-1,
// the layout of the paper's 16-PE, 32-bin example (BIN_AW = 1).
//
// After reset the PE spends 2^BIN_AW cycles clearing its buffer (busy is
// high). The host port hp_* lets the merger read a bin (data one cycle
// after the address) and clear it; it must only be used while the PE is
// idle, which an assertion checks for the clear.
module histo_pe
  import ditto_pkg::*;
#(
  parameter int M_PRIPE = 16,
  parameter int BIN_AW  = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  tuple_t            in_tuple,
  output logic              in_ready,
  output logic              busy,
  input  logic [BIN_AW-1:0] hp_addr,
  output logic [CNT_W-1:0]  hp_rd_data,
  input  logic              hp_clr
);
  localparam int PW    = $clog2(M_PRIPE);
  localparam int NBINS = 1 << BIN_AW;

  logic [CNT_W-1:0]  bin_mem [NBINS];
  logic              wr_phase;
  logic [BIN_AW-1:0] idx_q;
  logic [CNT_W-1:0]  rd_q;
  logic              init;
  logic [BIN_AW-1:0] init_addr;
  logic              accept;

  assign in_ready = !wr_phase && !init;
  assign accept   = in_valid && in_ready;
  assign busy     = wr_phase || init;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_phase  <= 1'b0;
      idx_q     <= '0;
      init      <= 1'b1;
      init_addr <= '0;
    end else begin
      if (init) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == BIN_AW'(NBINS-1)) init <= 1'b0;
      end
      if (accept) begin
        wr_phase <= 1'b1;
        idx_q    <= in_tuple.key[PW +: BIN_AW];
      end else begin
        wr_phase <= 1'b0;
      end
    end
  end

  // Buffer: read port for the PE, read port for the merger, one write port.
  always_ff @(posedge clk) begin
    if (accept) rd_q <= bin_mem[in_tuple.key[PW +: BIN_AW]];
    hp_rd_data <= bin_mem[hp_addr];
    if (wr_phase)    bin_mem[idx_q]     <= rd_q + 1'b1;
    else if (init)   bin_mem[init_addr] <= '0;
    else if (hp_clr) bin_mem[hp_addr]   <= '0;
  end

  assert property (@(posedge clk) disable iff (!rst_n) hp_clr |-> !busy);

endmodule
