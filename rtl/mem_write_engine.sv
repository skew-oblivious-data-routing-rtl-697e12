// mem_write_engine: write-side memory access engine.
//
// Packs the merged bin counts, which arrive one per transfer in ascending
// order, into memory words of W_MEM bits (W_MEM/CNT_W counts per word,
// count i of a word in bits [i*CNT_W +: CNT_W]) and writes each full word
// to global memory at base_addr + word number. The final, possibly partly
// filled, word is written when in_last arrives; its unused slots are zero.
// Packing into full memory words is how this design reads the paper's
// "coalesces memory requests"; the exact protocol is this design's choice.
//
// Interface: start (one cycle) latches base_addr; in_* (valid/ready) from
// the merger; memory write channel wr_* (valid/ready, word address, data);
// done pulses for one cycle after the last word has been accepted.
// While a word waits for wr_ready, in_ready is low.
module mem_write_engine
  import ditto_pkg::*;
#(
  parameter int W_MEM  = 512,
  parameter int ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic              in_valid,
  input  logic [CNT_W-1:0]  in_count,
  input  logic              in_last,
  output logic              in_ready,
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [W_MEM-1:0]  wr_data,
  input  logic              wr_ready,
  output logic              done
);
  localparam int WPB = W_MEM / CNT_W;
  localparam int SW  = (WPB > 1) ? $clog2(WPB) : 1;

  logic [W_MEM-1:0]  buffer;
  logic [SW-1:0]     slot;
  logic [ADDR_W-1:0] next_addr;
  logic              pending_last;

  assign in_ready = !wr_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buffer       <= '0;
      slot         <= '0;
      next_addr    <= '0;
      wr_valid     <= 1'b0;
      wr_addr      <= '0;
      wr_data      <= '0;
      pending_last <= 1'b0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        next_addr <= base_addr;
        slot      <= '0;
        buffer    <= '0;
      end
      if (in_valid && in_ready) begin
        if (32'(slot) == WPB - 1 || in_last) begin
          wr_valid     <= 1'b1;
          wr_addr      <= next_addr;
          wr_data      <= buffer | (W_MEM'(in_count) << (32'(slot) * CNT_W));
          pending_last <= in_last;
          next_addr    <= next_addr + 1'b1;
          slot         <= '0;
          buffer       <= '0;
        end else begin
          buffer[32'(slot)*CNT_W +: CNT_W] <= in_count;
          slot <= slot + 1'b1;
        end
      end
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        if (pending_last) done <= 1'b1;
      end
    end
  end

endmodule
