// tb_mem_write_engine: 40 counts (the last one flagged) into the write
// engine with a memory that refuses one write in three and a producer that
// offers data on random cycles. The memory must end up with three 512-bit
// words at base 100, 101, 102: counts 0..15, 16..31 and 32..39 followed by
// zeros, count i of a word in bits [i*32 +: 32]; done must pulse once.
module tb_mem_write_engine;
  import ditto_pkg::*;
  localparam int NC = 40, BASE = 100;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, in_valid, in_last, in_ready, wr_valid, wr_ready, done;
  logic [31:0] in_count, wr_addr;
  logic [511:0] wr_data;

  mem_write_engine dut (.clk, .rst_n, .start, .base_addr(32'(BASE)), .in_valid, .in_count,
    .in_last, .in_ready, .wr_valid, .wr_addr, .wr_data, .wr_ready, .done);

  logic [511:0] mem [256];
  int checks = 0, failures = 0, n_done = 0, n_wr = 0, cyc = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_valid && wr_ready) begin mem[wr_addr[7:0]] <= wr_data; n_wr++; end
    if (rst_n && done) n_done++;
  end
  assign wr_ready = (cyc % 3) != 0;

  initial begin
    int sent = 0;
    bit fire;
    logic [31:0] vals [NC];
    for (int i = 0; i < 256; i++) mem[i] = '0;
    for (int i = 0; i < NC; i++) vals[i] = $urandom;
    rst_n = 0; start = 0; in_valid = 0; in_last = 0; in_count = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (sent < NC) begin
      in_valid = $urandom_range(0, 2) != 0;
      in_count = vals[sent];
      in_last  = sent == NC - 1;
      #1;
      fire = in_valid && in_ready;
      @(posedge clk);
      if (fire) sent++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(n_done == 1, $sformatf("done pulses once (%0d)", n_done));
    check(n_wr == 3, $sformatf("three words written (%0d)", n_wr));
    for (int i = 0; i < 48; i++) begin
      logic [31:0] got;
      got = mem[BASE + i / 16][(i % 16) * 32 +: 32];
      check(got == (i < NC ? vals[i] : 32'd0), $sformatf("slot %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
