// tb_histo_pe: one HISTO PE with 16 PriPEs and 2 bins (key bit 4 picks the
// bin). Offers a tuple on every cycle and checks that the PE takes exactly
// one every two cycles; then reads both bins through the host port and
// compares them with a count kept here; then clears one bin and checks it
// reads back as zero while the other keeps its value.
module tb_histo_pe;
  import ditto_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, busy, hp_clr;
  tuple_t in_tuple;
  logic [0:0] hp_addr;
  logic [31:0] hp_rd_data;

  histo_pe dut (.clk, .rst_n, .in_valid, .in_tuple, .in_ready, .busy,
                .hp_addr, .hp_rd_data, .hp_clr);

  int checks = 0, failures = 0;
  int unsigned ref_cnt [2];
  int accepted = 0, cycles = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    ref_cnt[in_tuple.key[4]]++;
    accepted++;
  end

  initial begin
    rst_n = 0; in_valid = 0; in_tuple = '0; hp_addr = '0; hp_clr = 0;
    ref_cnt[0] = 0; ref_cnt[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (!busy);
    @(negedge clk);
    in_valid = 1;
    in_tuple = {$urandom, $urandom};
    repeat (800) begin
      @(posedge clk);
      cycles++;
      @(negedge clk);
      in_tuple = {$urandom, $urandom};
    end
    in_valid = 0;
    check(accepted == cycles / 2, $sformatf("II=2: %0d tuples in %0d cycles", accepted, cycles));
    repeat (3) @(posedge clk);
    for (int b = 0; b < 2; b++) begin
      @(negedge clk);
      hp_addr = 1'(b);
      @(posedge clk);
      #1;
      check(hp_rd_data == ref_cnt[b], $sformatf("bin %0d = %0d, expected %0d", b, hp_rd_data, ref_cnt[b]));
    end
    @(negedge clk);
    hp_addr = 1'b0; hp_clr = 1;
    @(negedge clk);
    hp_clr = 0;
    @(posedge clk); #1;
    check(hp_rd_data == 0, "cleared bin reads zero");
    @(negedge clk);
    hp_addr = 1'b1;
    @(posedge clk); #1;
    check(hp_rd_data == ref_cnt[1], "other bin kept");
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
