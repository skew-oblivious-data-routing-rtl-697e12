// tb_prepe: drives random tuples through one PrePE with a randomly stalling
// consumer and checks that each comes out once, in order, with dst equal to
// the key's four low bits (16 PriPEs) and its lane-enable bit kept.
module tb_prepe;
  import ditto_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_en, in_ready, out_valid, out_en, out_ready;
  tuple_t in_tuple, out_tuple;
  logic [3:0] out_dst;

  prepe dut (.clk, .rst_n, .in_valid, .in_en, .in_tuple, .in_ready,
             .out_valid, .out_en, .out_dst, .out_tuple, .out_ready);

  int checks = 0, failures = 0;
  tuple_t q_t [$];
  logic   q_e [$];
  int sent = 0, recv = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      tuple_t t;
      logic e;
      t = q_t.pop_front();
      e = q_e.pop_front();
      checks++;
      if (out_tuple != t || out_en != e || out_dst != t.key[3:0]) begin
        failures++;
        $display("FAIL: tuple %0d key=%h dst=%0d", recv, out_tuple.key, out_dst);
      end
      recv++;
    end
    if (in_valid && in_ready) begin
      q_t.push_back(in_tuple);
      q_e.push_back(in_en);
      sent++;
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; in_en = 0; in_tuple = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (sent < 500) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 3) != 0;
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 4) != 0;
        in_en    = $urandom_range(0, 5) != 0;
        in_tuple = {$urandom, $urandom};
      end
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (recv != sent) begin failures++; $display("FAIL: sent %0d got %0d", sent, recv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
