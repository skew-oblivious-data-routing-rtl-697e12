// tb_mapper: the paper's mapping example with four PriPEs and three SecPEs
// (IDs 4, 5, 6). Before any plan every tuple keeps its PriPE. After the
// plan pairs 4->2, 5->2, 6->0 (one per cycle), a stream of tuples for
// PriPE 2 must visit 2, 4, 5 round-robin (period 3, all three distinct in
// each period), PriPE 0 must alternate between 0 and 6, PriPEs 1 and 3 must
// stay put. tbl_reset must restore the initial mapping. The PriPE ID of
// every accepted tuple must be reported to the profiler.
module tb_mapper;
  import ditto_pkg::*;
  localparam int M = 4, X = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_en, in_ready, out_valid, out_en, out_ready;
  logic [1:0] in_dst, plan_pri, prof_pri;
  logic [2:0] out_dst, plan_sec;
  logic plan_valid, tbl_reset, prof_valid;
  tuple_t in_tuple, out_tuple;

  mapper #(.M_PRIPE(M), .X_SECPE(X)) dut (.clk, .rst_n, .in_valid, .in_en, .in_dst,
    .in_tuple, .in_ready, .out_valid, .out_en, .out_dst, .out_tuple, .out_ready,
    .plan_valid, .plan_sec, .plan_pri, .tbl_reset, .prof_valid, .prof_pri);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int seq [$];
  logic [1:0] prof_q [$];
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) seq.push_back(int'(out_dst));
    if (prof_valid) begin
      check(prof_q.size() > 0 && prof_q[0] == prof_pri, "profiler sees the PriPE ID");
      if (prof_q.size() > 0) void'(prof_q.pop_front());
    end
    if (in_valid && in_ready && in_en) prof_q.push_back(in_dst);
  end

  task automatic stream(input int pe, input int n);
    seq.delete();
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1; in_en = 1; in_dst = 2'(pe); in_tuple = {$urandom, $urandom};
    end
    @(negedge clk);
    in_valid = 0;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_en = 0; in_dst = 0; in_tuple = '0; out_ready = 1;
    plan_valid = 0; plan_sec = 0; plan_pri = 0; tbl_reset = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pe = 0; pe < M; pe++) begin
      stream(pe, 6);
      foreach (seq[i]) check(seq[i] == pe, $sformatf("initial: PriPE %0d -> %0d", pe, seq[i]));
    end
    // scheduling plan from the paper's example
    @(negedge clk); plan_valid = 1; plan_sec = 4; plan_pri = 2;
    @(negedge clk); plan_sec = 5; plan_pri = 2;
    @(negedge clk); plan_sec = 6; plan_pri = 0;
    @(negedge clk); plan_valid = 0;
    stream(2, 30);
    check(seq.size() == 30, "30 tuples out");
    for (int i = 0; i + 3 < seq.size(); i++) begin
      check(seq[i] == 2 || seq[i] == 4 || seq[i] == 5, $sformatf("PriPE 2 -> %0d", seq[i]));
      check(seq[i + 3] == seq[i], "PriPE 2 period 3");
      check(seq[i] != seq[i + 1] && seq[i] != seq[i + 2] && seq[i + 1] != seq[i + 2],
            "PriPE 2 visits 2, 4, 5 in each period");
    end
    stream(0, 20);
    for (int i = 0; i + 1 < seq.size(); i++) begin
      check(seq[i] == 0 || seq[i] == 6, "PriPE 0 -> 0 or 6");
      check(seq[i] != seq[i + 1], "PriPE 0 alternates");
    end
    stream(1, 8);
    foreach (seq[i]) check(seq[i] == 1, "PriPE 1 unchanged");
    stream(3, 8);
    foreach (seq[i]) check(seq[i] == 3, "PriPE 3 unchanged");
    // reschedule: back to the initial table
    @(negedge clk); tbl_reset = 1;
    @(negedge clk); tbl_reset = 0;
    stream(2, 9);
    foreach (seq[i]) check(seq[i] == 2, "after reset PriPE 2 keeps its tuples");
    stream(0, 9);
    foreach (seq[i]) check(seq[i] == 0, "after reset PriPE 0 keeps its tuples");
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
