// tb_ditto_histo_top: end-to-end test of the HISTO design at its default
// size (8 PrePEs, 16 PriPEs, 15 SecPEs).
//
// Four runs, each after a reset, each over tuples the testbench writes into
// a behavioural memory: (1) uniform random keys, checking the rate of about
// one memory word (8 tuples) per cycle; (2) every key on one PriPE, checking
// that the SecPEs take over and the run is several times faster than one
// PE alone could be (0.5 tuple per cycle); (3) a skew that moves from one
// PriPE to another half way, with a throughput threshold, checking that a
// reschedule happens; (4) a tuple count that leaves the last memory word
// partly filled. After every run all 32 global bins read back from memory
// must equal a histogram the testbench counts itself:
// bin = (key mod 16) * 2 + key[4]. The test also counts that back-pressure,
// SecPE routing, plan application and rescheduling each occurred.
module tb_ditto_histo_top;
  import ditto_pkg::*;

  localparam int N = 8, M = 16, NBINS = 32, WORDS = 4096;
  localparam int RD_BASE = 0, WR_BASE = 3000;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic        start, done;
  logic [31:0] num_tuples, threshold;
  logic        rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, wr_addr;
  logic [4:0]  rd_req_len;
  logic [511:0] rd_resp_data, wr_data;
  logic [31:0] stall_cycles, sec_tuples, plans_applied, reschedules;

  ditto_histo_top dut (
    .clk, .rst_n, .start, .rd_base(32'(RD_BASE)), .num_tuples, .wr_base(32'(WR_BASE)),
    .threshold, .done,
    .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready,
    .stall_cycles, .sec_tuples, .plans_applied, .reschedules);

  ddr_model #(.W_MEM(512), .ADDR_W(32), .LEN_BITS(5), .WORDS(WORDS)) u_mem (
    .clk, .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready,
    .rd_resp_valid, .rd_resp_data, .wr_valid, .wr_addr, .wr_data, .wr_ready);

  int checks = 0, failures = 0;
  int unsigned ref_bins [NBINS];
  int n_stall = 0, n_sec = 0, n_plan = 0, n_resched = 0, n_partial = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Key whose PriPE is pe (pe < 0: any PriPE).
  function automatic logic [31:0] make_key(input int pe);
    logic [31:0] k;
    k = $urandom;
    if (pe >= 0) k = {k[31:4], 4'(pe)};
    return k;
  endfunction

  // mode 0: uniform; 1: all on PriPE a; 2: PriPE a then PriPE b
  task automatic load(input int n, input int mode, input int a, input int b);
    for (int i = 0; i < NBINS; i++) ref_bins[i] = 0;
    for (int w = 0; w < WORDS; w++) u_mem.mem[w] = '0;
    for (int t = 0; t < n; t++) begin
      logic [31:0] key;
      int pe;
      pe  = (mode == 0) ? -1 : (mode == 1) ? a : (t < n / 2 ? a : b);
      key = make_key(pe);
      u_mem.mem[RD_BASE + t / N][(t % N) * 64 +: 64] = {key, 32'(t)};
      ref_bins[{key[3:0], key[4]}]++;
    end
  endtask

  task automatic run(input int n, input int thr, output int cycles);
    rst_n = 1'b0;
    start = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    num_tuples <= 32'(n);
    threshold  <= 32'(thr);
    start      <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cycles = 0;
    while (!done && cycles < 200000) begin
      @(posedge clk);
      cycles++;
    end
    check(done == 1'b1, "run finished");
  endtask

  task automatic compare(input string name);
    int bad = 0;
    for (int g = 0; g < NBINS; g++) begin
      logic [31:0] got;
      got = u_mem.mem[WR_BASE + g / 16][(g % 16) * 32 +: 32];
      checks++;
      if (got != ref_bins[g]) begin
        failures++;
        bad++;
        $display("FAIL %s: bin %0d = %0d, expected %0d", name, g, got, ref_bins[g]);
      end
    end
    if (stall_cycles > 0) n_stall++;
    if (sec_tuples > 0) n_sec++;
    if (plans_applied > 0) n_plan++;
    if (reschedules > 0) n_resched++;
    $display("%s: bins wrong=%0d stalls=%0d sec_tuples=%0d plans=%0d reschedules=%0d",
             name, bad, stall_cycles, sec_tuples, plans_applied, reschedules);
  endtask

  initial begin
    int cyc;
    rst_n = 1'b0;
    start = 1'b0;
    num_tuples = '0;
    threshold  = '0;

    // (1) uniform data: one memory word per cycle, plus a fixed overhead
    load(16384, 0, 0, 0);
    run(16384, 0, cyc);
    compare("uniform");
    $display("uniform: %0d cycles for %0d words", cyc, 16384 / N);
    check(cyc <= (16384 / N) * 5 / 4 + 400, "uniform rate near one word per cycle");

    // (2) extreme skew: all tuples on PriPE 2
    load(8192, 1, 2, 0);
    run(8192, 0, cyc);
    compare("skew");
    $display("skew: %0d cycles (one PE alone needs %0d)", cyc, 8192 * 2);
    check(cyc * 4 < 8192 * 2, "SecPEs give more than 4x over a single PE");
    check(sec_tuples > 8192 / 2, "most tuples went to SecPEs");

    // (3) evolving skew: PriPE 5, then PriPE 11, with a threshold
    load(16384, 2, 5, 11);
    run(16384, 256, cyc);
    compare("evolving");
    $display("evolving: %0d cycles", cyc);
    check(reschedules >= 1, "skew change triggered a reschedule");
    check(plans_applied >= 2, "a second plan was applied");

    // (4) partial last word
    load(1003, 0, 0, 0);
    run(1003, 0, cyc);
    compare("partial");
    n_partial++;

    check(n_stall > 0, "back-pressure from the routing happened");
    check(n_sec > 0, "tuples were routed to SecPEs");
    check(n_plan > 0, "a plan was applied");
    check(n_resched > 0, "a reschedule happened");
    check(n_partial > 0, "a partial word was processed");
    $display("mechanisms: stall_runs=%0d sec_runs=%0d plan_runs=%0d resched_runs=%0d partial_runs=%0d",
             n_stall, n_sec, n_plan, n_resched, n_partial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
