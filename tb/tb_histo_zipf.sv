// tb_histo_zipf: HISTO on Zipf-distributed keys, the skew sweep used to
// evaluate the architecture, run on the default design (16 PriPEs, 15
// SecPEs). For each Zipf factor alpha in {0, 1, 2, 3} it draws 16,384
// tuples over 1,024 distinct keys (rank r has probability proportional to
// 1/r^alpha; rank r maps to key r*2654435761, which scatters the ranks over
// the PriPEs), runs the design, checks all 32 bins against a count kept
// here and reports the throughput. Every run must stay within 1.5 times
// the uniform-data time plus the fixed profiling and scheduling overhead:
// without SecPEs, alpha = 3 would put almost every tuple on one PE and run
// at 0.5 tuple per cycle, 16 times slower than uniform data.
module tb_histo_zipf;
  import ditto_pkg::*;

  localparam int N = 8, NBINS = 32, WORDS = 4096, NT = 16384, NKEYS = 1024;
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
  real cdf [NKEYS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_zipf(input real alpha);
    real total, acc;
    total = 0.0;
    for (int r = 0; r < NKEYS; r++) total += 1.0 / ((r + 1.0) ** alpha);
    acc = 0.0;
    for (int r = 0; r < NKEYS; r++) begin
      acc += 1.0 / ((r + 1.0) ** alpha) / total;
      cdf[r] = acc;
    end
    for (int i = 0; i < NBINS; i++) ref_bins[i] = 0;
    for (int w = 0; w < WORDS; w++) u_mem.mem[w] = '0;
    for (int t = 0; t < NT; t++) begin
      real u;
      int lo, hi;
      logic [31:0] key;
      u  = real'($urandom) / 4294967296.0;
      lo = 0;
      hi = NKEYS - 1;
      while (lo < hi) begin
        int mid;
        mid = (lo + hi) / 2;
        if (cdf[mid] < u) lo = mid + 1;
        else hi = mid;
      end
      key = 32'(lo + 1) * 32'd2654435761;
      u_mem.mem[RD_BASE + t / N][(t % N) * 64 +: 64] = {key, 32'(t)};
      ref_bins[{key[3:0], key[4]}]++;
    end
  endtask

  task automatic run(output int cycles);
    rst_n = 1'b0;
    start = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    num_tuples <= 32'(NT);
    threshold  <= 32'd0;
    start      <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cycles = 0;
    while (!done && cycles < 100000) begin
      @(posedge clk);
      cycles++;
    end
    check(done == 1'b1, "run finished");
  endtask

  initial begin
    int cyc;
    int unsigned maxbin;
    rst_n = 1'b0;
    start = 1'b0;
    num_tuples = '0;
    threshold  = '0;
    for (int a = 0; a <= 3; a++) begin
      int bad = 0;
      load_zipf(real'(a));
      maxbin = 0;
      for (int g = 0; g < NBINS; g++) if (ref_bins[g] > maxbin) maxbin = ref_bins[g];
      run(cyc);
      for (int g = 0; g < NBINS; g++) begin
        logic [31:0] got;
        got = u_mem.mem[WR_BASE + g / 16][(g % 16) * 32 +: 32];
        checks++;
        if (got != ref_bins[g]) begin
          failures++;
          bad++;
        end
      end
      $display("alpha=%0d: %0d cycles, %0.2f tuples/cycle, largest bin %0d, wrong bins %0d, sec_tuples %0d",
               a, cyc, real'(NT) / cyc, maxbin, bad, sec_tuples);
      check(bad == 0, $sformatf("alpha=%0d bins", a));
      check(cyc <= (NT / N) * 3 / 2 + 600, $sformatf("alpha=%0d throughput", a));
      if (a == 3) check(sec_tuples > 0, "SecPEs used at alpha=3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
