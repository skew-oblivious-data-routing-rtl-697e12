// tb_runtime_profiler: profiler with 4 mappers, 4 PriPEs, 3 SecPEs
// (IDs 4..6), 256 profiling cycles and 64-cycle monitoring windows.
// (1) Workloads 60, 28, 125, 45 for PriPEs 0..3 must give the paper's
//     example plan 4->2, 5->2, 6->0, sent one pair per cycle after the
//     256 profiling cycles, 4 merge cycles and 3 x 4 scheduling cycles.
// (2) Random workloads: the plan must match a greedy schedule computed
//     here with real division (largest workload / (1 + SecPEs so far),
//     lowest ID on a tie).
// (3) Monitoring: full traffic raises no reschedule; traffic below the
//     threshold does; restart begins a new profiling round; threshold 0
//     never reschedules.
module tb_runtime_profiler;
  import ditto_pkg::*;
  localparam int N = 4, M = 4, X = 3, PC = 256, WIN = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, stop, restart, monitor_en;
  logic [31:0] threshold;
  logic [N-1:0] id_valid;
  logic [1:0] id [N];
  logic plan_valid, plan_done, resched, profiling;
  logic [2:0] plan_sec;
  logic [1:0] plan_pri;

  runtime_profiler #(.N_PREPE(N), .M_PRIPE(M), .X_SECPE(X), .PROFILE_CYCLES(PC), .WINDOW(WIN)) dut (
    .clk, .rst_n, .start, .stop, .restart, .monitor_en, .threshold, .id_valid, .id,
    .plan_valid, .plan_sec, .plan_pri, .plan_done, .resched, .profiling);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int plan_got [X];
  int n_pairs;
  int cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && plan_valid) begin
      check(int'(plan_sec) == M + n_pairs, "SecPE IDs in order");
      if (n_pairs < X) plan_got[n_pairs] = int'(plan_pri);
      n_pairs++;
    end
  end

  // Feed the given workload during the profiling cycles, then idle.
  task automatic profile(input int w [M], output int first_pair_cycle);
    int slots [$];
    for (int p = 0; p < M; p++) for (int k = 0; k < w[p]; k++) slots.push_back(p);
    slots.shuffle();
    n_pairs = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int c = 0; c < PC; c++) begin
      for (int n = 0; n < N; n++) begin
        if (slots.size() > 0 && $urandom_range(0, 1) == 1 || slots.size() > (PC - c - 1) * N + (N - n - 1)) begin
          id_valid[n] = 1'b1;
          id[n] = 2'(slots.pop_front());
        end else begin
          id_valid[n] = 1'b0;
        end
      end
      @(negedge clk);
    end
    id_valid = '0;
    first_pair_cycle = 0;
    while (!plan_valid && first_pair_cycle < 200) begin @(negedge clk); first_pair_cycle++; end
    repeat (X + 2) @(negedge clk);
  endtask

  function automatic void greedy(input int w [M], output int plan [X]);
    int share [M];
    for (int p = 0; p < M; p++) share[p] = 1;
    for (int x = 0; x < X; x++) begin
      int best = 0;
      for (int p = 1; p < M; p++)
        if (real'(w[p]) / share[p] > real'(w[best]) / share[best]) best = p;
      plan[x] = best;
      share[best]++;
    end
  endfunction

  task automatic do_reset();
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
  endtask

  initial begin
    int w [M];
    int exp_plan [X];
    int fc;
    rst_n = 0; start = 0; stop = 0; restart = 0; monitor_en = 1; threshold = 0;
    id_valid = '0;
    for (int n = 0; n < N; n++) id[n] = '0;
    do_reset();

    // (1) the paper's example
    w = '{60, 28, 125, 45};
    profile(w, fc);
    check(n_pairs == X, "three plan pairs");
    check(plan_got[0] == 2 && plan_got[1] == 2 && plan_got[2] == 0, "plan 4->2, 5->2, 6->0");
    $display("plan: 4->%0d 5->%0d 6->%0d, first pair %0d cycles after profiling",
             plan_got[0], plan_got[1], plan_got[2], fc);
    check(fc >= M + X * M && fc <= M + X * M + 3, "serial merge and scheduling latency");

    // (2) random workloads against the greedy model
    for (int r = 0; r < 6; r++) begin
      do_reset();
      for (int p = 0; p < M; p++) w[p] = $urandom_range(0, 250);
      greedy(w, exp_plan);
      profile(w, fc);
      for (int x = 0; x < X; x++)
        check(plan_got[x] == exp_plan[x],
              $sformatf("random %0d: SecPE %0d -> %0d, expected %0d", r, M + x, plan_got[x], exp_plan[x]));
    end

    // (3) monitoring: threshold 100 tuples per 64-cycle window
    threshold = 100;
    for (int c = 0; c < 3 * WIN; c++) begin
      id_valid = '1;
      @(negedge clk);
      check(!resched, "no reschedule at full throughput");
    end
    begin
      int waited = 0;
      while (!resched && waited < 3 * WIN) begin
        id_valid = 4'b0001;
        @(negedge clk);
        waited++;
      end
      check(resched, "low throughput raises a reschedule");
      check(waited <= 2 * WIN + 2, "reschedule within two windows");
    end
    id_valid = '0;
    repeat (5) @(negedge clk);
    check(resched && !profiling, "profiler waits while rescheduling");
    restart = 1;
    @(negedge clk);
    restart = 0;
    @(negedge clk);
    check(profiling, "restart begins a new profiling round");

    // threshold 0 disables rescheduling
    do_reset();
    threshold = 0;
    w = '{10, 10, 10, 10};
    profile(w, fc);
    repeat (4 * WIN) begin
      @(negedge clk);
      check(!resched, "threshold 0: no reschedule");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
