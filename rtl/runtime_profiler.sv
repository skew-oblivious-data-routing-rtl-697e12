// runtime_profiler: builds the SecPE scheduling plan and watches for a
// change in the workload distribution.
//
// Plan generation (as in the paper): during PROFILE_CYCLES cycles the
// PriPE IDs reported by the N mappers are counted in N independent
// histograms (one per mapper, M bins each). The N partial histograms are
// then merged into one workload histogram, one PriPE per cycle. The X
// SecPEs are assigned greedily and serially: each iteration gives one SecPE
// to the PriPE whose workload divided by (1 + SecPEs it already has) is the
// largest, comparing w_a*(k_b+1) with w_b*(k_a+1) so that no divider is
// needed; the lowest PriPE ID wins a tie (a design choice). One iteration
// scans the M PriPEs in M cycles. SecPE M+x is the x-th SecPE assigned.
// The plan is then sent as "SecPE ID -> PriPE ID" pairs, one per cycle, on
// plan_* to the mappers and the merger.
//
// Monitoring: afterwards a tick counter runs and the processed tuples
// (reported IDs) are summed over windows of WINDOW cycles. If a window
// ends with fewer tuples than threshold while monitor_en is high, the
// profiler raises resched (a level) and waits; the mappers then stop
// routing to SecPEs and the merger folds the SecPE results away. restart
// starts a new profiling round, which stands for the host enqueueing the
// profiler again. threshold = 0 disables rescheduling, as in the paper.
// The window length, the "fewer than" test and monitor_en are this
// design's choices. stop (ignored while a plan is being sent) ends the
// profiler's work; start begins it.
module runtime_profiler
  import ditto_pkg::*;
#(
  parameter int N_PREPE        = 8,
  parameter int M_PRIPE        = 16,
  parameter int X_SECPE        = 15,
  parameter int PROFILE_CYCLES = 256,
  parameter int WINDOW         = 256
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic                               stop,
  input  logic                               restart,
  input  logic                               monitor_en,
  input  logic [CNT_W-1:0]                   threshold,
  input  logic [N_PREPE-1:0]                 id_valid,
  input  logic [$clog2(M_PRIPE)-1:0]         id [N_PREPE],
  output logic                               plan_valid,
  output logic [$clog2(M_PRIPE+X_SECPE)-1:0] plan_sec,
  output logic [$clog2(M_PRIPE)-1:0]         plan_pri,
  output logic                               plan_done,
  output logic                               resched,
  output logic                               profiling
);
  localparam int PW  = $clog2(M_PRIPE);
  localparam int IDW = $clog2(M_PRIPE + X_SECPE);
  localparam int HW  = $clog2(PROFILE_CYCLES + 1);            // partial hist
  localparam int GW  = $clog2(N_PREPE * PROFILE_CYCLES + 1);  // merged hist
  localparam int KW  = $clog2(X_SECPE + 2);                    // SecPEs per PriPE + 1
  localparam int TW  = $clog2((PROFILE_CYCLES > WINDOW ? PROFILE_CYCLES : WINDOW) + 1);
  localparam int XW  = $clog2(X_SECPE + 1);
  localparam int SW  = $clog2(N_PREPE * WINDOW + 1);

  typedef enum logic [2:0] {S_IDLE, S_PROFILE, S_MERGE, S_SCHED, S_SEND,
                            S_MONITOR, S_RESCHED, S_DONE} state_t;
  state_t state;

  logic [HW-1:0]  hist [N_PREPE][M_PRIPE];
  logic [GW-1:0]  glob [M_PRIPE];
  logic [KW-1:0]  share [M_PRIPE];    // 1 + SecPEs assigned so far
  logic [PW-1:0]  plan [X_SECPE];
  logic [TW-1:0]  tick;
  logic [PW-1:0]  m;
  logic [XW-1:0]  x;
  logic [PW-1:0]  best;
  logic [SW-1:0]  win_sum;
  logic [$clog2(N_PREPE+1)-1:0] n_valid;

  // Greedy step: is PriPE m heavier per share than the current best?
  logic           better;
  logic [PW-1:0]  best_next;
  assign better    = (glob[m] * share[best]) > (glob[best] * share[m]);
  assign best_next = (m == '0) ? '0 : (better ? m : best);

  // Merged count of PriPE m over the N partial histograms.
  logic [GW-1:0]  merged;
  always_comb begin
    merged = '0;
    for (int n = 0; n < N_PREPE; n++) merged += GW'(hist[n][m]);
    n_valid = '0;
    for (int n = 0; n < N_PREPE; n++) n_valid += $bits(n_valid)'(id_valid[n]);
  end

  assign plan_valid = state == S_SEND;
  assign plan_sec   = IDW'(M_PRIPE) + IDW'(x);
  assign plan_pri   = plan[x];
  assign resched    = state == S_RESCHED;
  assign profiling  = state == S_PROFILE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tick      <= '0;
      m         <= '0;
      x         <= '0;
      best      <= '0;
      win_sum   <= '0;
      plan_done <= 1'b0;
      for (int n = 0; n < N_PREPE; n++)
        for (int j = 0; j < M_PRIPE; j++) hist[n][j] <= '0;
      for (int j = 0; j < M_PRIPE; j++) begin
        glob[j]  <= '0;
        share[j] <= KW'(1);
      end
      for (int j = 0; j < X_SECPE; j++) plan[j] <= '0;
    end else begin
      plan_done <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state <= S_PROFILE;
            tick  <= '0;
          end
        end
        S_PROFILE: begin
          for (int n = 0; n < N_PREPE; n++)
            if (id_valid[n]) hist[n][id[n]] <= hist[n][id[n]] + 1'b1;
          tick <= tick + 1'b1;
          if (32'(tick) == PROFILE_CYCLES - 1) begin
            state <= S_MERGE;
            m     <= '0;
          end
        end
        S_MERGE: begin
          glob[m]  <= merged;
          share[m] <= KW'(1);
          for (int n = 0; n < N_PREPE; n++) hist[n][m] <= '0;
          m <= m + 1'b1;
          if (32'(m) == M_PRIPE - 1) begin
            state <= S_SCHED;
            m     <= '0;
            x     <= '0;
            best  <= '0;
          end
        end
        S_SCHED: begin
          best <= best_next;
          m    <= m + 1'b1;
          if (32'(m) == M_PRIPE - 1) begin
            plan[x]          <= best_next;
            share[best_next] <= share[best_next] + 1'b1;
            m                <= '0;
            x                <= x + 1'b1;
            if (32'(x) == X_SECPE - 1) begin
              state <= S_SEND;
              x     <= '0;
            end
          end
        end
        S_SEND: begin
          x <= x + 1'b1;
          if (32'(x) == X_SECPE - 1) begin
            state     <= S_MONITOR;
            plan_done <= 1'b1;
            tick      <= '0;
            win_sum   <= '0;
          end
        end
        S_MONITOR: begin
          tick    <= tick + 1'b1;
          win_sum <= win_sum + SW'(n_valid);
          if (32'(tick) == WINDOW - 1) begin
            tick    <= '0;
            win_sum <= '0;
            if (monitor_en && threshold != '0 &&
                32'(win_sum) + 32'(n_valid) < 32'(threshold))
              state <= S_RESCHED;
          end
        end
        S_RESCHED: begin
          if (restart) begin
            state <= S_PROFILE;
            tick  <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (stop && state != S_SEND && state != S_IDLE) state <= S_DONE;
    end
  end

  initial assert (X_SECPE >= 1 && M_PRIPE >= 2)
    else $error("runtime_profiler: needs at least one SecPE and two PriPEs");

endmodule
