// merger: combines the results of PriPEs and SecPEs by the scheduling plan.
//
// A SecPE that helped PriPE p holds partial counts for p's bins; the true
// count of a bin is the PriPE's count plus the counts of all SecPEs the
// plan attached to p. The merger records the plan pairs ("SecPE s -> PriPE
// p") as they are sent to the mappers.
//
// Flush (on a reschedule): once flush_req is high and the SecPEs and their
// channels are idle (sec_idle), the merger adds, bin by bin, the SecPE
// counts of each PriPE into an intermediate result store, clears the SecPE
// buffers, forgets the plan and pulses flush_done. In the paper the
// intermediate results go to global memory; here they are kept in an
// on-chip store of M x 2^BIN_AW counters (this design's choice).
//
// Final merge (final_req, with all PEs idle): for PriPE p = 0..M-1 and bin
// b it emits intermediate[p][b] + PriPE p's bin b + the bin b of every SecPE
// attached to p, as word p*2^BIN_AW + b on out_* (valid/ready, in
// ascending order, out_last on the final word), then pulses final_done.
//
// PE access goes through one broadcast bin address hp_addr (PE read data
// comes back one cycle later) and a clear strobe per SecPE. Every word
// costs two cycles: address, then use.
module merger
  import ditto_pkg::*;
#(
  parameter int M_PRIPE = 16,
  parameter int X_SECPE = 15,
  parameter int BIN_AW  = 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               plan_valid,
  input  logic [$clog2(M_PRIPE+X_SECPE)-1:0] plan_sec,
  input  logic [$clog2(M_PRIPE)-1:0]         plan_pri,
  input  logic                               flush_req,
  input  logic                               sec_idle,
  output logic                               flush_done,
  input  logic                               final_req,
  output logic                               final_done,
  output logic                               busy,
  // PE buffer access
  output logic [BIN_AW-1:0]                  hp_addr,
  output logic [X_SECPE-1:0]                 sec_clr,
  input  logic [CNT_W-1:0]                   pri_rd [M_PRIPE],
  input  logic [CNT_W-1:0]                   sec_rd [X_SECPE],
  // merged bins
  output logic                               out_valid,
  output logic [$clog2(M_PRIPE)+BIN_AW-1:0]  out_index,
  output logic [CNT_W-1:0]                   out_count,
  output logic                               out_last,
  input  logic                               out_ready
);
  localparam int PW    = $clog2(M_PRIPE);
  localparam int NBINS = 1 << BIN_AW;

  typedef enum logic [2:0] {S_IDLE, S_FL_ADDR, S_FL_ACC, S_FL_WAIT,
                            S_FN_ADDR, S_FN_OUT, S_FN_DONE} state_t;
  state_t state;

  logic [CNT_W-1:0]  inter [M_PRIPE][NBINS];
  logic [X_SECPE-1:0] own_v;
  logic [PW-1:0]     own [X_SECPE];
  logic [PW-1:0]     p;
  logic [BIN_AW-1:0] b;
  logic [CNT_W-1:0]  sec_sum;

  // Sum of the SecPE counts that belong to PriPE p (at bin hp_addr).
  always_comb begin
    sec_sum = '0;
    for (int s = 0; s < X_SECPE; s++)
      if (own_v[s] && own[s] == p) sec_sum += sec_rd[s];
  end

  assign hp_addr   = b;
  assign busy      = state != S_IDLE;
  assign out_valid = state == S_FN_OUT;
  assign out_index = {p, b};
  assign out_count = inter[p][b] + pri_rd[p] + sec_sum;
  assign out_last  = (32'(p) == M_PRIPE - 1) && (32'(b) == NBINS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      p          <= '0;
      b          <= '0;
      own_v      <= '0;
      sec_clr    <= '0;
      flush_done <= 1'b0;
      final_done <= 1'b0;
      for (int s = 0; s < X_SECPE; s++) own[s] <= '0;
      for (int i = 0; i < M_PRIPE; i++)
        for (int j = 0; j < NBINS; j++) inter[i][j] <= '0;
    end else begin
      flush_done <= 1'b0;
      final_done <= 1'b0;
      sec_clr    <= '0;
      if (plan_valid && 32'(plan_sec) >= M_PRIPE) begin
        own_v[32'(plan_sec) - M_PRIPE] <= 1'b1;
        own[32'(plan_sec) - M_PRIPE]   <= plan_pri;
      end
      unique case (state)
        S_IDLE: begin
          p <= '0;
          b <= '0;
          if (flush_req && sec_idle)      state <= S_FL_ADDR;
          else if (final_req && sec_idle) state <= S_FN_ADDR;
        end
        // flush: bin b outer, PriPE p inner
        S_FL_ADDR: state <= S_FL_ACC;
        S_FL_ACC: begin
          inter[p][b] <= inter[p][b] + sec_sum;
          p <= p + 1'b1;
          if (32'(p) == M_PRIPE - 1) begin
            p       <= '0;
            sec_clr <= '1;
            state   <= S_FL_WAIT;
          end
        end
        S_FL_WAIT: begin
          // the clear of bin b is written this cycle
          b <= b + 1'b1;
          if (32'(b) == NBINS - 1) begin
            own_v      <= '0;
            flush_done <= 1'b1;
            state      <= S_FN_DONE;
          end else begin
            state <= S_FL_ADDR;
          end
        end
        // final: PriPE p outer, bin b inner
        S_FN_ADDR: state <= S_FN_OUT;
        S_FN_OUT: begin
          if (out_ready) begin
            b     <= b + 1'b1;
            state <= S_FN_ADDR;
            if (32'(b) == NBINS - 1) begin
              b <= '0;
              p <= p + 1'b1;
              if (32'(p) == M_PRIPE - 1) begin
                final_done <= 1'b1;
                state      <= S_FN_DONE;
              end
            end
          end
        end
        // wait for the request to drop before accepting a new one
        S_FN_DONE: if (!flush_req && !final_req) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
