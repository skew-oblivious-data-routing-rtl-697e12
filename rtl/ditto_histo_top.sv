// ditto_histo_top: skew-oblivious data routing architecture, built for
// histogram building (HISTO).
//
// Dataflow: the read engine streams memory words of N_PREPE 8-byte tuples
// (lane i in bits [i*64 +: 64], key in the upper 32 bits of a lane); N
// PrePEs tag every tuple with its PriPE (key mod M); N mappers redirect the
// tag to the PriPE itself or to one of the SecPEs the current plan attached
// to it; the data routing logic (combiner, then one decoder and one filter
// per destination) delivers every tuple to the channel of its PE; M PriPEs
// and X SecPEs each count the tuples in a private bin buffer. The runtime
// profiler builds the SecPE plan from the first PROFILE_CYCLES cycles of
// traffic, sends it to the mappers and the merger, then watches the
// throughput and triggers a reschedule when it drops under threshold: the
// mappers fall back to PriPEs only, the merger folds the SecPE counts into
// its intermediate store once the SecPE channels are drained, and the
// profiler starts over. At the end the merger emits every global bin
// (PriPE p owns bins p*2^BIN_AW ..), which the write engine stores from
// word address wr_base on, 16 counts of 32 bits per 512-bit word.
//
// The block structure, the plan format, the mapping and the profiling
// follow the paper; the handshakes, the control sequence below, the
// automatic restart of the profiler (the host does it in the paper) and
// the on-chip intermediate store are this design's choices.
//
// Control: start (one cycle, while idle) begins a run over num_tuples
// tuples at word address rd_base. done rises when the last bin word has
// been written and stays high until the next start. The counters
// stall_cycles, sec_tuples, plans_applied and reschedules report how often
// the routing back-pressured, how many tuples went to SecPEs, how many
// plans were applied and how many reschedules happened in the run.
module ditto_histo_top
  import ditto_pkg::*;
#(
  parameter int N_PREPE        = 8,
  parameter int M_PRIPE        = 16,
  parameter int X_SECPE        = 15,
  parameter int BIN_AW         = 1,
  parameter int ADDR_W         = 32,
  parameter int BURST_LEN      = 16,
  parameter int RD_FIFO_DEPTH  = 64,
  parameter int FILTER_DEPTH   = 32,
  parameter int PROFILE_CYCLES = 256,
  parameter int WINDOW         = 256,
  localparam int W_MEM         = N_PREPE * 64,
  localparam int LEN_W         = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // run control
  input  logic              start,
  input  logic [ADDR_W-1:0] rd_base,
  input  logic [LEN_W-1:0]  num_tuples,
  input  logic [ADDR_W-1:0] wr_base,
  input  logic [CNT_W-1:0]  threshold,
  output logic              done,
  // memory read
  output logic              rd_req_valid,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic [$clog2(BURST_LEN+1)-1:0] rd_req_len,
  input  logic              rd_req_ready,
  input  logic              rd_resp_valid,
  input  logic [W_MEM-1:0]  rd_resp_data,
  // memory write
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [W_MEM-1:0]  wr_data,
  input  logic              wr_ready,
  // activity counters
  output logic [31:0]       stall_cycles,
  output logic [31:0]       sec_tuples,
  output logic [31:0]       plans_applied,
  output logic [31:0]       reschedules
);
  localparam int PW   = $clog2(M_PRIPE);
  localparam int NDST = M_PRIPE + X_SECPE;
  localparam int IDW  = $clog2(NDST);
  localparam int LW   = $clog2(N_PREPE);
  localparam int NW   = $clog2(N_PREPE + 1);

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_FINAL, C_DONE} ctrl_t;
  ctrl_t ctrl;

  logic run_start;
  logic [LEN_W-1:0] remaining;   // tuples not yet handed to the PrePEs
  assign run_start = start && (ctrl == C_IDLE || ctrl == C_DONE);

  // ---------------------------------------------------------- read engine
  logic             re_busy, re_done, re_valid, re_ready;
  logic [W_MEM-1:0] re_data;
  logic [LEN_W-1:0] num_beats;
  assign num_beats = (num_tuples + LEN_W'(N_PREPE - 1)) / LEN_W'(N_PREPE);

  mem_read_engine #(.W_MEM(W_MEM), .ADDR_W(ADDR_W), .LEN_W(LEN_W),
                    .BURST_LEN(BURST_LEN), .FIFO_DEPTH(RD_FIFO_DEPTH)) u_rd (
    .clk, .rst_n, .start(run_start), .base_addr(rd_base), .num_beats,
    .busy(re_busy), .done(re_done),
    .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready,
    .rd_resp_valid, .rd_resp_data,
    .out_valid(re_valid), .out_data(re_data), .out_ready(re_ready));

  // ------------------------------------------------------------- PrePEs
  logic [N_PREPE-1:0] pre_ready, pre_valid, pre_en, lane_en;
  logic [PW-1:0]      pre_dst   [N_PREPE];
  tuple_t             pre_tuple [N_PREPE];
  logic [N_PREPE-1:0] map_ready, map_valid, map_en;
  logic [IDW-1:0]     map_dst   [N_PREPE];
  tuple_t             map_tuple [N_PREPE];
  logic [N_PREPE-1:0] prof_valid;
  logic [PW-1:0]      prof_pri  [N_PREPE];
  logic               comb_in_ready;

  always_comb
    for (int i = 0; i < N_PREPE; i++) lane_en[i] = 32'(i) < 32'(remaining);
  assign re_ready = pre_ready[0];

  // plan and reschedule signals
  logic           plan_valid, plan_done, resched, profiling;
  logic [IDW-1:0] plan_sec;
  logic [PW-1:0]  plan_pri;

  for (genvar i = 0; i < N_PREPE; i++) begin : g_lane
    prepe #(.M_PRIPE(M_PRIPE)) u_prepe (
      .clk, .rst_n,
      .in_valid(re_valid), .in_en(lane_en[i]),
      .in_tuple(tuple_t'(re_data[i*64 +: 64])), .in_ready(pre_ready[i]),
      .out_valid(pre_valid[i]), .out_en(pre_en[i]), .out_dst(pre_dst[i]),
      .out_tuple(pre_tuple[i]), .out_ready(map_ready[0]));

    mapper #(.M_PRIPE(M_PRIPE), .X_SECPE(X_SECPE)) u_mapper (
      .clk, .rst_n,
      .in_valid(pre_valid[i]), .in_en(pre_en[i]), .in_dst(pre_dst[i]),
      .in_tuple(pre_tuple[i]), .in_ready(map_ready[i]),
      .out_valid(map_valid[i]), .out_en(map_en[i]), .out_dst(map_dst[i]),
      .out_tuple(map_tuple[i]), .out_ready(comb_in_ready),
      .plan_valid, .plan_sec, .plan_pri, .tbl_reset(resched),
      .prof_valid(prof_valid[i]), .prof_pri(prof_pri[i]));
  end

  // ------------------------------------------------------- data routing
  logic               comb_valid, comb_fire;
  logic [N_PREPE-1:0] comb_en;
  logic [IDW-1:0]     comb_dst   [N_PREPE];
  tuple_t             comb_tuple [N_PREPE];
  logic [NDST-1:0]    dec_ready, dec_valid, filt_ready, filt_empty;
  logic [NDST-1:0]    pe_valid, pe_ready, pe_busy;
  tuple_t             pe_tuple [NDST];
  logic [CNT_W-1:0]   pe_rd    [NDST];
  logic [BIN_AW-1:0]  hp_addr;
  logic [X_SECPE-1:0] sec_clr;

  combiner #(.N_PREPE(N_PREPE), .N_DST(NDST), .IDW(IDW)) u_comb (
    .clk, .rst_n,
    .in_valid(map_valid[0]), .in_en(map_en), .in_dst(map_dst), .in_tuple(map_tuple),
    .in_ready(comb_in_ready),
    .out_valid(comb_valid), .out_fire(comb_fire), .out_en(comb_en),
    .out_dst(comb_dst), .out_tuple(comb_tuple), .dp_ready(dec_ready));

  for (genvar d = 0; d < NDST; d++) begin : g_dst
    logic [NW-1:0] dcount;
    logic [LW-1:0] dpos   [N_PREPE];
    tuple_t        dtuple [N_PREPE];

    route_decoder #(.N_PREPE(N_PREPE), .IDW(IDW), .MY_ID(d)) u_dec (
      .clk, .rst_n,
      .in_valid(comb_fire), .in_en(comb_en), .in_dst(comb_dst), .in_tuple(comb_tuple),
      .in_ready(dec_ready[d]),
      .out_valid(dec_valid[d]), .out_count(dcount), .out_pos(dpos), .out_tuple(dtuple),
      .out_ready(filt_ready[d]));

    route_filter #(.N_PREPE(N_PREPE), .DEPTH(FILTER_DEPTH)) u_filt (
      .clk, .rst_n,
      .in_valid(dec_valid[d]), .in_count(dcount), .in_pos(dpos), .in_tuple(dtuple),
      .in_ready(filt_ready[d]),
      .out_valid(pe_valid[d]), .out_tuple(pe_tuple[d]), .out_ready(pe_ready[d]),
      .empty(filt_empty[d]));

    histo_pe #(.M_PRIPE(M_PRIPE), .BIN_AW(BIN_AW)) u_pe (
      .clk, .rst_n,
      .in_valid(pe_valid[d]), .in_tuple(pe_tuple[d]), .in_ready(pe_ready[d]),
      .busy(pe_busy[d]), .hp_addr(hp_addr), .hp_rd_data(pe_rd[d]),
      .hp_clr(d >= M_PRIPE ? sec_clr[d >= M_PRIPE ? d - M_PRIPE : 0] : 1'b0));
  end

  // --------------------------------------------------------- idle tracking
  logic sec_in_flight, sec_idle, all_idle;
  always_comb begin
    sec_in_flight = 1'b0;
    for (int i = 0; i < N_PREPE; i++) begin
      if (map_valid[i] && map_en[i] && 32'(map_dst[i]) >= M_PRIPE) sec_in_flight = 1'b1;
      if (comb_valid && comb_en[i] && 32'(comb_dst[i]) >= M_PRIPE) sec_in_flight = 1'b1;
    end
    sec_idle = !sec_in_flight;
    for (int d = M_PRIPE; d < NDST; d++)
      if (dec_valid[d] || !filt_empty[d] || pe_busy[d]) sec_idle = 1'b0;
  end
  assign all_idle = !re_busy && !(|pre_valid) && !(|map_valid) && !comb_valid &&
                    !(|dec_valid) && (&filt_empty) && !(|pe_busy);

  // ---------------------------------------------------- runtime profiler
  logic merge_flush_done, merge_final_done, merge_busy;
  logic final_req, prof_stop;

  runtime_profiler #(.N_PREPE(N_PREPE), .M_PRIPE(M_PRIPE), .X_SECPE(X_SECPE),
                     .PROFILE_CYCLES(PROFILE_CYCLES), .WINDOW(WINDOW)) u_prof (
    .clk, .rst_n, .start(run_start), .stop(prof_stop), .restart(merge_flush_done),
    .monitor_en(re_busy), .threshold,
    .id_valid(prof_valid), .id(prof_pri),
    .plan_valid, .plan_sec, .plan_pri, .plan_done, .resched, .profiling);

  // --------------------------------------------------------------- merger
  logic                 mo_valid, mo_last, mo_ready;
  logic [PW+BIN_AW-1:0] mo_index;
  logic [CNT_W-1:0]     mo_count;
  logic [CNT_W-1:0]     pri_rd [M_PRIPE];
  logic [CNT_W-1:0]     sec_rd [X_SECPE];

  for (genvar d = 0; d < NDST; d++) begin : g_rd
    if (d < M_PRIPE) begin : g_pri
      assign pri_rd[d] = pe_rd[d];
    end else begin : g_sec
      assign sec_rd[d - M_PRIPE] = pe_rd[d];
    end
  end

  merger #(.M_PRIPE(M_PRIPE), .X_SECPE(X_SECPE), .BIN_AW(BIN_AW)) u_merge (
    .clk, .rst_n, .plan_valid, .plan_sec, .plan_pri,
    .flush_req(resched), .sec_idle, .flush_done(merge_flush_done),
    .final_req, .final_done(merge_final_done), .busy(merge_busy),
    .hp_addr, .sec_clr, .pri_rd, .sec_rd,
    .out_valid(mo_valid), .out_index(mo_index), .out_count(mo_count),
    .out_last(mo_last), .out_ready(mo_ready));

  // --------------------------------------------------------- write engine
  logic we_done;
  mem_write_engine #(.W_MEM(W_MEM), .ADDR_W(ADDR_W)) u_wr (
    .clk, .rst_n, .start(run_start), .base_addr(wr_base),
    .in_valid(mo_valid), .in_count(mo_count), .in_last(mo_last), .in_ready(mo_ready),
    .wr_valid, .wr_addr, .wr_data, .wr_ready, .done(we_done));

  // ------------------------------------------------------- control FSM
  assign prof_stop = ctrl == C_FINAL;
  assign final_req = ctrl == C_FINAL && !merge_final_done;
  assign done      = ctrl == C_DONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl          <= C_IDLE;
      remaining     <= '0;
      stall_cycles  <= '0;
      sec_tuples    <= '0;
      plans_applied <= '0;
      reschedules   <= '0;
    end else begin
      if (run_start) begin
        ctrl          <= C_RUN;
        remaining     <= num_tuples;
        stall_cycles  <= '0;
        sec_tuples    <= '0;
        plans_applied <= '0;
        reschedules   <= '0;
      end else begin
        if (re_valid && re_ready)
          remaining <= (remaining > LEN_W'(N_PREPE)) ? remaining - LEN_W'(N_PREPE) : '0;
        if (comb_valid && !comb_fire) stall_cycles <= stall_cycles + 1'b1;
        if (comb_fire) begin
          logic [31:0] s;
          s = '0;
          for (int i = 0; i < N_PREPE; i++)
            s += 32'(comb_en[i] && 32'(comb_dst[i]) >= M_PRIPE);
          sec_tuples <= sec_tuples + s;
        end
        if (plan_done) plans_applied <= plans_applied + 1'b1;
        if (merge_flush_done) reschedules <= reschedules + 1'b1;
        unique case (ctrl)
          C_RUN:   if (re_done && all_idle && !resched && !merge_busy &&
                       !plan_valid) ctrl <= C_FINAL;
          C_FINAL: if (we_done) ctrl <= C_DONE;
          default: ;
        endcase
      end
    end
  end

endmodule
