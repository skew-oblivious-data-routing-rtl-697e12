// tb_merger: merger with 4 PriPEs, 3 SecPEs (IDs 4..6) and 2 bins per PE.
// The PE buffers are modelled here (read data one cycle after the address,
// clear strobes). Plan 4->2, 5->2, 6->0 is sent, the SecPEs are given
// random counts and a flush is requested: it must wait for sec_idle, then
// clear every SecPE bin. A second plan 4->1, 5->3, 6->3 and new random
// counts follow; the final merge, read out through a randomly stalling
// consumer, must give for every PriPE p and bin b the PriPE count plus the
// counts of all SecPEs attached to p in either plan, as word p*2+b, in
// order, with out_last on the last word.
module tb_merger;
  import ditto_pkg::*;
  localparam int M = 4, X = 3, NB = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, plan_valid, flush_req, sec_idle, flush_done, final_req, final_done, busy;
  logic [2:0] plan_sec;
  logic [1:0] plan_pri;
  logic [0:0] hp_addr;
  logic [X-1:0] sec_clr;
  logic [31:0] pri_rd [M], sec_rd [X];
  logic out_valid, out_last, out_ready;
  logic [2:0] out_index;
  logic [31:0] out_count;

  merger #(.M_PRIPE(M), .X_SECPE(X), .BIN_AW(1)) dut (.clk, .rst_n, .plan_valid, .plan_sec,
    .plan_pri, .flush_req, .sec_idle, .flush_done, .final_req, .final_done, .busy,
    .hp_addr, .sec_clr, .pri_rd, .sec_rd, .out_valid, .out_index, .out_count, .out_last, .out_ready);

  int unsigned pri_buf [M][NB];
  int unsigned sec_buf [X][NB];
  int unsigned expect_bins [M][NB];

  always @(posedge clk) begin
    for (int p = 0; p < M; p++) pri_rd[p] <= pri_buf[p][hp_addr];
    for (int s = 0; s < X; s++) begin
      sec_rd[s] <= sec_buf[s][hp_addr];
      if (sec_clr[s]) sec_buf[s][hp_addr] = 0;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_plan(input int owner [X]);
    for (int s = 0; s < X; s++) begin
      @(negedge clk);
      plan_valid = 1; plan_sec = 3'(M + s); plan_pri = 2'(owner[s]);
    end
    @(negedge clk);
    plan_valid = 0;
  endtask

  task automatic fill_sec(input int owner [X]);
    for (int s = 0; s < X; s++)
      for (int b = 0; b < NB; b++) begin
        sec_buf[s][b] = $urandom_range(0, 1000);
        expect_bins[owner[s]][b] += sec_buf[s][b];
      end
  endtask

  initial begin
    int own1 [X];
    int own2 [X];
    int n_out;
    own1 = '{2, 2, 0};
    own2 = '{1, 3, 3};
    rst_n = 0; plan_valid = 0; plan_sec = 0; plan_pri = 0; flush_req = 0; sec_idle = 0;
    final_req = 0; out_ready = 0;
    for (int p = 0; p < M; p++) for (int b = 0; b < NB; b++) begin
      pri_buf[p][b] = 0; expect_bins[p][b] = 0;
    end
    for (int s = 0; s < X; s++) for (int b = 0; b < NB; b++) sec_buf[s][b] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    send_plan(own1);
    fill_sec(own1);
    @(negedge clk);
    flush_req = 1;
    repeat (10) begin
      @(negedge clk);
      check(!busy && !flush_done, "flush waits for idle SecPEs");
    end
    sec_idle = 1;
    begin
      int w = 0;
      while (!flush_done && w < 200) begin @(negedge clk); w++; end
      check(flush_done, "flush completes");
    end
    flush_req = 0;
    repeat (3) @(negedge clk);
    for (int s = 0; s < X; s++) for (int b = 0; b < NB; b++)
      check(sec_buf[s][b] == 0, $sformatf("SecPE %0d bin %0d cleared", M + s, b));

    send_plan(own2);
    fill_sec(own2);
    for (int p = 0; p < M; p++) for (int b = 0; b < NB; b++) begin
      pri_buf[p][b] = $urandom_range(0, 5000);
      expect_bins[p][b] += pri_buf[p][b];
    end
    @(negedge clk);
    final_req = 1;
    n_out = 0;
    while (!final_done && n_out < 100) begin
      out_ready = $urandom_range(0, 1);
      @(posedge clk);
      if (out_valid && out_ready) begin
        int p, b;
        p = n_out / NB;
        b = n_out % NB;
        check(int'(out_index) == n_out, $sformatf("word index %0d", out_index));
        check(out_count == expect_bins[p][b],
              $sformatf("PriPE %0d bin %0d = %0d, expected %0d", p, b, out_count, expect_bins[p][b]));
        check(out_last == (n_out == M * NB - 1), "out_last on the last word");
        n_out++;
      end
      @(negedge clk);
    end
    final_req = 0;
    check(n_out == M * NB, $sformatf("%0d words out", n_out));
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
