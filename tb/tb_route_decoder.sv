// tb_route_decoder: decoder for PE 3 of 31, 8 lanes. Random groups (IDs
// biased towards 3) with random lane enables; for each group that selects
// at least one tuple the output must give the number of selected lanes and
// their lane numbers in increasing order, worked out here by a plain scan;
// groups that select nothing must produce no output.
module tb_route_decoder;
  import ditto_pkg::*;
  localparam int N = 8, IDW = 5, ME = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0] in_en;
  logic [IDW-1:0] in_dst [N];
  tuple_t in_tuple [N], out_tuple [N];
  logic [3:0] out_count;
  logic [2:0] out_pos [N];

  route_decoder #(.N_PREPE(N), .IDW(IDW), .MY_ID(ME)) dut (.clk, .rst_n, .in_valid,
    .in_en, .in_dst, .in_tuple, .in_ready, .out_valid, .out_count, .out_pos, .out_tuple, .out_ready);

  typedef struct { int cnt; int pos [N]; tuple_t t [N]; } exp_t;
  exp_t q [$];
  int checks = 0, failures = 0, nonempty = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      exp_t e;
      bit ok;
      e = q.pop_front();
      ok = int'(out_count) == e.cnt;
      for (int k = 0; k < e.cnt; k++) ok &= (int'(out_pos[k]) == e.pos[k]);
      for (int k = 0; k < N; k++) ok &= out_tuple[k] == e.t[k];
      checks++;
      if (!ok) begin failures++; $display("FAIL: count %0d expected %0d", out_count, e.cnt); end
    end
    if (in_valid && in_ready) begin
      exp_t e;
      e.cnt = 0;
      for (int i = 0; i < N; i++) begin
        e.t[i] = in_tuple[i];
        e.pos[i] = 0;
      end
      for (int i = 0; i < N; i++)
        if (in_en[i] && in_dst[i] == IDW'(ME)) begin e.pos[e.cnt] = i; e.cnt++; end
      if (e.cnt > 0) begin q.push_back(e); nonempty++; end
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; in_en = '0; out_ready = 0;
    for (int i = 0; i < N; i++) begin in_dst[i] = '0; in_tuple[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (600) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 3) != 0;
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 3) != 0;
        in_en = N'($urandom);
        for (int i = 0; i < N; i++) begin
          in_dst[i] = ($urandom_range(0, 2) == 0) ? IDW'(ME) : IDW'($urandom_range(0, 30));
          in_tuple[i] = {$urandom, $urandom};
        end
      end
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (4) @(posedge clk);
    checks++;
    if (q.size() != 0 || nonempty < 100) begin
      failures++; $display("FAIL: %0d groups left, %0d non-empty", q.size(), nonempty);
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
