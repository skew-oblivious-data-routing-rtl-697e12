// tb_combiner: random 8-lane groups through the combiner with randomly
// not-ready datapaths (31 of them). Checks that a group leaves only when
// every datapath is ready (out_fire), leaves once, unchanged and in order.
module tb_combiner;
  import ditto_pkg::*;
  localparam int N = 8, ND = 31, IDW = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, out_valid, out_fire;
  logic [N-1:0] in_en, out_en;
  logic [IDW-1:0] in_dst [N], out_dst [N];
  tuple_t in_tuple [N], out_tuple [N];
  logic [ND-1:0] dp_ready;

  combiner dut (.clk, .rst_n, .in_valid, .in_en, .in_dst, .in_tuple, .in_ready,
                .out_valid, .out_fire, .out_en, .out_dst, .out_tuple, .dp_ready);

  typedef struct { logic [N-1:0] en; logic [IDW-1:0] dst [N]; tuple_t t [N]; } grp_t;
  grp_t q [$];
  int checks = 0, failures = 0, sent = 0, recv = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_fire != (out_valid && (&dp_ready))) begin failures++; $display("FAIL: fire rule"); end
    if (out_fire) begin
      grp_t g;
      bit ok;
      g = q.pop_front();
      ok = g.en == out_en;
      for (int i = 0; i < N; i++) ok &= (g.dst[i] == out_dst[i]) && (g.t[i] == out_tuple[i]);
      checks++;
      if (!ok) begin failures++; $display("FAIL: group %0d", recv); end
      recv++;
    end
    if (in_valid && in_ready) begin
      grp_t g;
      g.en = in_en;
      for (int i = 0; i < N; i++) begin g.dst[i] = in_dst[i]; g.t[i] = in_tuple[i]; end
      q.push_back(g);
      sent++;
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; in_en = '0; dp_ready = '1;
    for (int i = 0; i < N; i++) begin in_dst[i] = '0; in_tuple[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (sent < 300) begin
      @(negedge clk);
      for (int d = 0; d < ND; d++) dp_ready[d] = $urandom_range(0, 40) != 0;
      if (!in_valid || in_ready) begin
        in_valid = $urandom_range(0, 3) != 0;
        in_en = N'($urandom);
        for (int i = 0; i < N; i++) begin
          in_dst[i] = IDW'($urandom_range(0, ND - 1));
          in_tuple[i] = {$urandom, $urandom};
        end
      end
    end
    @(negedge clk);
    in_valid = 0; dp_ready = '1;
    repeat (4) @(posedge clk);
    checks++;
    if (recv != sent) begin failures++; $display("FAIL: sent %0d got %0d", sent, recv); end
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
