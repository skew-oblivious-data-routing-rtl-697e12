// tb_route_filter: random decoded groups (random count and lane positions)
// into a filter whose PE takes a tuple on random cycles. Every selected
// tuple must come out exactly once, in group order and lane-position order;
// in_ready must be low whenever fewer than 8 slots are free; and a full
// burst of 8 tuples must be written in a single cycle.
module tb_route_filter;
  import ditto_pkg::*;
  localparam int N = 8, DEPTH = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, out_valid, out_ready, empty;
  logic [3:0] in_count;
  logic [2:0] in_pos [N];
  tuple_t in_tuple [N], out_tuple;

  route_filter #(.N_PREPE(N), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_count,
    .in_pos, .in_tuple, .in_ready, .out_valid, .out_tuple, .out_ready, .empty);

  tuple_t q [$];
  int checks = 0, failures = 0, sent = 0, recv = 0, full8 = 0;
  int held = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (in_ready != (held + N <= DEPTH)) begin failures++; $display("FAIL: in_ready rule"); end
    if (out_valid && out_ready) begin
      tuple_t t;
      t = q.pop_front();
      checks++;
      if (out_tuple != t) begin failures++; $display("FAIL: tuple %0d", recv); end
      recv++;
      held--;
    end
    if (in_valid && in_ready) begin
      for (int k = 0; k < int'(in_count); k++) q.push_back(in_tuple[in_pos[k]]);
      held += int'(in_count);
      sent += int'(in_count);
      if (in_count == 8) full8++;
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; in_count = '0; out_ready = 0;
    for (int i = 0; i < N; i++) begin in_pos[i] = '0; in_tuple[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (sent < 1500) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 1) != 0;
      if (!in_valid || in_ready) begin
        int c;
        int lane;
        in_valid = $urandom_range(0, 3) == 0;
        c = ($urandom_range(0, 5) == 0) ? 8 : $urandom_range(1, 8);
        in_count = 4'(c);
        lane = 0;
        for (int k = 0; k < N; k++) begin
          // increasing lane positions, as a decoder produces
          in_pos[k] = 3'(lane);
          if (lane < N - 1 && (N - 1 - lane) > (c - 1 - k)) lane += $urandom_range(1, 1 + (N - 1 - lane) - (c - 1 - k));
          else if (lane < N - 1) lane++;
        end
        for (int i = 0; i < N; i++) in_tuple[i] = {$urandom, $urandom};
      end
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (40) @(posedge clk);
    checks++;
    if (recv != sent || !empty || full8 == 0) begin
      failures++; $display("FAIL: sent %0d got %0d empty %0b full8 %0d", sent, recv, empty, full8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
