// tb_mem_read_engine: streams 100 memory words from word address 7 through
// the read engine into a randomly stalling consumer and checks every word
// and its order, the burst lengths, done, and (in a second pass with the
// consumer always ready) that the engine delivers one word per cycle once
// the memory latency has passed.
module tb_mem_read_engine;
  localparam int W = 512, WORDS = 256, NB = 100, BASE = 7;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, out_valid, out_ready;
  logic [31:0] rd_req_addr;
  logic [4:0]  rd_req_len;
  logic [W-1:0] rd_resp_data, out_data;
  logic wr_ready;

  mem_read_engine dut (.clk, .rst_n, .start, .base_addr(32'(BASE)), .num_beats(32'(NB)),
    .busy, .done, .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready,
    .rd_resp_valid, .rd_resp_data, .out_valid, .out_data, .out_ready);
  ddr_model #(.W_MEM(W), .LEN_BITS(5), .WORDS(WORDS), .LATENCY(20)) u_mem (
    .clk, .rd_req_valid, .rd_req_addr, .rd_req_len, .rd_req_ready,
    .rd_resp_valid, .rd_resp_data, .wr_valid(1'b0), .wr_addr('0), .wr_data('0), .wr_ready);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int got, cycles;
  bit random_ready;
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready)
      check(rd_req_len >= 1 && rd_req_len <= 16, "burst length 1..16");
    if (out_valid && out_ready) begin
      check(out_data == {16{32'(BASE + got) ^ 32'h5a5a0000}}, $sformatf("word %0d", got));
      got++;
    end
  end
  always @(negedge clk) out_ready = random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic pass(input bit rnd);
    random_ready = rnd;
    rst_n = 0; start = 0; got = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 0;
    while (!done && cycles < 5000) begin @(posedge clk); cycles++; end
    check(done, "done raised");
    check(got == NB, $sformatf("all %0d words delivered (got %0d)", NB, got));
  endtask

  initial begin
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = {16{32'(i) ^ 32'h5a5a0000}};
    pass(1);
    pass(0);
    $display("full-rate pass: %0d cycles for %0d words", cycles, NB);
    check(cycles <= NB + 20 + 10, "one word per cycle after the latency");
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
