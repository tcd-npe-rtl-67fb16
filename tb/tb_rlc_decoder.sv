// tb_rlc_decoder: random tokens {run, value} are fed with random gaps; the
// decoded word stream must be `run` zeros then `value` per token, in order,
// and a stream of back-to-back tokens must decode at one word per cycle.
module tb_rlc_decoder;
  localparam int DW = 16, RUN_W = 8;
  logic clk = 0, rst_n = 0;
  logic tok_valid, tok_ready, o_valid;
  logic [RUN_W+DW-1:0] tok;
  logic [DW-1:0] o_data;
  logic [DW-1:0] expq [$];
  int checks = 0, failures = 0, nwords = 0;

  rlc_decoder #(.DW(DW), .RUN_W(RUN_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && o_valid) begin
    logic [DW-1:0] e;
    nwords++;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL unexpected word %h", o_data);
    end else begin
      e = expq.pop_front();
      if (o_data !== e) begin failures++; $display("FAIL word %h exp %h", o_data, e); end
    end
  end

  // Stimulus changes only at falling edges. tok_ready depends only on the
  // decoder's registers, so its value at a falling edge says whether the
  // next rising edge takes the token. Called and returns at a falling edge.
  task automatic send(logic [RUN_W-1:0] run, logic [DW-1:0] val);
    tok_valid = 1; tok = {run, val};
    while (!tok_ready) @(negedge clk);
    @(negedge clk);
    tok_valid = 0;
    for (int k = 0; k < int'(run); k++) expq.push_back('0);
    expq.push_back(val);
  endtask

  initial begin
    longint t0; int words;
    tok_valid = 0; tok = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 500; n++) begin
      send(RUN_W'($urandom_range(0, 3) == 0 ? $urandom_range(0, 255) : $urandom_range(0, 3)), DW'($urandom));
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (300) @(negedge clk);
    // throughput: 100 tokens of run 2, back to back
    t0 = $time / 10; words = nwords;
    for (int n = 0; n < 100; n++) begin
      send(RUN_W'(2), DW'(n + 1));
    end
    repeat (5) @(posedge clk);
    checks++;
    if (nwords - words != 300 || ($time / 10 - t0) > 300 + 6) begin
      failures++; $display("FAIL throughput: %0d words in %0d cycles", nwords - words, $time / 10 - t0);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d words missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
