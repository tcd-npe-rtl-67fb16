// tb_rlc_encoder: sparse random word streams (with long zero runs and a zero
// last word) go through the encoder under random output back-pressure; the
// tokens are expanded here and must give back exactly the input stream.
// Zero runs must be folded into tokens (fewer tokens than words).
module tb_rlc_encoder;
  localparam int DW = 16, RUN_W = 8;
  logic clk = 0, rst_n = 0;
  logic i_valid, i_ready, i_last, t_valid, t_ready;
  logic [DW-1:0] i_data;
  logic [RUN_W+DW-1:0] t_data;
  logic [DW-1:0] expq [$];
  int checks = 0, failures = 0, ntok = 0, nin = 0;

  rlc_encoder #(.DW(DW), .RUN_W(RUN_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) t_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && t_valid && t_ready) begin
    ntok++;
    for (int k = 0; k <= int'(t_data[RUN_W+DW-1:DW]); k++) begin
      logic [DW-1:0] got, e;
      got = (k == int'(t_data[RUN_W+DW-1:DW])) ? t_data[DW-1:0] : '0;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL extra word"); end
      else begin
        e = expq.pop_front();
        if (got !== e) begin failures++; $display("FAIL word %h exp %h", got, e); end
      end
    end
  end

  task automatic stream(int n, int zero_pct);
    for (int k = 0; k < n; k++) begin
      logic [DW-1:0] v;
      v = ($urandom_range(0, 99) < zero_pct || k == n - 1) ? '0 : DW'($urandom_range(1, 65535));
      i_valid <= 1; i_data <= v; i_last <= (k == n - 1);
      @(posedge clk);
      while (!i_ready) @(posedge clk);
      expq.push_back(v);
      nin++;
    end
    i_valid <= 0; i_last <= 0;
  endtask

  initial begin
    i_valid = 0; i_last = 0; i_data = '0; t_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    stream(200, 50);
    stream(1000, 99);   // runs longer than 255
    stream(300, 0);
    stream(1, 0);
    repeat (50) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d words not returned", expq.size()); end
    checks++;
    if (ntok >= nin) begin failures++; $display("FAIL no compression: %0d tokens for %0d words", ntok, nin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
