// tb_tcd_mac: self-checking test of one TCD-MAC.
//
// Streams of signed 16-bit pairs (random, plus the corner values -32768,
// 32767, 0, -1) are accumulated in carry-deferring mode and resolved with one
// propagation cycle. The result is compared with a dot product computed here
// in 64-bit integers and truncated to 36 bits. The stream of I inputs must
// give its result I+1 cycles after the first input (I CDM cycles, 1 CPM
// cycle). Also checked: a held MAC (en = 0) keeps its state between the last
// input and the propagation cycle.
module tb_tcd_mac;
  localparam int DW = 16, ACC_W = 36;
  logic clk = 0, rst_n = 0;
  logic en, clr, prop;
  logic signed [DW-1:0] a, b;
  logic [ACC_W-1:0] sum;
  int checks = 0, failures = 0;

  tcd_mac #(.DW(DW), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [DW-1:0] pick(int mode);
    case (mode)
      0: return 16'sh8000;
      1: return 16'sh7fff;
      2: return 16'sh0000;
      3: return 16'shffff;
      default: return DW'($urandom);
    endcase
  endfunction

  task automatic run_stream(int n, int corner);
    longint ref_sum;
    logic [ACC_W-1:0] exp_v;
    int cyc;
    ref_sum = 0;
    for (int i = 0; i < n; i++) begin
      a   <= (corner != 0) ? pick($urandom_range(0, 5)) : DW'($urandom);
      b   <= (corner != 0) ? pick($urandom_range(0, 5)) : DW'($urandom);
      en  <= 1'b1;
      clr <= (i == 0);
      prop <= 1'b0;
      @(posedge clk);
      ref_sum += longint'(a) * longint'(b);
    end
    cyc = n;
    // one idle (held) cycle must not disturb the state
    en <= 1'b0; clr <= 1'b0; prop <= 1'b0;
    @(posedge clk);
    en <= 1'b0; prop <= 1'b1;
    @(posedge clk);
    cyc++;
    prop <= 1'b0;
    #1;
    exp_v = ACC_W'(ref_sum);
    checks++;
    if (sum !== exp_v) begin
      failures++;
      $display("FAIL n=%0d sum %h exp %h", n, sum, exp_v);
    end
    checks++;
    if (cyc != n + 1) begin
      failures++;
      $display("FAIL latency %0d exp %0d", cyc, n + 1);
    end
  endtask

  initial begin
    en = 0; clr = 0; prop = 0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // single products covering every sign combination
    for (int i = 0; i < 300; i++) run_stream(1, i % 2);
    for (int i = 0; i < 40; i++) run_stream($urandom_range(2, 40), i % 3 == 0);
    run_stream(784, 0);
    run_stream(1000, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
