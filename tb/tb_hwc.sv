// tb_hwc: exhaustive check of the Hamming-weight compressor for C_HW(3:2),
// C_HW(2:2) and CC(7:3): the output must equal the number of ones.
module tb_hwc;
  logic [2:0] x3;  logic [1:0] h3;
  logic [1:0] x2;  logic [1:0] h2;
  logic [6:0] x7;  logic [2:0] h7;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  hwc #(.M(3)) u3 (.x(x3), .hw(h3));
  hwc #(.M(2)) u2 (.x(x2), .hw(h2));
  hwc #(.M(7)) u7 (.x(x7), .hw(h7));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 128; v++) begin
      x3 = 3'(v); x2 = 2'(v); x7 = 7'(v);
      #1;
      checks += 3;
      if (int'(h3) != $countones(x3)) begin failures++; $display("FAIL 3:2 %b -> %0d", x3, h3); end
      if (int'(h2) != $countones(x2)) begin failures++; $display("FAIL 2:2 %b -> %0d", x2, h2); end
      if (int'(h7) != $countones(x7)) begin failures++; $display("FAIL 7:3 %b -> %0d", x7, h7); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
