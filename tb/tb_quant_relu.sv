// tb_quant_relu: the quantiser must return floor(acc / 2^9) clamped to the
// signed 16-bit range, and with relu set max(0, that). Corner values around
// both saturation limits and random 36-bit values are applied.
module tb_quant_relu;
  localparam int ACC_W = 36, DW = 16;
  logic [ACC_W-1:0] acc;
  logic relu;
  logic [DW-1:0] q;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  quant_relu #(.ACC_W(ACC_W), .DW(DW)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DW-1:0] model(logic [ACC_W-1:0] a, logic r);
    longint v;
    v = longint'(signed'(a)) >>> 9;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    if (r && v < 0) v = 0;
    return DW'(v);
  endfunction

  task automatic check(logic [ACC_W-1:0] a);
    for (int r = 0; r < 2; r++) begin
      acc = a; relu = r[0];
      #1;
      checks++;
      if (q !== model(a, r[0])) begin
        failures++;
        $display("FAIL acc=%h relu=%0d q=%h exp %h", a, r, q, model(a, r[0]));
      end
    end
  endtask

  initial begin
    longint lims [8] = '{32767*512, 32767*512+511, 32768*512, -32768*512, -32768*512-1, 0, -1, 511};
    foreach (lims[k]) check(ACC_W'(lims[k]));
    for (int k = 0; k < 2000; k++) check({$urandom, $urandom} >> (28 - $urandom_range(0, 28)));
    for (int k = 0; k < 2000; k++) check(ACC_W'(longint'($urandom_range(0, 1 << 26)) - (1 << 25)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
