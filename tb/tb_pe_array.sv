// tb_pe_array: the full 16 x 8 PE array with its 16 Q/A units. Each group
// gets its own feature stream and each MAC its own weights; after the
// propagation cycle all eight columns are read out through the quantiser
// (with and without ReLU) and compared with a model of dot product,
// floor(x / 2^9), 16-bit saturation and ReLU.
module tb_pe_array;
  localparam int DW = 16, ACC_W = 36, NTG = 16, TGS = 8;
  logic clk = 0, rst_n = 0;
  logic [NTG-1:0][TGS-1:0] en;
  logic clr, prop, relu;
  logic [NTG-1:0][DW-1:0] feat, q;
  logic [NTG-1:0][TGS-1:0][DW-1:0] w;
  logic [$clog2(TGS)-1:0] col_sel;
  int checks = 0, failures = 0;

  pe_array #(.DW(DW), .ACC_W(ACC_W), .NTG(NTG), .TGS(TGS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DW-1:0] qa(longint v, logic r);
    v = v >>> 9;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    if (r && v < 0) v = 0;
    return DW'(v);
  endfunction

  task automatic roll(int n, int shift);
    longint acc [NTG][TGS];
    for (int g = 0; g < NTG; g++) for (int j = 0; j < TGS; j++) acc[g][j] = 0;
    for (int i = 0; i < n; i++) begin
      for (int g = 0; g < NTG; g++) begin
        feat[g] <= DW'(signed'(DW'($urandom)) >>> shift);
        for (int j = 0; j < TGS; j++) w[g][j] <= DW'(signed'(DW'($urandom)) >>> shift);
      end
      en <= '1; clr <= (i == 0); prop <= 0;
      @(posedge clk);
      for (int g = 0; g < NTG; g++) for (int j = 0; j < TGS; j++)
        acc[g][j] += longint'(signed'(feat[g])) * longint'(signed'(w[g][j]));
    end
    en <= '0; clr <= 0; prop <= 1;
    @(posedge clk);
    prop <= 0;
    for (int r = 0; r < 2; r++)
      for (int j = 0; j < TGS; j++) begin
        col_sel = j[$clog2(TGS)-1:0];
        relu = r[0];
        #1;
        for (int g = 0; g < NTG; g++) begin
          checks++;
          if (q[g] !== qa(acc[g][j], r[0])) begin
            failures++;
            $display("FAIL g%0d c%0d q %h exp %h", g, j, q[g], qa(acc[g][j], r[0]));
          end
        end
      end
  endtask

  initial begin
    en = '0; clr = 0; prop = 0; feat = '0; w = '0; col_sel = 0; relu = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    roll(10, 0);      // large values: saturation
    roll(50, 6);      // small values: in range
    roll(3, 4);
    roll(200, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
