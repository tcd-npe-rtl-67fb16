// tb_ldn_w: weight LDN at the default size (16 groups x 8 MACs, 128-word
// rows). For every K and random input index, MAC j of group g must receive
// word chunk*N + (g mod (16/K))*8 + j with N = 128/K and
// chunk = idx mod (128/N).
module tb_ldn_w;
  localparam int DW = 16, NTG = 16, TGS = 8, WORDS = 128;
  logic [WORDS-1:0][DW-1:0] row;
  logic [2:0] kcfg;
  logic [15:0] idx;
  logic [NTG-1:0][TGS-1:0][DW-1:0] w;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ldn_w #(.DW(DW), .NTG(NTG), .TGS(TGS), .WORDS(WORDS)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      int k, nn, per, ch, t, ws;
      for (int x = 0; x < WORDS; x++) row[x] = DW'($urandom);
      k = $urandom_range(0, 4);
      kcfg = 3'(k); idx = 16'($urandom);
      nn  = (NTG * TGS) >> k;
      per = WORDS / nn;
      ch  = int'(idx) % per;
      #1;
      for (int g = 0; g < NTG; g++) begin
        t = g % (NTG >> k);
        for (int j = 0; j < TGS; j++) begin
          ws = ch * nn + t * TGS + j;
          checks++;
          if (w[g][j] !== row[ws]) begin
            failures++;
            $display("FAIL K=%0d idx=%0d g=%0d j=%0d", 1 << k, idx, g, j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
