// tb_ldn_fm_rd: feature LDN at the default size (16 groups, 64-word rows).
// For random rows and every supported K, input-layout partition count KI >= K,
// first partition and input index, group g must receive word
// (rd_seg + g/(16/K)) * (64/KI) + idx mod (64/KI) of the row.
module tb_ldn_fm_rd;
  localparam int DW = 16, NTG = 16, WORDS = 64;
  logic [WORDS-1:0][DW-1:0] row;
  logic [2:0] kcfg, ki;
  logic [4:0] rd_seg;
  logic [15:0] idx;
  logic [NTG-1:0][DW-1:0] feat;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ldn_fm_rd #(.DW(DW), .NTG(NTG), .WORDS(WORDS)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int k, kp, sw, seg, b, wsel;
      for (int w = 0; w < WORDS; w++) row[w] = DW'($urandom);
      k    = $urandom_range(0, 4);
      kp   = $urandom_range(k, 4);
      seg  = $urandom_range(0, (1 << kp) - (1 << k));
      kcfg = 3'(k); ki = 3'(kp); rd_seg = 5'(seg); idx = 16'($urandom);
      sw   = WORDS >> kp;
      #1;
      for (int g = 0; g < NTG; g++) begin
        b    = g / (NTG >> k);
        wsel = (seg + b) * sw + int'(idx) % sw;
        checks++;
        if (feat[g] !== row[wsel]) begin
          failures++;
          $display("FAIL K=%0d KI=%0d seg=%0d idx=%0d g=%0d", 1 << k, 1 << kp, seg, idx, g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
