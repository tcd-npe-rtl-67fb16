// tb_ldn_fm_wr: write LDN at the default size. For random group outputs,
// K, output partition count KO >= K, first partition, offset and number of
// batches present, the row written must carry the output of group
// b*(16/K) + tsel at word (wr_seg + b)*(64/KO) + off for every present batch
// b, and the mask must select exactly those words.
module tb_ldn_fm_wr;
  localparam int DW = 16, NTG = 16, WORDS = 64;
  logic [NTG-1:0][DW-1:0] q;
  logic [2:0] kcfg, ko;
  logic [3:0] tsel;
  logic [4:0] wr_seg, nb_act;
  logic [5:0] off;
  logic valid;
  logic [WORDS-1:0][DW-1:0] wdata;
  logic [WORDS-1:0] wmask;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ldn_fm_wr #(.DW(DW), .NTG(NTG), .WORDS(WORDS)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int k, kp, sw, seg, nb, exp_mask [WORDS], wsel;
      for (int g = 0; g < NTG; g++) q[g] = DW'($urandom);
      k   = $urandom_range(0, 4);
      kp  = $urandom_range(k, 4);
      seg = $urandom_range(0, (1 << kp) - (1 << k));
      nb  = $urandom_range(1, 1 << k);
      sw  = WORDS >> kp;
      kcfg = 3'(k); ko = 3'(kp); wr_seg = 5'(seg); nb_act = 5'(nb);
      tsel = 4'($urandom_range(0, (NTG >> k) - 1));
      off  = 6'($urandom_range(0, sw - 1));
      valid = ($urandom_range(0, 7) != 0);
      #1;
      foreach (exp_mask[x]) exp_mask[x] = 0;
      for (int b = 0; b < nb; b++) begin
        wsel = (seg + b) * sw + int'(off);
        exp_mask[wsel] = int'(valid);
        checks++;
        if (valid && wdata[wsel] !== q[b * (NTG >> k) + int'(tsel)]) begin
          failures++;
          $display("FAIL data K=%0d KO=%0d b=%0d", 1 << k, 1 << kp, b);
        end
      end
      for (int x = 0; x < WORDS; x++) begin
        checks++;
        if (int'(wmask[x]) != exp_mask[x]) begin
          failures++;
          $display("FAIL mask word %0d K=%0d KO=%0d seg=%0d nb=%0d", x, 1 << k, 1 << kp, seg, nb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
