// tb_fm_mem: ping-pong feature memory at reduced size (2 banks x 32 rows x 16
// words). Masked row writes go to random banks; reads must return exactly the
// words written to that bank (words outside the mask unchanged) and the
// buffer must hold its row between reads.
module tb_fm_mem;
  localparam int DW = 16, ROWS = 32, WORDS = 16;
  logic clk = 0, rst_n = 0;
  logic we, wr_bank, re, rd_bank;
  logic [$clog2(ROWS)-1:0] wr_row, rd_row;
  logic [WORDS-1:0] wr_mask;
  logic [WORDS-1:0][DW-1:0] wr_data, row;
  logic [WORDS-1:0][DW-1:0] shadow [2][ROWS];
  int checks = 0, failures = 0;

  fm_mem #(.DW(DW), .ROWS(ROWS), .WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; wr_bank = 0; rd_bank = 0; wr_row = 0; rd_row = 0; wr_mask = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int bk = 0; bk < 2; bk++)
      for (int r = 0; r < ROWS; r++) begin
        we <= 1; wr_bank <= bk[0]; wr_row <= r[4:0]; wr_mask <= '1;
        for (int k = 0; k < WORDS; k++) wr_data[k] <= DW'($urandom);
        @(posedge clk);
        shadow[bk][r] = wr_data;
      end
    for (int n = 0; n < 300; n++) begin
      we <= 1; wr_bank <= 1'($urandom); wr_row <= 5'($urandom); wr_mask <= WORDS'($urandom);
      for (int k = 0; k < WORDS; k++) wr_data[k] <= DW'($urandom);
      @(posedge clk);
      for (int k = 0; k < WORDS; k++) if (wr_mask[k]) shadow[wr_bank][wr_row][k] = wr_data[k];
    end
    we <= 0;
    for (int n = 0; n < 300; n++) begin
      automatic logic [4:0] r = 5'($urandom);
      automatic logic b = 1'($urandom);
      re <= 1; rd_row <= r; rd_bank <= b;
      @(posedge clk);
      re <= 0; rd_row <= 5'($urandom); rd_bank <= 1'($urandom);
      repeat ($urandom_range(1, 3)) begin
        @(posedge clk);
        #1;
        checks++;
        if (row !== shadow[b][r]) begin
          failures++;
          $display("FAIL bank %0d row %0d", b, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
