// tb_w_mem: weight memory at reduced size (64 rows x 16 words). Random words
// are written one at a time, then rows are read back and compared with a
// shadow copy; the row buffer must keep its row while no read is issued.
module tb_w_mem;
  localparam int DW = 16, ROWS = 64, WORDS = 16;
  logic clk = 0, rst_n = 0;
  logic we, re;
  logic [$clog2(ROWS)-1:0] wr_row, rd_row;
  logic [$clog2(WORDS)-1:0] wr_word;
  logic [DW-1:0] wr_data;
  logic [WORDS-1:0][DW-1:0] row;
  logic [WORDS-1:0][DW-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  w_mem #(.DW(DW), .ROWS(ROWS), .WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; wr_row = 0; rd_row = 0; wr_word = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < WORDS; k++) begin
        we <= 1; wr_row <= r[5:0]; wr_word <= k[3:0]; wr_data <= DW'($urandom);
        @(posedge clk);
        shadow[r][k] = wr_data;
      end
    // overwrite some single words
    for (int n = 0; n < 200; n++) begin
      we <= 1; wr_row <= 6'($urandom); wr_word <= 4'($urandom); wr_data <= DW'($urandom);
      @(posedge clk);
      shadow[wr_row][wr_word] = wr_data;
    end
    we <= 0;
    for (int n = 0; n < 300; n++) begin
      automatic logic [5:0] r = 6'($urandom);
      re <= 1; rd_row <= r;
      @(posedge clk);
      re <= 0;
      rd_row <= 6'($urandom);          // ignored while re is low
      repeat ($urandom_range(1, 3)) begin
        @(posedge clk);
        #1;
        checks++;
        if (row !== shadow[r]) begin
          failures++;
          $display("FAIL row %0d read %h", r, row);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
