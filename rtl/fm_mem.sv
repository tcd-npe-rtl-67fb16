// fm_mem: feature-map memory (FM-Mem), two ping-pong banks, with its row
// buffer (FM-Buffer).
//
// Each bank holds ROWS x WORDS words of DW bits (512 x 64 x 16 bit = 64 KB by
// default). During a layer the input features are read from one bank and the
// output neurons are written into the other; the banks swap roles between
// layers. Reads fetch a whole row of the selected bank into the read register
// `row` (the FM-Buffer), which holds it until the next read. Writes take a
// whole row with a per-word mask, so the output LDN can store one word into
// each of several batch partitions of the same row in one cycle without
// changing the other words.
// Timing: write on the clock edge; a read issued in cycle t is visible in
// `row` in cycle t+1. The array is not reset; the buffer resets to zero.
module fm_mem #(
  parameter int DW    = 16,
  parameter int ROWS  = 512,
  parameter int WORDS = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic                          wr_bank,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [WORDS-1:0]              wr_mask,
  input  logic [WORDS-1:0][DW-1:0]      wr_data,
  input  logic                          re,
  input  logic                          rd_bank,
  input  logic [$clog2(ROWS)-1:0]       rd_row,
  output logic [WORDS-1:0][DW-1:0]      row
);
  logic [WORDS-1:0][DW-1:0] bank0 [ROWS];
  logic [WORDS-1:0][DW-1:0] bank1 [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int k = 0; k < WORDS; k++) begin
        if (wr_mask[k]) begin
          if (wr_bank) bank1[wr_row][k] <= wr_data[k];
          else         bank0[wr_row][k] <= wr_data[k];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  row <= '0;
    else if (re) row <= rd_bank ? bank1[rd_row] : bank0[rd_row];
  end
endmodule
