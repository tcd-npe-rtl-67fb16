// w_mem: filter-weight memory (W-Mem) with its row buffer (W-Buffer).
//
// ROWS x WORDS words of DW bits; 2048 x 128 x 16 bit = 512 KB by default.
// Writes are one word at a time (the memory must be word writable so that a
// part of a row can be filled without touching the rest). Reads fetch a whole
// row into the read register `row`, which holds it until the next read: this
// register is the W-Buffer from which the engine takes the weights of
// WORDS/N consecutive cycles, so W-Mem is read once per WORDS/N inputs.
// Timing: write on the clock edge; a read issued in cycle t is visible in
// `row` in cycle t+1. No reset of the array; the buffer resets to zero.
module w_mem #(
  parameter int DW    = 16,
  parameter int ROWS  = 2048,
  parameter int WORDS = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [$clog2(ROWS)-1:0]       wr_row,
  input  logic [$clog2(WORDS)-1:0]      wr_word,
  input  logic [DW-1:0]                 wr_data,
  input  logic                          re,
  input  logic [$clog2(ROWS)-1:0]       rd_row,
  output logic [WORDS-1:0][DW-1:0]      row
);
  logic [WORDS-1:0][DW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[wr_row][wr_word] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  row <= '0;
    else if (re) row <= mem[rd_row];
  end
endmodule
