// rlc_decoder: run-length decoder between off-chip DRAM and an on-chip memory.
//
// Weights and features come from DRAM run-length coded, which shortens the
// sparse (zero-rich) streams. Token format (this design's choice, the original
// work names only the coding): {run[RUN_W-1:0], value[DW-1:0]} stands for
// `run` zero words followed by `value`. The decoder emits one word per cycle
// with o_valid; a token takes run+1 cycles and the next token is accepted in
// the cycle of the current token's last word, so a stream of tokens decodes at
// one word per cycle. tok_valid/tok_ready is a valid/ready handshake: a
// token is taken in a cycle where both are high. The output cannot stall.
module rlc_decoder #(
  parameter int DW    = 16,
  parameter int RUN_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  tok_valid,
  output logic                  tok_ready,
  input  logic [RUN_W+DW-1:0]   tok,
  output logic                  o_valid,
  output logic [DW-1:0]         o_data
);
  logic             full;
  logic [RUN_W-1:0] run_left;
  logic [DW-1:0]    val;

  assign tok_ready = !full || (run_left == '0);
  assign o_valid   = full;
  assign o_data    = (run_left == '0) ? val : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full     <= 1'b0;
      run_left <= '0;
      val      <= '0;
    end else if (tok_valid && tok_ready) begin
      full     <= 1'b1;
      run_left <= tok[RUN_W+DW-1:DW];
      val      <= tok[DW-1:0];
    end else if (full) begin
      if (run_left == '0) full <= 1'b0;
      else                run_left <= run_left - 1'b1;
    end
  end
endmodule
