// rlc_encoder: run-length encoder from the feature memory back to DRAM.
//
// Produces the tokens read by rlc_decoder: {run, value} = `run` zero words
// followed by `value`. Zero words are counted instead of sent; a token leaves
// when a non-zero word arrives, when the run counter is full (the zero then
// becomes the token value), or with the last word of a transfer (i_last),
// so the decoded stream has exactly the encoded length. Both sides use
// valid/ready handshakes; the token output is registered and the input is
// stalled while a token waits for t_ready.
module rlc_encoder #(
  parameter int DW    = 16,
  parameter int RUN_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  i_valid,
  output logic                  i_ready,
  input  logic [DW-1:0]         i_data,
  input  logic                  i_last,
  output logic                  t_valid,
  input  logic                  t_ready,
  output logic [RUN_W+DW-1:0]   t_data
);
  logic [RUN_W-1:0] zrun;
  logic             emit;

  assign i_ready = !t_valid || t_ready;
  assign emit    = (i_data != '0) || i_last || (zrun == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zrun    <= '0;
      t_valid <= 1'b0;
      t_data  <= '0;
    end else begin
      if (t_valid && t_ready) t_valid <= 1'b0;
      if (i_valid && i_ready) begin
        if (emit) begin
          t_valid <= 1'b1;
          t_data  <= {zrun, i_data};
          zrun    <= '0;
        end else begin
          zrun    <= zrun + 1'b1;
        end
      end
    end
  end

  // a token must stay unchanged until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           t_valid && !t_ready |=> t_valid && $stable(t_data));
endmodule
