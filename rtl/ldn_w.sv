// ldn_w: local distribution network from the W-Buffer to the TCD-MAC groups
// (weight uni-/multicast).
//
// With NPE(K,N), N = NTG*TGS/K neurons are computed per batch and each input
// needs N weights. A W-Mem row of WORDS words holds the N weights of
// WORDS/N consecutive inputs, so input i uses chunk i mod (WORDS/N) of the
// buffered row (the per-cycle chunk multiplexer). Inside the chunk, group g
// works on neurons t*TGS .. t*TGS+TGS-1 with t = g mod (NTG/K): groups that
// hold the same neurons of different batches receive the same weights, the
// groups of one batch receive different weights. Requires WORDS >= NTG*TGS.
// Purely combinational.
module ldn_w #(
  parameter int DW    = 16,
  parameter int NTG   = 16,
  parameter int TGS   = 8,
  parameter int WORDS = 128
) (
  input  logic [WORDS-1:0][DW-1:0]          row,
  input  logic [2:0]                        kcfg,   // log2(K)
  input  logic [15:0]                       idx,    // input feature index i
  output logic [NTG-1:0][TGS-1:0][DW-1:0]   w
);
  localparam int LW = $clog2(WORDS);
  localparam int LG = $clog2(NTG);
  localparam int LA = $clog2(NTG * TGS);

  always_comb begin
    logic [LW:0]   n_per;        // N
    logic [LW:0]   per_row;      // inputs per W-Mem row
    logic [LW-1:0] chunk;
    logic [LG-1:0] t;
    logic [LW+1:0] base;
    n_per   = (LW+1)'(NTG * TGS) >> kcfg;
    per_row = (LW+1)'(WORDS) >> (LA - int'(kcfg));
    chunk   = LW'(idx) & LW'(per_row - 1'b1);
    for (int g = 0; g < NTG; g++) begin
      t    = LG'(g) & LG'((NTG >> kcfg) - 1);
      base = (LW+2)'(chunk) * (LW+2)'(n_per) + (LW+2)'(t) * (LW+2)'(TGS);
      for (int j = 0; j < TGS; j++)
        w[g][j] = row[LW'(base + (LW+2)'(j))];
    end
  end
endmodule
