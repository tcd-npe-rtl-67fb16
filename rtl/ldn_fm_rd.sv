// ldn_fm_rd: local distribution network from the FM-Buffer to the TCD-MAC
// groups (feature multicast).
//
// The FM row in the buffer is split into KI equal partitions of WORDS/KI
// words; partition p holds consecutive input features of one batch, so the
// feature of input index i sits at word p*(WORDS/KI) + i mod (WORDS/KI).
// Stage 1 picks, for each of the K batches of the roll (batch b lives in
// partition rd_seg + b), its current feature. Stage 2 is the per-group
// multiplexer: with NPE(K,N) the NTG groups are split into K equal runs of
// NTG/K groups, and group g receives the feature of batch g / (NTG/K). With
// K = 1 the feature of one batch is broadcast to all groups; with K = NTG
// every group gets its own batch. Purely combinational.
module ldn_fm_rd #(
  parameter int DW    = 16,
  parameter int NTG   = 16,
  parameter int WORDS = 64
) (
  input  logic [WORDS-1:0][DW-1:0]  row,
  input  logic [2:0]                kcfg,     // log2(K)
  input  logic [2:0]                ki,       // log2(partitions of the row layout)
  input  logic [4:0]                rd_seg,   // partition of batch 0
  input  logic [15:0]               idx,      // input feature index i
  output logic [NTG-1:0][DW-1:0]    feat
);
  localparam int LW = $clog2(WORDS);
  localparam int LG = $clog2(NTG);

  logic [NTG-1:0][DW-1:0] bfeat;   // feature of each batch

  always_comb begin
    logic [LW:0]  sw;              // words per partition
    logic [LW-1:0] off;
    logic [LW+5:0] wsel;
    sw  = (LW+1)'(WORDS) >> ki;
    off = LW'(idx) & LW'(sw - 1'b1);
    for (int b = 0; b < NTG; b++) begin
      wsel = ((LW+6)'(rd_seg) + (LW+6)'(b)) * (LW+6)'(sw) + (LW+6)'(off);
      bfeat[b] = row[LW'(wsel)];
    end
    for (int g = 0; g < NTG; g++)
      feat[g] = bfeat[LG'(g >> (LG - int'(kcfg)))];
  end
endmodule
