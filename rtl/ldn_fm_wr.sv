// ldn_fm_wr: local distribution network from the groups' quantisation /
// activation outputs to the FM-Mem partitions (write-back).
//
// With NPE(K,N) batch b owns groups b*(NTG/K) .. b*(NTG/K)+NTG/K-1. During
// write-back the neurons of a batch are stored one per cycle; tsel names the
// group of the batch whose output is stored in this cycle, so part[b] takes
// the output of group b*(NTG/K) + tsel. part[b] for b >= K is unused.
// The stored word of batch b goes to partition wr_seg + b of the output
// layout, which splits the FM row into KO partitions of WORDS/KO words, at
// word offset `off` inside the partition; the write mask marks exactly those
// words for the nb_act batches present. Purely combinational.
module ldn_fm_wr #(
  parameter int DW  = 16,
  parameter int NTG = 16,
  parameter int WORDS = 64
) (
  input  logic [NTG-1:0][DW-1:0]   q,
  input  logic [2:0]               kcfg,   // log2(K)
  input  logic [$clog2(NTG)-1:0]   tsel,   // group within the batch
  input  logic [2:0]               ko,     // log2(partitions of the output row)
  input  logic [4:0]               wr_seg, // partition of batch 0
  input  logic [$clog2(WORDS)-1:0] off,    // word offset inside a partition
  input  logic [4:0]               nb_act, // batches present
  input  logic                     valid,  // a neuron is stored this cycle
  output logic [WORDS-1:0][DW-1:0] wdata,
  output logic [WORDS-1:0]         wmask
);
  localparam int LW = $clog2(WORDS);
  logic [NTG-1:0][DW-1:0] part;
  localparam int LG = $clog2(NTG);
  always_comb begin
    logic [LG:0] gpb;             // groups per batch
    gpb = (LG+1)'(NTG) >> kcfg;
    for (int b = 0; b < NTG; b++)
      part[b] = q[LG'((LG+1)'(b) * gpb + (LG+1)'(tsel))];
  end

  always_comb begin
    logic [LW:0]   sw;
    logic [LW+5:0] p;
    logic [LW+5:0] bi;
    sw = (LW+1)'(WORDS) >> ko;
    for (int k = 0; k < WORDS; k++) begin
      p  = (LW+6)'(k) >> (LW - int'(ko));          // partition of word k
      bi = p - (LW+6)'(wr_seg);                    // batch stored there
      wmask[k] = valid && (p >= (LW+6)'(wr_seg)) && (bi < (LW+6)'(nb_act))
                 && ((LW'(k) & LW'(sw - 1'b1)) == off);
      wdata[k] = part[LG'(bi)];
    end
  end
endmodule
