// pe_array: the processing-element array, NTG TCD-MAC groups of TGS MACs
// (16 x 8 = 128 TCD-MACs by default).
//
// Group g takes one feature (feat[g]) and TGS weights (w[g]); all groups share
// the carry-deferring / propagation controls and the output column select.
// Each group's output bus goes to its own quantisation/activation unit
// (quant_relu), so NTG 16-bit results leave the array per cycle during
// write-back. Timing as tcd_mac.
module pe_array #(
  parameter int DW    = 16,
  parameter int ACC_W = 36,
  parameter int NTG   = 16,
  parameter int TGS   = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [NTG-1:0][TGS-1:0]          en,
  input  logic                             clr,
  input  logic                             prop,
  input  logic [NTG-1:0][DW-1:0]           feat,
  input  logic [NTG-1:0][TGS-1:0][DW-1:0]  w,
  input  logic [$clog2(TGS)-1:0]           col_sel,
  input  logic                             relu,
  output logic [NTG-1:0][DW-1:0]           q
);
  for (genvar g = 0; g < NTG; g++) begin : g_tg
    logic [ACC_W-1:0] bus;
    tcd_group #(.DW(DW), .ACC_W(ACC_W), .TGS(TGS)) u_tg (
      .clk, .rst_n, .en(en[g]), .clr, .prop,
      .feat(feat[g]), .w(w[g]), .col_sel, .bus);
    quant_relu #(.ACC_W(ACC_W), .DW(DW)) u_qa (.acc(bus), .relu, .q(q[g]));
  end
endmodule
