// tcd_group: one TCD-MAC group (TG), a row of TGS TCD-MACs.
//
// All MACs of a group work on the same batch, so they share one feature input
// (broadcast from the feature LDN) while each receives its own weight (unicast
// from the weight LDN): MAC j computes output neuron j of the group's slice.
// The per-MAC enable switches off MACs that have no neuron in the current roll.
// After the propagation cycle the group drives one MAC result at a time onto
// its output bus, chosen by col_sel, towards its quantisation/activation unit.
// Timing: as tcd_mac; bus is combinational from the selected MAC's sum
// register.
module tcd_group #(
  parameter int DW    = 16,
  parameter int ACC_W = 36,
  parameter int TGS   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [TGS-1:0]          en,
  input  logic                    clr,
  input  logic                    prop,
  input  logic [DW-1:0]           feat,
  input  logic [TGS-1:0][DW-1:0]  w,
  input  logic [$clog2(TGS)-1:0]  col_sel,
  output logic [ACC_W-1:0]        bus
);
  logic [ACC_W-1:0] sums [TGS];

  for (genvar j = 0; j < TGS; j++) begin : g_mac
    tcd_mac #(.DW(DW), .ACC_W(ACC_W)) u_mac (
      .clk, .rst_n, .en(en[j]), .clr, .prop,
      .a(feat), .b(w[j]), .sum(sums[j]));
  end

  assign bus = sums[col_sel];
endmodule
