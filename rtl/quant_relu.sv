// quant_relu: quantisation and ReLU activation unit (Q/A) of one TCD-MAC group.
//
// The 36-bit raw neuron value I(ACC_W-1:0) from a TCD-MAC is cut to a signed
// 16-bit fixed-point word:
//   S               = I(35)            sign
//   Integer Part1   = I(34:25)         10 bits dropped by quantisation
//   quantized       = I(24:9)          16 bits kept (Integer Part0 I(24:20)
//                                      and the upper fractional bits)
// Saturation follows the quantiser of the original work: for S = 0 an OR over
// Integer Part1 selects 0x7FFF, for S = 1 Integer Part1 not all ones selects
// 0x8000, otherwise the quantized word passes. This design also includes the
// kept sign bit I(24) in both tests (so the 11 bits I(34:24) must equal S),
// because a positive value with I(24) = 1 would otherwise turn negative.
// ReLU then ANDs every bit with NOT O(15) when relu is set.
// Purely combinational.
module quant_relu #(
  parameter int ACC_W = 36,
  parameter int DW    = 16,
  parameter int Q_LSB = 9          // lowest accumulator bit kept
) (
  input  logic [ACC_W-1:0] acc,
  input  logic             relu,
  output logic [DW-1:0]    q
);
  localparam int Q_MSB = Q_LSB + DW - 1;    // 24 with the defaults

  logic             s;
  logic [DW-1:0]    quantized, sat;
  logic [ACC_W-3-Q_MSB:0] part1;            // I(34:25)
  logic             pos_ovf, neg_ovf;

  assign s         = acc[ACC_W-1];
  assign part1     = acc[ACC_W-2:Q_MSB+1];
  assign quantized = acc[Q_MSB:Q_LSB];
  assign pos_ovf   = (|part1) | quantized[DW-1];
  assign neg_ovf   = ~((&part1) & quantized[DW-1]);

  always_comb begin
    if (!s) sat = pos_ovf ? {1'b0, {(DW-1){1'b1}}} : quantized;
    else    sat = neg_ovf ? {1'b1, {(DW-1){1'b0}}} : quantized;
    q = relu ? (sat & {DW{~sat[DW-1]}}) : sat;
  end
endmodule
