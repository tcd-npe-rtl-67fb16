// hwc: Hamming-weight compressor C_HW(m:n).
//
// Counts the ones among M bits of equal significance and returns the count as
// an n = ceil(log2(M+1))-bit binary number. With M = 3 this is the complete
// compressor CC(3:2) (a full adder: hw[0] is the sum, hw[1] the carry); with
// M = 2 it is C_HW(2:2) (a half adder). Purely combinational. The function is
// the one defined in the original work; the sum-of-bits realisation is left to
// synthesis.
module hwc #(
  parameter int M = 3,
  parameter int N = $clog2(M + 1)
) (
  input  logic [M-1:0] x,
  output logic [N-1:0] hw
);
  always_comb begin
    hw = '0;
    for (int k = 0; k < M; k++) hw = hw + N'(x[k]);
  end
endmodule
