// vpu_hat: Hadamard Adder Tree (VPU type 4), P = sum_i H[i]*A[i] with H[i] = +-1.
//
// One column of a Hadamard transform: every input is added or subtracted
// according to the sign bit of its Hadamard entry, and the N terms are
// reduced to one scalar of AW+clog2(N)+1 bits. No multipliers are used.
// Entries are HW-bit signed numbers as printed in the linear-module figure
// (4x4x4b); this design only looks at their sign, since a Hadamard matrix
// holds only +1 and -1. Purely combinational.
module vpu_hat #(
  parameter int unsigned N  = 4,
  parameter int unsigned AW = 21,
  parameter int unsigned HW = 4,
  parameter int unsigned PW = AW + $clog2(N) + 1
) (
  input  logic signed [AW-1:0] a [N],
  input  logic signed [HW-1:0] h [N],
  output logic signed [PW-1:0] p
);
  always_comb begin
    p = '0;
    for (int i = 0; i < N; i++) begin
      if (h[i][HW-1]) p = p - PW'(a[i]);
      else            p = p + PW'(a[i]);
    end
  end
endmodule
