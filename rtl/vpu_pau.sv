// vpu_pau: Parallel Adder Unit (VPU type 1), P[i] = A[i] + B[i] over N lanes.
//
// Each lane adds two signed operands at full precision, applies an arithmetic
// right shift by `shift` (the power-of-two rescale of PoT quantization) and
// saturates to PW bits. Purely combinational; the caller registers the result.
// The add itself follows the paper's VPU table; the shift and saturation are
// this design's way of narrowing to the widths printed in the figures.
module vpu_pau #(
  parameter int unsigned N  = 24,
  parameter int unsigned AW = 16,
  parameter int unsigned PW = 16
) (
  input  logic signed [AW-1:0] a [N],
  input  logic signed [AW-1:0] b [N],
  input  logic        [5:0]    shift,
  output logic signed [PW-1:0] p [N]
);
  localparam int unsigned SW = (AW + 1 > PW + 1) ? AW + 1 : PW + 1;
  localparam logic signed [SW-1:0] PMAX = SW'((64'sd1 <<< (PW-1)) - 1);
  localparam logic signed [SW-1:0] PMIN = SW'(-(64'sd1 <<< (PW-1)));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [SW-1:0] s;
      s = (SW'(a[i]) + SW'(b[i])) >>> shift;
      if (s > PMAX)      p[i] = PMAX[PW-1:0];
      else if (s < PMIN) p[i] = PMIN[PW-1:0];
      else               p[i] = s[PW-1:0];
    end
  end
endmodule
