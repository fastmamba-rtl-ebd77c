// vpu_pmu: Parallel Multiplier Unit (VPU type 2), P[i] = A[i] * B[i] over N lanes.
//
// Each lane multiplies two signed operands at full precision (AW+BW bits),
// shifts the product right arithmetically by `shift` (power-of-two rescale)
// and saturates to PW bits. Purely combinational. The multiply is the
// paper's; shift and saturation are this design's narrowing to the printed
// output widths.
module vpu_pmu #(
  parameter int unsigned N  = 24,
  parameter int unsigned AW = 16,
  parameter int unsigned BW = 16,
  parameter int unsigned PW = 16
) (
  input  logic signed [AW-1:0] a [N],
  input  logic signed [BW-1:0] b [N],
  input  logic        [5:0]    shift,
  output logic signed [PW-1:0] p [N]
);
  localparam int unsigned MW = (AW + BW > PW + 1) ? AW + BW : PW + 1;
  localparam logic signed [MW-1:0] PMAX = MW'((64'sd1 <<< (PW-1)) - 1);
  localparam logic signed [MW-1:0] PMIN = MW'(-(64'sd1 <<< (PW-1)));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [MW-1:0] m;
      m = (MW'(a[i]) * MW'(b[i])) >>> shift;
      if (m > PMAX)      p[i] = PMAX[PW-1:0];
      else if (m < PMIN) p[i] = PMIN[PW-1:0];
      else               p[i] = m[PW-1:0];
    end
  end
endmodule
