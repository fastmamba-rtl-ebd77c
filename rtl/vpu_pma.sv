// vpu_pma: Parallel Multiplier Adder Unit (VPU type 3), P[i] = A[i]*B[i] + C[i].
//
// Each lane forms the full-precision signed product, shifts it right
// arithmetically by `shift` so that it lands on the scale of C (PoT
// alignment), adds C and saturates to PW bits. Purely combinational. The
// multiply-add is the paper's; the alignment shift and saturation are this
// design's choice.
module vpu_pma #(
  parameter int unsigned N  = 8,
  parameter int unsigned AW = 16,
  parameter int unsigned BW = 32,
  parameter int unsigned CW = 32,
  parameter int unsigned PW = 32
) (
  input  logic signed [AW-1:0] a [N],
  input  logic signed [BW-1:0] b [N],
  input  logic signed [CW-1:0] c [N],
  input  logic        [5:0]    shift,
  output logic signed [PW-1:0] p [N]
);
  localparam int unsigned MW0 = ((AW + BW) > CW ? (AW + BW) : CW) + 1;
  localparam int unsigned MW  = (MW0 > PW + 1) ? MW0 : PW + 1;
  localparam logic signed [MW-1:0] PMAX = MW'((64'sd1 <<< (PW-1)) - 1);
  localparam logic signed [MW-1:0] PMIN = MW'(-(64'sd1 <<< (PW-1)));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [MW-1:0] m;
      m = ((MW'(a[i]) * MW'(b[i])) >>> shift) + MW'(c[i]);
      if (m > PMAX)      p[i] = PMAX[PW-1:0];
      else if (m < PMIN) p[i] = PMIN[PW-1:0];
      else               p[i] = m[PW-1:0];
    end
  end
endmodule
