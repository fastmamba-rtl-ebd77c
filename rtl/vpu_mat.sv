// vpu_mat: Multiplier Adder Tree (VPU type 5), P = sum_i A[i]*B[i].
//
// N signed products are summed at full precision, the sum is shifted right
// arithmetically by `shift` (PoT rescale) and saturated to PW bits. With
// shift = 0 and PW wide enough the result is the exact dot product. Purely
// combinational. The dot product is the paper's; shift and saturation are
// this design's narrowing to the printed widths.
module vpu_mat #(
  parameter int unsigned N  = 4,
  parameter int unsigned AW = 8,
  parameter int unsigned BW = 8,
  parameter int unsigned PW = 20
) (
  input  logic signed [AW-1:0] a [N],
  input  logic signed [BW-1:0] b [N],
  input  logic        [5:0]    shift,
  output logic signed [PW-1:0] p
);
  localparam int unsigned SW0 = AW + BW + $clog2(N) + 1;
  localparam int unsigned SW  = (SW0 > PW + 1) ? SW0 : PW + 1;
  localparam logic signed [SW-1:0] PMAX = SW'((64'sd1 <<< (PW-1)) - 1);
  localparam logic signed [SW-1:0] PMIN = SW'(-(64'sd1 <<< (PW-1)));

  logic signed [SW-1:0] acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < N; i++) acc = acc + (SW'(a[i]) * SW'(b[i]));
    acc = acc >>> shift;
    if (acc > PMAX)      p = PMAX[PW-1:0];
    else if (acc < PMIN) p = PMIN[PW-1:0];
    else                 p = acc[PW-1:0];
  end
endmodule
