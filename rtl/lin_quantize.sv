// lin_quantize: quantizer of the Hadamard-based linear module.
//
// Turns the N Hadamard-transformed activations of one group into 8-bit
// operands: each value is multiplied by the scale coefficient s_coe (the
// "Multiplier Unit") and shifted right by s_shift (the "Shift Unit"), then
// saturated to the signed 8-bit range -128..127. Widths follow the paper's
// figure (s_coe 21b, s_shift 3b, 8b out). This design's own choices: s_coe is
// a signed fraction with COE_FRAC fraction bits (so the total scale is
// s_coe * 2^-(COE_FRAC + s_shift)), the shift truncates toward minus infinity
// and out-of-range values saturate. Purely combinational.
module lin_quantize #(
  parameter int unsigned N        = 4,
  parameter int unsigned IW       = 24,
  parameter int unsigned CW       = 21,
  parameter int unsigned COE_FRAC = 20,
  parameter int unsigned OW       = 8
) (
  input  logic signed [IW-1:0] x [N],
  input  logic signed [CW-1:0] s_coe,
  input  logic        [2:0]    s_shift,
  output logic signed [OW-1:0] q [N]
);
  localparam int unsigned MW = IW + CW;
  localparam logic signed [MW-1:0] QMAX = MW'((64'sd1 <<< (OW-1)) - 1);
  localparam logic signed [MW-1:0] QMIN = MW'(-(64'sd1 <<< (OW-1)));

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [MW-1:0] m;
      m = (MW'(x[i]) * MW'(s_coe)) >>> (COE_FRAC + 32'(s_shift));
      if (m > QMAX)      q[i] = QMAX[OW-1:0];
      else if (m < QMIN) q[i] = QMIN[OW-1:0];
      else               q[i] = m[OW-1:0];
    end
  end
endmodule
