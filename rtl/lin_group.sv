// lin_group: one of the computing groups of the Hadamard-based linear module.
//
// Hadamard product: HN Hadamard Adder Trees share the HN activations x and
// each takes one column of the Hadamard matrix, giving x*H. Quantization:
// the HN results are scaled by s_coe, shifted by s_shift and saturated to
// 8 bits, then held in the group's buffer register. Matrix product: M
// Multiplier Adder Trees share the buffered 8-bit vector and each takes HN
// 8-bit Hadamard-domain weights, giving M partial sums. All of this follows
// the paper's group structure (4 HAT, quantize, buffer, 64 MAT).
//
// Timing (this design's choice): two register stages. The buffer register
// captures the quantized vector (and the weights presented with it) at the
// first edge; the partial sums are registered at the second edge.
module lin_group #(
  parameter int unsigned HN       = 4,
  parameter int unsigned M        = 64,
  parameter int unsigned XW       = 21,
  parameter int unsigned HW       = 4,
  parameter int unsigned CW       = 21,
  parameter int unsigned COE_FRAC = 20,
  parameter int unsigned QW       = 8,
  parameter int unsigned YW       = 20
) (
  input  logic                 clk,
  input  logic                 en1,                 // stage-1 load
  input  logic                 en2,                 // stage-2 load
  input  logic signed [XW-1:0] x     [HN],
  input  logic signed [HW-1:0] hcol  [HN][HN],      // hcol[j][i] = H[i][j]
  input  logic signed [CW-1:0] s_coe,
  input  logic        [2:0]    s_shift,
  input  logic signed [QW-1:0] w     [M][HN],
  output logic signed [YW-1:0] ypart [M]
);
  localparam int unsigned PW = XW + $clog2(HN) + 1;

  logic signed [PW-1:0] xh   [HN];
  logic signed [QW-1:0] xq   [HN];
  logic signed [QW-1:0] xbuf [HN];                  // the group's buffer
  logic signed [QW-1:0] wbuf [M][HN];
  logic signed [YW-1:0] ymat [M];

  for (genvar j = 0; j < HN; j++) begin : g_hat
    vpu_hat #(.N(HN), .AW(XW), .HW(HW), .PW(PW)) u_hat (
      .a(x), .h(hcol[j]), .p(xh[j]));
  end

  lin_quantize #(.N(HN), .IW(PW), .CW(CW), .COE_FRAC(COE_FRAC), .OW(QW)) u_quant (
    .x(xh), .s_coe(s_coe), .s_shift(s_shift), .q(xq));

  always_ff @(posedge clk) if (en1) begin
    xbuf <= xq;
    wbuf <= w;
  end

  for (genvar m = 0; m < M; m++) begin : g_mat
    vpu_mat #(.N(HN), .AW(QW), .BW(QW), .PW(YW)) u_mat (
      .a(xbuf), .b(wbuf[m]), .shift(6'd0), .p(ymat[m]));
  end

  always_ff @(posedge clk) if (en2) ypart <= ymat;
endmodule
