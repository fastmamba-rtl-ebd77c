// hadamard_linear: Hadamard-based Linear Module (8-bit W8A8 linear layer).
//
// Implements one step of the Hadamard-based linear quantization: the input
// feature slice of G*HN activations is split into G groups of HN; each group
// (lin_group) applies a size-HN Hadamard transform with adder trees,
// quantizes to 8 bits with the shared scale (s_coe, s_shift) and multiplies
// by M rows of 8-bit Hadamard-domain weights. Group Reduction then adds the
// G partial-sum vectors into the linear output Y^ (M values of YW bits). With
// the paper's numbers (6 groups x 4 HAT, 64 MAT per group) one step consumes
// 24 input features and produces 64 partial outputs.
//
// The weights are expected already transformed and quantized (W_H = H^T W^T,
// 8 bit) as in the paper's algorithm; de-quantization by s_X*s_W*m/d happens
// outside. This design adds an accumulator (ACC_W bits) that sums successive
// steps over the input dimension, the "Y^ = Y^ + X^_H W^_H" of the paper's
// algorithm: `acc_first` with a step restarts it.
//
// Timing: a step is accepted every cycle when in_valid is high; out_valid
// follows 3 cycles later (quantize buffer, MAT registers, reduction).
module hadamard_linear #(
  parameter int unsigned G        = 6,
  parameter int unsigned HN       = 4,
  parameter int unsigned M        = 64,
  parameter int unsigned XW       = 21,
  parameter int unsigned HW       = 4,
  parameter int unsigned CW       = 21,
  parameter int unsigned COE_FRAC = 20,
  parameter int unsigned QW       = 8,
  parameter int unsigned YW       = 20,
  parameter int unsigned ACC_W    = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 acc_first,
  input  logic signed [XW-1:0] x     [G][HN],
  input  logic signed [HW-1:0] hcol  [G][HN][HN],
  input  logic signed [CW-1:0] s_coe,
  input  logic        [2:0]    s_shift,
  input  logic signed [QW-1:0] w     [G][M][HN],
  output logic                 out_valid,
  output logic signed [YW-1:0]    y_sum [M],
  output logic signed [ACC_W-1:0] y_acc [M]
);
  localparam int unsigned RW = YW + $clog2(G) + 1;
  localparam logic signed [RW-1:0] YMAX = RW'((64'sd1 <<< (YW-1)) - 1);
  localparam logic signed [RW-1:0] YMIN = RW'(-(64'sd1 <<< (YW-1)));

  logic v1, v2, f1, f2;
  logic signed [YW-1:0] ypart [G][M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0; f1 <= 1'b0; f2 <= 1'b0;
    end else begin
      v1 <= in_valid;  f1 <= acc_first;
      v2 <= v1;        f2 <= f1;
      out_valid <= v2;
    end
  end

  for (genvar g = 0; g < G; g++) begin : g_grp
    lin_group #(.HN(HN), .M(M), .XW(XW), .HW(HW), .CW(CW), .COE_FRAC(COE_FRAC),
                .QW(QW), .YW(YW)) u_grp (
      .clk(clk), .en1(in_valid), .en2(v1), .x(x[g]), .hcol(hcol[g]),
      .s_coe(s_coe), .s_shift(s_shift), .w(w[g]), .ypart(ypart[g]));
  end

  // Group Reduction and step accumulation.
  always_ff @(posedge clk) if (v2) begin
    for (int m = 0; m < M; m++) begin
      logic signed [RW-1:0] s;
      s = '0;
      for (int g = 0; g < G; g++) s = s + RW'(ypart[g][m]);
      y_sum[m] <= (s > YMAX) ? YMAX[YW-1:0] : (s < YMIN) ? YMIN[YW-1:0] : s[YW-1:0];
      y_acc[m] <= f2 ? ACC_W'(s) : y_acc[m] + ACC_W'(s);
    end
  end
endmodule
