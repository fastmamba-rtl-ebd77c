// fastmamba_top: the fixed-point computing group of the FastMamba accelerator.
//
// Holds the three fixed-point engines of a Mamba2 layer side by side:
//   * hadamard_linear - the W8A8 Hadamard-based linear module (6 groups of
//     4 Hadamard adder trees, 8-bit quantizer and 64 multiplier adder trees,
//     group reduction), used for the in/out projections;
//   * conv_module     - the 32-channel causal 1-D convolution, kernel 4;
//   * ssm_module      - the three-step SSM with its shared exp/SoftPlus
//     Nonlinear Approximation Unit and the 32x8 state-update array.
// In the full accelerator these engines are fed from an on-chip buffer by a
// global data-flow handler, and the floating-point RMS normalization and
// SiLU units sit between them (projection -> convolution -> SiLU -> SSM ->
// gating -> RMS norm -> projection). Those parts, the buffer, the memory
// controller and the off-chip memory are not part of this RTL, so each
// engine's interface is brought out unchanged as ports, prefixed lin_, conv_
// and ssm_; whoever instantiates the top plays the role of the data-flow
// handler. The engines run independently and concurrently.
//
// Parameters are the paper's numbers by default; see each engine for its
// timing (linear: 3-cycle pipeline, one 24-feature step per cycle;
// convolution: 1-cycle latency, one time step per cycle; SSM: one token per
// NH*(HD/PC)*(DS/PS) scan cycles plus about 4+NH cycles of set-up).
module fastmamba_top
  import fm_pkg::*;
#(
  // linear module
  parameter int unsigned LIN_G  = 6,
  parameter int unsigned LIN_HN = 4,
  parameter int unsigned LIN_M  = 64,
  // convolution module
  parameter int unsigned CONV_CH = 32,
  parameter int unsigned CONV_K  = 4,
  // SSM module
  parameter int unsigned SSM_NH = 24,
  parameter int unsigned SSM_HD = 64,
  parameter int unsigned SSM_DS = 128,
  parameter int unsigned SSM_PC = 32,
  parameter int unsigned SSM_PS = 8
) (
  input  logic clk,
  input  logic rst_n,

  // ---- Hadamard-based linear module ----
  input  logic              lin_in_valid,
  input  logic              lin_acc_first,
  input  logic signed [20:0] lin_x    [LIN_G][LIN_HN],
  input  logic signed [3:0]  lin_hcol [LIN_G][LIN_HN][LIN_HN],
  input  logic signed [20:0] lin_s_coe,
  input  logic        [2:0]  lin_s_shift,
  input  logic signed [7:0]  lin_w    [LIN_G][LIN_M][LIN_HN],
  output logic              lin_out_valid,
  output logic signed [19:0] lin_y_sum [LIN_M],
  output logic signed [31:0] lin_y_acc [LIN_M],

  // ---- convolution module ----
  input  logic              conv_in_valid,
  input  logic              conv_seq_start,
  input  logic signed [15:0] conv_x [CONV_CH],
  input  logic signed [15:0] conv_w [CONV_CH][CONV_K],
  input  logic        [5:0]  conv_shift,
  output logic              conv_out_valid,
  output logic signed [15:0] conv_y [CONV_CH],

  // ---- SSM module ----
  input  logic signed [15:0] ssm_beta [SSM_NH],
  input  logic signed [15:0] ssm_a    [SSM_NH],
  input  logic signed [15:0] ssm_d    [SSM_NH],
  input  ssm_shift_t         ssm_shifts,
  input  logic              ssm_tok_valid,
  output logic              ssm_tok_ready,
  input  logic              ssm_tok_first,
  input  logic signed [15:0] ssm_delta [SSM_NH],
  input  logic signed [15:0] ssm_bvec  [SSM_DS],
  input  logic signed [15:0] ssm_cvec  [SSM_DS],
  input  logic              ssm_x_valid,
  output logic              ssm_x_ready,
  input  logic signed [15:0] ssm_x_vec [SSM_HD],
  output logic              ssm_y_valid,
  output logic [$clog2(SSM_NH)-1:0] ssm_y_head,
  output logic [$clog2(SSM_HD/SSM_PC > 1 ? SSM_HD/SSM_PC : 2)-1:0] ssm_y_cb,
  output logic signed [22:0] ssm_y_vec [SSM_PC],
  output logic              ssm_tok_done
);

  hadamard_linear #(.G(LIN_G), .HN(LIN_HN), .M(LIN_M)) u_linear (
    .clk(clk), .rst_n(rst_n), .in_valid(lin_in_valid), .acc_first(lin_acc_first),
    .x(lin_x), .hcol(lin_hcol), .s_coe(lin_s_coe), .s_shift(lin_s_shift), .w(lin_w),
    .out_valid(lin_out_valid), .y_sum(lin_y_sum), .y_acc(lin_y_acc));

  conv_module #(.CH(CONV_CH), .K(CONV_K)) u_conv (
    .clk(clk), .rst_n(rst_n), .in_valid(conv_in_valid), .seq_start(conv_seq_start),
    .x(conv_x), .w(conv_w), .shift(conv_shift),
    .out_valid(conv_out_valid), .y(conv_y));

  ssm_module #(.NH(SSM_NH), .HD(SSM_HD), .DS(SSM_DS), .PC(SSM_PC), .PS(SSM_PS)) u_ssm (
    .clk(clk), .rst_n(rst_n),
    .beta(ssm_beta), .a(ssm_a), .d(ssm_d), .shifts(ssm_shifts),
    .tok_valid(ssm_tok_valid), .tok_ready(ssm_tok_ready), .tok_first(ssm_tok_first),
    .delta(ssm_delta), .bvec(ssm_bvec), .cvec(ssm_cvec),
    .x_valid(ssm_x_valid), .x_ready(ssm_x_ready), .x_vec(ssm_x_vec),
    .y_valid(ssm_y_valid), .y_head(ssm_y_head), .y_cb(ssm_y_cb), .y_vec(ssm_y_vec),
    .tok_done(ssm_tok_done));

endmodule
