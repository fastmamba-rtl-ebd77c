// conv_module: Convolution Module, causal depthwise 1-D convolution (kernel 4).
//
// CH channels are processed in parallel, one Multiplier Adder Tree per
// channel (32 MATs of length 4, as in the paper). Each cycle with in_valid
// high brings one time step x[t] of CH channels; per channel the module keeps
// the K-1 previous samples, forms the window x[t-K+1..t] and computes
// y[t] = sum_k w[k] * x[t-K+1+k] (w[K-1] weights the newest sample, as in a
// causal PyTorch conv1d). The MAT output is shifted right by `shift` (the
// power-of-two rescale of PoT quantization) and saturated to OW bits.
//
// This design's own choices, where the paper is silent: 16-bit activations
// and weights, no bias term (a bias would be added by the caller), and
// `seq_start`, which marks the first step of a sequence so that the history
// is taken as zeros (zero padding on the left).
// Timing: one time step per cycle, result registered, latency 1 cycle.
module conv_module #(
  parameter int unsigned CH = 32,
  parameter int unsigned K  = 4,
  parameter int unsigned XW = 16,
  parameter int unsigned WW = 16,
  parameter int unsigned OW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 seq_start,
  input  logic signed [XW-1:0] x     [CH],
  input  logic signed [WW-1:0] w     [CH][K],
  input  logic        [5:0]    shift,
  output logic                 out_valid,
  output logic signed [OW-1:0] y     [CH]
);
  logic signed [XW-1:0] hist [CH][K-1];   // hist[c][K-2] is the newest past sample
  logic signed [XW-1:0] win  [CH][K];
  logic signed [OW-1:0] ymat [CH];

  always_comb begin
    for (int c = 0; c < CH; c++) begin
      for (int k = 0; k < K - 1; k++) win[c][k] = seq_start ? '0 : hist[c][k];
      win[c][K-1] = x[c];
    end
  end

  for (genvar c = 0; c < CH; c++) begin : g_mat
    vpu_mat #(.N(K), .AW(XW), .BW(WW), .PW(OW)) u_mat (
      .a(win[c]), .b(w[c]), .shift(shift), .p(ymat[c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < CH; c++)
        for (int k = 0; k < K - 1; k++) hist[c][k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int c = 0; c < CH; c++) begin
          for (int k = 0; k < K - 2; k++) hist[c][k] <= win[c][k+1];
          hist[c][K-2] <= x[c];
        end
      end
    end
  end

  always_ff @(posedge clk) if (in_valid) y <= ymat;
endmodule
