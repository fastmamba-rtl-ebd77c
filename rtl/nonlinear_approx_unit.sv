// nonlinear_approx_unit: 24-lane fixed-point exp / SoftPlus unit of the SSM module.
//
// Every lane computes e^x as 2^(x*log2 e) with log2 e taken as 1.0111b (23/16).
// The product t <= 0 is split into an integer part u and a fraction v in
// (-1,0] (truncation toward zero, so both are <= 0). 2^v comes from an
// 8-segment first-order approximation 2^v = LUT_b[s] + LUT_k[s]*v, the
// segment s being the three MSBs of |v|; the result is then shifted right by
// |u|. SoftPlus reuses the same EXP-INT datapath: SoftPlus(x) ~ e^x for
// x <= 0, and e^-x + x for x > 0, where the Reverse Process Unit (RPU)
// negates x, the Delay Unit keeps x for the final adder and the mode
// multiplexer picks the sum. This structure, the log2 e constant and the
// eight segments follow the paper. This design's own choices: the input and
// output are signed 16-bit with FRAC fraction bits (Q3.12 by default), the
// segment coefficients are chords (see fm_pkg), and in EXP mode a positive
// input is clamped to 0 (output 1.0), since the unit only serves x <= 0 there.
//
// Interface: `func` selects EXP or SOFTPLUS for the whole vector; the
// per-lane mode multiplexers are driven by func and the sign of x_i.
// Timing: fully pipelined, one vector per cycle, latency 3 cycles
// (stage 1: RPU + log2e multiply into the Integer/Decimal registers;
//  stage 2: LUT lookup, multiply-add, shift; stage 3: postprocessing add/mux).
module nonlinear_approx_unit
  import fm_pkg::*;
#(
  parameter int unsigned LANES = 24,
  parameter int unsigned W     = 16,
  parameter int unsigned FRAC  = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  nau_func_e           func,
  input  logic signed [W-1:0] x [LANES],
  output logic                out_valid,
  output logic signed [W-1:0] y [LANES]
);
  localparam int unsigned F  = FRAC + 4;      // fraction bits of t = x*23/16
  localparam int unsigned TW = W + 5;         // width of x*23
  localparam logic signed [W:0] YMAX = (W+1)'((1 <<< (W-1)) - 1);

  // ---- stage 1 registers: Integer (u), Decimal (|v|), Delay Unit, mode ----
  logic            v1, v2;
  logic [4:0]      u1   [LANES];
  logic [F-1:0]    f1   [LANES];
  logic signed [W-1:0] xd1 [LANES], xd2 [LANES];
  logic            sp1  [LANES], sp2 [LANES];
  logic signed [W-1:0] e2 [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
    end
  end

  // Preprocessing (RPU + mode mux) and the log2 e multiplier.
  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [W-1:0]  xp;
      logic signed [TW-1:0] t;
      logic        [TW-1:0] m;
      logic                 sp;
      sp = (func == NAU_SOFTPLUS) && (x[i] > 0);
      if (sp)            xp = -x[i];          // RPU: SoftPlus path for x > 0
      else if (x[i] > 0) xp = '0;             // EXP mode only covers x <= 0
      else               xp = x[i];
      t  = TW'(xp) * TW'(23);                 // x * 1.0111b, F fraction bits
      m  = TW'(-t);                           // |t|
      u1[i]  <= (m >> F) > 31 ? 5'd31 : 5'(m >> F);
      f1[i]  <= m[F-1:0];
      xd1[i] <= x[i];                          // Delay Unit, first stage
      sp1[i] <= sp;
    end
  end

  // EXP-INT: segment flag, LUT-k/LUT-b, multiply-add, shift by |u|.
  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++) begin
      logic [2:0]    seg;
      logic [17+F:0] kf;
      logic [17:0]   p15;     // 2^v in Q1.15 (<= 1.0)
      logic [17:0]   e15;
      seg = f1[i][F-1 -: 3];
      kf  = (18+F)'(LUT_K[seg]) * (18+F)'(f1[i]);
      p15 = 18'(LUT_B[seg]) - 18'(kf >> F);    // b + k*v with v = -|v|
      e15 = (u1[i] > 5'd17) ? 18'd0 : (p15 >> u1[i]);
      e2[i]  <= W'((e15 + 18'(1 << (LUT_FRAC - FRAC - 1))) >> (LUT_FRAC - FRAC));
      xd2[i] <= xd1[i];                        // Delay Unit, second stage
      sp2[i] <= sp1[i];
    end
  end

  // Postprocessing: e^-x + x for SoftPlus with x > 0, else e^x.
  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [W:0] s;
      s = (W+1)'(e2[i]) + (W+1)'(xd2[i]);
      if (sp2[i]) y[i] <= (s > YMAX) ? YMAX[W-1:0] : s[W-1:0];
      else        y[i] <= e2[i];
    end
  end
endmodule
