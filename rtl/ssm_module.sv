// ssm_module: SSM Module, one Mamba2 selective-scan step per token (decode
// recurrence), in 16/32-bit fixed point with power-of-two rescaling.
//
// For every token l and head h (NH heads, HD channels per head, DS states):
//   Step 1  delta~[h] = SoftPlus(delta[h] + beta[h])         PAU + NAU (SoftPlus)
//   Step 2  A^bar[h]  = exp(delta~[h] * A[h])                PMU + NAU (exp)
//           Q[h][p]   = delta~[h] * X[h][p]                  PMU, HD lanes
//   Step 3  B^bar     = Q[h][p] * B[n]                        PC x PMU(PS)
//           H[h][p][n] = A^bar[h] * H[h][p][n] + B^bar        PC x PMA(PS)
//           h^bar[p] += sum_n C[n] * H[h][p][n]               PC x MAT(PS)
//           Y[h][p]   = h^bar[p] + D[h] * X[h][p]             PMA(PC)
// Step 3 visits the hidden state in blocks of PC channels x PS states
// (32 x 8 = 256 state elements per cycle with the paper's numbers), so a
// token takes NH*(HD/PC)*(DS/PS) scan cycles (768 for 24 heads x 64 x 128).
// The three steps, the VPU types and their lane counts (24, 64, 32x8, 32)
// follow the paper's SSM module; one Nonlinear Approximation Unit is shared
// by Step 1 (SoftPlus mode) and Step 2 (exp mode).
//
// This design's own choices: the sequencer below (the SSM data-flow
// handler), the on-chip stores for Q, X and the hidden state H, the
// 16-bit Q3.12 format of delta, delta~ and A^bar, the PoT shift amounts in
// `shifts` (one per narrowing multiply), the accumulation of h^bar over the
// DS/PS state blocks before the D*X term is added, and `tok_first`, which
// starts a sequence with H = 0.
//
// Interface: a token is accepted with tok_valid/tok_ready together with
// delta, B and C; then NH beats of x_valid/x_ready bring X one head (HD
// values) at a time, head 0 first. Results leave as NH*HD/PC beats of
// y_valid with PC values of Y, tagged with head y_head and channel block
// y_cb; there is no back-pressure on y. tok_done pulses when the token has
// left. beta, A, D and shifts are static configuration.
module ssm_module
  import fm_pkg::*;
#(
  parameter int unsigned NH   = 24,
  parameter int unsigned HD   = 64,
  parameter int unsigned DS   = 128,
  parameter int unsigned PC   = 32,
  parameter int unsigned PS   = 8,
  parameter int unsigned W    = 16,
  parameter int unsigned FRAC = 12,
  parameter int unsigned HW   = 32,
  parameter int unsigned CHW  = 30,
  parameter int unsigned YW   = 23
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // static configuration
  input  logic signed [W-1:0]  beta [NH],
  input  logic signed [W-1:0]  a    [NH],
  input  logic signed [W-1:0]  d    [NH],
  input  ssm_shift_t           shifts,
  // token
  input  logic                 tok_valid,
  output logic                 tok_ready,
  input  logic                 tok_first,
  input  logic signed [W-1:0]  delta [NH],
  input  logic signed [W-1:0]  bvec  [DS],
  input  logic signed [W-1:0]  cvec  [DS],
  // X, one head per beat
  input  logic                 x_valid,
  output logic                 x_ready,
  input  logic signed [W-1:0]  x_vec [HD],
  // Y
  output logic                 y_valid,
  output logic [$clog2(NH)-1:0] y_head,
  output logic [$clog2(HD/PC > 1 ? HD/PC : 2)-1:0] y_cb,
  output logic signed [YW-1:0] y_vec [PC],
  output logic                 tok_done
);
  localparam int unsigned NCB   = HD / PC;
  localparam int unsigned NSB   = DS / PS;
  localparam int unsigned NADDR = NH * NCB * NSB;
  localparam int unsigned AW    = $clog2(NADDR);
  localparam int unsigned HBW   = $clog2(NH);
  localparam int unsigned CBW   = $clog2(NCB > 1 ? NCB : 2);
  localparam int unsigned SBW   = $clog2(NSB > 1 ? NSB : 2);
  localparam int unsigned ACCW  = CHW + SBW + 1;
  localparam int unsigned WORDW = PC * PS * HW;

  typedef enum logic [2:0] {
    S_IDLE, S_SP, S_SP_WAIT, S_EXP, S_EXP_WAIT, S_XLOAD, S_SCAN, S_DRAIN
  } state_e;
  state_e st;

  // ---- token registers and on-chip stores --------------------------------
  logic signed [W-1:0] delta_r [NH];
  logic signed [W-1:0] b_r [DS], c_r [DS];
  logic                first_r;
  logic signed [W-1:0] dt_r   [NH];      // delta~
  logic signed [W-1:0] abar_r [NH];      // A^bar
  logic signed [W-1:0] q_mem  [NH][HD];  // Q = delta~ * X
  logic signed [W-1:0] x_mem  [NH][HD];
  logic [WORDW-1:0]    hmem   [NADDR];   // hidden state, PC x PS per word

  // ---- Steps 1 and 2: PAU, PMU and the shared NAU -----------------------
  logic signed [W-1:0] sum_db [NH], prod_da [NH], nau_x [NH], nau_y [NH];
  logic                nau_in_valid, nau_out_valid;
  nau_func_e           nau_func;

  vpu_pau #(.N(NH), .AW(W), .PW(W)) u_pau (
    .a(delta_r), .b(beta), .shift(6'd0), .p(sum_db));
  vpu_pmu #(.N(NH), .AW(W), .BW(W), .PW(W)) u_pmu_da (
    .a(dt_r), .b(a), .shift(shifts.sh_da), .p(prod_da));

  assign nau_in_valid = (st == S_SP) || (st == S_EXP);
  assign nau_func     = (st == S_SP) ? NAU_SOFTPLUS : NAU_EXP;
  assign nau_x        = (st == S_SP) ? sum_db : prod_da;

  nonlinear_approx_unit #(.LANES(NH), .W(W), .FRAC(FRAC)) u_nau (
    .clk(clk), .rst_n(rst_n), .in_valid(nau_in_valid), .func(nau_func),
    .x(nau_x), .out_valid(nau_out_valid), .y(nau_y));

  // Q = delta~[h] * X[h], HD lanes
  logic [HBW-1:0]      xh_cnt;
  logic signed [W-1:0] dt_bc [HD], q_vec [HD];
  always_comb for (int p = 0; p < HD; p++) dt_bc[p] = dt_r[xh_cnt];
  vpu_pmu #(.N(HD), .AW(W), .BW(W), .PW(W)) u_pmu_q (
    .a(dt_bc), .b(x_vec), .shift(shifts.sh_q), .p(q_vec));

  // ---- scan counters and sequencer --------------------------------------
  logic [HBW-1:0] s_h;
  logic [CBW-1:0] s_cb;
  logic [SBW-1:0] s_sb;
  logic [AW-1:0]  s_addr;
  logic           rd_en;
  logic           y_pend;

  // pipeline stage R (state word read) and A (accumulate)
  logic           r_v, a_v;
  logic [HBW-1:0] r_h, a_h;
  logic [CBW-1:0] r_cb, a_cb;
  logic [SBW-1:0] r_sb, a_sb;
  logic [AW-1:0]  r_addr;
  logic [WORDW-1:0] r_word;

  assign tok_ready = (st == S_IDLE);
  assign x_ready   = (st == S_XLOAD);
  assign rd_en     = (st == S_SCAN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; xh_cnt <= '0; s_h <= '0; s_cb <= '0; s_sb <= '0; s_addr <= '0;
      tok_done <= 1'b0; first_r <= 1'b0;
    end else begin
      tok_done <= 1'b0;
      unique case (st)
        S_IDLE: if (tok_valid) begin
          first_r <= tok_first;
          st <= S_SP;
        end
        S_SP:       st <= S_SP_WAIT;
        S_SP_WAIT:  if (nau_out_valid) st <= S_EXP;
        S_EXP:      st <= S_EXP_WAIT;
        S_EXP_WAIT: if (nau_out_valid) begin xh_cnt <= '0; st <= S_XLOAD; end
        S_XLOAD: if (x_valid) begin
          if (xh_cnt == HBW'(NH - 1)) begin
            st <= S_SCAN; s_h <= '0; s_cb <= '0; s_sb <= '0; s_addr <= '0;
          end else xh_cnt <= xh_cnt + 1'b1;
        end
        S_SCAN: begin
          s_addr <= s_addr + 1'b1;
          if (s_sb == SBW'(NSB - 1)) begin
            s_sb <= '0;
            if (s_cb == CBW'(NCB - 1)) begin
              s_cb <= '0;
              if (s_h == HBW'(NH - 1)) st <= S_DRAIN;
              else s_h <= s_h + 1'b1;
            end else s_cb <= s_cb + 1'b1;
          end else s_sb <= s_sb + 1'b1;
        end
        S_DRAIN: if (!r_v && !a_v && !y_pend) begin st <= S_IDLE; tok_done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // token, delta~, A^bar, Q and X stores (no reset: written before use)
  always_ff @(posedge clk) begin
    if (st == S_IDLE && tok_valid) begin
      delta_r <= delta; b_r <= bvec; c_r <= cvec;
    end
    if (st == S_SP_WAIT && nau_out_valid)  dt_r   <= nau_y;
    if (st == S_EXP_WAIT && nau_out_valid) abar_r <= nau_y;
    if (st == S_XLOAD && x_valid) begin
      q_mem[xh_cnt] <= q_vec;
      x_mem[xh_cnt] <= x_vec;
    end
  end

  // ---- Step 3 datapath ---------------------------------------------------
  logic signed [HW-1:0]  hprev [PC][PS], bbar [PC][PS], hnew [PC][PS];
  logic signed [W-1:0]   q_bc  [PC][PS], ab_bc [PC][PS];
  logic signed [W-1:0]   b_blk [PS], c_blk [PS];
  logic signed [CHW-1:0] hbar  [PC];
  logic [WORDW-1:0]      w_word;

  always_comb begin
    for (int s = 0; s < PS; s++) begin
      b_blk[s] = b_r[32'(r_sb) * PS + s];
      c_blk[s] = c_r[32'(r_sb) * PS + s];
    end
    for (int c = 0; c < PC; c++)
      for (int s = 0; s < PS; s++) begin
        hprev[c][s] = first_r ? '0 : $signed(r_word[(c*PS + s)*HW +: HW]);
        q_bc[c][s]  = q_mem[r_h][32'(r_cb) * PC + c];
        ab_bc[c][s] = abar_r[r_h];
        w_word[(c*PS + s)*HW +: HW] = hnew[c][s];
      end
  end

  for (genvar c = 0; c < PC; c++) begin : g_lane
    vpu_pmu #(.N(PS), .AW(W), .BW(W), .PW(HW)) u_pmu_b (
      .a(q_bc[c]), .b(b_blk), .shift(shifts.sh_qb), .p(bbar[c]));
    vpu_pma #(.N(PS), .AW(W), .BW(HW), .CW(HW), .PW(HW)) u_pma_h (
      .a(ab_bc[c]), .b(hprev[c]), .c(bbar[c]), .shift(6'(FRAC)), .p(hnew[c]));
    vpu_mat #(.N(PS), .AW(W), .BW(HW), .PW(CHW)) u_mat_c (
      .a(c_blk), .b(hnew[c]), .shift(shifts.sh_ch), .p(hbar[c]));
  end

  // state memory: synchronous read at issue, write-back from stage R
  always_ff @(posedge clk) begin
    if (rd_en) r_word <= hmem[s_addr];
    if (r_v)   hmem[r_addr] <= w_word;
  end

  logic signed [CHW-1:0] a_hbar [PC];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v <= 1'b0; a_v <= 1'b0;
    end else begin
      r_v <= rd_en;
      a_v <= r_v;
    end
  end
  always_ff @(posedge clk) begin
    r_h <= s_h; r_cb <= s_cb; r_sb <= s_sb; r_addr <= s_addr;
    a_h <= r_h; a_cb <= r_cb; a_sb <= r_sb;
    a_hbar <= hbar;
  end

  // stage A: accumulate h^bar over the state blocks, add D*X on the last one
  logic signed [ACCW-1:0] acc [PC], hsum [PC];
  logic signed [W-1:0]    d_bc [PC], x_blk [PC];
  logic signed [YW-1:0]   y_calc [PC];
  always_comb begin
    for (int c = 0; c < PC; c++) begin
      hsum[c]  = ((a_sb == '0) ? '0 : acc[c]) + ACCW'(a_hbar[c]);
      d_bc[c]  = d[a_h];
      x_blk[c] = x_mem[a_h][32'(a_cb) * PC + c];
    end
  end
  vpu_pma #(.N(PC), .AW(W), .BW(W), .CW(ACCW), .PW(YW)) u_pma_y (
    .a(d_bc), .b(x_blk), .c(hsum), .shift(shifts.sh_dx), .p(y_calc));

  assign y_pend = y_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y_valid <= 1'b0;
    else        y_valid <= a_v && (a_sb == SBW'(NSB - 1));
  end
  always_ff @(posedge clk) begin
    if (a_v) acc <= hsum;
    if (a_v && a_sb == SBW'(NSB - 1)) begin
      y_vec  <= y_calc;
      y_head <= a_h;
      y_cb   <= a_cb;
    end
  end

  // Results can only appear while the hidden state is being scanned.
  a_y_in_scan: assert property (@(posedge clk) disable iff (!rst_n)
    y_valid |-> (st == S_SCAN || st == S_DRAIN));
endmodule
