// tb_fastmamba_top: end-to-end test of the fixed-point computing group at the
// paper's full size (linear 6x4 HAT + 6x64 MAT, 32-channel convolution, SSM
// with 24 heads x 64 channels x 128 states), all parameters at default.
//
// The three engines are driven concurrently, as the data-flow handler would:
//   * linear: 16 steps of random activations and weights, in two
//     accumulation runs, checked against a reference of Hadamard transform,
//     8-bit quantization, dot products, group reduction and accumulation;
//   * convolution: 40 time steps in two sequences, checked against a direct
//     causal convolution;
//   * SSM: three tokens (a sequence of two, then a fresh sequence). delta~ and
//     A^bar are held against their real-valued targets; Y is checked exactly
//     against an integer model of Steps 2-3 started from the unit's delta~ and
//     A^bar; the state scan must take 24*2*16 = 768 cycles per token.
// Each mechanism of the design is counted and must occur at least once:
// quantizer saturation, accumulation restart and continuation, convolution
// sequence restart with live history, convolution saturation, both SoftPlus
// branches, exp mode, state reset and state carry-over between tokens.
module tb_fastmamba_top;
  import fm_pkg::*;
  localparam int G = 6, HN = 4, M = 64, CH = 32, K = 4;
  localparam int NH = 24, HD = 64, DS = 128, PC = 32, PS = 8;
  localparam int NSB = DS / PS, NCB = HD / PC, NADDR = NH * NCB * NSB;
  localparam int NLIN = 16, NCONV = 40, NTOK = 3;

  logic clk = 0, rst_n = 0;
  // linear
  logic lin_in_valid = 0, lin_acc_first = 0, lin_out_valid;
  logic signed [20:0] lin_x [G][HN];
  logic signed [3:0]  lin_hcol [G][HN][HN];
  logic signed [20:0] lin_s_coe;
  logic        [2:0]  lin_s_shift;
  logic signed [7:0]  lin_w [G][M][HN];
  logic signed [19:0] lin_y_sum [M];
  logic signed [31:0] lin_y_acc [M];
  // convolution
  logic conv_in_valid = 0, conv_seq_start = 0, conv_out_valid;
  logic signed [15:0] conv_x [CH];
  logic signed [15:0] conv_w [CH][K];
  logic        [5:0]  conv_shift;
  logic signed [15:0] conv_y [CH];
  // SSM
  logic signed [15:0] ssm_beta [NH], ssm_a [NH], ssm_d [NH];
  ssm_shift_t ssm_shifts;
  logic ssm_tok_valid = 0, ssm_tok_ready, ssm_tok_first = 0;
  logic signed [15:0] ssm_delta [NH], ssm_bvec [DS], ssm_cvec [DS];
  logic ssm_x_valid = 0, ssm_x_ready;
  logic signed [15:0] ssm_x_vec [HD];
  logic ssm_y_valid, ssm_tok_done;
  logic [4:0] ssm_y_head;
  logic [0:0] ssm_y_cb;
  logic signed [22:0] ssm_y_vec [PC];

  fastmamba_top dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_qsat = 0, n_acc_restart = 0, n_acc_cont = 0, n_conv_restart = 0, n_conv_sat = 0;
  int n_sp_pos = 0, n_sp_neg = 0, n_exp = 0, n_state_reset = 0, n_state_carry = 0;
  int n_overlap = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(input longint v, input int bits);
    longint mx, mn;
    mx = (64'sd1 <<< (bits - 1)) - 1;
    mn = -(64'sd1 <<< (bits - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction
  function automatic int hent(input int r, input int c);
    return ($countones(r & c) % 2 == 1) ? -1 : 1;
  endfunction
  function automatic real q12(input longint v);
    return real'(v) / 4096.0;
  endfunction

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("FAIL: %s", msg);
  endtask

  // ------------------------------------------------------------------ linear
  longint lin_exp_sum [NLIN][M], lin_exp_acc [NLIN][M];
  int lin_nout = 0;
  always @(posedge clk) if (rst_n && lin_out_valid) begin
    for (int m = 0; m < M; m++) begin
      checks += 2;
      if (longint'(lin_y_sum[m]) != lin_exp_sum[lin_nout][m]) fail($sformatf("lin step %0d y_sum[%0d]", lin_nout, m));
      if (longint'(lin_y_acc[m]) != lin_exp_acc[lin_nout][m]) fail($sformatf("lin step %0d y_acc[%0d]", lin_nout, m));
    end
    lin_nout++;
  end

  task automatic run_linear();
    longint racc [M];
    for (int g = 0; g < G; g++)
      for (int j = 0; j < HN; j++)
        for (int i = 0; i < HN; i++) lin_hcol[g][j][i] = 4'(hent(i, j));
    for (int s = 0; s < NLIN; s++) begin
      longint q [G][HN];
      logic first;
      @(negedge clk);
      first = (s % 8 == 0);
      if (first) n_acc_restart++; else n_acc_cont++;
      lin_s_coe = 21'($urandom_range(1 << 14, (1 << 20) - 1));
      lin_s_shift = 3'($urandom);
      for (int g = 0; g < G; g++) begin
        longint xh [HN];
        for (int i = 0; i < HN; i++) begin
          lin_x[g][i] = 21'($urandom);
          if (s % 2 == 1) lin_x[g][i] = lin_x[g][i] >>> 9;
        end
        for (int m = 0; m < M; m++)
          for (int i = 0; i < HN; i++) lin_w[g][m][i] = 8'($urandom);
        for (int j = 0; j < HN; j++) begin
          xh[j] = 0;
          for (int i = 0; i < HN; i++) xh[j] += hent(i, j) * longint'(lin_x[g][i]);
          q[g][j] = (xh[j] * longint'(lin_s_coe)) >>> (20 + int'(lin_s_shift));
          if (q[g][j] > 127 || q[g][j] < -128) n_qsat++;
          q[g][j] = sat(q[g][j], 8);
        end
      end
      for (int m = 0; m < M; m++) begin
        longint sum;
        sum = 0;
        for (int g = 0; g < G; g++)
          for (int j = 0; j < HN; j++) sum += q[g][j] * longint'(lin_w[g][m][j]);
        lin_exp_sum[s][m] = sat(sum, 20);
        racc[m] = first ? sum : racc[m] + sum;
        lin_exp_acc[s][m] = racc[m];
      end
      lin_acc_first = first;
      lin_in_valid = 1'b1;
    end
    @(negedge clk);
    lin_in_valid = 1'b0;
    repeat (6) @(negedge clk);
    checks++;
    if (lin_nout != NLIN) fail("linear output count");
  endtask

  // ------------------------------------------------------------- convolution
  longint conv_hx [NCONV][CH];
  longint conv_ev [$];
  int conv_nout = 0;
  always @(posedge clk) if (rst_n && conv_out_valid) begin
    for (int c = 0; c < CH; c++) begin
      longint e;
      e = conv_ev.pop_front();
      checks++;
      if (longint'(conv_y[c]) != e) fail($sformatf("conv out %0d ch %0d got %0d want %0d", conv_nout, c, conv_y[c], e));
    end
    conv_nout++;
  end

  task automatic run_conv();
    conv_shift = 6'd11;
    for (int c = 0; c < CH; c++)
      for (int k = 0; k < K; k++) conv_w[c][k] = 16'($urandom);
    for (int t = 0; t < NCONV; t++) begin
      int t0;
      @(negedge clk);
      t0 = (t < 25) ? 0 : 25;
      if (t == 25) n_conv_restart++;
      for (int c = 0; c < CH; c++) begin
        longint s;
        conv_hx[t][c] = longint'($signed(16'($urandom)));
        s = 0;
        for (int k = 0; k < K; k++) begin
          int tt;
          tt = t - (K - 1) + k;
          if (tt >= t0) s += longint'(conv_w[c][k]) * conv_hx[tt][c];
        end
        s = s >>> 11;
        if (s > 32767 || s < -32768) n_conv_sat++;
        conv_ev.push_back(sat(s, 16));
        conv_x[c] = 16'(conv_hx[t][c]);
      end
      conv_seq_start = (t == t0);
      conv_in_valid = 1'b1;
    end
    @(negedge clk);
    conv_in_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (conv_nout != NCONV) fail("conv output count");
  endtask

  // --------------------------------------------------------------------- SSM
  longint yout [NH][HD];
  longint yexp [NH][HD];
  longint xin  [NH][HD];
  longint hst  [NH][HD][DS];
  int scan_cycles = 0;
  always @(posedge clk) if (rst_n && dut.u_ssm.rd_en) begin
    scan_cycles++;
    if (lin_in_valid || conv_in_valid) n_overlap++;
  end
  always @(posedge clk) if (rst_n && ssm_y_valid)
    for (int c = 0; c < PC; c++) yout[ssm_y_head][int'(ssm_y_cb) * PC + c] = longint'(ssm_y_vec[c]);

  task automatic check_close(input string what, input longint got, input real want);
    real g, tol;
    g = q12(got);
    tol = 4.0 / 4096.0 + 0.04 * (want < 0 ? -want : want);
    checks++;
    if (g - want > tol || want - g > tol) fail($sformatf("%s got %f want %f", what, g, want));
  endtask

  task automatic run_ssm();
    ssm_shifts.sh_da = 6'd12; ssm_shifts.sh_q = 6'd12; ssm_shifts.sh_qb = 6'd8;
    ssm_shifts.sh_ch = 6'd13; ssm_shifts.sh_dx = 6'd8;
    for (int h = 0; h < NH; h++) begin
      ssm_beta[h] = 16'($signed($urandom_range(0, 4096)) - 2048);
      ssm_a[h]    = -16'($urandom_range(1024, 12288));
      ssm_d[h]    = 16'($signed($urandom_range(0, 8192)) - 4096);
    end
    for (int t = 0; t < NTOK; t++) begin
      int scan0;
      logic first;
      first = (t != 1);
      if (first) n_state_reset++; else n_state_carry++;
      @(negedge clk);
      for (int h = 0; h < NH; h++) ssm_delta[h] = 16'($signed($urandom_range(0, 16384)) - 8192);
      for (int n = 0; n < DS; n++) begin
        ssm_bvec[n] = 16'($signed($urandom_range(0, 8192)) - 4096);
        ssm_cvec[n] = 16'($signed($urandom_range(0, 8192)) - 4096);
      end
      ssm_tok_first = first;
      ssm_tok_valid = 1'b1;
      while (!ssm_tok_ready) @(negedge clk);
      @(negedge clk);
      ssm_tok_valid = 1'b0;
      scan0 = scan_cycles;
      for (int h = 0; h < NH; h++) begin
        for (int p = 0; p < HD; p++) begin
          ssm_x_vec[p] = 16'($signed($urandom_range(0, 16384)) - 8192);
          xin[h][p] = ssm_x_vec[p];
        end
        ssm_x_valid = 1'b1;
        while (!ssm_x_ready) @(negedge clk);
        @(negedge clk);
      end
      ssm_x_valid = 1'b0;
      for (int h = 0; h < NH; h++) begin
        real s, spw, abw;
        s = q12(ssm_delta[h]) + q12(ssm_beta[h]);
        if (s > 0) n_sp_pos++; else n_sp_neg++;
        n_exp++;
        spw = (s > 0) ? $exp(-s) + s : $exp(s);
        check_close("delta~", longint'(dut.u_ssm.dt_r[h]), spw);
        abw = $exp(q12(sat((longint'(dut.u_ssm.dt_r[h]) * longint'(ssm_a[h])) >>> 12, 16)));
        check_close("A^bar", longint'(dut.u_ssm.abar_r[h]), abw);
      end
      for (int h = 0; h < NH; h++)
        for (int p = 0; p < HD; p++) begin
          longint qv, acc;
          qv = sat((longint'(dut.u_ssm.dt_r[h]) * xin[h][p]) >>> 12, 16);
          acc = 0;
          for (int sb = 0; sb < NSB; sb++) begin
            longint blk;
            blk = 0;
            for (int s = 0; s < PS; s++) begin
              int n;
              longint bb, hp;
              n = sb * PS + s;
              bb = sat((qv * longint'(ssm_bvec[n])) >>> 8, 32);
              hp = first ? 0 : hst[h][p][n];
              hst[h][p][n] = sat(((longint'(dut.u_ssm.abar_r[h]) * hp) >>> 12) + bb, 32);
              blk += longint'(ssm_cvec[n]) * hst[h][p][n];
            end
            acc += sat(blk >>> 13, 30);
          end
          yexp[h][p] = sat(((longint'(ssm_d[h]) * xin[h][p]) >>> 8) + acc, 23);
          yout[h][p] = 64'sh7fff_ffff_ffff;
        end
      while (!ssm_tok_done) @(posedge clk);
      checks++;
      if (scan_cycles - scan0 != NADDR) fail($sformatf("scan took %0d cycles", scan_cycles - scan0));
      for (int h = 0; h < NH; h++)
        for (int p = 0; p < HD; p++) begin
          checks++;
          if (yout[h][p] != yexp[h][p]) fail($sformatf("tok %0d Y[%0d][%0d] got %0d want %0d", t, h, p, yout[h][p], yexp[h][p]));
        end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    fork
      run_ssm();
      begin repeat (40) @(posedge clk); run_linear(); end
      begin repeat (60) @(posedge clk); run_conv(); end
    join
    $display("mechanisms: qsat=%0d acc_restart=%0d acc_cont=%0d conv_restart=%0d conv_sat=%0d",
             n_qsat, n_acc_restart, n_acc_cont, n_conv_restart, n_conv_sat);
    $display("            softplus_pos=%0d softplus_neg=%0d exp=%0d state_reset=%0d state_carry=%0d overlap=%0d",
             n_sp_pos, n_sp_neg, n_exp, n_state_reset, n_state_carry, n_overlap);
    checks += 11;
    if (n_qsat == 0)         fail("quantizer saturation never happened");
    if (n_acc_restart == 0)  fail("accumulation restart never happened");
    if (n_acc_cont == 0)     fail("accumulation continuation never happened");
    if (n_conv_restart == 0) fail("convolution restart never happened");
    if (n_conv_sat == 0)     fail("convolution saturation never happened");
    if (n_sp_pos == 0)       fail("SoftPlus x>0 branch never happened");
    if (n_sp_neg == 0)       fail("SoftPlus x<=0 branch never happened");
    if (n_exp == 0)          fail("exp mode never happened");
    if (n_state_reset == 0)  fail("state reset never happened");
    if (n_state_carry == 0)  fail("state carry-over never happened");
    if (n_overlap == 0)      fail("engines never ran concurrently");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
