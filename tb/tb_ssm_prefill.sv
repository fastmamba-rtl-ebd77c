// tb_ssm_prefill: prompt-prefill workload for the SSM module at its default,
// full size (24 heads x 64 channels x 128 states, 32x8 state elements per
// cycle), i.e. the SSM of one Mamba2-130M layer.
//
// Runs five prompt sequences back to back, of 64, 96, 116, 128 and 168
// tokens, each starting from H = 0, with random delta, B, C and X. The state
// carried from token to token inside each sequence is the point of the test:
// an error anywhere in the recurrence grows along the sequence. For each token
// it checks delta~ against the real-valued
// SoftPlus target and A^bar against exp(delta~ * A), within the tolerance of
// the linear approximation; then, starting from the unit's own delta~ and
// A^bar, an integer model written here recomputes Q, B^bar, the hidden-state
// recurrence, the C inner product and the D skip term with the same PoT
// shifts and saturations, and every Y value must match it exactly. Also
// checks that the state scan takes NH*(HD/PC)*(DS/PS) = 768 cycles per token
// and that both SoftPlus branches were exercised, and reports the average
// number of cycles per token (token accept to tok_done, X supplied at once).
module tb_ssm_prefill;
  import fm_pkg::*;
  localparam int NH = 24, HD = 64, DS = 128, PC = 32, PS = 8;
  localparam int NSB = DS / PS, NCB = HD / PC, NADDR = NH * NCB * NSB;
  localparam int NSEQ = 5;
  localparam int SEQ_LEN [NSEQ] = '{64, 96, 116, 128, 168};
  localparam int NTOK = 64 + 96 + 116 + 128 + 168;

  logic clk = 0, rst_n = 0;
  logic signed [15:0] beta [NH], a [NH], d [NH];
  ssm_shift_t shifts;
  logic tok_valid = 0, tok_ready, tok_first = 0;
  logic signed [15:0] delta [NH], bvec [DS], cvec [DS];
  logic x_valid = 0, x_ready;
  logic signed [15:0] x_vec [HD];
  logic y_valid, tok_done;
  logic [4:0] y_head;
  logic [0:0] y_cb;
  logic signed [22:0] y_vec [PC];

  int checks = 0, failures = 0;
  int n_sp_pos = 0, n_sp_neg = 0, scan_cycles = 0;
  longint tok_cycles = 0;
  int seq_i = 0, seq_pos = 0;
  longint yout [NH][HD];
  longint hst  [NH][HD][DS];          // reference hidden state
  longint xin  [NH][HD];

  ssm_module dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NTOK * 900 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && dut.rd_en) scan_cycles++;
  always @(posedge clk) if (rst_n && y_valid)
    for (int c = 0; c < PC; c++) yout[y_head][int'(y_cb) * PC + c] = longint'(y_vec[c]);

  function automatic longint sat(input longint v, input int bits);
    longint mx, mn;
    mx = (64'sd1 <<< (bits - 1)) - 1;
    mn = -(64'sd1 <<< (bits - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  function automatic real q12(input longint v);
    return real'(v) / 4096.0;
  endfunction

  task automatic check_close(input string what, input longint got, input real want);
    real g, tol;
    g = q12(got);
    tol = 4.0 / 4096.0 + 0.04 * (want < 0 ? -want : want);
    checks++;
    if (g - want > tol || want - g > tol) begin
      failures++;
      if (failures < 12) $display("%s got %f want %f", what, g, want);
    end
  endtask

  initial begin
    shifts.sh_da = 6'd12; shifts.sh_q = 6'd12; shifts.sh_qb = 6'd8;
    shifts.sh_ch = 6'd12; shifts.sh_dx = 6'd8;
    for (int h = 0; h < NH; h++) begin
      beta[h] = 16'($signed($urandom_range(0, 4096)) - 2048);     // -0.5 .. 0.5
      a[h]    = -16'($urandom_range(1024, 12288));                 // -0.25 .. -3
      d[h]    = 16'($signed($urandom_range(0, 8192)) - 4096);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < NTOK; t++) begin
      int scan0;
      longint t0;
      logic first;
      first = (seq_pos == 0);
      if (++seq_pos == SEQ_LEN[seq_i]) begin seq_pos = 0; seq_i++; end
      @(negedge clk);
      for (int h = 0; h < NH; h++) begin
        delta[h] = 16'($signed($urandom_range(0, 16384)) - 8192);   // -2 .. 2
      end
      for (int n = 0; n < DS; n++) begin
        bvec[n] = 16'($signed($urandom_range(0, 8192)) - 4096);
        cvec[n] = 16'($signed($urandom_range(0, 8192)) - 4096);
      end
      tok_first = first;
      tok_valid = 1'b1;
      while (!tok_ready) @(negedge clk);
      @(negedge clk);
      tok_valid = 1'b0;
      scan0 = scan_cycles;
      t0 = $time;
      // X, one head per beat
      for (int h = 0; h < NH; h++) begin
        for (int p = 0; p < HD; p++) begin
          logic signed [15:0] xv;
          xv = 16'($signed($urandom_range(0, 16384)) - 8192);
          x_vec[p] = xv;
          xin[h][p] = xv;
        end
        x_valid = 1'b1;
        while (!x_ready) @(negedge clk);
        @(negedge clk);
      end
      x_valid = 1'b0;
      // Steps 1 and 2 against their real-valued targets
      for (int h = 0; h < NH; h++) begin
        real s, dtr, spw, abw;
        s = q12(delta[h]) + q12(beta[h]);
        if (s > 0) n_sp_pos++; else n_sp_neg++;
        spw = (s > 0) ? $exp(-s) + s : $exp(s);
        check_close("delta~", longint'(dut.dt_r[h]), spw);
        dtr = q12(dut.dt_r[h]);
        abw = $exp(q12(sat((longint'(dut.dt_r[h]) * longint'(a[h])) >>> 12, 16)));
        check_close("A^bar", longint'(dut.abar_r[h]), abw);
      end
      // Step 3 integer model
      for (int h = 0; h < NH; h++)
        for (int p = 0; p < HD; p++) begin
          longint qv, acc, yv;
          qv = sat((longint'(dut.dt_r[h]) * xin[h][p]) >>> 12, 16);
          acc = 0;
          for (int sb = 0; sb < NSB; sb++) begin
            longint blk;
            blk = 0;
            for (int s = 0; s < PS; s++) begin
              int n;
              longint bb, hp;
              n = sb * PS + s;
              bb = sat((qv * longint'(bvec[n])) >>> 8, 32);
              hp = first ? 0 : hst[h][p][n];
              hst[h][p][n] = sat(((longint'(dut.abar_r[h]) * hp) >>> 12) + bb, 32);
              blk += longint'(cvec[n]) * hst[h][p][n];
            end
            acc += sat(blk >>> 12, 30);
          end
          yv = sat(((longint'(d[h]) * xin[h][p]) >>> 8) + acc, 23);
          yout[h][p] = 64'sh7fff_ffff_ffff;            // cleared, DUT must write it
          xin[h][p] = yv;                              // reuse as expected Y
        end
      while (!tok_done) @(posedge clk);
      tok_cycles += ($time - t0) / 10;
      checks++;
      if (scan_cycles - scan0 != NADDR) begin
        failures++; $display("scan took %0d cycles, want %0d", scan_cycles - scan0, NADDR);
      end
      for (int h = 0; h < NH; h++)
        for (int p = 0; p < HD; p++) begin
          checks++;
          if (yout[h][p] != xin[h][p]) begin
            failures++;
            if (failures < 12) $display("tok %0d Y[%0d][%0d] got %0d want %0d", t, h, p, yout[h][p], xin[h][p]);
          end
        end
      @(posedge clk);
    end
    checks++;
    if (n_sp_pos == 0 || n_sp_neg == 0) begin failures++; $display("SoftPlus branch not covered"); end
    $display("%0d tokens in %0d sequences, %0d cycles per token on average",
             NTOK, NSEQ, tok_cycles / NTOK);
    $display("softplus x>0: %0d, x<=0: %0d", n_sp_pos, n_sp_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
