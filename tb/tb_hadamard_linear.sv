// tb_hadamard_linear: end-to-end check of the Hadamard-based linear module at
// its default size (6 groups x 4 HAT, 64 MAT per group).
//
// Each step feeds random 21-bit activations, the 4x4 Sylvester Hadamard
// matrix, a random scale and random 8-bit weights. A reference written here
// recomputes the Hadamard transform, the quantization (multiply, shift,
// saturate to 8 bits), the 64 dot products, the group reduction and the
// accumulation over steps, and is compared with y_sum and y_acc. Also checks
// the 3-cycle latency and counts how often quantization saturated.
module tb_hadamard_linear;
  localparam int G = 6, HN = 4, M = 64, NSTEP = 48;
  logic clk = 0, rst_n = 0, in_valid = 0, acc_first = 0, out_valid;
  logic signed [20:0] x [G][HN];
  logic signed [3:0]  hcol [G][HN][HN];
  logic signed [20:0] s_coe;
  logic        [2:0]  s_shift;
  logic signed [7:0]  w [G][M][HN];
  logic signed [19:0] y_sum [M];
  logic signed [31:0] y_acc [M];
  int checks = 0, failures = 0, cycle = 0, n_out = 0, n_sat = 0;
  longint exp_sum [NSTEP][M];
  longint exp_acc [NSTEP][M];
  longint racc [M];
  int issue_q [$];

  hadamard_linear dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic int hent(input int r, input int c);
    return ($countones(r & c) % 2 == 1) ? -1 : 1;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (in_valid) issue_q.push_back(cycle);

  always @(posedge clk) if (rst_n && out_valid) begin
    int ic;
    ic = issue_q.pop_front();
    checks++;
    if (cycle - ic != 3) begin failures++; $display("latency %0d", cycle - ic); end
    for (int m = 0; m < M; m++) begin
      checks += 2;
      if (longint'(y_sum[m]) != exp_sum[n_out][m]) begin
        failures++; if (failures < 10) $display("step %0d y_sum[%0d] %0d want %0d", n_out, m, y_sum[m], exp_sum[n_out][m]);
      end
      if (longint'(y_acc[m]) != exp_acc[n_out][m]) begin
        failures++; if (failures < 10) $display("step %0d y_acc[%0d] %0d want %0d", n_out, m, y_acc[m], exp_acc[n_out][m]);
      end
    end
    n_out++;
  end

  initial begin
    for (int g = 0; g < G; g++)
      for (int j = 0; j < HN; j++)
        for (int i = 0; i < HN; i++) hcol[g][j][i] = 4'(hent(i, j));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s < NSTEP; s++) begin
      longint q [G][HN];
      logic signed [20:0] coe;
      logic [2:0] sh;
      logic first;
      first = (s % 8 == 0);
      coe = 21'($urandom_range(1 << 14, (1 << 20) - 1));
      sh  = 3'($urandom);
      for (int g = 0; g < G; g++) begin
        for (int i = 0; i < HN; i++) begin
          logic signed [20:0] xv;
          xv = 21'($urandom);
          if (s % 3 == 0) xv = xv >>> 8;
          x[g][i] <= xv;
          q[g][i] = xv;                        // temporarily the raw input
        end
        for (int m = 0; m < M; m++)
          for (int i = 0; i < HN; i++) begin
            logic signed [7:0] wv;
            wv = 8'($urandom);
            w[g][m][i] <= wv;
            exp_acc[s][m] = 0;
            exp_sum[s][m] = 0;
          end
      end
      // reference: Hadamard, quantize
      for (int g = 0; g < G; g++) begin
        longint xh [HN];
        for (int j = 0; j < HN; j++) begin
          xh[j] = 0;
          for (int i = 0; i < HN; i++) xh[j] += hent(i, j) * q[g][i];
        end
        for (int j = 0; j < HN; j++) begin
          longint t;
          t = (xh[j] * longint'(coe)) >>> (20 + int'(sh));
          if (t > 127) begin t = 127; n_sat++; end
          if (t < -128) begin t = -128; n_sat++; end
          q[g][j] = t;
        end
      end
      s_coe <= coe; s_shift <= sh; acc_first <= first; in_valid <= 1'b1;
      @(posedge clk);  // weights are sampled at this edge; compute reference from them
      for (int m = 0; m < M; m++) begin
        longint sum;
        sum = 0;
        for (int g = 0; g < G; g++)
          for (int j = 0; j < HN; j++) sum += q[g][j] * longint'(w[g][m][j]);
        exp_sum[s][m] = (sum > 524287) ? 524287 : (sum < -524288) ? -524288 : sum;
        racc[m] = first ? sum : racc[m] + sum;
        exp_acc[s][m] = longint'(32'(racc[m]));
        exp_acc[s][m] = (exp_acc[s][m] >= 64'sd2147483648) ? exp_acc[s][m] - 64'sd4294967296 : exp_acc[s][m];
      end
      if (s % 7 == 6) begin in_valid <= 1'b0; @(posedge clk); end
    end
    in_valid <= 1'b0;
    repeat (8) @(posedge clk);
    checks += 2;
    if (n_out != NSTEP) begin failures++; $display("outputs %0d", n_out); end
    if (n_sat == 0) begin failures++; $display("quantizer never saturated"); end
    $display("quantizer saturations: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
