// tb_conv_module: streams three random sequences through the 32-channel
// causal convolution and compares every output with a direct evaluation of
// sum_k w[k] * x[t-3+k] (zeros before the sequence start), shifted and
// saturated to 16 bits. Checks the 1-cycle latency, a gap in the stream and
// that saturation occurred.
module tb_conv_module;
  localparam int CH = 32, K = 4, NT = 60;
  logic clk = 0, rst_n = 0, in_valid = 0, seq_start = 0, out_valid;
  logic signed [15:0] x [CH];
  logic signed [15:0] w [CH][K];
  logic [5:0] shift;
  logic signed [15:0] y [CH];
  int checks = 0, failures = 0, n_sat = 0, n_out = 0;
  longint hx [NT][CH];
  longint ev [NT][CH];

  conv_module dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outputs are checked one edge after the sample was accepted
  logic pend = 0, pend_d = 0;
  int   pend_t, pend_t_d;
  always @(posedge clk) begin
    pend_d <= pend; pend_t_d <= pend_t;
    if (pend_d) begin
      checks++;
      if (!out_valid) begin failures++; $display("t=%0d no out_valid", pend_t_d); end
      for (int c = 0; c < CH; c++) begin
        checks++;
        if (longint'(y[c]) != ev[pend_t_d][c]) begin
          failures++;
          if (failures < 10) $display("t=%0d ch %0d got %0d want %0d", pend_t_d, c, y[c], ev[pend_t_d][c]);
        end
      end
      n_out++;
    end
  end

  initial begin
    shift = 6'd10;
    for (int c = 0; c < CH; c++)
      for (int k = 0; k < K; k++) w[c][k] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      int t0;
      t0 = (t < 20) ? 0 : (t < 45) ? 20 : 45;      // three sequences
      for (int c = 0; c < CH; c++) begin
        longint s;
        hx[t][c] = longint'($signed(16'($urandom)));
        s = 0;
        for (int k = 0; k < K; k++) begin
          int tt;
          tt = t - (K - 1) + k;
          if (tt >= t0) s += longint'(w[c][k]) * hx[tt][c];
        end
        s = s >>> 10;
        if (s > 32767) begin s = 32767; n_sat++; end
        if (s < -32768) begin s = -32768; n_sat++; end
        ev[t][c] = s;
        x[c] <= 16'(hx[t][c]);
      end
      seq_start <= (t == t0);
      in_valid <= 1'b1;
      pend <= 1'b1; pend_t <= t;
      @(posedge clk);
      if (t == 30) begin
        in_valid <= 1'b0; x[0] <= 16'sd12345;      // gap: must not disturb the history
        pend <= 1'b0;
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    pend <= 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_sat == 0 || n_out != NT) begin failures++; $display("n_sat %0d n_out %0d", n_sat, n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
