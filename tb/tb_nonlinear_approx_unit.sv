// tb_nonlinear_approx_unit: self-checking test of the 24-lane exp/SoftPlus unit.
//
// Streams random Q3.12 vectors back to back in both modes and compares every
// lane with the real-valued target of the approximation (e^x for EXP;
// e^x for x<=0 and e^-x + x for x>0 in SOFTPLUS), within a tolerance that
// covers the 1.0111b approximation of log2 e and the 8-segment chords. Also
// checks the 3-cycle latency and one-vector-per-cycle throughput, and the
// clamp of positive inputs in EXP mode.
module tb_nonlinear_approx_unit;
  import fm_pkg::*;
  localparam int LANES = 24, W = 16, FRAC = 12, NVEC = 200;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  nau_func_e func = NAU_EXP;
  logic signed [W-1:0] x [LANES], y [LANES];
  int checks = 0, failures = 0;
  int cycle = 0;

  nonlinear_approx_unit #(.LANES(LANES), .W(W), .FRAC(FRAC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected vectors and issue cycles
  real exp_arr [NVEC][LANES];
  int  n_out = 0;
  int  issue_q [$];

  function automatic real target(input logic signed [W-1:0] xi, input nau_func_e f);
    real xr;
    xr = real'(xi) / 4096.0;
    if (f == NAU_EXP) return (xr > 0.0) ? 1.0 : $exp(xr);
    return (xr > 0.0) ? $exp(-xr) + xr : $exp(xr);
  endfunction

  always @(posedge clk) if (in_valid) issue_q.push_back(cycle);

  always @(posedge clk) if (rst_n && out_valid) begin
    int  ic;
    ic = issue_q.pop_front();
    checks++;
    if (cycle - ic != 3) begin
      failures++; $display("latency %0d != 3", cycle - ic);
    end
    for (int i = 0; i < LANES; i++) begin
      real got, tol;
      got = real'(y[i]) / 4096.0;
      tol = 3.0/4096.0 + 0.006 * exp_arr[n_out][i] + 0.0045 * 8.0 * exp_arr[n_out][i];
      checks++;
      if (got - exp_arr[n_out][i] > tol || exp_arr[n_out][i] - got > tol) begin
        failures++;
        if (failures < 10) $display("lane %0d got %f want %f", i, got, exp_arr[n_out][i]);
      end
    end
    n_out++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int v = 0; v < NVEC; v++) begin
      nau_func_e f;
      f = (v % 2 == 1) ? NAU_SOFTPLUS : NAU_EXP;
      for (int i = 0; i < LANES; i++) begin
        logic signed [W-1:0] r;
        r = W'($urandom);
        if (f == NAU_EXP && v != 10) r = (r > 0) ? -r : r;   // vector 10 tests the clamp
        if (f == NAU_EXP && r < -16'sd32000) r = -16'sd32000;
        if (i == 0) r = '0;
        x[i] <= r;
        exp_arr[v][i] = target(r, f);
      end
      func <= f;
      in_valid <= 1'b1;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != NVEC) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
