// tb_lin_quantize: random Hadamard-domain values, scales and shifts through
// the 8-bit quantizer, against a 64-bit reference of
// sat8((x * s_coe) >>> (20 + s_shift)); counts saturated and in-range cases.
module tb_lin_quantize;
  localparam int N = 4, IW = 24;
  logic signed [IW-1:0] x [N];
  logic signed [20:0] s_coe;
  logic [2:0] s_shift;
  logic signed [7:0] q [N];
  int checks = 0, failures = 0, n_sat = 0, n_in = 0;
  lin_quantize dut (.*);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 1000; t++) begin
      s_coe = 21'($urandom_range(0, (1 << 20) - 1));
      s_shift = 3'($urandom);
      for (int i = 0; i < N; i++) begin
        x[i] = IW'($urandom);
        if (t % 2 == 0) x[i] = x[i] >>> 12;
      end
      #1;
      for (int i = 0; i < N; i++) begin
        longint e;
        e = (longint'(x[i]) * longint'(s_coe)) >>> (20 + int'(s_shift));
        if (e > 127 || e < -128) n_sat++; else n_in++;
        if (e > 127) e = 127;
        if (e < -128) e = -128;
        checks++;
        if (longint'(q[i]) != e) begin
          failures++;
          if (failures < 10) $display("x=%0d coe=%0d sh=%0d got %0d want %0d", x[i], s_coe, s_shift, q[i], e);
        end
      end
    end
    checks++;
    if (n_sat == 0 || n_in == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
