// tb_vpu_pma: random vectors through the Parallel Multiplier Adder Unit in the
// hidden-state configuration (16b x 32b + 32b -> 32b), compared lane by lane
// with a 64-bit reference of sat(((a*b) >>> shift) + c).
module tb_vpu_pma;
  localparam int N = 8, AW = 16, BW = 32, CW = 32, PW = 32;
  logic signed [AW-1:0] a [N];
  logic signed [BW-1:0] b [N];
  logic signed [CW-1:0] c [N];
  logic signed [PW-1:0] p [N];
  logic [5:0] shift;
  int checks = 0, failures = 0;
  vpu_pma #(.N(N), .AW(AW), .BW(BW), .CW(CW), .PW(PW)) dut (.*);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      shift = 6'($urandom_range(8, 16));
      for (int i = 0; i < N; i++) begin
        a[i] = AW'($urandom); b[i] = BW'($urandom); c[i] = CW'($urandom);
        if (t < 200) begin b[i] = b[i] >>> 12; c[i] = c[i] >>> 4; end
      end
      #1;
      for (int i = 0; i < N; i++) begin
        longint e;
        e = ((longint'(a[i]) * longint'(b[i])) >>> shift) + longint'(c[i]);
        if (e > 64'sd2147483647) e = 64'sd2147483647;
        if (e < -64'sd2147483648) e = -64'sd2147483648;
        checks++;
        if (longint'(p[i]) != e) begin
          failures++;
          if (failures < 10) $display("lane %0d got %0d want %0d", i, p[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
