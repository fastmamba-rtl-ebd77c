// tb_vpu_pmu: random vectors through the Parallel Multiplier Unit, compared
// lane by lane with a 64-bit reference of sat((a*b) >>> shift).
module tb_vpu_pmu;
  localparam int N = 24, AW = 16, BW = 16, PW = 16;
  logic signed [AW-1:0] a [N];
  logic signed [BW-1:0] b [N];
  logic signed [PW-1:0] p [N];
  logic [5:0] shift;
  int checks = 0, failures = 0;
  vpu_pmu #(.N(N), .AW(AW), .BW(BW), .PW(PW)) dut (.*);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      shift = 6'($urandom_range(0, 20));
      for (int i = 0; i < N; i++) begin
        a[i] = AW'($urandom); b[i] = BW'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        longint e;
        e = (longint'(a[i]) * longint'(b[i])) >>> shift;
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (longint'(p[i]) != e) begin
          failures++;
          if (failures < 10) $display("lane %0d: %0d * %0d >>> %0d got %0d want %0d", i, a[i], b[i], shift, p[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
