// tb_vpu_pau: random and saturating vectors through the Parallel Adder Unit,
// compared lane by lane with a 64-bit reference of sat((a+b) >>> shift).
module tb_vpu_pau;
  localparam int N = 24, AW = 16, PW = 16;
  logic signed [AW-1:0] a [N], b [N];
  logic signed [PW-1:0] p [N];
  logic [5:0] shift;
  int checks = 0, failures = 0;
  vpu_pau #(.N(N), .AW(AW), .PW(PW)) dut (.*);
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      shift = (t < 100) ? 6'd0 : 6'($urandom_range(0, 3));
      for (int i = 0; i < N; i++) begin
        a[i] = AW'($urandom); b[i] = AW'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        longint e;
        e = (longint'(a[i]) + longint'(b[i])) >>> shift;
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks++;
        if (longint'(p[i]) != e) begin
          failures++;
          if (failures < 10) $display("lane %0d: %0d + %0d >>> %0d got %0d want %0d", i, a[i], b[i], shift, p[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
