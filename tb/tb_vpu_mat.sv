// tb_vpu_mat: random 8-bit dot products of length 4 through the Multiplier
// Adder Tree (the linear module's configuration), including all -128 corner
// vectors and a saturating narrow output, against a 64-bit reference.
module tb_vpu_mat;
  localparam int N = 4, AW = 8, BW = 8, PW = 20;
  logic signed [AW-1:0] a [N];
  logic signed [BW-1:0] b [N];
  logic signed [PW-1:0] p;
  logic signed [9:0]    pn;
  logic [5:0] shift;
  int checks = 0, failures = 0;
  vpu_mat #(.N(N), .AW(AW), .BW(BW), .PW(PW)) dut (.*);
  vpu_mat #(.N(N), .AW(AW), .BW(BW), .PW(10)) dut_narrow (.a(a), .b(b), .shift(shift), .p(pn));
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      longint e, en;
      shift = (t < 250) ? 6'd0 : 6'($urandom_range(0, 6));
      for (int i = 0; i < N; i++) begin
        a[i] = AW'($urandom); b[i] = BW'($urandom);
        if (t == 0) begin a[i] = -8'sd128; b[i] = -8'sd128; end
      end
      #1;
      e = 0;
      for (int i = 0; i < N; i++) e += longint'(a[i]) * longint'(b[i]);
      e = e >>> shift;
      en = (e > 511) ? 511 : (e < -512) ? -512 : e;
      checks += 2;
      if (longint'(p) != e)  begin failures++; if (failures < 10) $display("got %0d want %0d", p, e); end
      if (longint'(pn) != en) begin failures++; if (failures < 10) $display("narrow got %0d want %0d", pn, en); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
