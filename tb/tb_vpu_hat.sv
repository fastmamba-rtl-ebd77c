// tb_vpu_hat: drives the Hadamard Adder Tree with every row of the 4x4
// Sylvester Hadamard matrix and random 21-bit inputs, and checks the result
// against the signed sum computed from the +1/-1 entries.
module tb_vpu_hat;
  localparam int N = 4, AW = 21, HW = 4, PW = AW + 3;
  logic signed [AW-1:0] a [N];
  logic signed [HW-1:0] h [N];
  logic signed [PW-1:0] p;
  int checks = 0, failures = 0;
  vpu_hat #(.N(N), .AW(AW), .HW(HW)) dut (.*);
  // Sylvester H4: entry (r,c) = (-1)^popcount(r & c)
  function automatic int hent(input int r, input int c);
    return ($countones(r & c) % 2 == 1) ? -1 : 1;
  endfunction
  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      int r;
      longint e;
      r = t % 4;
      e = 0;
      for (int i = 0; i < N; i++) begin
        a[i] = AW'($urandom);
        h[i] = HW'(hent(r, i));
      end
      if (t == 5) for (int i = 0; i < N; i++) a[i] = (hent(r, i) < 0) ? -(21'sd1 <<< 20) : ((21'sd1 <<< 20) - 1);
      #1;
      for (int i = 0; i < N; i++) e += hent(r, i) * longint'(a[i]);
      checks++;
      if (longint'(p) != e) begin
        failures++;
        if (failures < 10) $display("row %0d got %0d want %0d", r, p, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
