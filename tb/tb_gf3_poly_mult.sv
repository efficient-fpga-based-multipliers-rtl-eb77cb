// tb_gf3_poly_mult: random test of the digit multiplier in the paper's three
// method shapes: K K C_4 on 14 coefficients (default), K C_4 on 7 and C_4 on
// 4. Products are compared with an integer schoolbook product mod 3.
module tb_gf3_poly_mult;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  localparam int NV = 300;
  int checks = 0, failures = 0;

  f3_t [13:0] a14, b14;  f3_t [26:0] p14;
  f3_t [6:0]  a7,  b7;   f3_t [12:0] p7;
  f3_t [3:0]  a4,  b4;   f3_t [6:0]  p4;

  gf3_poly_mult                         dut14 (.a(a14), .b(b14), .p(p14));
  gf3_poly_mult #(.N(7), .LEVELS(1))    dut7  (.a(a7),  .b(b7),  .p(p7));
  gf3_poly_mult #(.N(4), .LEVELS(0))    dut4  (.a(a4),  .b(b4),  .p(p4));

  task automatic check(int n, int ai [], int bi [], f3_t got []);
    int exp [];
    bit ok = 1;
    exp = new[2*n-1];
    foreach (exp[i]) exp[i] = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) exp[i+j] = (exp[i+j] + ai[i] * bi[j]) % 3;
    for (int i = 0; i < 2 * n - 1; i++) if (dec1(got[i]) != exp[i]) ok = 0;
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("mismatch for N=%0d", n);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ai [], bi [];
    f3_t got [];
    for (int v = 0; v < NV; v++) begin
      // first vectors: all-twos operands, the largest coefficient sums
      ai = new[14]; bi = new[14];
      foreach (ai[i]) begin
        ai[i] = (v == 0) ? 2 : int'($urandom_range(0, 2));
        bi[i] = (v == 0) ? 2 : int'($urandom_range(0, 2));
      end
      for (int i = 0; i < 14; i++) begin a14[i] = enc1(ai[i]); b14[i] = enc1(bi[i]); end
      for (int i = 0; i < 7; i++)  begin a7[i]  = enc1(ai[i]); b7[i]  = enc1(bi[i]); end
      for (int i = 0; i < 4; i++)  begin a4[i]  = enc1(ai[i]); b4[i]  = enc1(bi[i]); end
      #1;
      got = new[27]; foreach (got[i]) got[i] = p14[i];
      check(14, ai, bi, got);
      got = new[13]; foreach (got[i]) got[i] = p7[i];
      check(7, ai, bi, got);
      got = new[7];  foreach (got[i]) got[i] = p4[i];
      check(4, ai, bi, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
