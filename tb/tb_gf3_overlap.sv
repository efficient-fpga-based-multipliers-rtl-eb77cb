// tb_gf3_overlap: random test of the overlap circuit at D = 14 (7 digit
// products). The expected sum places product i at x^(14 i) and adds
// overlapping coefficients with integer arithmetic mod 3.
module tb_gf3_overlap;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  localparam int D = 14, NW = 7;
  f3_t [NW-1:0][2*D-2:0] prods;
  f3_t [NW*D+D-2:0]      sum;
  int checks = 0, failures = 0;

  gf3_overlap dut (.prods, .sum);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pv [NW][2*D-1];
    int exp [NW*D+D-1];
    for (int v = 0; v < 200; v++) begin
      foreach (exp[i]) exp[i] = 0;
      for (int i = 0; i < NW; i++)
        for (int j = 0; j < 2 * D - 1; j++) begin
          pv[i][j] = (v == 0) ? 2 : int'($urandom_range(0, 2));
          prods[i][j] = enc1(pv[i][j]);
          exp[i*D+j] = (exp[i*D+j] + pv[i][j]) % 3;
        end
      #1;
      for (int i = 0; i < NW * D + D - 1; i++) begin
        checks++;
        if (dec1(sum[i]) != exp[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
