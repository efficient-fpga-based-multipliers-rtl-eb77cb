// tb_gf3_cell: exhaustive test of the F3 cell. All nine input pairs are
// applied and sum, product and negation are compared with integer
// arithmetic mod 3.
module tb_gf3_cell;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  f3_t a, b, sum, prod, neg_a;
  int checks = 0, failures = 0;

  gf3_cell dut (.a, .b, .sum, .prod, .neg_a);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 3; x++)
      for (int y = 0; y < 3; y++) begin
        a = enc1(x);
        b = enc1(y);
        #1;
        checks += 3;
        if (sum != enc1(x + y)) begin failures++; $display("add %0d+%0d -> %b", x, y, sum); end
        if (prod != enc1(x * y)) begin failures++; $display("mul %0d*%0d -> %b", x, y, prod); end
        if (neg_a != enc1(3 - x)) begin failures++; $display("neg %0d -> %b", x, neg_a); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
