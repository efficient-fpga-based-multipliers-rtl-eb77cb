// tb_gf3_6m_input_stage: for random operand words A0..A2, B0..B2 and each of
// the five evaluation points, drives the three accumulate cycles with the
// point's coefficients (1, p, p^2; 0, 0, 1 for infinity) and checks
// X = A(p) and the three Karatsuba parts (re, re+im, im) offered to the
// multiplier, all against integer arithmetic mod 3.
module tb_gf3_6m_input_stage;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  scal_e  coef;
  f3_2m_t word_a, word_b, acc_a, acc_b;
  opsel_e opsel;
  f397_t  op_a, op_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gf3_6m_input_stage dut (.clk, .rst_n, .en, .clr, .coef, .word_a, .word_b,
                          .opsel, .op_a, .op_b, .acc_a, .acc_b);

  // point coefficients (re, im) of word w, written out by hand:
  // p = 1: 1,1,1   p = s: 1,s,-1   p = -1: 1,-1,1   p = -s: 1,-s,-1   inf: 0,0,1
  function automatic void pcoef(int pt, int w, output int cr, output int ci, output scal_e code);
    int tr [5][3] = '{'{1,1,1}, '{1,0,2}, '{1,2,1}, '{1,0,2}, '{0,0,1}};
    int ti [5][3] = '{'{0,0,0}, '{0,1,0}, '{0,0,0}, '{0,2,0}, '{0,0,0}};
    cr = tr[pt][w];
    ci = ti[pt][w];
    code = (cr == 0 && ci == 0) ? SC_ZERO : (cr == 1 && ci == 0) ? SC_P1 :
           (cr == 2 && ci == 0) ? SC_M1 : (ci == 1) ? SC_PS : SC_MS;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv_t ar [3], ai [3], br [3], bi [3];
    iv_t xr, xi, yr, yi;
    int cr, ci;
    scal_e code;
    coef = SC_ZERO; word_a = '0; word_b = '0; opsel = OP_RE;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int v = 0; v < 10; v++) begin
      for (int w = 0; w < 3; w++) begin ar[w] = rnd(); ai[w] = rnd(); br[w] = rnd(); bi[w] = rnd(); end
      for (int pt = 0; pt < 5; pt++) begin
        xr = zero(); xi = zero(); yr = zero(); yi = zero();
        for (int w = 0; w < 3; w++) begin
          pcoef(pt, w, cr, ci, code);
          for (int i = 0; i < M; i++) begin
            xr[i] = (xr[i] + cr * ar[w][i] + 2 * ci * ai[w][i]) % 3;
            xi[i] = (xi[i] + cr * ai[w][i] + ci * ar[w][i]) % 3;
            yr[i] = (yr[i] + cr * br[w][i] + 2 * ci * bi[w][i]) % 3;
            yi[i] = (yi[i] + cr * bi[w][i] + ci * br[w][i]) % 3;
          end
          en = 1; clr = (w == 0); coef = code;
          word_a = '{im: enc(ai[w]), re: enc(ar[w])};
          word_b = '{im: enc(bi[w]), re: enc(br[w])};
          @(posedge clk);
          #1;
        end
        en = 0;
        // one idle cycle: the accumulators must hold
        @(posedge clk);
        #1;
        checks += 2;
        if (!ieq(dec(acc_a.re), xr) || !ieq(dec(acc_a.im), xi)) failures++;
        if (!ieq(dec(acc_b.re), yr) || !ieq(dec(acc_b.im), yi)) failures++;
        opsel = OP_RE;  #1; checks++; if (!ieq(dec(op_a), xr) || !ieq(dec(op_b), yr)) failures++;
        opsel = OP_IM;  #1; checks++; if (!ieq(dec(op_a), xi) || !ieq(dec(op_b), yi)) failures++;
        opsel = OP_SUM; #1; checks++; if (!ieq(dec(op_a), iadd(xr, xi)) || !ieq(dec(op_b), iadd(yr, yi))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
