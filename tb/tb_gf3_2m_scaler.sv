// tb_gf3_2m_scaler: applies every scalar code to random F_{3^{2*97}} values
// and compares with (cr + ci s)(xr + xi s) = (cr xr - ci xi) + (cr xi + ci xr) s
// computed with integers mod 3.
module tb_gf3_2m_scaler;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  f3_2m_t x, y;
  scal_e  coef;
  int checks = 0, failures = 0;

  gf3_2m_scaler dut (.x, .coef, .y);

  // scalar code -> (re, im), written out by hand
  function automatic void scal_val(int code, output int cr, output int ci);
    case (code)
      0: begin cr = 0; ci = 0; end
      1: begin cr = 1; ci = 0; end
      2: begin cr = 2; ci = 0; end
      3: begin cr = 0; ci = 1; end
      4: begin cr = 0; ci = 2; end
      5: begin cr = 1; ci = 1; end
      6: begin cr = 1; ci = 2; end
      7: begin cr = 2; ci = 1; end
      default: begin cr = 2; ci = 2; end
    endcase
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv_t xr, xi, er, ei;
    int cr, ci;
    for (int v = 0; v < 30; v++) begin
      xr = rnd();
      xi = rnd();
      for (int code = 0; code < 9; code++) begin
        scal_val(code, cr, ci);
        for (int i = 0; i < M; i++) begin
          er[i] = (cr * xr[i] + 2 * ci * xi[i]) % 3;
          ei[i] = (cr * xi[i] + ci * xr[i]) % 3;
        end
        x = '{im: enc(xi), re: enc(xr)};
        coef = scal_e'(code);
        #1;
        checks++;
        if (!ieq(dec(y.re), er) || !ieq(dec(y.im), ei)) begin
          failures++;
          if (failures < 5) $display("scaler code %0d wrong", code);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
