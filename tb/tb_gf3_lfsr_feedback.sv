// tb_gf3_lfsr_feedback: random test of the feedback circuit at D = 14. For a
// random accumulator c and overlap sum ov (of degree <= 96+D-1), the result
// must equal (c*x^D + ov) mod (x^97 + x^16 + 2), computed here by the
// integer reference reduction.
module tb_gf3_lfsr_feedback;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  localparam int D = 14, NW = 7;
  f397_t            c, c_next;
  f3_t [NW*D+D-2:0] ov;
  int checks = 0, failures = 0;

  gf3_lfsr_feedback dut (.c, .ov, .c_next);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv_t cv, ev;
    int t [2*M-1];
    for (int v = 0; v < 300; v++) begin
      cv = (v == 0) ? ineg(zero()) : rnd();
      if (v == 0) foreach (cv[i]) cv[i] = 2;
      c = enc(cv);
      foreach (t[i]) t[i] = 0;
      for (int i = 0; i < M; i++) t[i+D] = cv[i];
      ov = '0;
      for (int i = 0; i < M + D - 1; i++) begin
        int o;
        o = (v == 0) ? 2 : int'($urandom_range(0, 2));
        ov[i] = enc1(o);
        t[i] = (t[i] + o) % 3;
      end
      ev = ireduce(t);
      #1;
      checks++;
      if (!ieq(dec(c_next), ev)) begin
        failures++;
        if (failures < 4) $display("feedback mismatch at vector %0d", v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
