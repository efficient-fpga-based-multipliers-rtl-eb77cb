// tb_gf3_6m_output_stage: loads random products, issues back-to-back
// read-modify-write steps to the three result words of a model memory with
// every non-zero scalar code, and checks each written word against
// word + (cr + ci s)*P computed with integers mod 3. Also checks that a
// write lands exactly one cycle after its step.
module tb_gf3_6m_output_stage;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  logic clk = 0, rst_n = 0, p_load = 0, en = 0, we;
  logic [1:0] idx = 0, raddr, waddr;
  scal_e  coef;
  f397_t  p_in;
  f3_2m_t rdata, wdata;
  f3_2m_t mem [3];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gf3_6m_output_stage dut (.clk, .rst_n, .p_load, .p_in, .en, .idx, .coef,
                           .raddr, .rdata, .we, .waddr, .wdata);

  assign rdata = mem[raddr];
  always @(posedge clk) if (we) mem[waddr] <= wdata;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv_t mr [3], mi [3], pv;
    int cr, ci, code;
    int cr_t [9] = '{0, 1, 2, 0, 0, 1, 1, 2, 2};
    int ci_t [9] = '{0, 0, 0, 1, 2, 1, 2, 1, 2};
    coef = SC_ZERO; p_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      mr[w] = rnd(); mi[w] = rnd();
      mem[w] = '{im: enc(mi[w]), re: enc(mr[w])};
    end
    for (int v = 0; v < 40; v++) begin
      pv = rnd();
      p_in = enc(pv); p_load = 1;
      @(posedge clk);
      #1 p_load = 0; p_in = enc(rnd());   // must not disturb the held product
      for (int w = 0; w < 3; w++) begin
        code = 1 + int'($urandom_range(0, 7));
        cr = cr_t[code]; ci = ci_t[code];
        en = 1; idx = 2'(w); coef = scal_e'(code);
        for (int i = 0; i < M; i++) begin
          mr[w][i] = (mr[w][i] + cr * pv[i]) % 3;
          mi[w][i] = (mi[w][i] + ci * pv[i]) % 3;
        end
        @(posedge clk);
        #1;
        checks++;
        if (!we || waddr != 2'(w)) failures++;
      end
      en = 0;
      @(posedge clk);
      #1;
      checks++;
      if (we) failures++;
      for (int w = 0; w < 3; w++) begin
        checks++;
        if (!ieq(dec(mem[w].re), mr[w]) || !ieq(dec(mem[w].im), mi[w])) begin
          failures++;
          if (failures < 5) $display("word %0d wrong after product %0d", w, v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
