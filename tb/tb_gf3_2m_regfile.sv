// tb_gf3_2m_regfile: random writes and reads of the 3-word memory against a
// model array, plus the synchronous clear.
module tb_gf3_2m_regfile;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, we = 0;
  logic [1:0] waddr = 0, raddr = 0;
  f3_2m_t wdata, rdata;
  f3_2m_t words [3];
  f3_2m_t model [3];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gf3_2m_regfile dut (.clk, .rst_n, .clr, .we, .waddr, .wdata, .raddr, .rdata, .words);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int r = 0; r < 3; r++) begin
      raddr = 2'(r);
      #1;
      checks += 2;
      if (rdata != model[r]) failures++;
      if (words[r] != model[r]) failures++;
    end
  endtask

  initial begin
    wdata = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3; i++) model[i] = '0;
    compare();
    for (int v = 0; v < 200; v++) begin
      we    = ($urandom_range(0, 3) != 0);
      clr   = ($urandom_range(0, 19) == 0);
      waddr = 2'($urandom_range(0, 2));
      wdata = '{im: enc(rnd()), re: enc(rnd())};
      @(posedge clk);
      if (clr) for (int i = 0; i < 3; i++) model[i] = '0;
      else if (we) model[waddr] = wdata;
      #1 we = 0; clr = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
