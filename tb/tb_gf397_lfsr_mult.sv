// tb_gf397_lfsr_mult: tests the F_{3^97} LFSR multiplier in all five
// configurations of the paper's table (D = 1, 2, 4, 7, 14 with C_1, C_2, C_4,
// K C_4, K K C_4). Each runs corner operands (0, 1, x^96 * x^96, all twos)
// and random ones; every product is compared with the integer reference
// a*b mod f, and the number of cycles from start to done is checked against
// ceil(97/D) multiply cycles.
module tb_gf397_lfsr_mult;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  localparam int NCFG = 5;
  localparam int DS [NCFG] = '{1, 2, 4, 7, 14};
  localparam int LS [NCFG] = '{0, 0, 0, 1, 2};
  localparam int NV = 40;

  logic clk = 0, rst_n = 0;
  logic  start [NCFG];
  f397_t a, b;
  f397_t c [NCFG];
  logic  busy [NCFG], done [NCFG];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < NCFG; g++) begin : g_dut
    gf397_lfsr_mult #(.D(DS[g]), .LEVELS(LS[g])) dut (
      .clk, .rst_n, .start(start[g]), .a, .b, .c(c[g]), .busy(busy[g]), .done(done[g]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int g, iv_t av, iv_t bv);
    int cyc = 0;
    iv_t ev;
    ev = imul(av, bv);
    a = enc(av);
    b = enc(bv);
    start[g] = 1'b1;
    @(posedge clk);
    #1 start[g] = 1'b0;
    while (!done[g]) begin
      @(posedge clk);
      #1 cyc++;
    end
    checks += 2;
    if (cyc != (M + DS[g] - 1) / DS[g]) begin
      failures++;
      $display("D=%0d: %0d multiply cycles, expected %0d", DS[g], cyc, (M + DS[g] - 1) / DS[g]);
    end
    if (!ieq(dec(c[g]), ev)) begin
      failures++;
      if (failures < 6) $display("D=%0d: wrong product", DS[g]);
    end
    if (busy[g]) begin failures++; $display("busy still high at done"); end
  endtask

  initial begin
    iv_t av, bv;
    for (int g = 0; g < NCFG; g++) start[g] = 1'b0;
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int g = 0; g < NCFG; g++) begin
      // 0 * random
      run(g, zero(), rnd());
      // 1 * random
      av = zero(); av[0] = 1; bv = rnd();
      run(g, av, bv);
      // x^96 * x^96 = x^192: exercises the feedback most
      av = zero(); av[96] = 1;
      run(g, av, av);
      // all twos
      foreach (av[i]) av[i] = 2;
      run(g, av, av);
      for (int v = 0; v < NV; v++) run(g, rnd(), rnd());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
