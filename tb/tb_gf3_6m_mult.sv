// tb_gf3_6m_mult: end-to-end test of the F_{3^{6*97}} multiplier at its
// default parameters (D = 14, K K C_4). Multiplies corner operands (zero,
// one, r^2 s times itself, all twos) and random pairs, compares gamma with
// a schoolbook product over the tower computed with integers mod 3, and
// checks the latency of 149 clock edges from start to done. It also counts
// the mechanisms of the pipeline and fails if one never happens: input
// accumulation while the multiplier runs, output accumulation while it runs,
// each of the four input-stage scalars (1, -1, s, -s) and each of the eight
// non-zero output-stage scalars (+-1, +-s, +-1 +- s), and a start given
// back to back right after done.
module tb_gf3_6m_mult;
  import gf3_pkg::*;
  import tb_gf3_ref_pkg::*;

  localparam int NW  = 7;
  localparam int LAT = 9 + 15 * (NW + 2) + 5;
  localparam int NV  = 12;

  logic clk = 0, rst_n = 0, start = 0;
  f397_t [5:0] alpha, beta, gamma;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gf3_6m_mult dut (.clk, .rst_n, .start, .alpha, .beta, .gamma, .busy, .done);

  // mechanism counters
  int n_in_overlap = 0, n_out_overlap = 0, n_back_to_back = 0;
  int in_used [9], out_used [9];
  int cyc = 0;
  logic done_q = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    done_q <= done;
    if (start && !busy && done_q) n_back_to_back++;
    if (dut.in_en && dut.mul_busy) n_in_overlap++;
    if (dut.out_en && dut.mul_busy) n_out_overlap++;
    if (dut.in_en) in_used[int'(dut.in_coef_s)]++;
    if (dut.out_en) out_used[int'(dut.out_coef_s)]++;
  end

  task automatic run(i6_t av, i6_t bv, bit back_to_back);
    i6_t ev;
    time t0;
    ev = i6mul(av, bv);
    for (int w = 0; w < 3; w++) begin
      alpha[2*w] = enc(av[w].re); alpha[2*w+1] = enc(av[w].im);
      beta[2*w]  = enc(bv[w].re); beta[2*w+1]  = enc(bv[w].im);
    end
    start = 1;
    @(posedge clk);
    t0 = $time;
    #1 start = 0;
    do @(posedge clk); while (!done);
    // done is sampled at this edge: the next start comes in the cycle that follows
    checks++;
    if (($time - t0) / 10 != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", ($time - t0) / 10, LAT);
    end
    for (int w = 0; w < 3; w++) begin
      checks++;
      if (!ieq(dec(gamma[2*w]), ev[w].re) || !ieq(dec(gamma[2*w+1]), ev[w].im)) begin
        failures++;
        if (failures < 6) $display("result word %0d wrong", w);
      end
    end
    #1;
    if (!back_to_back) begin
      repeat (2) @(posedge clk);
      #1;
    end
  endtask

  function automatic i6_t rnd6();
    i6_t v;
    for (int w = 0; w < 3; w++) begin v[w].re = rnd(); v[w].im = rnd(); end
    return v;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    i6_t av, bv;
    foreach (in_used[i]) begin in_used[i] = 0; out_used[i] = 0; end
    alpha = '0; beta = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1;
    // zero times random
    for (int w = 0; w < 3; w++) begin av[w].re = zero(); av[w].im = zero(); end
    run(av, rnd6(), 0);
    // one times random
    av[0].re[0] = 1;
    run(av, rnd6(), 0);
    // (r^2 s)^2 = -r^4 = -r^2 - r
    for (int w = 0; w < 3; w++) begin av[w].re = zero(); av[w].im = zero(); end
    av[2].im[0] = 1;
    run(av, av, 0);
    // all twos
    for (int w = 0; w < 3; w++) foreach (av[w].re[i]) begin av[w].re[i] = 2; av[w].im[i] = 2; end
    run(av, av, 0);
    // random, started in the cycle right after done
    for (int v = 0; v < NV; v++) run(rnd6(), rnd6(), 1);

    checks += 4;
    if (n_in_overlap == 0)   begin failures++; $display("no input step under a multiplication"); end
    if (n_out_overlap == 0)  begin failures++; $display("no output step under a multiplication"); end
    if (n_back_to_back == 0) begin failures++; $display("no back-to-back start"); end
    for (int c = 1; c < 5; c++) begin
      checks++;
      if (in_used[c] == 0) begin failures++; $display("input scalar %0d never used", c); end
    end
    for (int c = 1; c < 9; c++) begin
      checks++;
      if (out_used[c] == 0) begin failures++; $display("output scalar %0d never used", c); end
    end
    if (in_used[5] + in_used[6] + in_used[7] + in_used[8] != 0) failures++;
    $display("mechanisms: input steps under mult %0d, output steps under mult %0d, back-to-back %0d",
             n_in_overlap, n_out_overlap, n_back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
