// tb_gf3_6m_ctrl: runs the controller against a model of the F_{3^97}
// multiplier that stays busy for NW = 7 cycles after each start. Checks:
// 15 multiplier starts with operand parts cycling re, sum, im; 5 input
// accumulations of 3 words each, all while the multiplier is busy except the
// very first; 45 output steps, one word per step, 3 per product, each after
// the product was latched; the output coefficients of the nine products
// whose points are 1, -1 and infinity into result word 1 (c2 + c3 s), taken
// by hand from the paper's appendix formulas for c2 and c3; and the
// start-to-done latency of 149 clock edges.
module tb_gf3_6m_ctrl;
  import gf3_pkg::*;

  localparam int NW = 7;
  localparam int LAT = 9 + 15 * (NW + 2) + 5;   // edges from start sampled to done sampled

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, ld_we, res_clr, in_en, in_clr, mul_start, mul_busy = 0;
  logic p_load, out_en;
  logic [1:0] ld_addr, in_raddr, out_idx;
  scal_e in_coef_o, out_coef_o;
  opsel_e opsel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gf3_6m_ctrl dut (.*);

  // multiplier model
  int mcnt = 0;
  always @(posedge clk) begin
    if (mul_start) begin mul_busy <= 1; mcnt <= NW; end
    else if (mul_busy) begin
      mcnt <= mcnt - 1;
      if (mcnt == 1) mul_busy <= 0;
    end
  end

  // expected coefficients of products into word 1, from the appendix:
  // c2 = -P0+P2+P6-P8+P12-P14, c3 = P0-P1+P2-P6+P7-P8-P12+P13-P14
  function automatic scal_e w1_exp(int k);
    case (k)
      0:  return SC_M1PS;  1: return SC_MS;   2: return SC_P1PS;
      6:  return SC_P1MS;  7: return SC_PS;   8: return SC_M1MS;
      12: return SC_P1MS; 13: return SC_PS;  14: return SC_M1MS;
      default: return SC_ZERO;
    endcase
  endfunction

  int n_start = 0, n_in = 0, n_in_overlap = 0, n_out = 0, n_out_overlap = 0;
  int n_load = 0, n_latch = 0, cyc = 0, t0 = 0, lat = -1;
  bit counting = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (start && !busy) t0 = cyc;
    if (done && counting) begin lat = cyc - t0; counting = 0; end
    if (ld_we) n_load++;
    if (mul_start) begin
      checks++;
      if (opsel != opsel_e'((n_start % 3 == 0) ? OP_RE : (n_start % 3 == 1) ? OP_SUM : OP_IM)) failures++;
      n_start++;
    end
    if (in_en) begin
      checks++;
      if (int'(in_raddr) != n_in % 3 || in_clr != (n_in % 3 == 0)) failures++;
      n_in++;
      if (mul_busy) n_in_overlap++;
    end
    if (p_load) n_latch++;
    if (out_en) begin
      int k;
      k = n_out / 3;
      checks++;
      if (int'(out_idx) != n_out % 3) failures++;
      if (n_latch != k + 1) failures++;
      if (out_idx == 2'd1 && w1_exp(k) != SC_ZERO) begin
        checks++;
        if (out_coef_o != w1_exp(k)) begin
          failures++;
          $display("product %0d word 1: coef %0d", k, out_coef_o);
        end
      end
      n_out++;
      if (mul_busy) n_out_overlap++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1 start = 1; counting = 1;
    @(posedge clk);
    #1 start = 0;
    wait (!counting);
    repeat (3) @(posedge clk);
    checks += 8;
    if (lat != LAT) begin failures++; $display("latency %0d, expected %0d", lat, LAT); end
    if (n_start != 15) begin failures++; $display("starts %0d", n_start); end
    if (n_in != 15) begin failures++; $display("input steps %0d", n_in); end
    if (n_in_overlap != 12) begin failures++; $display("input steps under mult %0d", n_in_overlap); end
    if (n_out != 45) begin failures++; $display("output steps %0d", n_out); end
    if (n_out_overlap != 42) begin failures++; $display("output steps under mult %0d", n_out_overlap); end
    if (n_load != 3) failures++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
