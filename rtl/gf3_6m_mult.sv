// gf3_6m_mult: multiplier for F_{3^{6*97}}, built on one digit-level LFSR
// multiplier for F_{3^97} and run as the three-stage pipeline (input stage,
// multiplication, output stage) proposed in the source paper.
//
// Field tower: F_{3^97} = F3[x]/(x^97+x^16+2), F_{3^{2*97}} = F_{3^97}[s]/(s^2+1),
// F_{3^{6*97}} = F_{3^{2*97}}[r]/(r^3-r-1). An operand is given by its six
// F_{3^97} coefficients in the order of the paper,
//   alpha = a0 + a1 s + a2 r + a3 rs + a4 r^2 + a5 r^2 s,
// and the product gamma = alpha*beta is returned the same way.
//
// The product over r is evaluated at the five points 1, s, -1, -s and
// infinity (five F_{3^{2*97}} products, the paper's 5-multiplication formula),
// and each of these is split by Karatsuba into three F_{3^97} products: 15
// multiplications in all, run one after another on the single multiplier.
// While one runs, the input stage forms the operands of the next and the
// output stage adds the previous one, times a scalar of F9, into the three
// result words. The results are then already reduced modulo r^3 - r - 1.
//
// Interface: pulse `start` while `busy` is low; alpha and beta are read in the
// three cycles after it (hold them stable while busy). `done` is high for one
// cycle when gamma is final; gamma keeps its value until the next start.
// Latency: done is sampled 9 + 15*(max(3,NW)+2) + 5 clock edges after the
// edge that sampled start, 149 for the default digit size D = 14 (NW = 7).
module gf3_6m_mult
  import gf3_pkg::*;
#(
  parameter int D      = 14,
  parameter int LEVELS = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  f397_t [5:0]  alpha,
  input  f397_t [5:0]  beta,
  output f397_t [5:0]  gamma,
  output logic         busy,
  output logic         done
);
  logic       ld_we, res_clr, in_en, in_clr, mul_start, mul_busy, mul_done;
  logic       p_load, out_en, res_we;
  logic [1:0] ld_addr, in_raddr, out_idx, res_raddr, res_waddr;
  scal_e      in_coef_s, out_coef_s;
  opsel_e     opsel;
  f3_2m_t     wa, wb, word_a, word_b, res_rdata, res_wdata;
  f3_2m_t     a_words [NWORD], b_words [NWORD], res_words [NWORD];
  f3_2m_t     acc_a, acc_b;
  f397_t      op_a, op_b, prod;

  gf3_6m_ctrl u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .ld_we, .ld_addr, .res_clr, .in_raddr,
    .in_en, .in_clr, .in_coef_o(in_coef_s), .opsel,
    .mul_start, .mul_busy,
    .p_load, .out_en, .out_idx, .out_coef_o(out_coef_s));

  // operand words A_w = alpha[2w] + alpha[2w+1] s
  always_comb begin
    wa = '{im: alpha[2*ld_addr+1], re: alpha[2*ld_addr]};
    wb = '{im: beta[2*ld_addr+1],  re: beta[2*ld_addr]};
  end

  gf3_2m_regfile #(.WORDS(NWORD), .AW(2)) u_mem_a (
    .clk, .rst_n, .clr(1'b0), .we(ld_we), .waddr(ld_addr), .wdata(wa),
    .raddr(in_raddr), .rdata(word_a), .words(a_words));

  gf3_2m_regfile #(.WORDS(NWORD), .AW(2)) u_mem_b (
    .clk, .rst_n, .clr(1'b0), .we(ld_we), .waddr(ld_addr), .wdata(wb),
    .raddr(in_raddr), .rdata(word_b), .words(b_words));

  gf3_6m_input_stage u_in (
    .clk, .rst_n, .en(in_en), .clr(in_clr), .coef(in_coef_s),
    .word_a, .word_b, .opsel, .op_a, .op_b, .acc_a, .acc_b);

  gf397_lfsr_mult #(.D(D), .LEVELS(LEVELS)) u_mul (
    .clk, .rst_n, .start(mul_start), .a(op_a), .b(op_b), .c(prod),
    .busy(mul_busy), .done(mul_done));

  gf3_6m_output_stage #(.AW(2)) u_out (
    .clk, .rst_n, .p_load, .p_in(prod), .en(out_en), .idx(out_idx),
    .coef(out_coef_s), .raddr(res_raddr), .rdata(res_rdata),
    .we(res_we), .waddr(res_waddr), .wdata(res_wdata));

  gf3_2m_regfile #(.WORDS(NWORD), .AW(2)) u_mem_c (
    .clk, .rst_n, .clr(res_clr), .we(res_we), .waddr(res_waddr), .wdata(res_wdata),
    .raddr(res_raddr), .rdata(res_rdata), .words(res_words));

  always_comb begin
    for (int w = 0; w < NWORD; w++) begin
      gamma[2*w]   = res_words[w].re;
      gamma[2*w+1] = res_words[w].im;
    end
  end
endmodule
