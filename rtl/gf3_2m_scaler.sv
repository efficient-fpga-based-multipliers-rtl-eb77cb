// gf3_2m_scaler: scalar unit of the input and output stages. It multiplies a
// value x = re + im*s of F_{3^{2*97}} by one of the F9 scalars 0, +-1, +-s,
// +-1 +- s, with the structure drawn in the source paper: fixed units -s, s
// and -1 (bit permutations only), a left mux choosing s*x or -s*x, a right
// mux choosing x or -x, and a final ("hatched") mux that passes the left
// output, the right output, or their sum. Zero is this design's addition,
// used to skip a term. Purely combinational.
module gf3_2m_scaler
  import gf3_pkg::*;
(
  input  f3_2m_t x,
  input  scal_e  coef,
  output f3_2m_t y
);
  typedef enum logic [1:0] {PICK_NONE, PICK_LEFT, PICK_RIGHT, PICK_SUM} pick_e;

  f3_2m_t x_ps, x_ms, x_m1, left, right;
  logic   left_neg, right_neg;
  pick_e  pick;

  always_comb begin
    x_ps = f3_2m_mul_s(x);
    x_ms = f3_2m_neg(x_ps);
    x_m1 = f3_2m_neg(x);

    left_neg  = 1'b0;
    right_neg = 1'b0;
    pick      = PICK_NONE;
    unique case (coef)
      SC_ZERO: pick = PICK_NONE;
      SC_P1:   pick = PICK_RIGHT;
      SC_M1:   begin pick = PICK_RIGHT; right_neg = 1'b1; end
      SC_PS:   pick = PICK_LEFT;
      SC_MS:   begin pick = PICK_LEFT;  left_neg  = 1'b1; end
      SC_P1PS: pick = PICK_SUM;
      SC_P1MS: begin pick = PICK_SUM;   left_neg  = 1'b1; end
      SC_M1PS: begin pick = PICK_SUM;   right_neg = 1'b1; end
      SC_M1MS: begin pick = PICK_SUM;   left_neg  = 1'b1; right_neg = 1'b1; end
      default: pick = PICK_NONE;
    endcase

    left  = left_neg  ? x_ms : x_ps;
    right = right_neg ? x_m1 : x;
    unique case (pick)
      PICK_LEFT:  y = left;
      PICK_RIGHT: y = right;
      PICK_SUM:   y = f3_2m_add(left, right);
      default:    y = '0;
    endcase
  end
endmodule
