// gf397_lfsr_mult: digit-level LFSR multiplier for F_{3^97} =
// F3[x]/(x^97 + x^16 + 2), following the structure of the source paper.
//
// Register A holds a(x) split into NW = ceil(97/D) words of D coefficients
// (the top word zero-padded). Register B holds b(x), padded with leading
// zeros to NW*D coefficients, and is shifted by one digit per cycle so that
// its most significant digit is always the one being used. Each cycle the NW
// digit multipliers (gf3_poly_mult, Karatsuba/classical as set by LEVELS)
// multiply every word of A by that digit, the overlap circuit sums the
// products, and the feedback circuit computes c <- (c*x^D + A*digit) mod f.
// After NW cycles c = a*b mod f, fully reduced.
//
// Interface: pulse `start` while `busy` is low; a and b are sampled on that
// edge, c is cleared and busy rises. Exactly NW = ceil(97/D) multiply cycles
// follow (the cycle count of the paper's table); `done` pulses for one cycle
// after the last one and c then holds the product until the next start. The
// load cycle and this handshake are this design's choice; the paper gives
// only the multiply cycles. Defaults D = 14, LEVELS = 2 are the paper's
// fastest configuration (K K C_4, 7 cycles).
module gf397_lfsr_mult
  import gf3_pkg::*;
#(
  parameter int D      = 14,
  parameter int LEVELS = 2,
  parameter int NW     = (M + D - 1) / D
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  f397_t a,
  input  f397_t b,
  output f397_t c,
  output logic  busy,
  output logic  done
);
  localparam int W  = NW * D;
  localparam int CW = $clog2(NW + 1);

  f3_t [NW-1:0][D-1:0]     a_reg;
  f3_t [W-1:0]             b_reg;
  f3_t [D-1:0]             digit;
  f3_t [NW-1:0][2*D-2:0]   prods;
  f3_t [W+D-2:0]           ov;
  f397_t                   c_next;
  logic [CW-1:0]           cnt;

  assign digit = b_reg[W-1 -: D];

  for (genvar i = 0; i < NW; i++) begin : g_m
    gf3_poly_mult #(.N(D), .LEVELS(LEVELS)) u_m (
      .a(a_reg[i]), .b(digit), .p(prods[i]));
  end

  gf3_overlap #(.D(D), .NW(NW)) u_overlap (.prods(prods), .sum(ov));

  gf3_lfsr_feedback #(.D(D), .NW(NW)) u_feedback (.c(c), .ov(ov), .c_next(c_next));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_reg <= '0;
      b_reg <= '0;
      c     <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        a_reg <= '0;
        b_reg <= '0;
        for (int i = 0; i < M; i++) begin
          a_reg[i / D][i % D] <= a[i];
          b_reg[i]            <= b[i];
        end
        c    <= '0;
        cnt  <= CW'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        c     <= c_next;
        b_reg <= {b_reg[W-D-1:0], {D{2'b00}}};
        cnt   <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  property p_no_start_when_busy;
    @(posedge clk) disable iff (!rst_n) busy |-> !start;
  endproperty
  a_no_start_when_busy: assert property (p_no_start_when_busy);
endmodule
