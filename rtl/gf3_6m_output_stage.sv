// gf3_6m_output_stage: output stage of the F_{3^{6*97}} multiplier. It holds
// the last product P of the F_{3^97} multiplier (loaded by `p_load`) and adds
// multiples of it to the result words in memory: for each step it reads word
// `idx` from memory, adds coef*P (P taken as an F_{3^{2*97}} value with zero
// imaginary part, scaled by a gf3_2m_scaler that can apply +-1, +-s and
// +-1 +- s) and registers the sum in its accumulator; on the next cycle the
// accumulator is written back to the same word. The structure (scaler,
// accumulator fed from memory, result to memory) is the one drawn in the
// source paper; the two-cycle read-modify-write is this design's choice.
// Timing: a step issued in cycle t (en = 1) is in memory after the edge that
// ends cycle t+1; steps may be issued back to back to different words.
module gf3_6m_output_stage
  import gf3_pkg::*;
#(
  parameter int AW = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          p_load,
  input  f397_t         p_in,
  input  logic          en,
  input  logic [AW-1:0] idx,
  input  scal_e         coef,
  output logic [AW-1:0] raddr,
  input  f3_2m_t        rdata,
  output logic          we,
  output logic [AW-1:0] waddr,
  output f3_2m_t        wdata
);
  f397_t  p_reg;
  f3_2m_t p_scaled;

  gf3_2m_scaler u_sc (.x('{im: '0, re: p_reg}), .coef(coef), .y(p_scaled));

  assign raddr = idx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_reg <= '0;
      wdata <= '0;
      we    <= 1'b0;
      waddr <= '0;
    end else begin
      if (p_load) p_reg <= p_in;
      we <= en;
      if (en) begin
        wdata <= f3_2m_add(rdata, p_scaled);
        waddr <= idx;
      end
    end
  end
endmodule
