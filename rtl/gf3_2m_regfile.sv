// gf3_2m_regfile: small memory of WORDS elements of F_{3^{2*97}} (one
// F_{3^{6*97}} operand or result: word w holds the coefficient of r^w).
// One synchronous write port, one asynchronous read port, a synchronous clear
// of all words, and the whole contents as an output for the host. The source
// paper only says that the stages read from and write to "memory"; the ports
// and the clear are this design's choices. Written as an array, so an FPGA
// tool may map it to distributed RAM.
module gf3_2m_regfile
  import gf3_pkg::*;
#(
  parameter int WORDS = NWORD,
  parameter int AW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  f3_2m_t        wdata,
  input  logic [AW-1:0] raddr,
  output f3_2m_t        rdata,
  output f3_2m_t        words [WORDS]
);
  f3_2m_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int i = 0; i < WORDS; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem[raddr];
  assign words = mem;

  a_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (int'(waddr) < WORDS));
endmodule
