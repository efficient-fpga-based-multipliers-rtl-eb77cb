// gf3_6m_ctrl: controller of the three-stage F_{3^{6*97}} multiplier.
//
// The 15 F_{3^97} products are numbered k = 3*pt + t: pt is the evaluation
// point (1, s, -1, -s, infinity) and t the Karatsuba part (low, sum, high).
// Work is cut into slots j = 0..16. In slot j the multiplier computes product
// j-1, the input stage prepares the operands of product j and the output
// stage adds product j-2 into the result memory, so the three stages overlap
// as the source paper asks; the slot scheme itself is this design's choice.
//
//   IDLE   -> on `start`: LOAD
//   LOAD   3 cycles: operand words 0..2 written into the operand memories,
//          result memory cleared in the first
//   SLOT_START 1 cycle: start the multiplier on product j-1 (1 <= j <= 15)
//          and latch product j-2 into the output stage (j >= 2)
//   SLOT_RUN   steps 0..2: input stage accumulates word `step` (only when
//          product j begins a new point), output stage updates result word
//          `step`; the slot ends once step 3 is reached and the multiplier
//          is idle
//   FINISH 1 cycle, `done` high, result memory final -> IDLE
//
// With NW multiply cycles per F_{3^97} product, a slot with a multiplication
// lasts max(3, NW) + 2 cycles and one without lasts 5. `done` is high in the
// cycle after the last slot, so it is sampled 9 + 15*(max(3,NW)+2) + 5 clock
// edges after the edge that sampled `start` (149 for D = 14).
module gf3_6m_ctrl
  import gf3_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  // operand memories
  output logic       ld_we,
  output logic [1:0] ld_addr,
  output logic       res_clr,
  output logic [1:0] in_raddr,
  // input stage
  output logic       in_en,
  output logic       in_clr,
  output scal_e      in_coef_o,
  output opsel_e     opsel,
  // F_{3^97} multiplier
  output logic       mul_start,
  input  logic       mul_busy,
  // output stage
  output logic       p_load,
  output logic       out_en,
  output logic [1:0] out_idx,
  output scal_e      out_coef_o
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SLOT_START, S_SLOT_RUN, S_FINISH} state_e;

  localparam int NSLOT = NPROD + 2;

  state_e     state;
  logic [4:0] slot;
  logic [1:0] step;

  // product numbers the stages work on in this slot
  int k_in, k_mul, k_out;
  logic in_active, mul_active, out_active;

  always_comb begin
    k_in       = int'(slot);
    k_mul      = int'(slot) - 1;
    k_out      = int'(slot) - 2;
    in_active  = (k_in < NPROD) && (k_in % 3 == 0);
    mul_active = (k_mul >= 0) && (k_mul < NPROD);
    out_active = (k_out >= 0) && (k_out < NPROD);
  end

  assign busy      = (state != S_IDLE);
  assign done      = (state == S_FINISH);
  assign ld_we     = (state == S_LOAD);
  assign res_clr   = (state == S_LOAD) && (step == 2'd0);
  assign in_raddr  = step;
  assign in_en     = (state == S_SLOT_RUN) && in_active && (step != 2'd3);
  assign in_clr    = (step == 2'd0);
  assign in_coef_o = in_coef(k_in / 3, int'(step));
  assign opsel     = prod_opsel(mul_active ? k_mul : 0);
  assign mul_start = (state == S_SLOT_START) && mul_active;
  assign p_load    = (state == S_SLOT_START) && out_active;
  assign out_en    = (state == S_SLOT_RUN) && out_active && (step != 2'd3);
  assign out_idx   = step;
  assign out_coef_o = out_coef(out_active ? k_out : 0, int'(step));
  assign ld_addr   = step;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      slot  <= '0;
      step  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          step  <= '0;
        end
        S_LOAD: begin
          if (step == 2'd2) begin
            state <= S_SLOT_START;
            slot  <= '0;
            step  <= '0;
          end else begin
            step <= step + 1'b1;
          end
        end
        S_SLOT_START: begin
          state <= S_SLOT_RUN;
          step  <= '0;
        end
        S_SLOT_RUN: begin
          if (step != 2'd3) begin
            step <= step + 1'b1;
          end else if (!mul_busy) begin
            step <= '0;
            if (int'(slot) == NSLOT - 1) begin
              state <= S_FINISH;
            end else begin
              slot  <= slot + 1'b1;
              state <= S_SLOT_START;
            end
          end
        end
        S_FINISH: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  a_no_mul_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    mul_start |-> !mul_busy);
endmodule
