// ga_alu: one ALU of the Adaptive Computation Kernel.
//
// Following the paper's ALU figure, the core has a multiplier (MUL), an
// adder (ADD), a comparator (CMP, giving min or max) and an accumulator
// (ACC) behind the multiplier; a first output mux picks one of them and a
// second mux picks the value as is or after ReLU / PReLU. The op select
// drives both the first mux and the accumulator; post drives the second.
//   ALU_MAC   : acc <= acc + a*b when acc_en, y = acc (previous value)
//   ALU_RDACC : y = post(acc)
//   others    : y = post(a*b | a+b | min | max | a)   (combinational)
// acc_clr zeroes the accumulator on the next edge. Arithmetic is Q16.16;
// the format and the PReLU slope input (alpha) are this design's choices.
module ga_alu
  import ga_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  alu_op_e op,
  input  post_e   post,
  input  word_t   a,
  input  word_t   b,
  input  word_t   alpha,
  input  logic    acc_clr,
  input  logic    acc_en,
  output word_t   y,
  output word_t   acc
);
  word_t mul, sel;

  always_comb begin
    mul = fxmul(a, b);
    unique case (op)
      ALU_MUL:   sel = mul;
      ALU_ADD:   sel = a + b;
      ALU_MIN:   sel = (a < b) ? a : b;
      ALU_MAX:   sel = (a > b) ? a : b;
      ALU_MAC,
      ALU_RDACC: sel = acc;
      default:   sel = a;
    endcase
    unique case (post)
      POST_RELU:  y = (sel < 0) ? '0 : sel;
      POST_PRELU: y = (sel < 0) ? fxmul(sel, alpha) : sel;
      default:    y = sel;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      acc <= '0;
    else if (acc_clr)                acc <= '0;
    else if (acc_en && op == ALU_MAC) acc <= acc + mul;
  end
endmodule
