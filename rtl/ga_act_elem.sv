// ga_act_elem: one Activation Element of the Activation Unit.
//
// The paper's figure shows EXP, an ADD of the constant 1, two input muxes in
// front of a divider (DIV) and an output mux. This element is combinational:
//   ACT_EXP     : y = exp(x)
//   ACT_SIGMOID : y = 1 / (1 + exp(x))   (the formula as the paper prints it;
//                 a standard sigmoid is obtained by negating x beforehand)
//   ACT_DIV     : y = x / d
// All values are Q16.16. exp(x) is computed as 2^(x*log2 e): the integer part
// of the exponent is a shift, the fraction uses a 16-segment linear
// interpolation of 2^f whose 17 knots are round(2^(i/16) * 65536). This
// approximation (relative error below 0.03 %) is this design's choice; the
// paper does not say how EXP is built. Results saturate to the 32-bit range.
module ga_act_elem
  import ga_pkg::*;
(
  input  act_fn_e fn,
  input  word_t   x,
  input  word_t   d,
  output word_t   y
);
  localparam word_t LOG2E = 32'sd94548;            // log2(e) in Q16.16
  localparam word_t ONE   = 32'sd65536;
  localparam word_t WMAX  = 32'sh7fffffff;

  function automatic logic [17:0] knot(logic [4:0] i);
    case (i)
      5'd0:  return 18'd65536;  5'd1:  return 18'd68438;  5'd2:  return 18'd71468;
      5'd3:  return 18'd74632;  5'd4:  return 18'd77936;  5'd5:  return 18'd81386;
      5'd6:  return 18'd84990;  5'd7:  return 18'd88752;  5'd8:  return 18'd92682;
      5'd9:  return 18'd96785;  5'd10: return 18'd101070; 5'd11: return 18'd105545;
      5'd12: return 18'd110218; 5'd13: return 18'd115098; 5'd14: return 18'd120194;
      5'd15: return 18'd125515; default: return 18'd131072;
    endcase
  endfunction

  function automatic word_t fxexp(word_t v);
    word_t t;
    logic signed [15:0] n;
    logic [3:0]  seg;
    logic [11:0] fr;
    logic [17:0] k0, k1;
    logic [31:0] m;
    t   = fxmul(v, LOG2E);
    n   = t[31:16];
    seg = t[15:12];
    fr  = t[11:0];
    k0  = knot({1'b0, seg});
    k1  = knot({1'b0, seg} + 5'd1);
    m   = 32'(k0) + ((32'(k1 - k0) * 32'(fr)) >> 12);
    if (n >= 16'sd15)       return WMAX;
    else if (n >= 0)        return word_t'(m << n);
    else if (n < -16'sd17)  return '0;
    else                    return word_t'(m >> (-n));
  endfunction

  function automatic word_t fxdiv(word_t num, word_t den);
    logic signed [63:0] q;
    if (den == 0) return (num < 0) ? -WMAX : WMAX;
    q = (64'(num) <<< FRAC) / 64'(den);
    if (q > 64'(WMAX))       return WMAX;
    else if (q < -64'(WMAX)) return -WMAX;
    else                     return word_t'(q);
  endfunction

  word_t e, num, den;
  always_comb begin
    e   = fxexp(x);
    num = (fn == ACT_DIV) ? x : ONE;            // DIV input muxes
    den = (fn == ACT_DIV) ? d : ((e > WMAX - ONE) ? WMAX : e + ONE);
    unique case (fn)
      ACT_EXP: y = e;
      default: y = fxdiv(num, den);
    endcase
  end
endmodule
