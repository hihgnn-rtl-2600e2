// activation_module -- the Activation Module: non-linear functions on WIDTH Q16.16 values.
//
// Functions (act_op_t): ReLU, LeakyReLU (negative slope 0.2), ELU (alpha 1), exp and tanh.
// exp(x) is computed as 2^(x*log2 e): the integer part of the exponent becomes a shift, the
// top four fraction bits index a 16-entry table of 2^(k/16), and the remaining fraction r
// (below 1/16) is applied as 1 + r*ln 2. Results saturate at 2^15 and flush to 0 below
// 2^-16. tanh(|x|) = (1 - e)/(1 + e) with e = exp(-2|x|), sign restored; ELU's negative
// side is exp(x) - 1. The result is registered: out follows in_valid by one cycle.
// The list of functions is the design's; the approximations, the 0.2 slope and the
// one-cycle latency are this implementation's choices.
module activation_module
  import hihgnn_pkg::*;
#(
  parameter int unsigned WIDTH = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  act_op_t op,
  input  word_t   x   [WIDTH],
  output logic    out_valid,
  output word_t   y   [WIDTH]
);
  localparam word_t LOG2E     = 32'sd94548;   // log2(e) in Q16.16
  localparam word_t LN2       = 32'sd45426;   // ln(2) in Q16.16
  localparam word_t NEG_SLOPE = 32'sd13107;   // 0.2 in Q16.16
  localparam word_t SAT       = 32'sh7FFF_FFFF;

  // 2^(k/16) in Q16.16, k = 0..15
  function automatic word_t exp2_tab(logic [3:0] k);
    unique case (k)
      4'd0:  return 32'sd65536;   4'd1:  return 32'sd68438;
      4'd2:  return 32'sd71468;   4'd3:  return 32'sd74632;
      4'd4:  return 32'sd77936;   4'd5:  return 32'sd81386;
      4'd6:  return 32'sd84990;   4'd7:  return 32'sd88752;
      4'd8:  return 32'sd92682;   4'd9:  return 32'sd96785;
      4'd10: return 32'sd101070;  4'd11: return 32'sd105545;
      4'd12: return 32'sd110218;  4'd13: return 32'sd115098;
      4'd14: return 32'sd120194;  default: return 32'sd125515;
    endcase
  endfunction

  function automatic word_t fx_exp(word_t v);
    word_t t, m, r;
    logic signed [15:0] n;
    t = fx_mul(v, LOG2E);
    n = t[31:16];
    r = word_t'({20'd0, t[11:0]});
    m = exp2_tab(t[15:12]);
    m = m + fx_mul(m, fx_mul(r, LN2));
    // the range checks on v keep v * log2(e) from overflowing
    if (v < -32'sd786432)     return '0;    // v < -12
    else if (v > 32'sd720896) return SAT;   // v > 11
    else if (n >= 16'sd15)    return SAT;
    else if (n <= -16'sd17)   return '0;
    else if (n >= 0)        return m <<< n;
    else                    return m >>> (-n);
  endfunction

  function automatic word_t fx_tanh(word_t v);
    word_t av, e, th;
    av = (v < 0) ? -v : v;
    if (av > 32'sd1048576) av = 32'sd1048576;             // tanh(16) is 1 in Q16.16
    e  = fx_exp(-(av <<< 1));
    th = fx_div(FX_ONE - e, FX_ONE + e);
    return (v < 0) ? -th : th;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int k = 0; k < WIDTH; k++) begin
        unique case (op)
          ACT_RELU:  y[k] <= (x[k] < 0) ? word_t'(0) : x[k];
          ACT_LRELU: y[k] <= (x[k] < 0) ? fx_mul(x[k], NEG_SLOPE) : x[k];
          ACT_ELU:   y[k] <= (x[k] < 0) ? fx_exp(x[k]) - FX_ONE : x[k];
          ACT_EXP:   y[k] <= fx_exp(x[k]);
          ACT_TANH:  y[k] <= fx_tanh(x[k]);
          default:   y[k] <= x[k];
        endcase
      end
    end
  end
endmodule
