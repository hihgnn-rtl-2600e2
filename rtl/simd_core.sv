// simd_core -- one WAYS-wide SIMD core for element-wise (EW) operations.
//
// Every lane k computes op(a[k], b[k], c[k]) in Q16.16 (see simd_op_t in hihgnn_pkg):
// add, subtract, multiply, multiply-accumulate c + a*b, divide and max. The result is
// registered: out_valid/out follow in_valid by one cycle. A scalar operand is broadcast by
// the caller placing it in every lane of b.
// The 8-way width is the design's; the operation set and one-cycle latency are this
// implementation's choices, sized to what the HGNN stages need (weighted aggregation,
// Softmax decomposition and the final division).
module simd_core
  import hihgnn_pkg::*;
#(
  parameter int unsigned WAYS = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  simd_op_t op,
  input  word_t    a [WAYS],
  input  word_t    b [WAYS],
  input  word_t    c [WAYS],
  output logic     out_valid,
  output word_t    out [WAYS]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int k = 0; k < WAYS; k++) begin
        unique case (op)
          SIMD_ADD:  out[k] <= a[k] + b[k];
          SIMD_SUB:  out[k] <= a[k] - b[k];
          SIMD_MUL:  out[k] <= fx_mul(a[k], b[k]);
          SIMD_MAC:  out[k] <= c[k] + fx_mul(a[k], b[k]);
          SIMD_DIV:  out[k] <= fx_div(a[k], b[k]);
          SIMD_MAX:  out[k] <= (a[k] > b[k]) ? a[k] : b[k];
          default:   out[k] <= a[k];
        endcase
      end
    end
  end
endmodule
