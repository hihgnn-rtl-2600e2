// simd_module -- the SIMD Module: CORES SIMD cores of WAYS lanes side by side.
//
// Operates on vectors of CORES*WAYS Q16.16 elements: core n handles elements
// [n*WAYS, n*WAYS+WAYS). All cores execute the same operation in the same cycle; the result
// follows in_valid by one cycle. Besides the element-wise result the module sums all
// elements of the result (out_sum, one cycle after out_valid), which the schedulers use for
// dot products and accumulations.
// 128 cores of 8 lanes per lane of the accelerator is the design's figure; the common
// opcode and the sum output are this implementation's choices.
module simd_module
  import hihgnn_pkg::*;
#(
  parameter int unsigned WAYS  = 8,
  parameter int unsigned CORES = 128,
  parameter int unsigned W     = CORES * WAYS
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  simd_op_t op,
  input  word_t    a [W],
  input  word_t    b [W],
  input  word_t    c [W],
  output logic     out_valid,
  output word_t    out [W],
  output logic     sum_valid,
  output word_t    out_sum
);
  logic cv [CORES];

  for (genvar n = 0; n < CORES; n++) begin : g_core
    simd_core #(.WAYS(WAYS)) u_core (
      .clk, .rst_n, .in_valid, .op,
      .a        (a[n*WAYS +: WAYS]),
      .b        (b[n*WAYS +: WAYS]),
      .c        (c[n*WAYS +: WAYS]),
      .out_valid(cv[n]),
      .out      (out[n*WAYS +: WAYS])
    );
  end

  assign out_valid = cv[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum_valid <= 1'b0;
    else        sum_valid <= cv[0];
  end

  always_ff @(posedge clk) begin
    word_t s;
    s = '0;
    for (int k = 0; k < W; k++) s = s + out[k];
    out_sum <= s;
  end
endmodule
