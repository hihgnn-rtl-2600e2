// att_buf -- Attention Buffer: the attention coefficients of the current semantic graph.
//
// Two banks indexed by vertex index: theta_src[i] = a_P1 . h'_i (source side, theta(u,*)) and
// theta_dst[i] = a_P2 . h'_i (target side, theta(*,v)). Within one semantic graph all source
// vertices share one type and all target vertices share one type, so the index alone
// addresses each bank. Write: wr_en, wr_idx, a per-bank enable wr_sel[1] (src) / wr_sel[0]
// (dst) and the two values. Two independent read ports (one per edge endpoint), each giving
// its value one cycle after its enable.
// The buffer's role is the design's; the two-bank layout (2 x 16384 words = 128 KB of the
// 0.38 MB buffer) is this implementation's choice.
module att_buf
  import hihgnn_pkg::*;
#(
  parameter int unsigned DEPTH = 1 << VIDX_W,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [1:0]    wr_sel,
  input  logic [AW-1:0] wr_idx,
  input  word_t         wr_src,
  input  word_t         wr_dst,
  input  logic          rs_en,
  input  logic [AW-1:0] rs_idx,
  output word_t         rs_theta,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_idx,
  output word_t         rd_theta
);
  word_t src_mem [DEPTH];
  word_t dst_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_sel[1]) src_mem[wr_idx] <= wr_src;
    if (wr_en && wr_sel[0]) dst_mem[wr_idx] <= wr_dst;
    if (rs_en) rs_theta <= src_mem[rs_idx];
    if (rd_en) rd_theta <= dst_mem[rd_idx];
  end
endmodule
