// na_buf -- Neighbor Aggregation Buffer of one lane.
//
// One entry per target-vertex index: the running weighted sum z (HID Q16.16 words) and the
// running Softmax denominator den of that vertex. A two-port memory: read port rd_en/rd_idx
// with rd_z/rd_den one cycle later, write port wr_en/wr_idx/wr_z/wr_den. An entry that was
// never written since the last clr reads as zero, so aggregation starts from zero without
// a clearing pass; clr empties the whole buffer in one cycle.
// Role and default size (14.52 MB over four lanes: 14868 entries of 64 words per lane) are
// the design's; the valid bits and the separate denominator word are this
// implementation's choices.
module na_buf
  import hihgnn_pkg::*;
#(
  parameter int unsigned HID   = 64,
  parameter int unsigned LINES = 14868,
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_idx,
  output word_t         rd_z [HID],
  output word_t         rd_den,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_idx,
  input  word_t         wr_z [HID],
  input  word_t         wr_den
);
  word_t            zmem [LINES][HID];
  word_t            dmem [LINES];
  logic [LINES-1:0] valid;
  logic             rv;
  word_t            rz [HID];
  word_t            rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid <= '0;
    else if (clr)   valid <= '0;
    else if (wr_en) valid[wr_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      zmem[wr_idx] <= wr_z;
      dmem[wr_idx] <= wr_den;
    end
    if (rd_en) begin
      rz <= zmem[rd_idx];
      rd <= dmem[rd_idx];
      rv <= valid[rd_idx];
    end
  end

  always_comb begin
    for (int k = 0; k < HID; k++) rd_z[k] = rv ? rz[k] : word_t'(0);
    rd_den = rv ? rd : word_t'(0);
  end
endmodule
