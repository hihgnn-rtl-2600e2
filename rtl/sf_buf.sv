// sf_buf -- Semantic Fusion Buffer: per target vertex, the sum over semantic graphs of the
// weighted results exp(w_P) * z_v^P.
//
// Accumulate port: acc_en/acc_idx/acc_vec adds acc_vec into entry acc_idx (read in the
// first cycle, written in the second; a back-to-back update of the same entry is forwarded,
// so one update per cycle is sustained). Read port: rd_en/rd_idx, rd_data one cycle later.
// Entries untouched since clr read as zero.
// Role and default size (0.12 MB: 491 entries of 64 words) are the design's; the built-in
// read-add-write and the forwarding are this implementation's choices.
module sf_buf
  import hihgnn_pkg::*;
#(
  parameter int unsigned HID   = 64,
  parameter int unsigned LINES = 491,
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          acc_en,
  input  logic [AW-1:0] acc_idx,
  input  word_t         acc_vec [HID],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_idx,
  output word_t         rd_data [HID]
);
  word_t            mem [LINES][HID];
  logic [LINES-1:0] valid;
  // stage 2 of the accumulate
  logic             s2_en;
  logic [AW-1:0]    s2_idx;
  word_t            s2_vec [HID];
  word_t            s2_old [HID];
  logic             s2_oldv;
  word_t            s2_sum [HID];
  word_t            rraw [HID];
  logic             rvalid;

  always_comb
    for (int k = 0; k < HID; k++) s2_sum[k] = (s2_oldv ? s2_old[k] : word_t'(0)) + s2_vec[k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0; s2_en <= 1'b0;
    end else begin
      s2_en <= acc_en && !clr;
      if (clr)        valid <= '0;
      else if (s2_en) valid[s2_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (acc_en) begin
      s2_idx <= acc_idx;
      s2_vec <= acc_vec;
      if (s2_en && s2_idx == acc_idx) begin       // forward the sum being written
        s2_old  <= s2_sum;
        s2_oldv <= 1'b1;
      end else begin
        s2_old  <= mem[acc_idx];
        s2_oldv <= valid[acc_idx];
      end
    end
    if (s2_en) mem[s2_idx] <= s2_sum;
    if (rd_en) begin
      rraw   <= mem[rd_idx];
      rvalid <= valid[rd_idx];
    end
  end

  always_comb for (int k = 0; k < HID; k++) rd_data[k] = rvalid ? rraw[k] : word_t'(0);
endmodule
