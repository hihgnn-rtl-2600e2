// fp_buf -- Feature Projection Buffer: direct-mapped cache of projected features h'.
//
// Each of LINES lines holds one projected feature of HID Q16.16 words and the vertex it
// belongs to. Line of vertex (type, index) = (type * 2^14 + index) mod LINES. Lookup:
// rd_en/rd_vid, and one cycle later rd_hit and rd_data. Fill: wr_en/wr_vid/wr_data writes
// the line, replacing whatever vertex held it (this is how a later semantic graph's vertex
// type displaces an earlier one). inval clears every line's valid bit.
// The buffer's role and its default size (2.44 MB: 9994 lines of 64 x 32-bit words) are
// the design's; direct mapping and the one-cycle lookup are this implementation's choices.
module fp_buf
  import hihgnn_pkg::*;
#(
  parameter int unsigned HID   = 64,
  parameter int unsigned LINES = 9994,
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inval,
  input  logic  rd_en,
  input  vid_t  rd_vid,
  output logic  rd_hit,
  output word_t rd_data [HID],
  input  logic  wr_en,
  input  vid_t  wr_vid,
  input  word_t wr_data [HID]
);
  word_t          data [LINES][HID];
  vid_t           tag  [LINES];
  logic [LINES-1:0] valid;

  function automatic logic [AW-1:0] line_of(vid_t v);
    return AW'(32'(v) % LINES);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid <= '0;
    else if (inval) valid <= '0;
    else if (wr_en) valid[line_of(wr_vid)] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      data[line_of(wr_vid)] <= wr_data;
      tag[line_of(wr_vid)]  <= wr_vid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_hit <= 1'b0;
    else        rd_hit <= rd_en && valid[line_of(rd_vid)] && (tag[line_of(rd_vid)] == rd_vid);
  end

  always_ff @(posedge clk) if (rd_en) rd_data <= data[line_of(rd_vid)];
endmodule
