// rab -- Redundancy-Aware Bitmap: three status bits per vertex, indexed by (type, index).
//
// Encoding (the design's table): bit 2 = feature projected, bit 1 = source-side attention
// coefficient theta(u,*) computed, bit 0 = target-side coefficient theta(*,v) computed.
// 000 means the raw feature must still be fetched and projected. The projected bit is kept
// for the whole run (projected features are reusable across semantic graphs); the two
// coefficient bits are only valid inside one semantic graph and are cleared between graphs.
// Storage: one two-port (1 read + 1 write) bank per vertex type for the projected bits and
// one for the coefficient bits. Read: rd_en/rd_vid, rd_bits one cycle later. Write: wr_en,
// wr_vid, wr_bits (all three bits). Clear: clr_start with clr_count sweeps entries
// 0..clr_count-1 of every bank in parallel, one entry per cycle, clearing the coefficient bits
// (and the projected bits too when clr_proj); busy is high meanwhile and writes are ignored.
// The three-bit encoding and the (type, index) addressing are the design's; the bank split,
// the one-cycle read and the sweep clear are this implementation's choices.
module rab
  import hihgnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_en,
  input  vid_t              rd_vid,
  output logic [2:0]        rd_bits,
  input  logic              wr_en,
  input  vid_t              wr_vid,
  input  logic [2:0]        wr_bits,
  input  logic              clr_start,
  input  logic              clr_proj,
  input  logic [VIDX_W:0]   clr_count,
  output logic              busy
);
  localparam int unsigned TYPES = 1 << VTYPE_W;
  localparam int unsigned DEPTH = 1 << VIDX_W;

  logic        pbank [TYPES][DEPTH];
  logic [1:0]  tbank [TYPES][DEPTH];
  logic [VIDX_W:0] sweep, sweep_end;
  logic        sweep_proj;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; sweep <= '0; sweep_end <= '0; sweep_proj <= 1'b0;
    end else if (clr_start && !busy) begin
      busy <= (clr_count != '0); sweep <= '0; sweep_end <= clr_count; sweep_proj <= clr_proj;
    end else if (busy) begin
      sweep <= sweep + 1'b1;
      if (sweep + 1'b1 == sweep_end) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      for (int t = 0; t < TYPES; t++) begin
        tbank[t][sweep[VIDX_W-1:0]] <= 2'b00;
        if (sweep_proj) pbank[t][sweep[VIDX_W-1:0]] <= 1'b0;
      end
    end else if (wr_en) begin
      pbank[wr_vid.vtype][wr_vid.idx] <= wr_bits[2];
      tbank[wr_vid.vtype][wr_vid.idx] <= wr_bits[1:0];
    end
    if (rd_en) rd_bits <= {pbank[rd_vid.vtype][rd_vid.idx], tbank[rd_vid.vtype][rd_vid.idx]};
  end
endmodule
