// tb_att_buf -- checks the Att-Buf, which keeps the two attention coefficients of each
// vertex: theta as an edge source (a1 . h') and as an edge target (a2 . h').
// Writes select either half (wr_sel[1] source, wr_sel[0] target, or both); the other half
// must keep its value. Both read ports (source and target) are used in the same cycle
// and return data one cycle after their enable. Compared with a model.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_att_buf;
  import hihgnn_pkg::*;
  localparam int unsigned DEPTH = 1 << VIDX_W, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          wr_en = 1'b0, rs_en = 1'b0, rd_en = 1'b0;
  logic [1:0]    wr_sel;
  logic [AW-1:0] wr_idx, rs_idx, rd_idx;
  word_t         wr_src, wr_dst, rs_theta, rd_theta;

  att_buf dut (.clk, .wr_en, .wr_sel, .wr_idx, .wr_src, .wr_dst,
               .rs_en, .rs_idx, .rs_theta, .rd_en, .rd_idx, .rd_theta);

  word_t m_src [DEPTH], m_dst [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b;
    wr_sel = '0; wr_idx = '0; rs_idx = '0; rd_idx = '0; wr_src = '0; wr_dst = '0;
    // give every entry used a known value first
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_sel = 2'b11; wr_idx = AW'(i * 61);
      wr_src = word_t'($urandom); wr_dst = word_t'($urandom);
      m_src[i * 61] = wr_src; m_dst[i * 61] = wr_dst;
    end
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_sel = 2'($urandom_range(1, 3)); wr_idx = AW'(61 * $urandom_range(0, 255));
      wr_src = word_t'($urandom); wr_dst = word_t'($urandom);
      if (wr_sel[1]) m_src[wr_idx] = wr_src;
      if (wr_sel[0]) m_dst[wr_idx] = wr_dst;
      @(negedge clk);
      wr_en = 1'b0;
      a = 61 * $urandom_range(0, 255); b = 61 * $urandom_range(0, 255);
      rs_en = 1'b1; rs_idx = AW'(a); rd_en = 1'b1; rd_idx = AW'(b);
      @(negedge clk);
      rs_en = 1'b0; rd_en = 1'b0;
      checks++;
      if (rs_theta !== m_src[a] || rd_theta !== m_dst[b]) begin
        failures++;
        if (failures < 10) $display("FAIL: src[%0d]=%0d (exp %0d) dst[%0d]=%0d (exp %0d)", a, rs_theta, m_src[a], b, rd_theta, m_dst[b]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
