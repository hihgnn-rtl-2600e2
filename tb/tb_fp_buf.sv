// tb_fp_buf -- checks the FP-Buf, the direct-mapped store of projected features
// (9994 lines of 64 words, line = vertex id mod 9994).
// Nothing hits after reset. A written vertex hits one cycle after its read with the
// written vector; a vertex whose line was taken by another vertex misses (eviction), and a
// vertex mapping to another line is unaffected; inval makes everything miss. Checked
// against a model of tags and data.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_fp_buf;
  import hihgnn_pkg::*;
  localparam int unsigned HID = 64, LINES = 9994;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  inval = 1'b0, rd_en = 1'b0, wr_en = 1'b0, rd_hit;
  vid_t  rd_vid, wr_vid;
  word_t rd_data [HID], wr_data [HID];

  fp_buf dut (.clk, .rst_n, .inval, .rd_en, .rd_vid, .rd_hit, .rd_data, .wr_en, .wr_vid, .wr_data);

  // model: per line, the vertex held and a seed that generates its vector
  int   m_tag [LINES];
  int   m_seed [LINES];

  function automatic word_t val(int seed, int k);
    return word_t'(seed * 7919 + k * 104729);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(vid_t v, int seed);
    @(negedge clk);
    wr_en = 1'b1; wr_vid = v;
    for (int k = 0; k < HID; k++) wr_data[k] = val(seed, k);
    m_tag[32'(v) % LINES] = 32'(v);
    m_seed[32'(v) % LINES] = seed;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic rd(vid_t v);
    int l;
    bit exp_hit;
    l = 32'(v) % LINES;
    exp_hit = (m_tag[l] == 32'(v));
    @(negedge clk);
    rd_en = 1'b1; rd_vid = v;
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (rd_hit !== exp_hit) begin
      failures++;
      if (failures < 10) $display("FAIL: vertex %0h hit=%0b expected %0b", v, rd_hit, exp_hit);
    end
    if (exp_hit)
      for (int k = 0; k < HID; k++) begin
        checks++;
        if (rd_data[k] !== val(m_seed[l], k)) begin
          failures++;
          if (failures < 10) $display("FAIL: vertex %0h word %0d wrong", v, k);
        end
      end
  endtask

  initial begin
    vid_t v, w;
    rd_vid = '0; wr_vid = '0;
    for (int k = 0; k < HID; k++) wr_data[k] = '0;
    for (int l = 0; l < LINES; l++) m_tag[l] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20; n++) rd(vid_t'($urandom));
    for (int n = 0; n < 300; n++) begin
      v = vid_t'($urandom);
      wr(v, n);
      rd(v);
      if (n % 3 == 0) begin            // a conflicting vertex evicts v
        w = vid_t'((32'(v) + LINES) % 65536);
        if (32'(w) % LINES == 32'(v) % LINES) begin
          wr(w, n + 1000);
          rd(v);
          rd(w);
        end
      end
    end
    for (int n = 0; n < 300; n++) rd(vid_t'($urandom));
    @(negedge clk);
    inval = 1'b1;
    @(negedge clk);
    inval = 1'b0;
    for (int l = 0; l < LINES; l++) m_tag[l] = -1;
    for (int n = 0; n < 100; n++) rd(vid_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
