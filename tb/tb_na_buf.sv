// tb_na_buf -- checks the NA-Buf of one lane (14868 entries, each a 64-word partial
// aggregate z and a Softmax denominator).
// An entry never written since reset or clr reads as zero (a fresh accumulator). Written
// entries read back one cycle after rd_en, and the read data stays on the outputs until the
// next read even while other entries are written. Compared with a model.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_na_buf;
  import hihgnn_pkg::*;
  localparam int unsigned HID = 64, LINES = 14868, AW = $clog2(LINES);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          clr = 1'b0, rd_en = 1'b0, wr_en = 1'b0;
  logic [AW-1:0] rd_idx, wr_idx;
  word_t         rd_z [HID], wr_z [HID], rd_den, wr_den;

  na_buf dut (.clk, .rst_n, .clr, .rd_en, .rd_idx, .rd_z, .rd_den, .wr_en, .wr_idx, .wr_z, .wr_den);

  int m_seed [LINES];     // -1: not written

  function automatic word_t val(int seed, int k);
    return word_t'(seed * 31337 + k * 65521 + 1);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(int i);
    checks++;
    if (m_seed[i] < 0) begin
      bit nz;
      nz = (rd_den != 0);
      for (int k = 0; k < HID; k++) nz |= (rd_z[k] != 0);
      if (nz) begin failures++; if (failures < 10) $display("FAIL: unwritten entry %0d not zero", i); end
    end else begin
      bit bad;
      bad = (rd_den !== val(m_seed[i], 999));
      for (int k = 0; k < HID; k++) bad |= (rd_z[k] !== val(m_seed[i], k));
      if (bad) begin failures++; if (failures < 10) $display("FAIL: entry %0d wrong", i); end
    end
  endtask

  task automatic wr(int i, int seed);
    @(negedge clk);
    wr_en = 1'b1; wr_idx = AW'(i);
    for (int k = 0; k < HID; k++) wr_z[k] = val(seed, k);
    wr_den = val(seed, 999);
    m_seed[i] = seed;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  initial begin
    int i, j;
    rd_idx = '0; wr_idx = '0; wr_den = '0;
    for (int k = 0; k < HID; k++) wr_z[k] = '0;
    for (int l = 0; l < LINES; l++) m_seed[l] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      i = $urandom_range(0, LINES - 1);
      if ($urandom_range(0, 1)) wr(i, n);
      @(negedge clk);
      rd_en = 1'b1; rd_idx = AW'(i);
      @(negedge clk);
      rd_en = 1'b0;
      compare(i);
      // the read data must be held while another entry is written
      j = $urandom_range(0, LINES - 1);
      if (j != i) begin
        wr(j, n + 5000);
        compare(i);
      end
    end
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    for (int l = 0; l < LINES; l++) m_seed[l] = -1;
    for (int n = 0; n < 100; n++) begin
      i = $urandom_range(0, LINES - 1);
      @(negedge clk);
      rd_en = 1'b1; rd_idx = AW'(i);
      @(negedge clk);
      rd_en = 1'b0;
      compare(i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
