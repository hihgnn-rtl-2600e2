// tb_rab -- checks the Reuse Attribute Buffer (3 bits per vertex of every type:
// projected, theta-as-source ready, theta-as-target ready).
// After a full clear of 16384 entries (busy must last exactly that many cycles) every entry
// reads 000. Random writes are then read back one cycle later. A clear of the first 2000
// entries with clr_proj = 0 must reset only the two theta bits there and keep the projected
// bit; one with clr_proj = 1 resets all three; entries beyond the cleared count keep their bits.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_rab;
  import hihgnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            rd_en = 1'b0, wr_en = 1'b0, clr_start = 1'b0, clr_proj = 1'b0, busy;
  vid_t            rd_vid, wr_vid;
  logic [2:0]      rd_bits, wr_bits;
  logic [VIDX_W:0] clr_count;

  rab dut (.clk, .rst_n, .rd_en, .rd_vid, .rd_bits, .wr_en, .wr_vid, .wr_bits,
           .clr_start, .clr_proj, .clr_count, .busy);

  logic [2:0] model [4][1 << VIDX_W];

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear(int count, bit proj);
    int n;
    @(negedge clk);
    clr_start = 1'b1; clr_proj = proj; clr_count = (VIDX_W + 1)'(count);
    @(negedge clk);
    clr_start = 1'b0;
    n = 0;
    while (busy) begin @(negedge clk); n++; end
    checks++;
    if (n != count) begin failures++; $display("FAIL: clear of %0d took %0d cycles", count, n); end
    for (int t = 0; t < 4; t++)
      for (int i = 0; i < count; i++) model[t][i] = proj ? 3'b000 : {model[t][i][2], 2'b00};
  endtask

  task automatic check_read(vid_t v);
    @(negedge clk);
    rd_en = 1'b1; rd_vid = v;
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (rd_bits !== model[v.vtype][v.idx]) begin
      failures++;
      if (failures < 10) $display("FAIL: bits of %0d/%0d = %b expected %b", v.vtype, v.idx, rd_bits, model[v.vtype][v.idx]);
    end
  endtask

  initial begin
    vid_t v;
    rd_vid = '0; wr_vid = '0; wr_bits = '0; clr_count = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    clear(1 << VIDX_W, 1'b1);
    for (int n = 0; n < 50; n++) begin
      v.vtype = 2'($urandom_range(0, 3)); v.idx = VIDX_W'($urandom);
      check_read(v);
    end
    // random writes, each followed by its read
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      v.vtype = 2'($urandom_range(0, 3)); v.idx = VIDX_W'($urandom_range(0, 2999));
      wr_en = 1'b1; wr_vid = v; wr_bits = 3'($urandom);
      model[v.vtype][v.idx] = wr_bits;
      @(negedge clk);
      wr_en = 1'b0;
      check_read(v);
    end
    clear(2000, 1'b0);
    for (int n = 0; n < 200; n++) begin
      v.vtype = 2'($urandom_range(0, 3)); v.idx = VIDX_W'($urandom_range(0, 2999));
      check_read(v);
    end
    clear(2000, 1'b1);
    for (int n = 0; n < 200; n++) begin
      v.vtype = 2'($urandom_range(0, 3)); v.idx = VIDX_W'($urandom_range(0, 2999));
      check_read(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
