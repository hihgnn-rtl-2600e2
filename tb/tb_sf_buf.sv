// tb_sf_buf -- checks the SF-Buf (491 entries of 64 words) that accumulates the weighted
// semantic results SF[v] += e_P * z_v^P.
// Random accumulates are issued every cycle, often to the same entry in consecutive
// cycles (the read-modify-write must forward its own sum), and reads (one cycle latency)
// are compared with a model. Entries never accumulated since clr read as zero.
module tb_sf_buf;
  import hihgnn_pkg::*;
  localparam int unsigned HID = 64, LINES = 491, AW = $clog2(LINES);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          clr = 1'b0, acc_en = 1'b0, rd_en = 1'b0;
  logic [AW-1:0] acc_idx, rd_idx;
  word_t         acc_vec [HID], rd_data [HID];

  sf_buf dut (.clk, .rst_n, .clr, .acc_en, .acc_idx, .acc_vec, .rd_en, .rd_idx, .rd_data);

  word_t model [LINES][HID];

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(int first, int last);
    for (int i = first; i <= last; i++) begin
      @(negedge clk);
      rd_en = 1'b1; rd_idx = AW'(i);
      @(negedge clk);
      rd_en = 1'b0;
      for (int k = 0; k < HID; k++) begin
        checks++;
        if (rd_data[k] !== model[i][k]) begin
          failures++;
          if (failures < 10) $display("FAIL: SF[%0d][%0d] = %0d expected %0d", i, k, rd_data[k], model[i][k]);
        end
      end
    end
  endtask

  initial begin
    int i;
    acc_idx = '0; rd_idx = '0;
    for (int k = 0; k < HID; k++) acc_vec[k] = '0;
    for (int l = 0; l < LINES; l++) for (int k = 0; k < HID; k++) model[l][k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    i = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      acc_en = ($urandom_range(0, 5) != 0);
      if ($urandom_range(0, 2) != 0) i = $urandom_range(0, 39);   // else the same entry again
      acc_idx = AW'(i);
      for (int k = 0; k < HID; k++) acc_vec[k] = word_t'(int'($urandom_range(0, 2000000)) - 1000000);
      if (acc_en) for (int k = 0; k < HID; k++) model[i][k] += acc_vec[k];
    end
    @(negedge clk);
    acc_en = 1'b0;
    @(negedge clk);
    read_all(0, 49);
    read_all(LINES - 3, LINES - 1);
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    for (int l = 0; l < LINES; l++) for (int k = 0; k < HID; k++) model[l][k] = 0;
    read_all(0, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
