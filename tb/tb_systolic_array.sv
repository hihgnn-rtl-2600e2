// tb_systolic_array -- checks one 8 x 8 weight-stationary systolic array.
// A random weight tile is loaded, then random input vectors are streamed, back to back and
// with gaps; every result y = W x (per-product Q16.16 truncation, sums wrap like the
// hardware adders) must arrive in issue order exactly 2N = 16 cycles after its input. A
// second tile is then loaded and used to show that the load replaces the old weights.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_systolic_array;
  import hihgnn_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned LAT = 2 * N;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  w_load = 1'b0, in_valid = 1'b0, out_valid;
  word_t w_tile [N][N], x [N], y [N];

  systolic_array #(.N(N)) dut (.clk, .rst_n, .w_load, .w_tile, .in_valid, .x, .out_valid, .y);

  typedef struct { word_t v [N]; int t; } exp_t;
  exp_t  exp_q [$];
  int    cyc = 0;
  always @(posedge clk) cyc++;

  // checker: compare every output with the oldest expected vector and its issue time
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      exp_t e;
      e = exp_q.pop_front();
      if (cyc - e.t != LAT) begin failures++; $display("FAIL: latency %0d expected %0d", cyc - e.t, LAT); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (y[j] !== e.v[j]) begin failures++; if (failures < 10) $display("FAIL: y[%0d]=%0d expected %0d", j, y[j], e.v[j]); end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_tile(output word_t w [N][N]);
    @(negedge clk);
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++) begin
        w[j][i] = word_t'(int'($urandom_range(0, 262144)) - 131072);
        w_tile[j][i] = w[j][i];
      end
    w_load = 1'b1;
    @(negedge clk);
    w_load = 1'b0;
  endtask

  task automatic stream(input word_t w [N][N], input int n);
    for (int v = 0; v < n; v++) begin
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      for (int i = 0; i < N; i++) x[i] = word_t'(int'($urandom_range(0, 262144)) - 131072);
      if (in_valid) begin
        for (int j = 0; j < N; j++) begin
          e.v[j] = 0;
          for (int i = 0; i < N; i++) e.v[j] += word_t'((longint'(w[j][i]) * longint'(x[i])) >>> 16);
        end
        e.t = cyc;
        exp_q.push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);
  endtask

  initial begin
    word_t w1 [N][N], w2 [N][N];
    for (int i = 0; i < N; i++) x[i] = 0;
    for (int j = 0; j < N; j++) for (int i = 0; i < N; i++) w_tile[j][i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_tile(w1);
    stream(w1, 60);
    load_tile(w2);
    stream(w2, 40);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
