// tb_systolic_module -- checks the Systolic Module of 96 arrays (8 x 8) in both modes.
// All 96 weight tiles are loaded one per cycle. In cooperative mode an input slice of
// 12 groups x 8 elements is broadcast so that array g*8+b multiplies group g, and output
// block b must be the sum over the 12 groups (one 64 x 96 matrix-vector product per
// issue). In independent mode every array works on its own 8 elements and returns its own
// 8 results. Results must come out in order 2N+1 = 17 cycles after issue, and the mode of
// each result must be the mode it was issued in (the two are interleaved).
module tb_systolic_module;
  import hihgnn_pkg::*;
  localparam int unsigned N = 8, ARRAYS = 96, OUT_BLKS = 8;
  localparam int unsigned GROUPS = ARRAYS / OUT_BLKS;
  localparam int unsigned LAT = 2 * N + 1;
  localparam int unsigned VW = ARRAYS * N;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        coop = 1'b1, w_load = 1'b0, in_valid = 1'b0, out_valid;
  logic [6:0]  w_idx = '0;
  word_t       w_tile [N][N];
  word_t       in_vec [VW], out_vec [VW];
  word_t       wm [ARRAYS][N][N];

  systolic_module dut (.clk, .rst_n, .coop, .w_load, .w_idx, .w_tile, .in_valid, .in_vec,
                       .out_valid, .out_vec);

  typedef struct { word_t v [VW]; int n; int t; } exp_t;
  exp_t exp_q [$];
  int   cyc = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      exp_t e;
      e = exp_q.pop_front();
      if (cyc - e.t != LAT) begin failures++; $display("FAIL: latency %0d expected %0d", cyc - e.t, LAT); end
      for (int k = 0; k < e.n; k++) begin
        checks++;
        if (out_vec[k] !== e.v[k]) begin
          failures++;
          if (failures < 10) $display("FAIL: out_vec[%0d]=%0d expected %0d", k, out_vec[k], e.v[k]);
        end
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

  function automatic word_t pm(word_t w, word_t x);
    return word_t'((longint'(w) * longint'(x)) >>> 16);
  endfunction

  initial begin
    for (int k = 0; k < VW; k++) in_vec[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < ARRAYS; a++) begin
      @(negedge clk);
      w_load = 1'b1; w_idx = 7'(a);
      for (int j = 0; j < N; j++)
        for (int i = 0; i < N; i++) begin
          wm[a][j][i] = word_t'(int'($urandom_range(0, 131072)) - 65536);
          w_tile[j][i] = wm[a][j][i];
        end
    end
    @(negedge clk);
    w_load = 1'b0;
    for (int n = 0; n < 40; n++) begin
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      coop = ($urandom_range(0, 1) == 1);
      for (int k = 0; k < VW; k++) in_vec[k] = word_t'(int'($urandom_range(0, 262144)) - 131072);
      if (in_valid) begin
        e.t = cyc;
        if (coop) begin
          e.n = OUT_BLKS * N;
          for (int b = 0; b < OUT_BLKS; b++)
            for (int j = 0; j < N; j++) begin
              word_t s;
              s = 0;
              for (int g = 0; g < GROUPS; g++)
                for (int i = 0; i < N; i++) s += pm(wm[g * OUT_BLKS + b][j][i], in_vec[g * N + i]);
              e.v[b * N + j] = s;
            end
        end else begin
          e.n = VW;
          for (int a = 0; a < ARRAYS; a++)
            for (int j = 0; j < N; j++) begin
              word_t s;
              s = 0;
              for (int i = 0; i < N; i++) s += pm(wm[a][j][i], in_vec[a * N + i]);
              e.v[a * N + j] = s;
            end
        end
        exp_q.push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
