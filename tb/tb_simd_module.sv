// tb_simd_module -- checks the SIMD Module: 128 cores of 8 ways (1024 lanes) working on one
// wide vector. Each issued operation must come back one cycle later on out/out_valid for
// all 1024 elements, and the reduction out_sum (sum of all elements, used for the
// q . tanh(...) dot product) one cycle after that on sum_valid.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_simd_module;
  import hihgnn_pkg::*;
  localparam int unsigned WAYS = 8, CORES = 128, W = WAYS * CORES;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     in_valid = 1'b0, out_valid, sum_valid;
  simd_op_t op = SIMD_ADD;
  word_t    a [W], b [W], c [W], out [W];
  word_t    out_sum;

  simd_module dut (.clk, .rst_n, .in_valid, .op, .a, .b, .c, .out_valid, .out, .sum_valid, .out_sum);

  function automatic word_t ref_op(simd_op_t o, word_t x, word_t y, word_t z);
    longint p;
    case (o)
      SIMD_ADD: return x + y;
      SIMD_SUB: return x - y;
      SIMD_MUL: begin p = longint'(x) * longint'(y); return word_t'(p >>> 16); end
      SIMD_MAC: begin p = longint'(x) * longint'(y); return z + word_t'(p >>> 16); end
      SIMD_DIV: begin
        if (y == 0) return 0;
        p = longint'(x) * 65536;
        return word_t'(p / longint'(y));
      end
      SIMD_MAX: return (x > y) ? x : y;
      default:  return x;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t    exp_out [W];
    word_t    exp_sum, psum;
    bit       pend, pend2;
    simd_op_t o;
    for (int k = 0; k < W; k++) begin a[k] = 0; b[k] = 0; c[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    pend = 0; pend2 = 0;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== pend || sum_valid !== pend2) begin
        failures++; $display("FAIL: valid flags %0b/%0b expected %0b/%0b", out_valid, sum_valid, pend, pend2);
      end
      if (pend2) begin
        checks++;
        if (out_sum !== exp_sum) begin failures++; $display("FAIL: out_sum %0d expected %0d", out_sum, exp_sum); end
      end
      pend2 = pend;
      if (pend) begin
        psum = 0;
        for (int k = 0; k < W; k++) begin
          checks++;
          if (out[k] !== exp_out[k]) begin
            failures++;
            if (failures < 10) $display("FAIL: element %0d = %0d expected %0d", k, out[k], exp_out[k]);
          end
          psum += exp_out[k];
        end
        exp_sum = psum;
      end
      in_valid = ($urandom_range(0, 3) != 0);
      o = simd_op_t'($urandom_range(0, 6));
      op = o;
      for (int k = 0; k < W; k++) begin
        a[k] = word_t'(int'($urandom_range(0, 400000)) - 200000);
        b[k] = word_t'(int'($urandom_range(0, 400000)) - 200000);
        c[k] = word_t'(int'($urandom_range(0, 400000)) - 200000);
        exp_out[k] = ref_op(o, a[k], b[k], c[k]);
      end
      pend = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
