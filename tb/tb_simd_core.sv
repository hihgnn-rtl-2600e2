// tb_simd_core -- checks every element-wise operation of one 8-way SIMD core.
// Random Q16.16 operands and random operations are issued back to back; each result must
// appear exactly one cycle after issue (out_valid) and match a Q16.16 reference computed
// here with 64-bit integers (multiply truncates toward minus infinity, divide toward zero,
// divide by zero gives zero). Idle cycles must keep out_valid low.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_simd_core;
  import hihgnn_pkg::*;
  localparam int unsigned WAYS = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     in_valid = 1'b0, out_valid;
  simd_op_t op = SIMD_ADD;
  word_t    a [WAYS], b [WAYS], c [WAYS], out [WAYS];

  simd_core #(.WAYS(WAYS)) dut (.clk, .rst_n, .in_valid, .op, .a, .b, .c, .out_valid, .out);

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

  function automatic word_t rnd();
    // mixture of small and full-range values, and an occasional zero
    case ($urandom_range(0, 3))
      0: return word_t'($urandom);
      1: return word_t'(int'($urandom_range(0, 200000)) - 100000);
      2: return 0;
      default: return word_t'(int'($urandom_range(0, 40000000)) - 20000000);
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
    word_t    ea [WAYS], eb [WAYS], ec [WAYS];
    simd_op_t eop;
    bit       pend;
    for (int k = 0; k < WAYS; k++) begin a[k] = 0; b[k] = 0; c[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    pend = 1'b0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      // result of what was issued at the previous negedge
      checks++;
      if (out_valid !== pend) begin failures++; $display("FAIL: out_valid=%0b expected %0b", out_valid, pend); end
      if (pend)
        for (int k = 0; k < WAYS; k++) begin
          checks++;
          if (out[k] !== ref_op(eop, ea[k], eb[k], ec[k])) begin
            failures++;
            if (failures < 10) $display("FAIL: op %s way %0d: %0d expected %0d", eop.name(), k, out[k], ref_op(eop, ea[k], eb[k], ec[k]));
          end
        end
      in_valid = ($urandom_range(0, 4) != 0);
      op = simd_op_t'($urandom_range(0, 6));
      for (int k = 0; k < WAYS; k++) begin a[k] = rnd(); b[k] = rnd(); c[k] = rnd(); end
      pend = in_valid; eop = op; ea = a; eb = b; ec = c;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
