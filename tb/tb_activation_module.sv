// tb_activation_module -- checks the non-linear functions of the activation module
// (8 elements per cycle, one cycle latency) against real-valued references:
// ReLU exact, LeakyReLU (slope 0.2, held as 13107/65536) within 0.01 %, exp within 0.5 % plus 0.0001 (about 6 LSB) over
// [-10, 10] plus saturation beyond the Q16.16 range, tanh and ELU within 0.005.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_activation_module;
  import hihgnn_pkg::*;
  localparam int unsigned WIDTH = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic    in_valid = 1'b0, out_valid;
  act_op_t op = ACT_PASS;
  word_t   x [WIDTH], y [WIDTH];

  activation_module #(.WIDTH(WIDTH)) dut (.clk, .rst_n, .in_valid, .op, .x, .out_valid, .y);

  function automatic real r16(word_t w); return real'(w) / 65536.0; endfunction

  function automatic bit ok(act_op_t o, word_t xi, word_t yo);
    real xr, yr, e, d;
    xr = r16(xi); yr = r16(yo);
    case (o)
      ACT_PASS:  return yo == xi;
      ACT_RELU:  return yo == ((xi < 0) ? 0 : xi);
      ACT_LRELU: begin
        e = (xr < 0) ? 0.2 * xr : xr; d = yr - e;
        if (d < 0) d = -d;
        return d < 0.0001 + 0.0001 * ((e < 0) ? -e : e);
      end
      ACT_EXP: begin
        if (xr > 10.5) return yo == 32'sh7FFF_FFFF || yr > 30000.0;
        e = $exp(xr); d = yr - e;
        return (d < 0.005 * e + 0.0001 && d > -0.005 * e - 0.0001);
      end
      ACT_TANH:  begin e = $tanh(xr); d = yr - e; return (d < 0.005 && d > -0.005); end
      ACT_ELU:   begin e = (xr < 0) ? $exp(xr) - 1.0 : xr; d = yr - e; return (d < 0.005 && d > -0.005); end
      default:   return 1'b0;
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
    word_t   px [WIDTH];
    act_op_t pop;
    bit      pend;
    for (int k = 0; k < WIDTH; k++) x[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    pend = 0;
    for (int n = 0; n < 800; n++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== pend) begin failures++; $display("FAIL: out_valid %0b expected %0b", out_valid, pend); end
      if (pend)
        for (int k = 0; k < WIDTH; k++) begin
          checks++;
          if (!ok(pop, px[k], y[k])) begin
            failures++;
            if (failures < 15) $display("FAIL: %s(%f) = %f", pop.name(), r16(px[k]), r16(y[k]));
          end
        end
      in_valid = ($urandom_range(0, 4) != 0);
      op = act_op_t'($urandom_range(0, 5));
      for (int k = 0; k < WIDTH; k++)
        x[k] = (n > 700) ? word_t'($urandom)                                   // full range
                         : word_t'(int'($urandom_range(0, 1310720)) - 655360);  // [-10, 10]
      pend = in_valid; pop = op; px = x;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
