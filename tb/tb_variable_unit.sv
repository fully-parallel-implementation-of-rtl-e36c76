// tb_variable_unit -- self-checking test of one variable unit.
//
// Random initial values are loaded and random summed clause terms applied.
// After each clock V is compared with a model that adds floor(dv_sum/16)
// (one Euler step of dt = 1/16) and clips the result to [-16384, 16384],
// and only when step is high.  The Boolean output must be 1 exactly when
// V >= 0.  Both clip limits must be reached.
`timescale 1ns/1ps
module tb_variable_unit;
  import memc_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, step = 0;
  v_t   v_init, v;
  dv_t  dv_sum;
  logic value;

  variable_unit dut (.clk, .rst_n, .load, .v_init, .step, .dv_sum, .v, .value);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;
  longint model;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic longint floor16(longint x);
    longint q = x / 16;
    if (x % 16 != 0 && x < 0) q--;
    return q;
  endfunction

  initial begin
    v_init = '0; dv_sum = '0;
    repeat (2) @(posedge clk); #1;
    check(v == 0, "reset value");
    rst_n = 1;
    model = 0;
    for (int i = 0; i < 20000; i++) begin
      int r = $urandom_range(99);
      v_init = v_t'(int'($urandom_range(32768)) - 16384);
      case ($urandom_range(3))
        0: dv_sum = dv_t'(longint'($urandom_range(4000)) - 2000);
        1: dv_sum = dv_t'(longint'($urandom_range(400000)) - 200000);
        2: dv_sum = dv_t'(longint'($urandom) * 1000 - longint'(2147483647) * 1000);
        default: dv_sum = dv_t'(longint'($urandom_range(33)) - 16);
      endcase
      load = (r == 0);
      step = (r > 0 && r < 80);
      @(posedge clk); #1;
      if (load) model = v_init;
      else if (step) begin
        model = model + floor16(longint'(dv_sum));
        if (model > 16384) model = 16384;
        if (model < -16384) model = -16384;
      end
      load = 0; step = 0;
      check(longint'(v) == model, $sformatf("V %0d vs %0d", v, model));
      check(value == (model >= 0), "Boolean value");
      if (model == 16384) n_hi++;
      if (model == -16384) n_lo++;
    end
    check(n_hi > 0 && n_lo > 0, "both clip limits reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
