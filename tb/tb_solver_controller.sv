// tb_solver_controller -- self-checking test of the run controller.
//
// The formula is stood in for by the testbench: all_sat goes high once the
// controller has issued K step strobes (K random per run, 0 included).  Two
// controllers run side by side, one with the default 12 clocks per step and
// one with 5.  For each run it checks the load strobe on start, that steps
// come exactly STEP_CYCLES clocks apart, that the run stops with
// steps == K, that tx_start pulses exactly once, that the status pin was low
// for (K + 1) * STEP_CYCLES clocks, and that done, busy and the pin agree.
`timescale 1ns/1ps
module tb_solver_controller;

  logic clk = 0, rst_n = 0, start = 0;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always #5 clk = ~clk;

  for (genvar g = 0; g < 2; g++) begin : g_dut
    localparam int SC = (g == 0) ? 12 : 5;
    logic all_sat, load, step, busy, done, tx_start, status_pin;
    logic [31:0] steps;
    int issued, target, low, tx_pulses, last_step, gap_err;

    if (g == 0) begin : g_def
      solver_controller dut (.clk, .rst_n, .start, .all_sat, .load, .step, .busy, .done,
                             .tx_start, .status_pin, .steps);
    end else begin : g_five
      solver_controller #(.STEP_CYCLES(SC)) dut (.clk, .rst_n, .start, .all_sat, .load, .step,
                             .busy, .done, .tx_start, .status_pin, .steps);
    end

    assign all_sat = (issued >= target);

    int cyc;
    always @(posedge clk) begin
      cyc++;
      if (rst_n) begin
        if (load) begin issued = 0; low = 0; tx_pulses = 0; last_step = cyc; end
        if (!status_pin) low++;
        if (tx_start) tx_pulses++;
        if (step) begin
          if (cyc - last_step != SC) gap_err++;
          last_step = cyc;
          issued++;
        end
      end
    end
  end

  task automatic run(input int k0, input int k1);
    g_dut[0].target = k0;
    g_dut[1].target = k1;
    @(negedge clk);
    start = 1;
    @(posedge clk); #1;
    check(g_dut[0].busy && g_dut[1].busy && !g_dut[0].status_pin && !g_dut[1].status_pin,
          "busy and status pin low after start");
    start = 0;
    wait (g_dut[0].done && g_dut[1].done);
    repeat (3) @(posedge clk); #1;
    check(g_dut[0].steps == 32'(k0), $sformatf("SC=12 steps %0d vs %0d", g_dut[0].steps, k0));
    check(g_dut[1].steps == 32'(k1), $sformatf("SC=5 steps %0d vs %0d", g_dut[1].steps, k1));
    check(g_dut[0].low == (k0 + 1) * 12, $sformatf("SC=12 low %0d clocks, k %0d", g_dut[0].low, k0));
    check(g_dut[1].low == (k1 + 1) * 5, $sformatf("SC=5 low %0d clocks, k %0d", g_dut[1].low, k1));
    check(g_dut[0].tx_pulses == 1 && g_dut[1].tx_pulses == 1, "one tx_start per run");
    check(g_dut[0].gap_err == 0 && g_dut[1].gap_err == 0, "step spacing");
    check(g_dut[0].status_pin && g_dut[1].status_pin && !g_dut[0].busy && !g_dut[1].busy,
          "idle state after the run");
  endtask

  initial begin
    g_dut[0].target = 1000; g_dut[1].target = 1000;
    g_dut[0].issued = 0;    g_dut[1].issued = 0;
    g_dut[0].gap_err = 0;   g_dut[1].gap_err = 0;
    g_dut[0].cyc = 0;       g_dut[1].cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(g_dut[0].status_pin && !g_dut[0].busy && !g_dut[0].done, "idle after reset");
    run(0, 0);
    run(1, 3);
    for (int r = 0; r < 10; r++) run($urandom_range(200), $urandom_range(200));
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
