// tb_memc_solver_full -- end-to-end test of the memcomputing solver with
// every parameter at its default: N = 150 variables, M = 645 clauses
// (M/N = 4.3), the default hard-wired instance, 12 clocks per step and the
// 115200-baud UART at 125 MHz.
//
// One run is started from random initial V.  It checks
// that the solver stops, that the assignment it reports satisfies every
// clause of the hard-wired instance (rebuilt here from memc_pkg), that the
// UART stream decodes to the same assignment, and that the status pin was
// low for exactly (steps + 1) * STEP_CYCLES clocks (one step per
// STEP_CYCLES clocks).  It also counts how often each mechanism of the
// dynamics occurred: integration steps, V clipped at +-1, X_s clipped at 0
// and at 1, X_l growing and returning to its lower bound 1, and a failure
// is counted for any that never did.
`timescale 1ns/1ps
module tb_memc_solver_full;
  import memc_pkg::*;

  // the top's defaults: N = 150, M = 645, SEED = 1, 12 clocks per step,
  // 1085 clocks per UART bit
  localparam int N    = 150;
  localparam int M    = 645;
  localparam int SEED = 1;
  localparam int SC   = 12;
  localparam int CPB  = 1085;
  localparam int RUNS = 1;
  localparam int NBYTES = (N + 7) / 8;

  logic clk = 0, rst_n = 0, start = 0;
  v_t   v_init [N];
  logic busy, done, status_pin, uart_txd, uart_busy;
  logic [31:0] steps;
  logic [N-1:0] assignment;
  xs_t xs [M];
  xl_t xl [M];

  memc_solver_top dut (
    .clk, .rst_n, .start, .v_init, .busy, .done, .status_pin, .steps,
    .assignment, .uart_txd, .uart_busy, .xs, .xl
  );

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int n_steps = 0, n_vclip = 0, n_xs0 = 0, n_xs1 = 0, n_xlgrow = 0, n_xlfloor = 0;
  int low_cycles;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters, sampled at every integration step
  always @(posedge clk) if (rst_n && dut.step) begin
    n_steps++;
    for (int n = 0; n < N; n++) if (dut.v[n] == v_t'(ONE) || dut.v[n] == -v_t'(ONE)) n_vclip++;
    for (int m = 0; m < M; m++) begin
      if (xs[m] == 0) n_xs0++;
      if (xs[m] == xs_t'(ONE)) n_xs1++;
      if (xl[m] > xl_t'(ONE)) n_xlgrow++;
    end
  end
  // X_l brought back to its floor 1 after having grown
  xl_t xl_prev [M];
  always @(posedge clk) begin
    for (int m = 0; m < M; m++) begin
      if (rst_n && busy && xl_prev[m] > xl_t'(ONE) && xl[m] == xl_t'(ONE)) n_xlfloor++;
      xl_prev[m] <= xl[m];
    end
  end

  always @(posedge clk) if (!status_pin) low_cycles++;

  function automatic bit formula_sat(logic [N-1:0] a);
    for (int m = 0; m < M; m++) begin
      bit c = 0;
      for (int s = 0; s < 3; s++) begin
        lit_t l = planted_lit(SEED, N, m, s);
        if (a[l.idx] != l.neg) c = 1;
      end
      if (!c) return 0;
    end
    return 1;
  endfunction

  task automatic uart_receive(output logic [NBYTES*8-1:0] data);
    for (int b = 0; b < NBYTES; b++) begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      check(uart_txd == 0, "UART start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        data[8*b + i] = uart_txd;
      end
      repeat (CPB) @(posedge clk);
      check(uart_txd == 1, "UART stop bit");
    end
  endtask

  initial begin
    logic [NBYTES*8-1:0] rx;
    int t0;
    for (int n = 0; n < N; n++) v_init[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(formula_sat(planted_assignment()), "generator: planted assignment satisfies the instance");
    for (int r = 0; r < RUNS; r++) begin
      for (int n = 0; n < N; n++) v_init[n] = v_t'(int'($urandom_range(2 * ONE)) - int'(ONE));
      @(posedge clk); #1;
      low_cycles = 0;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      check(busy && !status_pin, "run starts, status pin low");
      fork
        uart_receive(rx);
      join_none
      t0 = 0;
      while (!done) begin @(posedge clk); #1; t0++; end
      check(formula_sat(assignment), $sformatf("run %0d: reported assignment satisfies all clauses", r));
      check(low_cycles == (int'(steps) + 1) * SC,
            $sformatf("run %0d: status pin low %0d clocks, steps %0d", r, low_cycles, steps));
      check(status_pin, "status pin high after the run");
      wait fork;
      check(rx[N-1:0] == assignment, $sformatf("run %0d: UART data %h vs %h", r, rx[N-1:0], assignment));
      $display("run %0d: solved in %0d steps", r, steps);
      repeat (CPB) @(posedge clk);
      check(!uart_busy, "UART idle after transfer");
    end
    $display("mechanisms: steps=%0d vclip=%0d xs0=%0d xs1=%0d xlgrow=%0d xlfloor=%0d",
             n_steps, n_vclip, n_xs0, n_xs1, n_xlgrow, n_xlfloor);
    check(n_steps   > 0, "integration steps happened");
    check(n_vclip   > 0, "V clipped at +-1");
    check(n_xs0     > 0, "X_s clipped at 0");
    check(n_xs1     > 0, "X_s clipped at 1");
    check(n_xlgrow  > 0, "X_l grew above 1");
    check(n_xlfloor > 0, "X_l returned to its floor 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] planted_assignment();
    logic [N-1:0] a;
    for (int n = 0; n < N; n++) a[n] = planted_value(SEED, n);
    return a;
  endfunction

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
