// tb_memc_workloads -- the solver on the problem sizes of the published
// evaluation: random 3-SAT with clause-to-variable ratio 4.3 and
// N = 20, 40, 60, 80, 100, 130 variables (N = 150 is the default size,
// covered by tb_memc_solver_full).  Each size is its own solver instance
// with its own hard-wired planted instance; all start together from random
// initial V.  For each size it checks that the run ends, that the reported
// assignment satisfies every clause, and that the status pin was low for
// (steps + 1) * 12 clocks; it prints the steps to solution and the time at
// 96 ns per step.
`timescale 1ns/1ps
module tb_memc_workloads;
  import memc_pkg::*;

  localparam int NW = 6;
  localparam int NS [NW] = '{20, 40, 60, 80, 100, 130};
  localparam int SC = 12;

  logic clk = 0, rst_n = 0, start = 0;
  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  bit finished [NW];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  for (genvar w = 0; w < NW; w++) begin : g_w
    localparam int N = NS[w];
    localparam int M = (N * 43 + 5) / 10;        // round(4.3 N)
    localparam int unsigned SEED = 100 + w;
    v_t v_init [N];
    logic busy, done, status_pin, uart_txd, uart_busy;
    logic [31:0] steps;
    logic [N-1:0] assignment;
    xs_t xs [M];
    xl_t xl [M];
    int low;

    memc_solver_top #(.N(N), .M(M), .SEED(SEED), .CLKS_PER_BIT(4)) dut (
      .clk, .rst_n, .start, .v_init, .busy, .done, .status_pin, .steps,
      .assignment, .uart_txd, .uart_busy, .xs, .xl
    );

    always @(posedge clk) if (rst_n && !status_pin) low++;

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

    initial begin
      low = 0;
      for (int n = 0; n < N; n++) v_init[n] = v_t'(int'($urandom_range(2 * ONE)) - int'(ONE));
      @(posedge rst_n);
      @(posedge clk);
      wait (busy);
      wait (done);
      #1;
      check(formula_sat(assignment), $sformatf("N=%0d M=%0d: assignment satisfies all clauses", N, M));
      check(low == (int'(steps) + 1) * SC, $sformatf("N=%0d: status low %0d clocks for %0d steps", N, low, steps));
      $display("N=%0d M=%0d: %0d steps to solution, %0d ns at 96 ns/step", N, M, steps, steps * 96);
      finished[w] = 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int w = 0; w < NW; w++) wait (finished[w]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    for (int w = 0; w < NW; w++) if (!finished[w]) begin failures++; $display("FAIL: size %0d did not finish", NS[w]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
