// memc_solver_top -- fully parallel digital memcomputing solver for 3-SAT.
//
// What it does: integrates the memcomputing equations of a 3-SAT formula
// with N variables and M clauses, all N + 2M ODEs advancing together in one
// integration step, until the signs of the variables satisfy every clause.
// It then reports the number of steps, raises `done`, and sends the
// assignment over the UART.
//
// How it works: one clause_unit per clause evaluates the clause function,
// the gradient and rigidity terms for its three literals and keeps its own
// short and long memories.  A fixed summation network adds, for every
// variable n, the terms of all clauses that contain n; one variable_unit per
// variable applies the Euler step to V_n.  The formula is hard-wired at
// elaboration (as it is in an FPGA bitstream): clause m, literal s is
// memc_pkg::planted_lit(SEED, N, m, s), a random planted instance, so the
// wiring between the units is fixed and its size grows linearly with M.
// solver_controller sequences the steps and stops the run; solution_uart
// returns the result.
//
// Interface: pulse `start` with v_init holding the initial V_n (scaled by
// 2^14, within [-16384, 16384]).  status_pin is low while computing.  When
// `done` is high, `steps` is the step count and `assignment[n]` the value of
// variable n (V_n >= 0 reads as 1); the same bits then leave on uart_txd.
// xs and xl expose the clause memories (scaled by 2^14) for observation.
//
// Timing: one integration step every STEP_CYCLES clocks (12 at an assumed
// 125 MHz = 96 ns).  The path from the state registers through the clause
// units and the summation network back to the registers is combinational
// and is given all STEP_CYCLES clocks (a multicycle path).
//
// Follows the published design: the equations, their integer scaling and
// constants, full parallelism, the fixed 96 ns step, the status pin and the
// UART.  Own choices: the instance generator used as default problem, the
// clock frequency, the number formats, the UART format.
module memc_solver_top
  import memc_pkg::*;
#(
  parameter int          N            = 150,     // variables
  parameter int          M            = 645,     // clauses (M/N = 4.3)
  parameter int unsigned SEED         = 1,       // selects the hard-wired instance
  parameter int          STEP_CYCLES  = 12,      // clocks per integration step
  parameter int          CLKS_PER_BIT = 1085,    // UART bit time in clocks
  parameter int          STEPW        = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  v_t               v_init [N],
  output logic             busy,
  output logic             done,
  output logic             status_pin,
  output logic [STEPW-1:0] steps,
  output logic [N-1:0]     assignment,
  output logic             uart_txd,
  output logic             uart_busy,
  output xs_t              xs [M],        // short memories, for observation
  output xl_t              xl [M]         // long memories, for observation
);

  // ---- hard-wired instance ------------------------------------------------
  typedef lit_t [3*M-1:0] inst_t;

  function automatic inst_t build_instance();
    inst_t t;
    for (int m = 0; m < M; m++)
      for (int s = 0; s < 3; s++)
        t[3*m + s] = planted_lit(SEED, N, m, s);
    return t;
  endfunction

  localparam inst_t INST = build_instance();

  // ---- control ------------------------------------------------------------
  logic load, step, tx_start, all_sat;
  logic [M-1:0] clause_sat;

  assign all_sat = &clause_sat;

  solver_controller #(.STEP_CYCLES(STEP_CYCLES), .STEPW(STEPW)) u_ctrl (
    .clk, .rst_n, .start, .all_sat,
    .load, .step, .busy, .done, .tx_start, .status_pin, .steps
  );

  // ---- variables ----------------------------------------------------------
  v_t  v      [N];
  dv_t dv_sum [N];

  for (genvar n = 0; n < N; n++) begin : g_var
    variable_unit u_var (
      .clk, .rst_n, .load, .v_init(v_init[n]), .step,
      .dv_sum(dv_sum[n]), .v(v[n]), .value(assignment[n])
    );
  end

  // ---- clauses ------------------------------------------------------------
  dv_t contrib [3*M];

  for (genvar m = 0; m < M; m++) begin : g_clause
    localparam lit_t L0 = INST[3*m + 0];
    localparam lit_t L1 = INST[3*m + 1];
    localparam lit_t L2 = INST[3*m + 2];
    localparam int   I0 = int'(L0.idx);
    localparam int   I1 = int'(L1.idx);
    localparam int   I2 = int'(L2.idx);
    v_t  cv [3];
    dv_t cc [3];
    assign cv[0] = v[I0];
    assign cv[1] = v[I1];
    assign cv[2] = v[I2];
    clause_unit #(.M(M), .NEG({L2.neg, L1.neg, L0.neg})) u_clause (
      .clk, .rst_n, .load, .step,
      .v(cv), .contrib(cc), .sat(clause_sat[m]), .xs(xs[m]), .xl(xl[m])
    );
    assign contrib[3*m + 0] = cc[0];
    assign contrib[3*m + 1] = cc[1];
    assign contrib[3*m + 2] = cc[2];
  end

  // ---- clause-to-variable summation network -------------------------------
  // Every literal slot adds its term into the sum of its own variable; the
  // indices are constants, so this is a fixed adder tree per variable.
  always_comb begin
    for (int n = 0; n < N; n++) dv_sum[n] = '0;
    for (int k = 0; k < 3*M; k++) begin
      int n;
      n = int'(INST[k].idx) % N;
      dv_sum[n] = dv_sum[n] + contrib[k];
    end
  end

  // ---- solution transfer --------------------------------------------------
  solution_uart #(.NBITS(N), .CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .send(tx_start), .bits(assignment),
    .txd(uart_txd), .busy(uart_busy)
  );

  initial assert (N < (1 << IDXW)) else $error("memc_solver_top: N too large");

endmodule
