// variable_unit -- one continuous Boolean variable V_n of the solver.
//
// What it does: holds V_n = 2^14 v_n and, on each `step`, applies one
// forward-Euler step of dt = 2^-4 to it:
//     V_n <= clip(V_n + dv_sum / 2^4, -2^14, +2^14)
// where dv_sum is the sum, over every clause that contains variable n, of the
// term that clause computes for it (the right-hand side of dV_n/dt).
// `value` is the Boolean reading of V_n: 1 for V_n >= 0, 0 for V_n < 0.
//
// Interface: load (or reset) copies v_init into V_n (reset gives 0).  step is
// a single-cycle strobe; dv_sum must be settled when it is high.
//
// Follows the published model: forward Euler, dt = 2^-4, the 2^14 scale and
// the range [-1, 1] of v_n.  Own choices: the division by 2^4 is an
// arithmetic right shift, the value at reset, and that V = 0 reads as 1.
module variable_unit
  import memc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  v_t   v_init,
  input  logic step,
  input  dv_t  dv_sum,
  output v_t   v,
  output logic value
);

  logic signed [DVW:0] v_next;

  always_comb begin
    v_next = (DVW+1)'(v) + (DVW+1)'(dv_sum >>> DT_SH);
    if (v_next >  (DVW+1)'(ONE)) v_next =  (DVW+1)'(ONE);
    if (v_next < -(DVW+1)'(ONE)) v_next = -(DVW+1)'(ONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    v <= '0;
    else if (load) v <= v_init;
    else if (step) v <= v_t'(v_next);
  end

  assign value = ~v[VW-1];

endmodule
