// tb_clause_unit -- self-checking test of one clause unit.
//
// A reference model written here from the scaled equations (floor division
// done with / and % rather than shifts, constants written as plain numbers)
// is run next to two clause units with different literal signs.  Random and
// boundary values of V are applied; every clock the three contributions and
// the satisfied flag are compared, and after every step, load and idle
// clock the memories X_s and X_l.  A final phase holds one clause fully
// violated for long enough that X_l reaches its upper bound 1e4*M (M = 1
// there), and then satisfied so that X_s and X_l fall back to their floors.
`timescale 1ns/1ps
module tb_clause_unit;
  import memc_pkg::*;

  localparam logic [2:0] NEG_A = 3'b000;
  localparam logic [2:0] NEG_B = 3'b101;
  localparam int         M_A   = 645;
  localparam int         M_B   = 1;

  logic clk = 0, rst_n = 0, load = 0, step = 0;
  v_t   va [3], vb [3];
  dv_t  ca [3], cb [3];
  logic sa, sb;
  xs_t  xsa, xsb;
  xl_t  xla, xlb;

  clause_unit #(.M(M_A), .NEG(NEG_A)) dut_a (.clk, .rst_n, .load, .step, .v(va), .contrib(ca), .sat(sa), .xs(xsa), .xl(xla));
  clause_unit #(.M(M_B), .NEG(NEG_B)) dut_b (.clk, .rst_n, .load, .step, .v(vb), .contrib(cb), .sat(sb), .xs(xsb), .xl(xlb));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_r = 0, n_xlmax = 0, n_xs0 = 0, n_xs1 = 0;

  function automatic longint fdiv(longint x, longint d);
    longint q;
    q = x / d;
    if ((x % d) != 0 && x < 0) q = q - 1;
    return q;
  endfunction

  function automatic longint min2(longint a, longint b);
    return a < b ? a : b;
  endfunction

  typedef struct {
    longint xs, xl;
  } mem_t;

  // model: contributions and satisfied flag
  function automatic void model_out(input logic [2:0] neg, input v_t v [3], input mem_t st,
                                    output longint c_out [3], output bit sat, output longint cfun, output int nr);
    longint a [3], amin, wg, wr, q;
    for (int s = 0; s < 3; s++) begin
      q = neg[s] ? -1 : 1;
      a[s] = 16384 - q * longint'(v[s]);
    end
    amin = min2(a[0], min2(a[1], a[2]));
    cfun = fdiv(amin, 2);
    wg = fdiv(st.xl * st.xs, 16384);
    wr = fdiv((16384 + fdiv(st.xl, 1024)) * (16384 - st.xs), 16384);
    nr = 0;
    sat = 0;
    for (int s = 0; s < 3; s++) begin
      longint g, r;
      q = neg[s] ? -1 : 1;
      g = q * fdiv(min2(a[(s+1)%3], a[(s+2)%3]), 2);
      c_out[s] = fdiv(wg * g, 16384);
      if (a[s] == amin) begin
        r = fdiv(q * 16384 - longint'(v[s]), 2);
        c_out[s] += fdiv(wr * r, 16384);
        nr++;
      end
      if ((q > 0 && v[s] >= 0) || (q < 0 && v[s] < 0)) sat = 1;
    end
  endfunction

  function automatic mem_t model_step(input mem_t st, input longint cfun, input int m);
    mem_t n;
    n.xs = st.xs + fdiv(16 * (st.xs + 16) * (cfun - 4096), 16384 * 16);
    if (n.xs < 0) n.xs = 0;
    if (n.xs > 16384) n.xs = 16384;
    n.xl = st.xl + fdiv(4 * (cfun - 819), 16);
    if (n.xl < 16384) n.xl = 16384;
    if (n.xl > longint'(10000) * m * 16384) n.xl = longint'(10000) * m * 16384;
    return n;
  endfunction

  mem_t sta, stb;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic v_t rand_v();
    int r = $urandom_range(9);
    if (r == 0) return v_t'(16384);
    if (r == 1) return v_t'(-16384);
    if (r == 2) return '0;
    return v_t'(int'($urandom_range(32768)) - 16384);
  endfunction

  // compare outputs now, then apply one clock with the given controls
  task automatic cycle(input bit do_step, input bit do_load);
    longint ma [3], mb [3], cfa, cfb;
    bit msa, msb;
    int nra, nrb;
    #1;
    model_out(NEG_A, va, sta, ma, msa, cfa, nra);
    model_out(NEG_B, vb, stb, mb, msb, cfb, nrb);
    n_r += nra + nrb;
    for (int s = 0; s < 3; s++) begin
      check(ca[s] == dv_t'(ma[s]), $sformatf("A contrib[%0d] %0d vs %0d", s, ca[s], ma[s]));
      check(cb[s] == dv_t'(mb[s]), $sformatf("B contrib[%0d] %0d vs %0d", s, cb[s], mb[s]));
    end
    check(sa == msa && sb == msb, "sat flag");
    step = do_step; load = do_load;
    @(posedge clk); #1;
    step = 0; load = 0;
    if (do_load) begin
      sta = '{xs: 8192, xl: 16384};
      stb = '{xs: 8192, xl: 16384};
    end else if (do_step) begin
      sta = model_step(sta, cfa, M_A);
      stb = model_step(stb, cfb, M_B);
    end
    check(longint'(xsa) == sta.xs && longint'(xla) == sta.xl,
          $sformatf("A memories %0d/%0d vs %0d/%0d", xsa, xla, sta.xs, sta.xl));
    check(longint'(xsb) == stb.xs && longint'(xlb) == stb.xl,
          $sformatf("B memories %0d/%0d vs %0d/%0d", xsb, xlb, stb.xs, stb.xl));
    if (stb.xl == longint'(10000) * M_B * 16384) n_xlmax++;
    if (sta.xs == 0 || stb.xs == 0) n_xs0++;
    if (sta.xs == 16384 || stb.xs == 16384) n_xs1++;
  endtask

  initial begin
    for (int s = 0; s < 3; s++) begin va[s] = '0; vb[s] = '0; end
    sta = '{xs: 8192, xl: 16384};
    stb = '{xs: 8192, xl: 16384};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random phase
    for (int i = 0; i < 4000; i++) begin
      int r = $urandom_range(99);
      if (i % 50 < 25) begin
        for (int s = 0; s < 3; s++) begin va[s] = rand_v(); vb[s] = rand_v(); end
      end else begin
        // hold a violated clause for a while so the memories grow
        for (int s = 0; s < 3; s++) begin
          va[s] = NEG_A[s] ? v_t'(12000) : v_t'(-12000);
          vb[s] = NEG_B[s] ? v_t'(16384) : v_t'(-16384);
        end
      end
      cycle(r < 70, r == 99);
    end
    // X_l of the M = 1 unit to its upper bound, then back down
    for (int s = 0; s < 3; s++) vb[s] = NEG_B[s] ? v_t'(16384) : v_t'(-16384);
    for (int i = 0; i < 45000; i++) cycle(1, 0);
    for (int s = 0; s < 3; s++) vb[s] = NEG_B[s] ? v_t'(-16384) : v_t'(16384);
    for (int i = 0; i < 200; i++) cycle(1, 0);
    $display("events: R active=%0d, Xl at upper bound=%0d, Xs at 0=%0d, Xs at 1=%0d", n_r, n_xlmax, n_xs0, n_xs1);
    check(n_r > 0 && n_xlmax > 0 && n_xs0 > 0 && n_xs1 > 0, "all clip and rigidity cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
