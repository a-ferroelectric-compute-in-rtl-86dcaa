// tb_mesa_ctrl: self-checking test of the multi-epoch simulated annealing controller.
// The testbench answers each energy request itself, for a random 10-variable QUBO, after
// a few cycles. It keeps its own copy of the annealing state and checks every decision
// the controller reports:
// downhill iff E_new < E_o, stagnant iff E_new - E_o < eps, otherwise uphill, accepted at
// random but never at zero temperature. It checks the trap count, the epoch restarts
// (count > count_max), the cooling T <- T - T>>tshift, that each candidate is the
// current state with at most nflip free variables flipped, the iteration count, and
// the best solution against a brute-force minimum. A second run at zero temperature must
// accept no uphill move. Each decision kind must occur.
module tb_mesa_ctrl;
  import fecim_pkg::*;
  localparam int NV = NVARS, W = EW, T = TW, NU = 10;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NV-1:0] x_init, fixed;
  logic [$clog2(NV):0] nvars;
  logic [3:0] nflip, tshift;
  logic [T-1:0] t0;
  logic [15:0] count_max;
  logic signed [W-1:0] eps;
  logic [31:0] max_iter, seed;
  logic vmv_req, vmv_done;
  logic [NV-1:0] x_cand;
  logic signed [W-1:0] energy;
  logic busy, done;
  logic [NV-1:0] x_opt;
  logic signed [W-1:0] e_opt, e_cur;
  logic [T-1:0] temp;
  logic [15:0] trap_count;
  logic [31:0] iter, epoch;
  logic ev_downhill, ev_new_best, ev_stagnant, ev_uphill_accept, ev_uphill_reject, ev_new_epoch;

  mesa_ctrl dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int q [NU][NU];
  int n_down = 0, n_best = 0, n_stag = 0, n_upacc = 0, n_uprej = 0, n_epoch = 0;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int qubo(logic [NV-1:0] x);
    int e = 0;
    for (int i = 0; i < NU; i++)
      for (int j = i; j < NU; j++)
        if (x[i] && x[j]) e += q[i][j];
    return e;
  endfunction

  // testbench copy of the annealing state
  int m_e_cur, m_e_opt, m_count, m_temp, m_min_seen, e_last;
  logic [NV-1:0] m_x_o, m_x_opt, x_last;
  bit m_first;

  task automatic run(int t0_i, int iters, bit expect_no_uphill);
    int steps;
    t0 = T'(t0_i); max_iter = iters;
    m_first = 1; m_min_seen = 1 << 30;
    start = 1; @(posedge clk); #1; start = 0;
    steps = 0;
    while (!done && steps < 2_000_000) begin
      if (vmv_req) begin
        int e;
        // candidate = current state with at most nflip free bits changed
        if (!m_first) begin
          check($countones(x_cand ^ m_x_o) <= int'(nflip), "at most nflip flips");
          check(((x_cand ^ m_x_o) & (fixed | ~NV'((1 << NU) - 1))) == '0, "fixed and unused bits kept");
        end
        x_last = x_cand;
        e = qubo(x_cand);
        e_last = e;
        if (e < m_min_seen) m_min_seen = e;
        repeat (3) @(posedge clk);
        #1;
        energy = W'(e); vmv_done = 1;
        @(posedge clk); #1; vmv_done = 0;
        if (m_first) begin
          m_first = 0;
          m_e_cur = e; m_e_opt = e; m_x_o = x_last; m_x_opt = x_last;
          m_count = 0; m_temp = t0_i;
        end
        continue;
      end
      if (ev_downhill || ev_stagnant || ev_uphill_accept || ev_uphill_reject) begin
        bit down, stag, acc;
        down = e_last < m_e_cur;
        stag = !down && (e_last - m_e_cur < int'(eps));
        check(ev_downhill == down, "downhill decision");
        check(ev_stagnant == stag, "stagnant decision");
        check((ev_uphill_accept || ev_uphill_reject) == (!down && !stag), "uphill decision");
        check(!(ev_uphill_accept && m_temp == 0), "no uphill acceptance at zero temperature");
        if (expect_no_uphill) check(!ev_uphill_accept, "no uphill acceptance when t0 = 0");
        n_down += int'(ev_downhill); n_stag += int'(ev_stagnant);
        n_upacc += int'(ev_uphill_accept); n_uprej += int'(ev_uphill_reject);
        acc = down || ev_uphill_accept;
        check(ev_new_best == (down && e_last < m_e_opt), "best-solution update");
        n_best += int'(ev_new_best);
        if (down && e_last < m_e_opt) begin m_e_opt = e_last; m_x_opt = x_last; end
        if (acc) begin m_e_cur = e_last; m_x_o = x_last; m_count = 0; end
        else m_count++;
        if (m_count > int'(count_max)) begin
          check(ev_new_epoch, "epoch ends when count > count_max");
          n_epoch++;
          m_count = 0; m_temp = int'(t0); m_e_cur = m_e_opt; m_x_o = m_x_opt;
        end else begin
          check(!ev_new_epoch, "no epoch end below count_max");
          m_temp = m_temp - (m_temp >> tshift);
        end
        check(int'(temp) == m_temp, $sformatf("temperature %0d exp %0d", temp, m_temp));
        check(int'(trap_count) == m_count, "trap count");
        check(int'(e_cur) == m_e_cur, "current energy");
        check(int'(e_opt) == m_e_opt, "best energy");
      end
      @(posedge clk); #1;
      steps++;
    end
    check(done, "run finished");
    check(iter == max_iter, $sformatf("iterations %0d", iter));
    check(int'(e_opt) == m_min_seen, "best energy is the lowest energy seen");
    check(qubo(x_opt) == int'(e_opt), "best vector has the best energy");
  endtask

  initial begin
    int gmin;
    for (int i = 0; i < NU; i++)
      for (int j = 0; j < NU; j++) q[i][j] = (j >= i) ? int'($urandom % 13) - 6 : 0;
    gmin = 1 << 30;
    for (int v = 0; v < (1 << NU); v++) if (qubo(NV'(v)) < gmin) gmin = qubo(NV'(v));
    x_init = NV'(10'b1010110011);
    fixed = NV'(1 << 9);
    nvars = ($clog2(NV)+1)'(NU);
    nflip = 2; tshift = 3; count_max = 6; eps = 1; seed = 32'h1234_5678;
    vmv_done = 0; energy = '0; t0 = '0; max_iter = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(16'h6000, 600, 0);
    check(n_down > 0 && n_best > 0 && n_stag > 0 && n_upacc > 0 && n_uprej > 0 && n_epoch > 0,
          "every decision kind occurred");
    $display("decisions: downhill=%0d new_best=%0d stagnant=%0d uphill_acc=%0d uphill_rej=%0d epochs=%0d",
             n_down, n_best, n_stag, n_upacc, n_uprej, n_epoch);
    // the best reachable with variable 9 fixed at its initial value
    gmin = 1 << 30;
    for (int v = 0; v < (1 << NU); v++) if (v[9] == x_init[9] && qubo(NV'(v)) < gmin) gmin = qubo(NV'(v));
    check(int'(e_opt) == gmin, $sformatf("global minimum %0d found (got %0d)", gmin, e_opt));
    run(0, 100, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
